// nf_mem_model -- behavioural model of pooled CXL memory (testbench only).
//
// Not synthesizable and not part of the design: a stand-in for the DRAM
// behind the controller. It accepts one line request per cycle while it has
// room for it, stores written lines in a sparse array (lines never written
// read as zero), and answers every request in order after a fixed LATENCY
// cycles: read data, or a write completion. The default of 400 cycles is a
// 200 ns access at a 2 GHz controller clock. A response that the controller
// does not accept waits, and the responses behind it wait too.
`timescale 1ns/1ps
module nf_mem_model
  import nf_pkg::*;
#(
  parameter int unsigned LATENCY = 400,
  parameter int unsigned MAX_OUTSTANDING = 1024
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    req_valid,
  output logic    req_ready,
  input  nf_req_t req,
  output logic    rsp_valid,
  input  logic    rsp_ready,
  output nf_rsp_t rsp
);

  typedef struct {
    longint unsigned due;
    nf_rsp_t         r;
  } pend_t;

  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  pend_t                q[$];
  longint unsigned      cyc = 0;

  assign req_ready = (q.size() < MAX_OUTSTANDING);

  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    if (q.size() != 0 && q[0].due <= cyc) begin
      rsp_valid = 1'b1;
      rsp       = q[0].r;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
      cyc <= 0;
    end else begin
      cyc <= cyc + 1;
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (req_valid && req_ready) begin
        pend_t p;
        logic [ADDR_W-1:0] line;
        line    = req.addr >> 6;
        p.due   = cyc + LATENCY;
        p.r.write = req.write;
        p.r.tag   = req.tag;
        if (req.write) begin
          mem[line] = req.data;
          p.r.data  = '0;
        end else begin
          p.r.data  = mem.exists(line) ? mem[line] : '0;
        end
        q.push_back(p);
      end
    end
  end

endmodule
