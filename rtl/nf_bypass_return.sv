// nf_bypass_return -- FP32 bypass return and response merge.
//
// What it does: carries the responses that must not be transformed -- reads
// in FP32-bypass mode and write completions -- around the low-bit datapath,
// and merges them with the datapath's output onto the one response channel
// back to the link. Bypassed bytes are returned exactly as stored.
//
// How: bypassed responses enter a small FIFO (DEPTH entries). Each cycle the
// response channel carries the datapath's output if it has one, because the
// five-stage datapath cannot stall; otherwise it carries the FIFO head. To keep
// bypassed responses from waiting behind an endless low-bit stream, dp_hold
// asks the controller not to start new lines into the datapath while the FIFO
// holds anything; the datapath then drains within five cycles and the FIFO
// gets the channel. The bypass route itself follows the paper's "bypass
// return" block; the FIFO, its depth, the priority rule and dp_hold are this
// design's choices.
//
// Interface and timing: byp_valid/byp_ready is a valid/ready input; a pushed
// response can leave on rsp_* in the next cycle at the earliest (one register
// of latency). dp_valid/dp_* come from the datapath and are always taken in
// the same cycle, combinationally. rsp_valid has no ready: the response
// channel always accepts. held is high in a cycle where the FIFO holds a
// response but the datapath owns the channel. rst_n is active low, synchronous.
module nf_bypass_return
  import nf_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bypassed responses (FP32-bypass reads, write completions)
  input  logic                 byp_valid,
  output logic                 byp_ready,
  input  nf_rsp_t              byp_rsp,
  // low-bit datapath output
  input  logic                 dp_valid,
  input  logic [TAG_W-1:0]     dp_tag,
  input  logic [LINE_BITS-1:0] dp_data,
  // merged response channel
  output logic                 rsp_valid,
  output nf_rsp_t              rsp,
  output logic                 rsp_from_dp,
  // flow control / status
  output logic                 dp_hold,
  output logic                 held
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  nf_rsp_t         fifo [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            push, pop;

  assign byp_ready = (count < (PW+1)'(DEPTH));
  assign push      = byp_valid && byp_ready;
  assign pop       = !dp_valid && (count != '0);
  assign dp_hold   = (count != '0);
  assign held      = dp_valid && (count != '0);

  always_comb begin
    rsp_from_dp = dp_valid;
    if (dp_valid) begin
      rsp_valid = 1'b1;
      rsp.write = 1'b0;
      rsp.tag   = dp_tag;
      rsp.data  = dp_data;
    end else begin
      rsp_valid = (count != '0);
      rsp       = fifo[rd_ptr];
    end
  end

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= byp_rsp;
  end

`ifndef SYNTHESIS
  // The FIFO never overflows or underflows.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (PW+1)'(DEPTH));
`endif

endmodule
