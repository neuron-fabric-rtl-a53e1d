// nf_bw_gate -- per-line CXL bandwidth gate.
//
// What it does: spaces cache-line service events so that on average no more
// lines pass than the configured link bandwidth allows. The paper uses such a
// configurable limiter in its timing model; the interval it creates between
// line services is what hides the five-cycle low-bit datapath under bandwidth
// pressure.
//
// How: a credit counter in 1/256-byte units gains `rate` every cycle and is
// capped just below the cost of one line (64 bytes = 16384 units) plus one
// cycle's gain, so no burst builds up while the link is idle and no fraction of a
// line is lost between services. A line may pass only while the credit holds a
// whole line; passing one subtracts the line's cost. With rate >= 16384
// (64 bytes/cycle or more, e.g. 128 GiB/s at 2 GHz) a line passes every
// cycle; with rate = 8192 every second cycle; with 5461 (21.3 bytes/cycle)
// every third, and so on. The credit scheme,
// its units and the one-line cap are this design's choices; the paper only
// names the function.
//
// Interface and timing: a valid/ready pass-through with no storage. out_valid
// = in_valid && open; in_ready = out_ready && open, all combinational, so a
// line crosses in the same cycle. open is high when a line may pass this
// cycle. rate is sampled every cycle. rst_n (active low, synchronous) fills
// the credit to one line. A rate of 0 closes the gate.
module nf_bw_gate
  import nf_pkg::*;
#(
  parameter int unsigned LINE_BYTES_P = nf_pkg::LINE_BITS / 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [BW_RATE_W-1:0] rate,      // bytes per cycle x 256
  input  logic                 in_valid,
  output logic                 in_ready,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic                 open
);

  localparam int unsigned COST = LINE_BYTES_P * BW_FRAC;
  localparam int unsigned CRW  = $clog2(COST + (1 << BW_RATE_W) + 1);

  logic [CRW-1:0] credit, credit_d, after, cap;
  logic           fire;

  assign open      = (credit >= CRW'(COST));
  assign out_valid = in_valid && open;
  assign in_ready  = out_ready && open;
  assign fire      = in_valid && out_ready && open;

  always_comb begin
    after    = fire ? (credit - CRW'(COST)) : credit;
    credit_d = after + CRW'(rate);
    cap      = CRW'(COST) + CRW'(rate) - CRW'(1);
    if (credit_d > cap) credit_d = cap;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) credit <= CRW'(COST);
    else        credit <= credit_d;
  end

endmodule
