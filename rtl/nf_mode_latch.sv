// nf_mode_latch -- controller mode latch written by the training control plane.
//
// What it does: holds the payload mode that the controller applies to later
// read responses of the gradient buffer: FP32 bypass, identity, G-Binary or
// G-Ternary. The control plane writes only this mode metadata; it never
// touches gradient payloads. A write admits a mode (the Commander's role); a
// clear returns the latch to FP32 bypass (the Supervisor's recovery). Reset
// also selects FP32 bypass, because training starts on the full-precision
// path. The mode set and the "clear back to FP32" recovery follow the paper;
// the write/clear port shape, clear winning over a same-cycle write, and the
// change pulse are this design's choices.
//
// Interface and timing: wr_en/wr_mode and clr are sampled on the rising clk
// edge; mode_q shows the new mode from the next cycle on. changed pulses for
// one cycle in the cycle the new value first shows, whenever the held mode
// actually changed. rst_n is an active-low synchronous reset.
module nf_mode_latch
  import nf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr_en,    // admit: load wr_mode
  input  nf_mode_e wr_mode,
  input  logic     clr,      // recover: back to FP32 bypass
  output nf_mode_e mode_q,
  output logic     changed
);

  nf_mode_e mode_d;

  always_comb begin
    mode_d = mode_q;
    if (clr)        mode_d = MODE_FP32;
    else if (wr_en) mode_d = wr_mode;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode_q  <= MODE_FP32;
      changed <= 1'b0;
    end else begin
      mode_q  <= mode_d;
      changed <= (mode_d != mode_q);
    end
  end

endmodule
