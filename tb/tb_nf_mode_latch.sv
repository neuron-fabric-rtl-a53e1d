// tb_nf_mode_latch -- self-checking testbench of the controller mode latch.
//
// Checks the reset value (FP32 bypass), that every mode written is held from
// the next cycle on and kept while nothing is written, that a clear returns to
// FP32 and wins over a write in the same cycle, and that the change pulse
// fires exactly when the held mode changes. Then runs random writes and clears
// against a one-line reference model. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_nf_mode_latch;
  import nf_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  logic     wr_en = 1'b0;
  nf_mode_e wr_mode = MODE_FP32;
  logic     clr = 1'b0;
  nf_mode_e mode_q;
  logic     changed;

  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  nf_mode_latch dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_mode(wr_mode),
                     .clr(clr), .mode_q(mode_q), .changed(changed));

  nf_mode_e ref_mode = MODE_FP32;
  logic     ref_changed = 1'b0;

  task automatic step(logic w, nf_mode_e m, logic c);
    nf_mode_e nxt;
    wr_en <= w; wr_mode <= m; clr <= c;
    nxt = c ? MODE_FP32 : (w ? m : ref_mode);
    @(posedge clk);
    #0.1;
    ref_changed = (nxt != ref_mode);
    ref_mode = nxt;
    checks++;
    if (mode_q !== ref_mode || changed !== ref_changed) begin
      failures++;
      $display("FAIL: w=%0b m=%s c=%0b -> mode %s changed %0b, expected %s %0b",
               w, m.name(), c, mode_q.name(), changed, ref_mode.name(), ref_changed);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #0.1;
    rst_n = 1'b1;
    checks++;
    if (mode_q !== MODE_FP32) begin
      failures++; $display("FAIL: reset mode %s", mode_q.name());
    end
    step(1'b1, MODE_GBIN, 1'b0);      // admit G-Binary
    step(1'b0, MODE_GTER, 1'b0);      // no write: hold
    step(1'b1, MODE_GTER, 1'b0);      // switch to G-Ternary
    step(1'b1, MODE_GTER, 1'b0);      // same mode again: no change pulse
    step(1'b0, MODE_GBIN, 1'b1);      // Supervisor recovery
    step(1'b1, MODE_IDENTITY, 1'b0);
    step(1'b1, MODE_GBIN, 1'b1);      // clear beats write
    for (int n = 0; n < 500; n++) begin
      step(($urandom_range(0, 2) == 0), nf_mode_e'($urandom_range(0, 3)),
           ($urandom_range(0, 7) == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
