// tb_nf_bw_gate -- self-checking testbench of the per-line bandwidth gate.
//
// Offers a line every cycle and counts how many pass in a long window at
// several rates: 128 GiB/s at 2 GHz (68.7 bytes/cycle -> every cycle),
// 32 bytes/cycle (every 2nd cycle), 16 bytes/cycle (every 4th), 21.33
// bytes/cycle (3 lines in 9 cycles on average). The spacing between passed
// lines must never be shorter than the rate allows, and the total over the
// window must match rate/64 lines per cycle to within one line. It also checks
// that downstream backpressure stops lines without consuming credit and that
// the handshake outputs agree with each other every cycle.
`timescale 1ns/1ps
module tb_nf_bw_gate;
  import nf_pkg::*;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic [BW_RATE_W-1:0] rate = BW_RATE_128GIBS_2GHZ;
  logic                 in_valid = 1'b0;
  logic                 in_ready;
  logic                 out_valid;
  logic                 out_ready = 1'b1;
  logic                 open;

  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  nf_bw_gate dut (.clk(clk), .rst_n(rst_n), .rate(rate), .in_valid(in_valid),
                  .in_ready(in_ready), .out_valid(out_valid), .out_ready(out_ready),
                  .open(open));

  // handshake consistency, every cycle
  always @(posedge clk) if (rst_n) begin
    if (out_valid !== (in_valid && open) || in_ready !== (out_ready && open)) begin
      failures++;
      $display("FAIL: handshake outputs inconsistent");
    end
  end

  task automatic window(logic [BW_RATE_W-1:0] r, int cycles);
    int passed, last, min_gap;
    real expect_lines;
    passed = 0; last = -1; min_gap = 1 << 30;
    rate <= r; in_valid <= 1'b0; out_ready <= 1'b1;
    repeat (3) @(posedge clk); // idle: the credit settles at the new cap
    in_valid <= 1'b1;
    for (int c = 0; c < cycles; c++) begin
      #0.1;
      if (in_valid && in_ready) begin
        passed++;
        if (last >= 0 && c - last < min_gap) min_gap = c - last;
        last = c;
      end
      @(posedge clk);
    end
    expect_lines = real'(cycles) * real'(r) / (64.0 * 256.0);
    if (expect_lines > real'(cycles)) expect_lines = real'(cycles);
    checks++;
    if (real'(passed) < expect_lines - 1.5 || real'(passed) > expect_lines + 1.5) begin
      failures++;
      $display("FAIL: rate %0d: %0d lines in %0d cycles, expected %0.1f", r, passed, cycles, expect_lines);
    end
    // minimum spacing: ceil(16384 / rate) cycles, at least 1
    checks++;
    if (passed > 1 && real'(min_gap) < $floor(16384.0 / real'(r))) begin
      failures++;
      $display("FAIL: rate %0d: gap %0d cycles too short", r, min_gap);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    window(BW_RATE_128GIBS_2GHZ, 400);     // >= 64 B/cycle: a line every cycle
    window(16'd8192, 400);                 // 32 B/cycle: every 2nd cycle
    window(16'd4096, 400);                 // 16 B/cycle: every 4th cycle
    window(16'd5461, 900);                 // 21.33 B/cycle
    // backpressure: with out_ready low nothing passes and credit is kept
    rate <= 16'd4096; out_ready <= 1'b0;
    repeat (8) @(posedge clk);
    #0.1;
    checks++;
    if (!open || in_ready) begin
      failures++; $display("FAIL: gate not open / ready under backpressure");
    end
    // with no request at all the gate must not let anything through
    in_valid <= 1'b0; out_ready <= 1'b1;
    @(posedge clk); #0.1;
    checks++;
    if (out_valid) begin
      failures++; $display("FAIL: out_valid with no request");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
