// tb_nf_lowbit_dp -- self-checking testbench of the five-stage low-bit datapath.
//
// Drives directed lines (the eight-worker voting examples: 6 of 8 positive,
// a 4/4 tie, unanimous votes) and then a few thousand random lines in random
// modes and at random line addresses, mostly back to back with occasional
// bubbles. Every output line is compared with a reference computed here from
// first principles ($countones per byte, sign of 2c-8, gate from the flattened
// element index (address/64)*64 + byte taken mod 3) and its latency is checked
// to be exactly five cycles. An output with nothing in flight also counts as
// a failure. A watchdog ends the run if it hangs.
`timescale 1ns/1ps
module tb_nf_lowbit_dp;
  import nf_pkg::*;

  localparam int unsigned LW = 512;
  localparam int unsigned NB = LW / 8;
  localparam int unsigned NRAND = 3000;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              in_valid = 1'b0;
  nf_mode_e          in_mode = MODE_IDENTITY;
  logic [ADDR_W-1:0] in_addr = '0;
  logic [TAG_W-1:0]  in_tag = '0;
  logic [LW-1:0]     in_data = '0;
  logic              out_valid;
  logic [TAG_W-1:0]  out_tag;
  logic [LW-1:0]     out_data;

  int checks = 0;
  int failures = 0;
  longint unsigned cyc = 0;

  always #1 clk = ~clk;

  nf_lowbit_dp dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_mode(in_mode), .in_addr(in_addr),
    .in_tag(in_tag), .in_data(in_data),
    .out_valid(out_valid), .out_tag(out_tag), .out_data(out_data)
  );

  typedef struct {
    longint unsigned   at;
    nf_mode_e          mode;
    logic [ADDR_W-1:0] addr;
    logic [TAG_W-1:0]  tag;
    logic [LW-1:0]     data;
  } item_t;

  item_t pend[$];
  int n_gated = 0, n_tie = 0;

  // Reference output of one line, worked out without the design's helpers.
  function automatic logic [LW-1:0] ref_line(item_t it);
    logic [LW-1:0] r;
    longint unsigned first;
    if (it.mode == MODE_IDENTITY || it.mode == MODE_FP32) return it.data;
    first = longint'(it.addr >> 6) * 64;
    for (int i = 0; i < NB; i++) begin
      int c;
      logic [7:0] b;
      c = $countones(it.data[8*i +: 8]);
      if (c > 4)      b = 8'h10 | 8'(c);
      else if (c < 4) b = 8'h30 | 8'(c);
      else            b = 8'h04;
      if (it.mode == MODE_GTER && ((first + longint'(i)) % 3 == 2)) b = 8'h00;
      r[8*i +: 8] = b;
    end
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) begin
      item_t it;
      it.at = cyc; it.mode = in_mode; it.addr = in_addr; it.tag = in_tag; it.data = in_data;
      pend.push_back(it);
    end
    if (rst_n && out_valid) begin
      checks++;
      if (pend.size() == 0) begin
        failures++;
        $display("FAIL: output with nothing in flight at cycle %0d", cyc);
      end else begin
        item_t it;
        logic [LW-1:0] exp_d;
        it = pend.pop_front();
        exp_d = ref_line(it);
        if (cyc - it.at != 5) begin
          failures++;
          $display("FAIL: latency %0d, expected 5", cyc - it.at);
        end
        if (out_tag !== it.tag || out_data !== exp_d) begin
          failures++;
          $display("FAIL: mode %s addr %h tag %0d/%0d\n got %h\n exp %h",
                   it.mode.name(), it.addr, out_tag, it.tag, out_data, exp_d);
        end
        if (it.mode == MODE_GTER) n_gated++;
      end
    end
  end

  task automatic drive(nf_mode_e m, logic [ADDR_W-1:0] a, logic [LW-1:0] d, logic [TAG_W-1:0] t);
    in_valid <= 1'b1; in_mode <= m; in_addr <= a; in_data <= d; in_tag <= t;
    @(posedge clk);
  endtask

  task automatic idle(int n);
    in_valid <= 1'b0;
    repeat (n) @(posedge clk);
  endtask

  function automatic logic [LW-1:0] rand_line();
    logic [LW-1:0] d;
    for (int w = 0; w < LW / 32; w++) d[32*w +: 32] = $urandom();
    return d;
  endfunction

  initial begin
    logic [LW-1:0] d;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // Directed: byte 0 = six positive / two negative, byte 1 = 4/4 tie,
    // byte 2 = all positive, byte 3 = all non-positive, the rest repeat.
    for (int i = 0; i < NB; i++) begin
      case (i % 4)
        0: d[8*i +: 8] = 8'b1110_1101;
        1: d[8*i +: 8] = 8'b0101_1010;
        2: d[8*i +: 8] = 8'hFF;
        default: d[8*i +: 8] = 8'h00;
      endcase
    end
    drive(MODE_IDENTITY, 48'h0, d, TAG_W'(1));
    drive(MODE_GBIN,     48'h0, d, TAG_W'(2));
    drive(MODE_GTER,     48'h0, d, TAG_W'(3));
    drive(MODE_GTER,     48'h40, d, TAG_W'(4));   // next line: gate phase moves by one
    drive(MODE_GTER,     48'h80, d, TAG_W'(5));
    idle(8);
    // The lines above are compared with ref_line() like every other line:
    // the 6-of-8 element must come back as 8'h16 (count 6, positive), the tie
    // as 8'h04, and in G-Ternary element 2 of line 0 as 8'h00.

    // Random, back to back with occasional gaps.
    for (int n = 0; n < NRAND; n++) begin
      nf_mode_e m;
      logic [ADDR_W-1:0] a;
      case ($urandom_range(0, 3))
        0: m = MODE_IDENTITY;
        1: m = MODE_GBIN;
        2: m = MODE_GTER;
        default: m = MODE_GTER;
      endcase
      a = {$urandom(), $urandom()};
      a[5:0] = '0;
      drive(m, a, rand_line(), 4'($urandom()));
      if ($urandom_range(0, 9) == 0) idle($urandom_range(1, 6));
    end
    idle(10);
    checks++;
    if (pend.size() != 0) begin
      failures++;
      $display("FAIL: %0d lines never came out", pend.size());
    end
    checks++;
    if (n_gated == 0) begin
      failures++;
      $display("FAIL: no G-Ternary line exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
