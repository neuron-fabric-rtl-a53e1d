// tb_nf_bypass_return -- self-checking testbench of the bypass return and
// response merge.
//
// Each cycle it offers, at random, a bypassed response (an FP32-bypass read or
// a write completion) and a datapath output, and checks the merged response
// channel against a reference queue: a datapath output always takes the
// channel in its own cycle; otherwise the oldest bypassed response leaves, in
// order and with its bytes, tag and write flag unchanged, no earlier than one
// cycle after it entered. byp_ready, dp_hold and held are checked against the
// queue occupancy. It counts how often the FIFO filled and how often a
// bypassed response was held behind the datapath, and fails if either never
// happened. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_nf_bypass_return;
  import nf_pkg::*;

  localparam int unsigned DEPTH = 2;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 byp_valid = 1'b0;
  logic                 byp_ready;
  nf_rsp_t              byp_rsp = '0;
  logic                 dp_valid = 1'b0;
  logic [TAG_W-1:0]     dp_tag = '0;
  logic [LINE_BITS-1:0] dp_data = '0;
  logic                 rsp_valid;
  nf_rsp_t              rsp;
  logic                 rsp_from_dp;
  logic                 dp_hold;
  logic                 held;

  int checks = 0, failures = 0;
  int n_full = 0, n_held = 0, n_byp_out = 0, n_dp_out = 0;

  always #1 clk = ~clk;

  nf_bypass_return #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n),
    .byp_valid(byp_valid), .byp_ready(byp_ready), .byp_rsp(byp_rsp),
    .dp_valid(dp_valid), .dp_tag(dp_tag), .dp_data(dp_data),
    .rsp_valid(rsp_valid), .rsp(rsp), .rsp_from_dp(rsp_from_dp),
    .dp_hold(dp_hold), .held(held)
  );

  nf_rsp_t q[$];

  function automatic logic [LINE_BITS-1:0] rand_line();
    logic [LINE_BITS-1:0] d;
    for (int w = 0; w < LINE_BITS / 32; w++) d[32*w +: 32] = $urandom();
    return d;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      // phases: busy datapath stretches, then quiet stretches
      int dp_pct;
      dp_pct = ((n / 50) % 2 == 0) ? 85 : 20;
      @(posedge clk);
      #0.1;
      byp_valid = ($urandom_range(0, 99) < 45);
      byp_rsp.write = $urandom_range(0, 1);
      byp_rsp.tag   = TAG_W'($urandom());
      byp_rsp.data  = rand_line();
      dp_valid = ($urandom_range(0, 99) < dp_pct);
      dp_tag   = TAG_W'($urandom());
      dp_data  = rand_line();
      #0.1;
      check("byp_ready", byp_ready == (q.size() < DEPTH));
      check("dp_hold",   dp_hold == (q.size() != 0));
      check("held",      held == (dp_valid && q.size() != 0));
      if (q.size() == DEPTH) n_full++;
      if (held) n_held++;
      if (dp_valid) begin
        n_dp_out++;
        check("datapath response on the channel",
              rsp_valid && rsp_from_dp && !rsp.write && rsp.tag == dp_tag && rsp.data == dp_data);
      end else if (q.size() != 0) begin
        n_byp_out++;
        check("bypassed response in order and unchanged",
              rsp_valid && !rsp_from_dp && rsp == q[0]);
        void'(q.pop_front());
      end else begin
        check("channel idle", !rsp_valid);
      end
      if (byp_valid && byp_ready) q.push_back(byp_rsp);
    end
    check("FIFO filled at least once", n_full > 0);
    check("bypass held behind datapath at least once", n_held > 0);
    check("bypassed responses delivered", n_byp_out > 100);
    $display("full=%0d held=%0d bypass_out=%0d dp_out=%0d", n_full, n_held, n_byp_out, n_dp_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
