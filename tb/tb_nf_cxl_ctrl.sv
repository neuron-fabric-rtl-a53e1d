// tb_nf_cxl_ctrl -- end-to-end testbench of the controller at its default
// sizes (512-bit lines, five-cycle datapath, 512 tags), with a fixed-latency
// pooled-memory model (200 ns = 400 cycles at 2 GHz) behind it.
//
// It plays the packed-sign read-back test: it writes eight-worker sign
// packets (one byte per gradient element, bit k = worker k's sign) into a
// gradient buffer, then reads the same address range back under FP32
// bypass, identity, G-Binary and G-Ternary, each response compared with a
// reference chosen by the mode that was in force when the read was issued
// (bytes as written; or count and majority sign per byte; or that with every
// third flattened element zeroed). Then it exercises the control and flow
// mechanisms: a Supervisor clear back to FP32 while low-bit reads are in
// flight, re-admission, writes interleaved with low-bit reads so that write
// completions wait behind the datapath and hold new datapath entries, and a
// reduced link rate so the bandwidth gate spaces requests. The low-bit
// response latency must be exactly five cycles after memory answers, and at
// the 128 GiB/s default rate requests must be able to pass every cycle. Each
// mechanism is counted and one that never happened counts as a failure. The
// stored bytes are read again at the end to show that no transform changed
// memory. Last, a bucket-stream phase writes and then reads NSTREAM lines
// back to back in G-Binary at the 128 GiB/s default rate and checks that the
// controller sustains one line per cycle behind the 400-cycle memory latency.
// A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_nf_cxl_ctrl;
  import nf_pkg::*;

  localparam int unsigned NLINES = 48;
  localparam int unsigned NSTREAM = 2048;
  localparam logic [ADDR_W-1:0] STREAM_BASE  = 48'h0000_4000_0000;
  localparam logic [ADDR_W-1:0] BUF_BASE     = 48'h0000_1000_0000;
  localparam logic [ADDR_W-1:0] SCRATCH_BASE = 48'h0000_2000_0040;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 ctrl_mode_wr = 1'b0;
  nf_mode_e             ctrl_mode = MODE_FP32;
  logic                 ctrl_mode_clr = 1'b0;
  nf_mode_e             mode_o;
  logic                 mode_changed_o;
  logic [BW_RATE_W-1:0] cfg_bw_rate = BW_RATE_128GIBS_2GHZ;
  logic                 h_req_valid = 1'b0;
  logic                 h_req_ready;
  nf_req_t              h_req = '0;
  logic                 h_rsp_valid;
  nf_rsp_t              h_rsp;
  logic                 h_rsp_lowbit;
  logic                 m_req_valid;
  logic                 m_req_ready;
  nf_req_t              m_req;
  logic                 m_rsp_valid;
  logic                 m_rsp_ready;
  nf_rsp_t              m_rsp;

  always #1 clk = ~clk;

  nf_cxl_ctrl dut (
    .clk(clk), .rst_n(rst_n),
    .ctrl_mode_wr(ctrl_mode_wr), .ctrl_mode(ctrl_mode), .ctrl_mode_clr(ctrl_mode_clr),
    .mode_o(mode_o), .mode_changed_o(mode_changed_o),
    .cfg_bw_rate(cfg_bw_rate),
    .h_req_valid(h_req_valid), .h_req_ready(h_req_ready), .h_req(h_req),
    .h_rsp_valid(h_rsp_valid), .h_rsp(h_rsp), .h_rsp_lowbit(h_rsp_lowbit),
    .m_req_valid(m_req_valid), .m_req_ready(m_req_ready), .m_req(m_req),
    .m_rsp_valid(m_rsp_valid), .m_rsp_ready(m_rsp_ready), .m_rsp(m_rsp)
  );

  nf_mem_model u_mem (
    .clk(clk), .rst_n(rst_n),
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp)
  );

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  typedef struct {
    logic                 write;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] exp_data;
    nf_mode_e             mode;
    longint unsigned      t_mem;
  } out_t;

  out_t                 outst [1 << TAG_W];
  logic [(1<<TAG_W)-1:0] busy = '0;
  logic [LINE_BITS-1:0] shadow [logic [ADDR_W-1:0]];
  nf_mode_e             model_mode = MODE_FP32;

  // mechanism counters
  int n_rsp_mode [4] = '{0, 0, 0, 0};
  int n_wr_cmp = 0, n_admit = 0, n_recover = 0, n_gate_stall = 0;
  int n_byp_held = 0, n_dp_hold = 0, n_mode_inflight = 0, n_gated = 0;
  int n_b2b_fire = 0;
  longint unsigned first_stream_fire = 0, last_rsp = 0;
  int n_rsp_total = 0;
  longint unsigned last_fire = 0;
  bit slow_phase = 0;
  int min_gap_slow = 1 << 30;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // Reference of a read response, from first principles.
  function automatic logic [LINE_BITS-1:0] ref_line(nf_mode_e m, logic [ADDR_W-1:0] a,
                                                    logic [LINE_BITS-1:0] d);
    logic [LINE_BITS-1:0] r;
    longint unsigned first;
    if (m == MODE_FP32 || m == MODE_IDENTITY) return d;
    first = longint'(a >> 6) * 64;
    for (int i = 0; i < LINE_BITS / 8; i++) begin
      int c;
      logic [7:0] b;
      c = $countones(d[8*i +: 8]);
      if (c > 4)      b = 8'h10 | 8'(c);
      else if (c < 4) b = 8'h30 | 8'(c);
      else            b = 8'h04;
      if (m == MODE_GTER && ((first + longint'(i)) % 3 == 2)) b = 8'h00;
      r[8*i +: 8] = b;
    end
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // mode latch model and status check
      check("mode latch output", mode_o == model_mode);
      if (ctrl_mode_clr) begin
        if (model_mode != MODE_FP32) n_recover++;
        model_mode <= MODE_FP32;
      end else if (ctrl_mode_wr) begin
        if (ctrl_mode inside {MODE_GBIN, MODE_GTER} && model_mode != ctrl_mode) n_admit++;
        model_mode <= ctrl_mode;
      end
      // request accepted
      if (h_req_valid && !h_req_ready) n_gate_stall++;
      if (h_req_valid && h_req_ready) begin
        out_t o;
        logic [ADDR_W-1:0] line;
        line = h_req.addr >> 6;
        check("tag free at issue", !busy[h_req.tag]);
        o.write = h_req.write;
        o.addr  = h_req.addr;
        o.mode  = model_mode;
        o.t_mem = 0;
        if (h_req.write) begin
          shadow[line] = h_req.data;
          o.exp_data = '0;
        end else begin
          o.exp_data = ref_line(model_mode, h_req.addr,
                                shadow.exists(line) ? shadow[line] : '0);
        end
        outst[h_req.tag] = o;
        busy[h_req.tag] <= 1'b1;
        if (cyc - last_fire == 1) n_b2b_fire++;
        if (slow_phase && last_fire != 0 && int'(cyc - last_fire) < min_gap_slow)
          min_gap_slow = int'(cyc - last_fire);
        last_fire = cyc;
      end
      // memory answered
      if (m_rsp_valid && !m_rsp_ready) n_dp_hold++;
      if (m_rsp_valid && m_rsp_ready) outst[m_rsp.tag].t_mem = cyc;
      // response to the link
      if (h_rsp_valid) begin
        out_t o;
        o = outst[h_rsp.tag];
        check("response for an outstanding tag", busy[h_rsp.tag]);
        if (o.write) begin
          n_wr_cmp++;
          check("write completion", h_rsp.write && !h_rsp_lowbit);
          check("bypass latency >= 1", cyc - o.t_mem >= 1);
          if (cyc - o.t_mem > 1) n_byp_held++;
        end else begin
          n_rsp_mode[o.mode]++;
          if (o.mode != mode_o) n_mode_inflight++;
          check("read data", !h_rsp.write && h_rsp.data == o.exp_data);
          if (h_rsp.data != o.exp_data)
            $display("  mode %s addr %h\n  got %h\n  exp %h", o.mode.name(), o.addr, h_rsp.data, o.exp_data);
          if (o.mode == MODE_FP32) begin
            check("FP32 bypass route", !h_rsp_lowbit);
            check("bypass latency >= 1", cyc - o.t_mem >= 1);
            if (cyc - o.t_mem > 1) n_byp_held++;
          end else begin
            check("datapath route", h_rsp_lowbit);
            check("datapath latency == 5", cyc - o.t_mem == 5);
            if (o.mode == MODE_GTER)
              for (int i = 0; i < LINE_BITS / 8; i++) if (h_rsp.data[8*i +: 8] == 8'h00) n_gated++;
          end
        end
        busy[h_rsp.tag] <= 1'b0;
        last_rsp = cyc;
        n_rsp_total++;
      end
    end
  end

  // ---------------- stimulus ----------------
  task automatic issue(logic w, logic [ADDR_W-1:0] a, logic [LINE_BITS-1:0] d);
    int t;
    logic rdy;
    // wait for a free tag
    t = -1;
    while (t < 0) begin
      for (int i = 0; i < (1 << TAG_W); i++) if (!busy[i]) begin t = i; break; end
      if (t < 0) begin
        h_req_valid = 1'b0;
        @(posedge clk); #0.1;
      end
    end
    h_req_valid = 1'b1;
    h_req.write = w;
    h_req.addr  = a;
    h_req.tag   = TAG_W'(t);
    h_req.data  = d;
    do begin
      #0.1 rdy = h_req_ready;
      @(posedge clk); #0.1;
    end while (!rdy);
    h_req_valid = 1'b0;
  endtask

  task automatic drain();
    h_req_valid = 1'b0;
    while (busy != '0) begin
      @(posedge clk); #0.1;
    end
    repeat (4) @(posedge clk);
    #0.1;
  endtask

  task automatic set_mode(nf_mode_e m);
    ctrl_mode_wr = 1'b1; ctrl_mode = m;
    @(posedge clk); #0.1;
    ctrl_mode_wr = 1'b0;
  endtask

  task automatic clear_mode();
    ctrl_mode_clr = 1'b1;
    @(posedge clk); #0.1;
    ctrl_mode_clr = 1'b0;
  endtask

  task automatic read_all();
    for (int n = 0; n < NLINES; n++) issue(1'b0, BUF_BASE + 64 * n, '0);
  endtask

  function automatic logic [LINE_BITS-1:0] sign_packet(int n);
    logic [LINE_BITS-1:0] d;
    for (int w = 0; w < LINE_BITS / 32; w++) d[32*w +: 32] = $urandom();
    // line 0: every element is the 6-positive / 2-negative vote of the text
    if (n == 0) for (int i = 0; i < LINE_BITS / 8; i++) d[8*i +: 8] = 8'b1101_1110;
    // line 1: every element a 4/4 tie
    if (n == 1) for (int i = 0; i < LINE_BITS / 8; i++) d[8*i +: 8] = 8'b1010_0101;
    return d;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;
    @(posedge clk); #0.1;

    // 1. training starts on FP32 bypass; the runtime writes sign packets
    for (int n = 0; n < NLINES; n++) issue(1'b1, BUF_BASE + 64 * n, sign_packet(n));
    drain();
    // 2. FP32 bypass read-back
    read_all(); drain();
    // 3. identity through the datapath
    set_mode(MODE_IDENTITY); read_all(); drain();
    // 4. G-Binary admitted
    set_mode(MODE_GBIN); read_all(); drain();
    // line 0 directed: 6 of 8 positive -> count 6, positive (0x16)
    check("reference: 6 of 8 positive encodes as 8'h16", ref_line(MODE_GBIN, BUF_BASE, sign_packet(0))[7:0] == 8'h16);
    // 5. G-Ternary admitted
    set_mode(MODE_GTER); read_all(); drain();
    // 6. recovery while reads are in flight, then re-admission
    for (int n = 0; n < NLINES; n++) begin
      issue(1'b0, BUF_BASE + 64 * n, '0);
      if (n == NLINES / 2) clear_mode();
    end
    set_mode(MODE_GBIN);
    // 7. writes interleaved with low-bit reads
    for (int n = 0; n < 2 * NLINES; n++) begin
      if (n % 4 == 3) issue(1'b1, SCRATCH_BASE + 64 * (n % 8), sign_packet(n + 100));
      else            issue(1'b0, BUF_BASE + 64 * (n % NLINES), '0);
    end
    drain();
    // 8. reduced link rate: 16 bytes/cycle, one line every 4 cycles
    cfg_bw_rate = 16'd4096;
    repeat (3) @(posedge clk); #0.1;
    slow_phase = 1;
    set_mode(MODE_GTER); read_all(); drain();
    slow_phase = 0;
    cfg_bw_rate = BW_RATE_128GIBS_2GHZ;
    // 9. stored bytes unchanged by any transform
    clear_mode(); read_all(); drain();

    // 10. bucket stream at the default rate: write, then read back to back
    for (int n = 0; n < NSTREAM; n++) issue(1'b1, STREAM_BASE + 64 * n, sign_packet(n + 7));
    drain();
    set_mode(MODE_GBIN);
    begin
      int n_before;
      longint unsigned t0, span;
      n_before = n_rsp_total;
      t0 = cyc;
      for (int n = 0; n < NSTREAM; n++) issue(1'b0, STREAM_BASE + 64 * n, '0);
      drain();
      span = last_rsp - t0;
      $display("stream: %0d G-Binary lines in %0d cycles (memory latency 400)", NSTREAM, span);
      check("stream responses all returned", n_rsp_total - n_before == NSTREAM);
      check("one line per cycle sustained", span <= NSTREAM + 400 + 16);
    end

    check("every cycle at 128 GiB/s (back-to-back issue seen)", n_b2b_fire > 0);
    check("bandwidth gate spacing >= 4 cycles at 16 B/cycle", min_gap_slow >= 4 && min_gap_slow < (1 << 30));
    check("FP32 bypass reads",       n_rsp_mode[MODE_FP32] > 0);
    check("identity reads",          n_rsp_mode[MODE_IDENTITY] > 0);
    check("G-Binary reads",          n_rsp_mode[MODE_GBIN] > 0);
    check("G-Ternary reads",         n_rsp_mode[MODE_GTER] > 0);
    check("gated G-Ternary elements", n_gated > 0);
    check("write completions",       n_wr_cmp > 0);
    check("admissions",              n_admit > 0);
    check("recoveries",              n_recover > 0);
    check("mode change with reads in flight", n_mode_inflight > 0);
    check("bandwidth-gate stalls",   n_gate_stall > 0);
    check("bypass held behind datapath", n_byp_held > 0);
    check("datapath entry held for bypass", n_dp_hold > 0);
    $display("reads fp32=%0d identity=%0d gbin=%0d gter=%0d writes=%0d admit=%0d recover=%0d",
             n_rsp_mode[0], n_rsp_mode[1], n_rsp_mode[2], n_rsp_mode[3], n_wr_cmp, n_admit, n_recover);
    $display("inflight_mode_change=%0d gate_stall=%0d byp_held=%0d dp_hold=%0d gated_bytes=%0d b2b=%0d",
             n_mode_inflight, n_gate_stall, n_byp_held, n_dp_hold, n_gated, n_b2b_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
