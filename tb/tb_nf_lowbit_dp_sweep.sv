// tb_nf_lowbit_dp_sweep -- the low-bit datapath at the other widths of the
// width sweep: 64, 128, 256 and 1024-bit lines (the 512-bit default has its own
// testbench).
//
// One instance per width is fed random lines in random modes at random
// line-aligned addresses, back to back. Each output is compared with a
// reference computed here: per byte the count of ones, the sign of 2c-8 and,
// in G-Ternary, a zero for flattened element index (address / line bytes) *
// line bytes + byte with index mod 3 == 2. Latency must be five cycles at
// every width. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_nf_lowbit_dp_sweep;
  import nf_pkg::*;

  localparam int unsigned MAXW = 1024;
  localparam int NW = 4;
  localparam int unsigned WIDTHS [NW] = '{64, 128, 256, 1024};
  localparam int unsigned NRAND = 1500;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              in_valid = 1'b0;
  nf_mode_e          in_mode = MODE_IDENTITY;
  logic [ADDR_W-1:0] in_addr = '0;
  logic [TAG_W-1:0]  in_tag = '0;
  logic [MAXW-1:0]   in_data = '0;

  logic              out_valid [NW];
  logic [TAG_W-1:0]  out_tag   [NW];
  logic [MAXW-1:0]   out_data  [NW];

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  always #1 clk = ~clk;

  for (genvar g = 0; g < NW; g++) begin : g_w
    localparam int unsigned LW = WIDTHS[g];
    logic [LW-1:0] od;
    nf_lowbit_dp #(.LINE_W(LW)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(in_mode),
      .in_addr(in_addr), .in_tag(in_tag), .in_data(in_data[LW-1:0]),
      .out_valid(out_valid[g]), .out_tag(out_tag[g]), .out_data(od)
    );
    assign out_data[g] = MAXW'(od);
  end

  typedef struct {
    longint unsigned   at;
    nf_mode_e          mode;
    logic [ADDR_W-1:0] addr;
    logic [TAG_W-1:0]  tag;
    logic [MAXW-1:0]   data;
  } item_t;

  item_t pend [NW][$];

  function automatic logic [MAXW-1:0] ref_line(item_t it, int unsigned lw);
    logic [MAXW-1:0] r;
    longint unsigned first;
    int unsigned nb;
    nb = lw / 8;
    r = '0;
    if (it.mode == MODE_IDENTITY || it.mode == MODE_FP32) begin
      for (int unsigned b = 0; b < lw; b++) r[b] = it.data[b];
      return r;
    end
    first = longint'(it.addr / nb) * nb;
    for (int unsigned i = 0; i < nb; i++) begin
      int c;
      logic [7:0] v;
      c = $countones(it.data[8*i +: 8]);
      if (c > 4)      v = 8'h10 | 8'(c);
      else if (c < 4) v = 8'h30 | 8'(c);
      else            v = 8'h04;
      if (it.mode == MODE_GTER && ((first + longint'(i)) % 3 == 2)) v = 8'h00;
      r[8*i +: 8] = v;
    end
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int g = 0; g < NW; g++) begin
      if (rst_n && in_valid) begin
        item_t it;
        it.at = cyc; it.mode = in_mode; it.addr = in_addr; it.tag = in_tag; it.data = in_data;
        pend[g].push_back(it);
      end
      if (rst_n && out_valid[g]) begin
        checks++;
        if (pend[g].size() == 0) begin
          failures++;
          $display("FAIL: width %0d output with nothing in flight", WIDTHS[g]);
        end else begin
          item_t it;
          it = pend[g].pop_front();
          if (cyc - it.at != 5 || out_tag[g] != it.tag || out_data[g] != ref_line(it, WIDTHS[g])) begin
            failures++;
            $display("FAIL: width %0d mode %s addr %h latency %0d", WIDTHS[g], it.mode.name(),
                     it.addr, cyc - it.at);
          end
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < NRAND; n++) begin
      logic [ADDR_W-1:0] a;
      a = {$urandom(), $urandom()};
      a[6:0] = '0;                         // aligned for every width
      in_valid <= 1'b1;
      in_mode  <= nf_mode_e'($urandom_range(1, 3));
      in_addr  <= a;
      in_tag   <= TAG_W'($urandom());
      for (int w = 0; w < MAXW / 32; w++) in_data[32*w +: 32] <= $urandom();
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    for (int g = 0; g < NW; g++) begin
      checks++;
      if (pend[g].size() != 0) begin
        failures++;
        $display("FAIL: width %0d: %0d lines never came out", WIDTHS[g], pend[g].size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
