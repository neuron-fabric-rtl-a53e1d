// nf_lowbit_dp -- five-stage G-Binary / G-Ternary read-response datapath.
//
// What it does: transforms one cache line of a read response per cycle. In
// identity mode the line is returned byte for byte. In G-Binary mode every
// byte i holds the sign bits of eight workers, b(k,i) in bit k; the datapath
// counts the positive votes c(i) = PopCount(b(0,i)..b(7,i)), forms the
// majority update u(i) = sgn(2c(i) - W) and returns both in one byte (layout in
// nf_pkg). G-Ternary reuses the same count and majority logic and then applies
// the recurring 2-of-3 zero gate over flattened gradient elements: element
// e = line*64 + i keeps its G-Binary byte when e mod 3 is 0 or 1 and returns
// 8'h00 when e mod 3 is 2.
//
// How: the five pipeline stages follow the stage list of the datapath
// description -- 1 request decode (mode, gate phase of the line address),
// 2 sign unpacking/alignment (XNOR of each vote with the positive polarity,
// gate mask per element), 3 per-element PopCount, 4 majority or ternary gating,
// 5 mode selection and response registration. The 512-bit width, eight workers
// per byte, the five-cycle depth, the count/majority arithmetic and the 2-of-3
// gate follow the paper. The output byte encoding, the gate phase taken from
// the absolute line address, and the XNOR reference being the constant
// "positive" polarity (so it reduces to the vote bits themselves) are this
// design's choices. A request in FP32-bypass mode is not expected here (the
// controller routes it around the datapath); if one arrives it is treated as
// identity.
//
// Interface and timing: in_valid/in_* are sampled on a rising clk edge; the
// result appears on out_valid/out_* exactly DP_STAGES = 5 cycles later. The
// pipeline accepts one line every cycle and never stalls (no ready signal):
// the response channel downstream always accepts. rst_n is an active-low
// synchronous reset of the valid bits only.
module nf_lowbit_dp
  import nf_pkg::*;
#(
  parameter int unsigned LINE_W   = nf_pkg::LINE_BITS,
  parameter int unsigned NWORKERS = nf_pkg::WORKERS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  nf_mode_e            in_mode,
  input  logic [ADDR_W-1:0]   in_addr,
  input  logic [TAG_W-1:0]    in_tag,
  input  logic [LINE_W-1:0]   in_data,
  output logic                out_valid,
  output logic [TAG_W-1:0]    out_tag,
  output logic [LINE_W-1:0]   out_data
);

  localparam int unsigned NELEM = LINE_W / NWORKERS;   // elements per line
  localparam int unsigned CW    = $clog2(NWORKERS + 1); // count width

  // Out-of-range elaboration guard: 8 workers per byte is the paper's format
  // and the output byte holds a count of at most 4 bits.
  if (NWORKERS != 8 || LINE_W % 8 != 0) begin : g_bad_cfg
    $error("nf_lowbit_dp: NWORKERS must be 8 and LINE_W a multiple of 8");
  end

  // Control that travels with the line through every stage.
  typedef struct packed {
    logic             valid;
    logic             lowbit;   // G-Binary or G-Ternary
    logic             ternary;  // G-Ternary
    logic [TAG_W-1:0] tag;
  } ctl_t;

  // ---------------- stage 1: request decode ----------------
  ctl_t              s1_ctl;
  logic [1:0]        s1_phase;
  logic [LINE_W-1:0] s1_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_ctl.valid <= 1'b0;
    end else begin
      s1_ctl.valid <= in_valid;
    end
    s1_ctl.lowbit  <= (in_mode == MODE_GBIN) || (in_mode == MODE_GTER);
    s1_ctl.ternary <= (in_mode == MODE_GTER);
    s1_ctl.tag     <= in_tag;
    s1_phase       <= line_phase3(in_addr, LINE_W / 8);
    s1_data        <= in_data;
  end

  // ---------------- stage 2: sign unpacking / alignment ----------------
  // agree = XNOR(vote, positive polarity); gate mask from the line phase.
  localparam logic [NWORKERS-1:0] POS_POLARITY = '1;

  logic [NELEM-1:0][NWORKERS-1:0] s2_agree_d;
  logic [NELEM-1:0]               s2_gate_d;

  always_comb begin
    for (int unsigned i = 0; i < NELEM; i++) begin
      s2_agree_d[i] = ~(s1_data[i*NWORKERS +: NWORKERS] ^ POS_POLARITY);
      // element (first + i) mod 3 == 2 is gated to zero
      s2_gate_d[i]  = (((32'(s1_phase) + i) % 3) != 2);
    end
  end

  ctl_t                           s2_ctl;
  logic [NELEM-1:0][NWORKERS-1:0] s2_agree;
  logic [NELEM-1:0]               s2_gate;
  logic [LINE_W-1:0]              s2_data;

  always_ff @(posedge clk) begin
    if (!rst_n) s2_ctl.valid <= 1'b0;
    else        s2_ctl.valid <= s1_ctl.valid;
    s2_ctl.lowbit  <= s1_ctl.lowbit;
    s2_ctl.ternary <= s1_ctl.ternary;
    s2_ctl.tag     <= s1_ctl.tag;
    s2_agree       <= s2_agree_d;
    s2_gate        <= s2_gate_d;
    s2_data        <= s1_data;
  end

  // ---------------- stage 3: per-element PopCount ----------------
  logic [NELEM-1:0][CW-1:0] s3_count_d;

  always_comb begin
    for (int unsigned i = 0; i < NELEM; i++) begin
      s3_count_d[i] = '0;
      for (int unsigned k = 0; k < NWORKERS; k++) begin
        s3_count_d[i] = s3_count_d[i] + CW'(s2_agree[i][k]);
      end
    end
  end

  ctl_t                     s3_ctl;
  logic [NELEM-1:0][CW-1:0] s3_count;
  logic [NELEM-1:0]         s3_gate;
  logic [LINE_W-1:0]        s3_data;

  always_ff @(posedge clk) begin
    if (!rst_n) s3_ctl.valid <= 1'b0;
    else        s3_ctl.valid <= s2_ctl.valid;
    s3_ctl.lowbit  <= s2_ctl.lowbit;
    s3_ctl.ternary <= s2_ctl.ternary;
    s3_ctl.tag     <= s2_ctl.tag;
    s3_count       <= s3_count_d;
    s3_gate        <= s2_gate;
    s3_data        <= s2_data;
  end

  // ---------------- stage 4: majority or ternary gating ----------------
  logic [NELEM-1:0][7:0] s4_vote_d;

  always_comb begin
    for (int unsigned i = 0; i < NELEM; i++) begin
      if (s3_ctl.ternary && !s3_gate[i]) s4_vote_d[i] = 8'h00;
      else                               s4_vote_d[i] = encode_vote(4'(s3_count[i]), NWORKERS);
    end
  end

  ctl_t                  s4_ctl;
  logic [NELEM-1:0][7:0] s4_vote;
  logic [LINE_W-1:0]     s4_data;

  always_ff @(posedge clk) begin
    if (!rst_n) s4_ctl.valid <= 1'b0;
    else        s4_ctl.valid <= s3_ctl.valid;
    s4_ctl.lowbit  <= s3_ctl.lowbit;
    s4_ctl.ternary <= s3_ctl.ternary;
    s4_ctl.tag     <= s3_ctl.tag;
    s4_vote        <= s4_vote_d;
    s4_data        <= s3_data;
  end

  // ---------------- stage 5: mode selection, response registration ----------
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s4_ctl.valid;
    out_tag  <= s4_ctl.tag;
    out_data <= s4_ctl.lowbit ? LINE_W'(s4_vote) : s4_data;
  end

endmodule
