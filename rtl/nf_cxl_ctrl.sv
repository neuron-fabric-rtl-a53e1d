// nf_cxl_ctrl -- CXL.mem-side controller with a low-bit gradient-aggregation
// response path (top level).
//
// What it does: sits between the CXL link and pooled memory that holds a
// byte-addressed gradient buffer. Writes pass to memory unchanged, so the
// stored bytes are never altered by the controller. Reads go to memory too;
// on the way back each read response is returned according to the mode the
// control plane has put into the mode latch:
//   FP32 bypass  the stored bytes, through the bypass return (1 cycle)
//   identity     the stored bytes, through the low-bit datapath (5 cycles)
//   G-Binary     per element: positive-vote count and majority sign (5 cycles)
//   G-Ternary    G-Binary with the recurring 2-of-3 zero gate (5 cycles)
// The control plane itself (the policy that decides the mode) lives in the
// training stack; this block only exposes the latch's write/clear port.
//
// How: a bandwidth gate spaces accepted line requests at the configured link
// rate. Each accepted request records its line address and the mode in force
// in a table indexed by its tag, so a mode change affects only requests
// accepted after it, and the read response, which carries only the tag,
// finds both again. FP32-bypass reads and all write completions take the
// bypass return; the other modes take the five-stage datapath; the two are
// merged onto the response channel with the datapath first. Because the two
// routes differ in latency, responses can return out of request order; the
// tag identifies them, as on CXL.mem.
//
// What follows the paper: the placement on the read-response path, the four
// modes, the mode latch with FP32 as the start and recovery mode, the
// 512-bit five-cycle datapath, and the bandwidth gate. This design's choices:
// the request/response port format (struct with write flag, 48-bit address,
// 9-bit tag, 512-bit data), capturing the mode per request at acceptance,
// the tag table, and identity running through the datapath while FP32 bypass
// goes around it.
//
// Interface and timing: all valid/ready handshakes complete on a rising clk
// edge where both are high. h_req -> m_req is combinational through the
// bandwidth gate. The memory response is accepted combinationally; the host
// response follows 1 cycle later on the bypass route or 5 cycles later
// through the datapath, and the host response channel always accepts. The
// host must not reuse a tag until its response has returned. rst_n is an
// active-low synchronous reset.
module nf_cxl_ctrl
  import nf_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // control path: mode metadata only
  input  logic                 ctrl_mode_wr,
  input  nf_mode_e             ctrl_mode,
  input  logic                 ctrl_mode_clr,
  output nf_mode_e             mode_o,
  output logic                 mode_changed_o,  // 1-cycle pulse on a change
  // link bandwidth for the bandwidth gate, bytes/cycle x 256
  input  logic [BW_RATE_W-1:0] cfg_bw_rate,
  // requests from the CXL link
  input  logic                 h_req_valid,
  output logic                 h_req_ready,
  input  nf_req_t              h_req,
  // responses to the CXL link
  output logic                 h_rsp_valid,
  output nf_rsp_t              h_rsp,
  output logic                 h_rsp_lowbit,    // response came through the datapath
  // requests to pooled memory
  output logic                 m_req_valid,
  input  logic                 m_req_ready,
  output nf_req_t              m_req,
  // responses from pooled memory
  input  logic                 m_rsp_valid,
  output logic                 m_rsp_ready,
  input  nf_rsp_t              m_rsp
);

  localparam int unsigned NTAGS = 1 << TAG_W;

  // ---------------- mode latch ----------------
  nf_mode_latch u_mode_latch (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (ctrl_mode_wr),
    .wr_mode (ctrl_mode),
    .clr     (ctrl_mode_clr),
    .mode_q  (mode_o),
    .changed (mode_changed_o)
  );

  // ---------------- request path through the bandwidth gate ----------------
  nf_bw_gate u_bw_gate (
    .clk       (clk),
    .rst_n     (rst_n),
    .rate      (cfg_bw_rate),
    .in_valid  (h_req_valid),
    .in_ready  (h_req_ready),
    .out_valid (m_req_valid),
    .out_ready (m_req_ready),
    .open      ()
  );

  assign m_req = h_req;

  logic req_fire;
  assign req_fire = h_req_valid && h_req_ready;

  // ---------------- per-tag request table ----------------
  logic [ADDR_W-1:0] trk_addr [NTAGS];
  nf_mode_e          trk_mode [NTAGS];
  logic [NTAGS-1:0]  outstanding;

  always_ff @(posedge clk) begin
    if (req_fire) begin
      trk_addr[h_req.tag] <= h_req.addr;
      trk_mode[h_req.tag] <= mode_o;
    end
  end

  // ---------------- response routing ----------------
  nf_mode_e          rsp_mode;
  logic [ADDR_W-1:0] rsp_addr;
  logic              route_byp;
  logic              byp_ready, dp_hold;
  logic              dp_in_valid;
  logic              rsp_fire;

  assign rsp_mode    = trk_mode[m_rsp.tag];
  assign rsp_addr    = trk_addr[m_rsp.tag];
  assign route_byp   = m_rsp.write || (rsp_mode == MODE_FP32);
  assign m_rsp_ready = route_byp ? byp_ready : !dp_hold;
  assign dp_in_valid = m_rsp_valid && !route_byp && !dp_hold;
  assign rsp_fire    = m_rsp_valid && m_rsp_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      outstanding <= '0;
    end else begin
      for (int unsigned t = 0; t < NTAGS; t++) begin
        if (rsp_fire && m_rsp.tag == TAG_W'(t))      outstanding[t] <= 1'b0;
        else if (req_fire && h_req.tag == TAG_W'(t)) outstanding[t] <= 1'b1;
      end
    end
  end

  // ---------------- low-bit datapath ----------------
  logic                 dp_out_valid;
  logic [TAG_W-1:0]     dp_out_tag;
  logic [LINE_BITS-1:0] dp_out_data;

  nf_lowbit_dp u_lowbit_dp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (dp_in_valid),
    .in_mode   (rsp_mode),
    .in_addr   (rsp_addr),
    .in_tag    (m_rsp.tag),
    .in_data   (m_rsp.data),
    .out_valid (dp_out_valid),
    .out_tag   (dp_out_tag),
    .out_data  (dp_out_data)
  );

  // ---------------- bypass return and merge ----------------
  nf_bypass_return u_bypass_return (
    .clk         (clk),
    .rst_n       (rst_n),
    .byp_valid   (m_rsp_valid && route_byp),
    .byp_ready   (byp_ready),
    .byp_rsp     (m_rsp),
    .dp_valid    (dp_out_valid),
    .dp_tag      (dp_out_tag),
    .dp_data     (dp_out_data),
    .rsp_valid   (h_rsp_valid),
    .rsp         (h_rsp),
    .rsp_from_dp (h_rsp_lowbit),
    .dp_hold     (dp_hold),
    .held        ()
  );

`ifndef SYNTHESIS
  // The link must not reuse a tag that is still outstanding.
  a_tag_unique: assert property (@(posedge clk) disable iff (!rst_n)
    req_fire |-> !outstanding[h_req.tag]);
  // Memory may only answer a tag that is outstanding.
  a_rsp_known: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_fire |-> outstanding[m_rsp.tag]);
  // Valid/ready: a stalled request to memory stays put.
  a_mreq_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req_valid && !m_req_ready && h_req_valid |=> h_req_valid);
`endif

endmodule
