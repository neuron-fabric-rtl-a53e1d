// nf_pkg -- shared types and helper functions of the near-memory gradient
// aggregation controller.
//
// A gradient-buffer cache line is LINE_BITS wide (64 bytes). In the low-bit
// modes every byte is one gradient element and bit k of that byte is the sign
// bit b(k,i) written by worker k (1 = positive, 0 = non-positive), so one byte
// carries the votes of eight workers. The controller returns one byte per
// element in the low-bit modes; its layout (this design's choice) is
//   bits [3:0]  sign count c = number of positive votes, 0..8
//   bits [5:4]  update u = sgn(2c - W) as 2-bit two's complement
//               (01 = +1, 11 = -1, 00 = 0 on a tie)
//   bits [7:6]  zero
// and a G-Ternary element whose zero gate is closed returns 8'h00 (a value an
// ungated element can never produce, because c = 0 always comes with u = -1).
package nf_pkg;

  // Line geometry: 512-bit line = 64-byte CXL response granularity.
  localparam int unsigned LINE_BITS  = 512;
  localparam int unsigned LINE_BYTES = LINE_BITS / 8;
  // Eight virtual workers, one sign bit each per element byte.
  localparam int unsigned WORKERS    = 8;
  // Host physical address and request tag widths (this design's choice).
  // 512 tags cover the ~430 lines in flight that a 200 ns memory access at
  // 128 GiB/s needs to keep the link busy.
  localparam int unsigned ADDR_W     = 48;
  localparam int unsigned TAG_W      = 9;
  // Low-bit datapath depth in controller cycles.
  localparam int unsigned DP_STAGES  = 5;

  // Cost of one cache-line service event for the bandwidth gate, in 1/256
  // byte units (64 bytes), and the default link rate: 128 GiB/s at a 2 GHz
  // controller clock = 68.72 bytes/cycle = 17592/256.
  localparam int unsigned BW_FRAC    = 256;
  localparam int unsigned BW_RATE_W  = 16;
  localparam logic [BW_RATE_W-1:0] BW_RATE_128GIBS_2GHZ = 16'd17592;

  // A cache-line request as it crosses the controller: from the link to the
  // controller and from the controller to pooled memory.
  typedef struct packed {
    logic                 write;
    logic [ADDR_W-1:0]    addr;
    logic [TAG_W-1:0]     tag;
    logic [LINE_BITS-1:0] data;   // write data; don't-care on reads
  } nf_req_t;

  // A response: read data, or a write completion (data don't-care).
  typedef struct packed {
    logic                 write;
    logic [TAG_W-1:0]     tag;
    logic [LINE_BITS-1:0] data;
  } nf_rsp_t;

  // The four controller-visible payload modes: identity, FP32 bypass,
  // G-Binary, G-Ternary. FP32 bypass is the reset value: training starts on
  // the full-precision path.
  typedef enum logic [1:0] {
    MODE_FP32     = 2'd0,
    MODE_IDENTITY = 2'd1,
    MODE_GBIN     = 2'd2,
    MODE_GTER     = 2'd3
  } nf_mode_e;

  // Position, 0..2, of an address's first element in the recurring 2-of-3
  // G-Ternary gate pattern. Element e of the flattened buffer has
  // e = line * LINE_BYTES + byte; the gate is closed when e mod 3 == 2.
  // Since 4 == 1 (mod 3), a number is congruent to the sum of its base-4
  // digits, which keeps this a small adder tree instead of a divider.
  function automatic logic [1:0] line_phase3(input logic [ADDR_W-1:0] addr,
                                             input int unsigned line_bytes);
    logic [ADDR_W-1:0] line_idx;
    logic [15:0]       acc;
    logic [15:0]       first;
    line_idx = addr / ADDR_W'(line_bytes);
    acc = '0;
    for (int unsigned d = 0; d < ADDR_W / 2; d++) begin
      acc = acc + 16'(line_idx[2*d +: 2]);
    end
    // first element index mod 3 = (line mod 3) * (line_bytes mod 3) mod 3
    first = 16'((32'(acc) % 3) * (line_bytes % 3));
    return 2'(first % 3);
  endfunction

  // Expected low-bit output byte for one element; used by the datapath's
  // reference checks in the testbenches as well as documentation of the
  // encoding above.
  function automatic logic [7:0] encode_vote(input logic [3:0] count,
                                             input int unsigned workers);
    logic [1:0] u;
    if (2 * int'(count) > int'(workers))      u = 2'b01;
    else if (2 * int'(count) < int'(workers)) u = 2'b11;
    else                                      u = 2'b00;
    return {2'b00, u, count};
  endfunction

endpackage
