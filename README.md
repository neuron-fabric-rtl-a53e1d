# Low-bit gradient aggregation on the response path of a CXL memory controller

In data-parallel training, every worker's gradient has to be combined with
everyone else's at each step. Once the gradients no longer fit in the
last-level cache, that All-Reduce traffic goes through the memory controller.
This design puts a small, fixed-function aggregation stage into a CXL.mem
memory controller. The training runtime writes a **packed sign payload** into
a gradient buffer in CXL-attached memory: for every gradient element, one bit
per worker saying "my gradient here is positive". When the buffer is read
back, the controller can return the **majority vote** over the workers instead
of the stored bits. That vote is one byte per element instead of eight
32-bit floats.

Low-bit aggregation is not safe for every layer or every phase of training,
so the controller has a **mode latch**. The training stack's control plane
writes it, and it decides what a read returns. Training starts in full
precision. Low-bit modes are admitted only when diagnostics allow, and a
clear sends the controller back to full precision for recovery. The
transform acts only on the read response. It never changes what is stored,
so the same buffer always works as a plain byte buffer too.

The design follows the NEURON-Fabric architecture (Wang, Huang, Lung). That
publication gives the arithmetic, the four modes, the 512-bit width and the
five-cycle depth. It does not give a register-level design. Everything at
that level here is this implementation's own, and the section *Where this
departs from, or goes beyond, the source* lists those choices.

## The four response modes

| mode (`nf_mode_e`) | what a read returns | route | latency after memory answers |
|---|---|---|---|
| `MODE_FP32` (reset) | stored bytes | bypass return, around the datapath | 1 cycle (more if held) |
| `MODE_IDENTITY` | stored bytes | through the five-stage datapath | 5 cycles |
| `MODE_GBIN` (G-Binary) | per element: vote count and majority sign | datapath | 5 cycles |
| `MODE_GTER` (G-Ternary) | G-Binary with every third element forced to zero | datapath | 5 cycles |

FP32 bypass is the normal full-precision path, used for warm-up,
calibration and recovery. Identity returns the same bytes as FP32 bypass but
sends them through the datapath. It is the functional check that the low-bit
path itself corrupts nothing.

## Element format and arithmetic

A 64-byte line holds 64 gradient elements, one byte each. Bit *k* of byte *i*
is worker *k*'s sign bit: 1 means positive, 0 means zero or negative. So one
line carries the votes of W = 8 workers for 64 elements.

For each element the datapath computes

- the count of positive votes, c = popcount(byte), from 0 to 8,
- the vote margin, a = 2c − W, from −8 to +8,
- the update, u = sgn(a): +1, −1, or 0 on a 4–4 tie.

In the low-bit modes, each returned byte is

```
bit  7 6 | 5 4 | 3 2 1 0
     0 0 |  u  |    c         u: 01 = +1, 11 = -1, 00 = 0
```

So 6 positive and 2 negative votes return `8'h16`, a tie returns `8'h04`,
unanimous positive returns `8'h18` and unanimous negative returns `8'h30`.
The count stays in the byte so software can check it exactly. The sign is the
update that training uses.

**G-Ternary gate.** Number the elements of the whole buffer consecutively,
e = (address / 64) · 64 + i. Elements with e mod 3 = 0 or 1 keep their
G-Binary byte. Elements with e mod 3 = 2 return `8'h00`. An ungated element
can never produce `8'h00`, because c = 0 always comes with u = −1, so a zero
byte always means "gated". Because 64 ≡ 1 (mod 3), the pattern shifts by one
position from each line to the next. The datapath finds each line's starting
phase as (line index mod 3) · (64 mod 3) mod 3. It computes the line index
mod 3 as the sum of the index's base-4 digits, since 4 ≡ 1 (mod 3), which
gives a small adder tree instead of a divider (`nf_pkg::line_phase3`). The
index is counted from physical address 0. A buffer whose base is not a
multiple of 3 lines therefore starts at a different phase, and the runtime
has to allow for that (see below).

## The five-stage datapath (`nf_lowbit_dp`)

The datapath accepts one line per cycle and never stalls:

| stage | work |
|---|---|
| 1 request decode | register the line, its tag and mode; compute the line's gate phase from its address |
| 2 sign unpacking / alignment | XNOR every vote with the positive polarity; build the 64-bit gate mask |
| 3 per-element counts | 64 eight-input popcounts |
| 4 majority or ternary gating | encode {u, c} per byte; force gated bytes to zero in G-Ternary |
| 5 mode selection, response registration | choose the stored line (identity) or the vote bytes; register the output |

The source lists six steps for five cycles. Here mode selection and
response registration share the last stage. The XNOR reference is the
constant "positive" polarity, so after synthesis it reduces to the vote bits
themselves. It stays in the code because it is where a signed-polarity
variant would go. The stored line travels through all five stages so that
identity mode works, which accounts for most of the flip-flops.

`LINE_W` is a parameter, and the source sweeps widths from 64 to 1024 bits.
It must be a multiple of 8. `NWORKERS` has to stay 8, because the byte
format holds the votes of exactly eight workers.

## The controller around it (`nf_cxl_ctrl`)

```
 link req ──► bandwidth gate ──► memory req
                  │ on accept: table[tag] <- {address, mode}
 memory rsp ──► route by {write, table[tag].mode}
                  ├─ FP32 read / write completion ──► bypass FIFO ──────┐
                  └─ identity / G-Binary / G-Ternary ──► 5-stage datapath ─┴─► merge ──► link rsp
 control plane ──► mode latch (write = admit, clear = back to FP32)
```

- **Writes** go to memory unchanged. Their completion comes back on the
  bypass route.
- **Mode capture.** When a request is accepted, the mode in force and the
  line address are stored in a 512-entry table indexed by the request tag.
  The memory response carries only the tag. A latch change therefore
  affects only reads accepted after it; reads already in flight keep the
  mode they were issued under. The end-to-end test clears the latch in the
  middle of a burst of G-Ternary reads and checks exactly this.
- **Two routes, one channel.** The datapath cannot stall, so its output
  always gets the response channel. Bypassed responses wait in a two-entry
  FIFO and leave in any cycle the datapath does not use. While the FIFO
  holds anything, new lines are not started into the datapath (`dp_hold`
  lowers `m_rsp_ready` for them). The datapath then drains within five
  cycles, so a bypassed response never waits behind an endless low-bit
  stream.
- **Ordering.** The two routes have different latencies, so responses can
  come back in a different order from the requests. Every response carries
  its tag, as on CXL.mem, and `h_rsp_lowbit` says which route it took. The
  link must not reuse a tag until its response has come back (an assertion
  checks this).
- **Bandwidth gate (`nf_bw_gate`).** A credit counter spaces line requests
  to the link rate given on `cfg_bw_rate`, in bytes per cycle × 256. It
  gains the rate every cycle, a line costs 64 × 256, and the credit is
  capped just below one line plus one cycle's gain. That cap rules out
  bursts after idle time without losing the fractional part. 128 GiB/s at
  2 GHz is 68.7 bytes/cycle (`BW_RATE_128GIBS_2GHZ` = 17592), which lets a
  line through every cycle. At 16 bytes/cycle a line passes every fourth
  cycle. In the source this gate belongs to the timing model: the interval
  it opens between line services is what hides the five-cycle datapath
  under bandwidth pressure. Here it is an actual block on the request side.

### Mode latch (`nf_mode_latch`)

The latch resets to FP32 bypass. `wr_en` loads `wr_mode`. `clr` forces FP32
and wins over a write in the same cycle, because recovery is the safe choice.
`changed` pulses for one cycle whenever the held value actually changes, so
the runtime can see fallback and re-admission. The policy that drives the
latch is not part of this RTL: forecasts, telemetry, loss-trend guards and
the admission ladder all live in the training stack.

## Timing and throughput

- Datapath: one line per cycle, exactly 5 cycles from memory response to
  link response. At 2 GHz that is 64 B × 2·10⁹ = 119 GiB/s, which is 93% of
  the 128 GiB/s default link rate. Matching that rate needs 2.15 GHz or a
  second lane.
- Bypass: at least 1 cycle, plus up to 5 cycles while a datapath burst
  drains.
- Request path: combinational through the bandwidth gate, with no added
  cycle.
- Outstanding reads: 512 tags. A 200 ns memory at 128 GiB/s needs about 430
  lines in flight. The end-to-end test streams 2048 G-Binary reads behind a
  400-cycle memory and gets them back in 2452 cycles.

## Interfaces

All signals use one clock. `rst_n` is active-low and synchronous.
`nf_pkg` defines the request and response structs:

```
nf_req_t = {write, addr[47:0], tag[8:0], data[511:0]}   // 570 bits
nf_rsp_t = {write, tag[8:0], data[511:0]}               // 522 bits
```

Top-level ports of `nf_cxl_ctrl`:

- `ctrl_mode_wr` / `ctrl_mode` / `ctrl_mode_clr`: the mode-latch write and
  clear. `mode_o` and `mode_changed_o` report the latch state.
- `cfg_bw_rate`: the link rate for the bandwidth gate.
- `h_req_valid` / `h_req_ready` / `h_req`: requests from the link.
- `h_rsp_valid` / `h_rsp` / `h_rsp_lowbit`: responses to the link. This
  channel has no ready; it always accepts.
- `m_req_*` and `m_rsp_*`: the valid/ready request and response channels to
  pooled memory.

The CXL link, PHY and flit layer are not modelled. The plain channels stand
for the CXL.mem request and response messages.

## Where this departs from, or goes beyond, the source

- **Output byte layout.** The source says the functional test checks the
  count per byte and that training reads the sign. It does not give a bit
  layout. The `{00, u, c}` byte and the `8'h00` gated value are this
  design's.
- **G-Ternary gate source.** One passage describes the evaluated gate as
  the fixed 2-of-3 pattern. Another says the runtime writes zero-gate bits
  next to the signs. This design implements the fixed pattern. A per-element
  gate taken from memory would need a payload format the source does not
  define.
- **Gate phase origin.** The elements are counted from physical address 0.
  The source does not say whether the count starts at the buffer base.
- **Identity vs. FP32 bypass.** Both return stored bytes. Identity runs
  through the datapath and FP32 bypass around it. This split is this
  design's reading of why the source lists them as separate modes.
- **Response merge, FIFO, `dp_hold`, tag table, mode capture per request,
  out-of-order tagged responses, port formats, 48-bit addresses, 9-bit
  tags.** None of these is described in the source.
- **One global latch.** Layer-aware operation (low-bit backbone, FP32
  classifier head) means rewriting the latch between reading the two
  buffers. Per-request capture makes that safe with reads in flight.
  Per-buffer mode metadata is named in the source only as future work.
- **Bandwidth gate as hardware.** In the source it is part of the timing
  model.
- **Throughput.** A single 512-bit lane at 2 GHz is slightly below the
  128 GiB/s default link rate, as computed above.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_nf_lowbit_dp` | directed vote patterns (6/2, 4/4 tie, unanimous) and 3000 random lines in random modes and at random addresses, back to back; the reference is computed from `$countones` and the element index; latency exactly 5 |
| `tb_nf_lowbit_dp_sweep` | the same datapath checks at 64, 128, 256 and 1024-bit line widths, one instance each, fed the same random stream |
| `tb_nf_mode_latch` | reset value, write, hold, clear over write, change pulse, 500 random steps |
| `tb_nf_bw_gate` | lines passed per window at four rates (every cycle, every 2nd, every 4th, every 3rd), minimum spacing, backpressure |
| `tb_nf_bypass_return` | merge priority, FIFO order and content, `byp_ready` / `dp_hold` / `held`, FIFO-full and held cases seen |
| `tb_nf_cxl_ctrl` | end to end at the default sizes against `tb/nf_mem_model.sv` (sparse memory, 400-cycle latency): packed-sign write and read-back under all four modes, recovery with reads in flight, re-admission, writes mixed with low-bit reads, reduced link rate, stored bytes unchanged at the end, sustained one-line-per-cycle stream; counts each mechanism and fails if one never happened |

To run one with Verilator 5 (two-state; run from the directory that holds
`rtl/` and `tb/`):

```
verilator --binary --timing --assert -y rtl -y tb rtl/nf_pkg.sv tb/tb_nf_cxl_ctrl.sv \
          --top-module tb_nf_cxl_ctrl -o sim && ./obj_dir/sim
```

Use the same command for the other testbenches with their own top. The
whole end-to-end run takes well under a second of simulation.

**What these tests do not cover.** The tests check the logic against the
arithmetic above. They say nothing about timing closure at 2 GHz or about
area. The CXL protocol around the plain channels, and every training-level
claim of the source (accuracy, traffic ratios), are outside this RTL.

## Files

- `rtl/nf_pkg.sv`: widths, mode enum, request/response structs, gate-phase
  and vote-encoding functions.
- `rtl/nf_lowbit_dp.sv`: the five-stage datapath.
- `rtl/nf_mode_latch.sv`: the mode latch.
- `rtl/nf_bw_gate.sv`: the bandwidth gate.
- `rtl/nf_bypass_return.sv`: the bypass FIFO and response merge.
- `rtl/nf_cxl_ctrl.sv`: the top.
- `tb/`: one testbench per module and the memory model.
