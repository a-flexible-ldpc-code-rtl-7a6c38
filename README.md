# A fully flexible LDPC decoder on a torus network-on-chip

An LDPC decoder that can decode *any* LDPC code has a hard interconnect problem. The parity-check matrix decides which processing element (PE) must send each message to which other PE. For a structured code family (WiMAX, WiFi) you can hard-wire shifters for that pattern. For an arbitrary code you cannot.

This design replaces the fixed interconnect with a small network-on-chip: a 2D torus of 5 x 5 routing elements, each serving one PE. All 25 PEs run the layered normalized min-sum algorithm.

The routing in this network is not decided in hardware. For each code, everything is worked out off-line by a cycle-accurate simulation of one decoding iteration:

- which input each router output takes in every cycle;
- where each arriving value is stored;
- when each parity check starts.

The results are loaded into per-node circular configuration buffers and replayed every iteration. As a result:

- a flit is nothing but an 8-bit message, with no header;
- changing to a different code only means loading different buffer contents;
- that load can happen while the previous code is still decoding.

The default sizing follows the WiMAX (IEEE 802.16e) case:

| Quantity | Default |
|---|---|
| Network | 5 x 5 torus |
| Message width | 8 bits (two's complement, 1 fractional bit) |
| Router input FIFO depth | 7 |
| Checks per PE, `N_pc` | up to 47 |
| Check degree, `N_d` | up to 20 |
| Memory per PE (L(q) and R each) | 940 words |
| Configuration buffers | 767 words each |
| Normalization factor alpha | 1.15 |

At these sizes all WiMAX codes fit, up to the 2304-bit, rate-1/2 code with its 1152 checks.

## The algorithm each PE runs

Layered decoding treats the rows of the parity-check matrix as a sequence of layers. Two quantities are kept:

- for every bit j, the current soft value L(q_j);
- for every check m and bit j in it, the last check-to-bit message R_mj.

Processing check m of degree d does the following:

1. L(q_mj) = L(q_j) - R_mj(old) for the d bits j of the check.
2. min1 and min2 are the smallest and second-smallest |L(q_mj)|. s is the XOR of all the signs.
3. For each j:
   - A = min2 if |L(q_mj)| is the minimum, else A = min1;
   - R_mj(new) = sign(s XOR sign(L(q_mj))) * A / alpha;
   - L(q_j)(new) = L(q_mj) + R_mj(new).

The updated L(q_j) is then needed by whichever check of the *next* layer contains bit j, and that check is usually on another PE. This is the traffic the NoC carries.

In the first iteration of a frame, R_mj(old) is 0 and L(q_j) is the channel LLR.

## Node structure

Each node (`noc_node`) contains the following:

- **Routing element** (`noc_router`).
  - It has five ports: north, east, south, west and the local PE.
  - Each input has a FIFO (7 deep).
  - A 5 x 5 crossbar feeds five output registers that drive the links.
- **Processing element** (`ldpc_pe`), attached to the router's local port.
- **Three circular configuration buffers** (`cfg_circ_buffer`), each read once per cycle:

  | Buffer | Word width | Contents |
  |---|---|---|
  | RM (routing memory) | 15 bits | The crossbar setting of this cycle |
  | WAG (write address generator) | 10 bits | Where the value arriving at the PE in this cycle goes in the L(q_j) memory |
  | CNT/CMP | 11 bits | Either "start a check of degree d in block b" or nothing |

- **Configuration control unit** (`ccu`), connecting the node to its row's configuration bus.

The top level (`ldpc_noc_decoder`) arranges N x N nodes in a torus. Every link wraps around at the edges. It adds one configuration bus per row and the frame/iteration controller (`decode_ctrl`).

## Routing element and the RM word

The RM word holds five 3-bit fields. Field p, at bits 3p+2..3p, is for output p. The ports are numbered 0 = N, 1 = E, 2 = S, 3 = W, 4 = local. Each field gives the number (0..4) of the input FIFO whose head the output takes, or 7 if the output stays idle.

A FIFO is popped when at least one output selects it. Several outputs may take the same head in the same cycle, which gives a multicast.

Timing through the router:

- a flit on an input link in cycle t is in the FIFO from cycle t+1;
- if it is selected in cycle s, it is on the output link in cycle s+1;
- one hop therefore costs at least two cycles.

The router has no notion of a destination: the schedule is responsible for selecting only non-empty FIFOs and never overfilling one. Assertions in the router and the FIFO flag a schedule that breaks either rule.

## Processing element pipeline

This is the part with the most timing detail. Two-port memories hold L(q_j) and R_mj. Each memory has `N_pc x N_d` words, organised as one block of `N_d` consecutive words per check mapped on the PE. The values of check number b live at addresses b*N_d .. b*N_d+d-1.

Values reach the memories as follows:

- **Arriving values.** The router's local output delivers incoming values in whatever order the NoC schedule produced. Each value is written at the address the WAG buffer supplies in that cycle, so it lands in the slot of the check that will use it next.
- **Reads.** The CNT/CMP unit (`cnt_cmp`) is loaded from the CNT/CMP buffer with a check's block offset and degree. It then counts through the block, one read per cycle. Its comparator marks the last read.
- **Subtraction.** The subtractor forms L(q_mj).
- **Minimum extraction.** `min_extract` tracks min1, min2 and the sign XOR.
- **Waiting values.** The L(q_mj) values wait in a FIFO, and their memory addresses wait in a second FIFO beside it.
- **Output.** When the minima are final, `compare_unit` does three things for each waiting value:
  - chooses min1 or min2;
  - scales by 1/alpha (a multiplication by 111/128);
  - forms R_mj(new) and L(q_j)(new).

  R_mj(new) is written back at the stored address. L(q_j)(new) goes through the output buffer into the router's local input.

For a check of degree d whose start word is read in cycle t:

| Event | Cycles |
|---|---|
| Memory reads | t+1 .. t+d |
| Minima known | t+d+1 |
| The d new values leave the PE | t+d+3 .. t+2d+2, one per cycle |

A new check may start every d cycles, so the reads run back to back. When a long check is followed by a short one, the short check's outputs wait until the previous check's outputs are done. Up to four finished minimum searches can queue for this.

R_mj(old) of the first iteration is forced to 0 by a valid bit per R location, cleared when a frame starts. The channel LLRs are written into the L(q_j) memories through a load port while the decoder is idle.

## Configuration: row buses, CCUs and circular buffers

Each torus row has a configuration bus of 39 lines: `{node id (3), WAG word (10), RM word (15), CNT/CMP word (11)}`. In every bus cycle, the CCU of each node compares the id field with its own id. The addressed node writes the three fields into its three buffers. Id 7 addresses no node. Loading a code whose iteration lasts k cycles therefore takes N x k bus cycles, with the rows loading in parallel.

Each circular buffer keeps four pointers:

- **SOF / EOF.** The start and end of the region used by the running code. It holds k words, wrapping around the buffer end.
- **RDP.** Steps SOF → EOF once per iteration. The word at RDP applies to the current cycle.
- **WRP.** Where the next uploaded word goes. `cfg_upload_start` sets it to EOF+1.

The new code is therefore written just behind the running one. To switch, assert `cfg_switch` with the new length k2. At the next iteration boundary (RDP = EOF), or at once if the decoder is idle, the buffer does three things:

- SOF becomes EOF+1;
- EOF becomes SOF+k2-1;
- RDP jumps to the new SOF.

The next iteration then runs the new code without a gap.

The capacity B = 767 allows upload and decoding to overlap. The longest WiMAX iteration is 491 cycles, so 767 words leave room for most of the next code beside the running one. When the two codes do not fit together, the upload runs in three phases:

1. Fill the B - k1 free words while the old code runs.
2. During the old code's last iteration, overwrite words the read pointer has already passed.
3. During the new code's first iteration, write the remaining words ahead of the read pointer.

With n nodes sharing a row bus, phases 2 and 3 give each node k1/n and k2/n words. This is enough whenever B > (n-1)/n x (k1 + k2). For the worst WiMAX pair (iterations of 491 and 466 cycles) on the 5 x 5 decoder, that means B > 766.

The buffer does not stop writes that run into the region being read; the uploader must keep pace. `tb_cfg_circ_buffer` runs all three phases on one buffer. The decoder-level testbenches use phase 1 and, when the codes do not fit together, write the rest while the decoder is idle between frames.

All three buffers of a node receive the same run and switch controls, so they stay at the same position. An assertion checks this.

## Frame control

`decode_ctrl` starts a frame on `start`:

- it pulses `frame_start`, which clears the R valid bits;
- it raises `run` and counts iteration boundaries (the buffers' RDP = EOF) up to `it_max`;
- it then drops `run` and pulses `done`.

There is no early stopping. During the last iteration, the values leaving the PEs on `soft_valid`/`soft_data` are the a-posteriori LLRs of the bits, as updated by the last layer.

## Number formats

| Value | Format |
|---|---|
| Messages, LLRs, memory words | 8-bit two's complement, saturated symmetrically to ±127 |
| Minima | 7-bit magnitudes |
| 1/alpha | 111/128 ≈ 0.867, applied to the magnitude and truncated |

## Where this RTL departs from or adds to the source description

- **Check-node sign.** The source writes the check-node update with a leading minus sign, carried over from the tanh form of belief propagation. Normalized min-sum has no such minus, and with it min-sum does not converge. The standard sign is used here.
- **End of the new code's region.** The source gives EOF2 = SOF2 + k2 (mod B), which spans k2+1 words. Elsewhere it states that a code occupies exactly k words, and that is followed here: EOF2 = SOF2 + k2 - 1.
- **Bus width.** The source counts 38 bus lines (10 WAG + 15 RM + 3 id). That leaves 10 lines for the CNT/CMP word. Here that word is 11 bits, because a 6-bit block index (0..46) and a 5-bit degree (0..20) must both fit, so the bus is 39 lines wide.
- **Own choices.** The source does not specify these, so they are this design's:
  - the RM word packing and the port numbering;
  - the CNT/CMP word format;
  - reset values;
  - the R valid bits;
  - the LLR load port and soft-output taps;
  - the depth of the PE's internal FIFOs (2 N_d for L(q_mj) and addresses, 4 for minima);
  - truncation in the 1/alpha multiply;
  - applying a code switch only at an iteration boundary.
- **Not built.** The off-line tools that produce the configuration (graph partitioning of the checks, the NoC simulator with O1Turn routing) are not hardware and are not part of the RTL. A simplified version lives in the end-to-end testbench.
- **Other configurations.** The source also sizes a 4 x 4 WiFi decoder (FIFO depth 3, 15 iterations) and an 8 x 8 DVB-S2 decoder. The top parameters `N = 4` and `FIFO_DEPTH = 3` build the WiFi decoder. The memory and buffer sizes are package constants in `ldpc_pkg`. The DVB-S2 codes need several times the PE memory and buffer sizes of the WiMAX sizing.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against an independent model, has a watchdog, and ends with a `TB_RESULT checks=<n> failures=<m>` line.

`tb_ldpc_noc_decoder` runs the whole 5 x 5 decoder at its default parameters:

- **Configuration flow.** It contains a small configuration flow of its own:
  - two layered codes (100 bits with 2 layers, and 60 bits with 3 layers, mixed check degrees);
  - a check-to-PE mapping;
  - XY routing on the torus, taking the shorter direction;
  - a cycle-accurate model of router and PE timing, which yields the RM, WAG and CNT/CMP contents.
- **Run.** It decodes 18 frames, alternating the two codes. Each next code is uploaded while the current one decodes, and the switch happens on the fly at the frame boundary.
- **Checks.** Every value leaving every PE is compared with a bit-accurate layered min-sum model, and each frame must last exactly it_max x k cycles.
- **Mechanisms.** It counts, and requires at least once:
  - a flit waiting in a FIFO;
  - a value routed from a PE back to itself;
  - use of a wrap-around link;
  - a check waiting for the compare stage;
  - a code switch while running;
  - an upload that wraps past the end of the circular buffers.

Two further testbenches decode codes of the sizes the decoder was designed for. The codes are quasi-cyclic, with the block structure and degree profile of the standard codes but randomly drawn shifts, so they are not the standard matrices. Each of these testbenches uses the same checks as the end-to-end test.

`tb_wimax_codes` runs six WiMAX sizes on the default 5 x 5 decoder, from the largest to the smallest:

- lengths 576, 1632 and 2304;
- rate 1/2 with 10 iterations and rate 5/6 with 14.

The 2304-bit rate-1/2 code fills all 47 check blocks of every PE. The rate-5/6 codes use checks of degree 20, the full N_d.

Its schedule is the same simple XY one, with two additions:

- back-pressure, so no router FIFO exceeds 7 entries;
- a limit on how many PE outputs may wait for the router.

The resulting iteration lengths are:

| Code | Iteration length k (cycles) |
|---|---|
| 2304, rate 1/2 | 620 |
| 2304, rate 5/6 | 726 |
| 1632, rate 1/2 | 458 |
| 1632, rate 5/6 | 556 |
| 576, rate 1/2 | 195 |
| 576, rate 5/6 | 232 |

These are all within the 767-word buffers, but 1.3 to 1.8 times longer than an optimised mapping achieves. For example, 421 cycles for the 2304 rate-1/2 code gives 82 Mb/s at 300 MHz and 10 iterations; this schedule gives about 56 Mb/s. Throughput therefore depends on the quality of the off-line schedule, not on the RTL.

`tb_wifi_code` runs the 4 x 4 configuration (`N = 4`) on rate-3/4 WiFi-structured codes of lengths 1296 and 648 with 15 iterations. Two limits of the testbench's simple schedule apply here:

- The 1944-bit code needs slightly more than 767 cycles per iteration, so it is not run.
- The schedule deadlocks with 3-entry FIFOs, so this test keeps 7-entry FIFOs.

Simulation with Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl rtl/ldpc_pkg.sv \
    tb/tb_ldpc_noc_decoder.sv --top-module tb_ldpc_noc_decoder
./obj_dir/Vtb_ldpc_noc_decoder
```

The other testbenches are built the same way. Name the testbench file and top module instead.

## Files

| File | Contents |
|---|---|
| `rtl/ldpc_pkg.sv` | Sizes, types (bus word, CNT/CMP word, port numbers), saturation |
| `rtl/ldpc_noc_decoder.sv` | Top: torus of nodes, row buses, frame control |
| `rtl/noc_node.sv` | One node: router, PE, CCU, three buffers |
| `rtl/noc_router.sv` | Input-queued, RM-driven router |
| `rtl/sync_fifo.sv` | FIFO used by router and PE |
| `rtl/ldpc_pe.sv` | Layered min-sum PE |
| `rtl/cnt_cmp.sv` | Read address counter and comparator |
| `rtl/min_extract.sv` | First/second minimum and sign |
| `rtl/compare_unit.sv` | Min selection, 1/alpha, adder |
| `rtl/dp_ram.sv` | Two-port memory (L(q_j) and R_mj) |
| `rtl/cfg_circ_buffer.sv` | Circular configuration buffer |
| `rtl/ccu.sv` | Configuration control unit |
| `rtl/decode_ctrl.sv` | Frame/iteration controller |
