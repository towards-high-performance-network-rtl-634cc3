# A CS-BATS network-coding encoder with bounded-value generators

This is synthesizable SystemVerilog for a hardware encoder for BATS (batched
sparse) network codes. Its target is an FPGA card with HBM (the reference
platform is an AMD Alveo U50 at 300 MHz).

A BATS encoder turns K input packets into an unbounded stream of *batches*.
Batch i selects dg_i of the input packets and arranges them as the columns of
a pk x dg_i matrix B_i. It then multiplies B_i by a dg_i x M generator matrix
G_i over GF(2^8):

    X_i = B_i * G_i        (pk x M: M coded packets of pk bytes)

Two ideas make this cheap and fast in hardware.

1. **Cyclic-shift (CS-)BATS.** Batches are not picked at random. A small base
   graph of m rows fixes the packets of the first m batches. Batch i reuses row
   i mod m, with every selected packet index moved up by floor(i/m), modulo K.
   As a result:
   - the degree never exceeds the largest row degree (32 here, against up to
     K = 256 for random BATS);
   - the memory access pattern is known in advance;
   - only m generator matrices exist. They sit in an on-chip ROM and are
     reused for every batch built from the same row.
2. **Bounded-value (BV) generators.** Every generator coefficient comes from
   L(2^s), the 2^s field elements whose top 8-s bits are zero. The main
   configuration uses s = 2.
   - The multiplier only has to look at s bits of its second operand. It
     becomes a chain of s shift-and-add stages instead of 8.
   - A coefficient takes s bits of ROM instead of 8.

   The code stays decodable because random matrices over such a small subset
   are still full rank with high probability. That argument belongs to the
   code design and is not repeated here.

The accelerator runs many independent *BATS compute units* (CUs), one batch
each. It feeds them from HBM and merges their results onto a few write ports.

## Numbers of the default configuration

| quantity | value |
|---|---|
| field | GF(2^8), polynomial x^8+x^4+x^3+x^2+1 (0x11D) |
| coefficient set | L(2^2): {0,1,2,3}, 2 bits |
| packet length pk, batch size M, input packets K | 256 bytes, 16, 256 |
| base graph | m = 8 rows, degrees {11,12,14,14,19,20,27,32} (149 edges) |
| systolic array (t_m x t_n) | 8 x 8 MAC cells per CU |
| B tile depth t_k | 32 (the largest degree) |
| memory beat | 512 bits = 64 bytes |
| CUs / read adapters / write ports | 8 / 8 / 1 |

The matching parameters are:
- in `bats_pkg`: `ELEM_W`, `BV_S`, `BATCH_M`, `PKT_LEN`, `NUM_PKT`, `BG_ROWS`,
  `T_M`, `T_N`, `T_K` and `BEAT_W`;
- on the top: `NCU`, `NAXI` and `NOUT`.

The paper publishes the degrees of the base graph but not its connections.
It also does not publish the generator matrices. Both tables are therefore
placeholders, defined by formula in `bats_pkg`:
- `bg_col(r, k)`: which packet edge k of row r selects, `(29r + 7k) mod K`;
- `gen_coef(r, k, j)`: a fixed hash of (r, k, j), cut to s bits.

No module depends on the values, only on the degrees. To use a real code,
replace these two functions. The generator entries are not checked for full
rank.

## The multiplier (`gf_mul_bv`)

Schoolbook multiplication in GF(2^n) walks the bits of b. Stage i:
- adds the current multiple `ta = a * x^i` to the product if b[i] = 1;
- doubles `ta`: shift left one bit and, if a 1 falls out, XOR in the
  reduction polynomial.

Unrolled, this is a chain of n stages, each a multiplexer and two n-bit XORs.
Counting 1-bit XORs, that is 2n^2 per multiplier, plus n for the accumulator.

With b in L(2^s) only the first s stages remain. The cost drops to 2ns + n
per MAC cell. For the 8 x 8 array that is 64 x 40 = 2560 one-bit XORs,
against 64 x 136 = 8704 for full multipliers. The module is parameterised in
S, so S = 8 gives the ordinary full multiplier for comparison.

`ff_pe` wraps the multiplier into a MAC cell. The cell adds (XOR) into an
output-stationary accumulator and registers the operands on to its
neighbours.

## One compute unit (`bats_cu`)

```
 gen_matrix_rom -> gmat_mover -> g_tile_buffer ----------+   (G, from above)
                                                         v
 HBM read -> data_mover -> b_tile_buffer -> systolic_array (8x8 ff_pe)
                 ^                              |
                 |                              v
 HBM write <- out_port_share <- transpose_buffer (inside data_mover)
                         all sequenced by cu_controller
```

### Tiling and the "super-tile"

X is tiled by rows.
- A t_m x t_k tile of B (8 rows x all dg columns) is multiplied by the whole
  of G (dg x 16).
- This is done as two t_m x t_n products, one for each half of the columns
  of X.
- Each B tile is therefore read from memory once and used twice.

A column of a B tile is 8 consecutive bytes of one packet, but a memory beat
carries 64 bytes. The data mover therefore reads t_m + alpha = 64 bytes per
packet column (alpha = 56). One beat fills a column of a *super-tile* of
64 rows, which holds 8 row tiles.
- A super-tile costs dg memory reads.
- It feeds 8 x 2 x dg array cycles, so memory needs only 1/16 of the
  compute rate.
- A batch is 256/64 = 4 super-tiles.

`b_tile_buffer` holds two super-tiles (ping-pong):
- the mover fills one bank while the array works on the other;
- `full[bank]` flags pass each bank between the two sides.

### Order of work and cycle counts

For each batch, `cu_controller` does the following:

1. It starts the G mover and the data mover together. The G mover copies one
   ROM word per clock into the G buffer, so G is ready after dg + 2 cycles.
   This is hidden behind the memory latency of the first B reads.
2. For each super-tile J (bank J mod 2), it waits until the bank is full.
   This is an **input stall**.
3. For each of its 8 row tiles, it claims an output bank. If neither output
   bank is free, it waits: an **output stall**.
4. It then issues column tile n = 0 and then n = 1, each over k = 0..dg-1, one
   k per clock. `first` and `last` flags travel with the data.
5. It releases the B bank to the mover.

Without stalls, a batch takes 64·dg issue cycles plus 3 cycles of control
overhead. That is 707 cycles for dg = 11 and 2051 for dg = 32. An average
batch of the 8-row graph (dg = 149/8) moves 256·16 bytes in about 1195
cycles, so one CU delivers at most 8.2 Gb/s at 300 MHz.

### Systolic timing

`systolic_array` skews its own inputs. Row i of B and its control word are
delayed i cycles, and column j of G is delayed j cycles. As a result, the
caller presents a whole B column and a whole G row in the same cycle.

If the last k of a tile is issued in cycle t, PE(i,j) outputs its result in
cycle t+i+j+1. The whole 8 x 8 tile has left the array 15 cycles after its
last issue. Tiles are issued back to back. The `first` flag restarts each
accumulator, so there are no bubbles between tiles.

### Transposed output and the output ping-pong

`transpose_buffer` has two banks of t_m x M = 128 bytes.
- Result X[i][m] goes to byte m·8 + i, so each coded packet's 8 bytes are
  contiguous.
- When the second column tile of a row tile is complete, the bank is written
  out as two 512-bit beats.
- Meanwhile the array fills the other bank.

Output layout: row tile t of batch b is the 128-byte block at
`out_base + (b·32 + t)·128`, with coded packet m at byte offset 8m. Input
packet p is read from `in_base + p·256`.

### Memory ports

Read and write ports are simple single-beat valid/ready channels with byte
addresses:
- read request: `rd_req_*`;
- read data: `rd_rsp_*`, returned in order with any latency;
- write beat: `wr_*`, an {address, 512-bit data} pair.

A real system needs an AXI4 master on each of these. It is not included.
Bursts are therefore not modelled: every beat is a transaction.

## Many compute units (`bats_accel`)

### Load-balance scheduling (`load_balance_scheduler`)

Batches are handed out in order, in rounds of NCU. Within a layer (m
consecutive batches using rows 0..m-1), batch i goes to CU i mod NCU. In
every odd layer the order is reversed, so batch i goes to CU NCU-1-(i mod NCU).
- The CU that built the light rows of one layer builds the heavy rows of the
  next.
- With growing row degrees this evens out the finishing times.

A dispatch waits for its CU, with no work stealing. `lbs_en = 0` gives the
plain sequential order for comparison.

The published pseudo-code states the reversal condition differently from its
own prose. The test here is "odd layer", which is what the prose and the
published timing example describe. A four-CU version of that example, with
per-CU loads 54/62/68/82 without reversal and 68/65/65/68 with it, is
reproduced in the scheduler's testbench.

### Sharing a write port (`out_port_share`)

Several CUs share one write port. The port takes one 512-bit beat from each
CU in turn, round robin over the CUs that have a beat ready, and runs at one
beat per clock while any CU has data. The two output banks per CU absorb the
waiting. The top can instead be built with NOUT ports, each serving NCU/NOUT
CUs.

### Bundling read ports (`axi_rd_adapter`)

By default every CU has its own read adapter and HBM pseudo channel. With
NAXI < NCU, NCU/NAXI CUs share an adapter:
- requests are granted round robin;
- a queue of requester ids (64 reads in flight) routes the in-order data back.

This trades logic for contention. The testbenches measure that contention.

### Counters

The top clears five event counters at `start`: input-stall CU-cycles,
output-stall CU-cycles, reversed dispatches, write-port contention cycles and
read-adapter contention cycles.

## Departures from the published design

- **Placeholder tables.** The base-graph connections and the generator
  matrices are placeholders (see above). The shift is to the right: packet
  index plus floor(i/m).
- **G buffer.**
  - The published G buffer is a ping-pong pair of t_k x t_n tiles.
  - Here `g_tile_buffer` holds all of G (both column tiles) for the whole
    batch.
  - G is reused by every row tile, and reloading it costs dg + 2 cycles per
    batch. A second bank would gain under 0.1 %.
- **ROM size.** The ROM holds the 8-row base graph (149 words x 32 bits =
  596 bytes). The published ROM figure (468 bytes) is for the 7-row graph
  used in the coding simulations. Changing `bg_degree` and `BG_ROWS` in
  `bats_pkg` builds that one.
- **Memory interface.** Memory ports are single-beat valid/ready, not AXI4.
  The HBM, its crossbars, the pseudo-channel choice and the host/PCIe shell
  are outside the design. The host's settings (`start`, `num_batches`,
  `lbs_en`, `in_base`, `out_base`) are plain top-level ports.
- **Loop order, layout and counters.**
  - The loop order inside a CU, the output address map and the transposed
    byte order are choices of this design.
  - So are the systolic skew, the output-stationary dataflow and the control
    word that travels with B.
  - The event counters are additions for observation.
- **Throughput model.** Throughputs quoted below come from simulation with
  behavioural memory models, not from hardware. The models are:
  - read latency 90 cycles, the documented worst case for aligned HBM
    accesses;
  - write ports that accept a beat 34 % of the time.
- **Reversal condition.** Where the published pseudo-code and prose disagree
  on when to reverse the CU order, the prose was followed.

## Simulated behaviour

All runs encode 32 batches (`tb_bats_accel`, `tb_bats_accel_exps`), with every
coded byte checked against an independent GF(2^8) reference.

| configuration | cycles | Gb/s at 300 MHz |
|---|---|---|
| 8 CUs, 8 read adapters, 1 write port (default) | 8794 | 35.8 |
| 8 CUs, 4 / 2 / 1 read adapters | 8902 / 9274 / 9855 | 35.3 / 33.9 / 31.9 |
| 4 / 2 / 1 CUs, one adapter each | 13027 / 21828 / 41753 | 24.1 / 14.4 / 7.5 |
| 8 CUs, 2 write ports | 8736 | 36.0 |

The published board measurements are lower: 25 Gb/s for the default, 24 Gb/s
with 4 adapters and 27 Gb/s with 2 write ports. The trends are the same:
- nearly linear scaling in CUs;
- little loss from pairing CUs on an adapter;
- a growing loss at higher bundling.

The absolute gap is expected, since the models have no refresh, bank
conflicts or AXI overhead.

## Files

`rtl/`: one module or package per file.

| file | role |
|---|---|
| `bats_pkg.sv` | constants, types (`batch_cmd_t`, `wr_req_t`, `pe_ctl_t`), base-graph and generator tables |
| `gf_mul_bv.sv` | bounded-value GF(2^8) multiplier |
| `ff_pe.sv` | MAC cell |
| `systolic_array.sv` | 8 x 8 array with input skew |
| `gen_matrix_rom.sv` | generator ROM |
| `gmat_mover.sv` | ROM-to-buffer copy of G |
| `g_tile_buffer.sv` | G storage |
| `b_tile_buffer.sv` | ping-pong super-tile buffer |
| `data_mover.sv` | B reads, contains the output buffer |
| `transpose_buffer.sv` | ping-pong transposing output buffer |
| `cu_controller.sv` | per-CU sequencer |
| `bats_cu.sv` | compute unit |
| `load_balance_scheduler.sv` | batch dispatch |
| `out_port_share.sv` | write-port round robin |
| `axi_rd_adapter.sv` | bundled read port |
| `bats_accel.sv` | top |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`), plus:
- `tb_bats_accel_bundled.sv`: 4 read adapters and 2 write ports;
- `tb_bats_accel_exps.sv`: seven scaling configurations side by side, using
  the harness `accel_exp_run.sv`;
- behavioural memory models: `hbm_rd_model.sv` (generated content, fixed
  latency) and `hbm_wr_sink.sv`;
- `tb_ref_pkg.sv`: reference multiplier, memory content function and expected
  X.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb --top-module tb_bats_accel \
    rtl/bats_pkg.sv tb/tb_ref_pkg.sv tb/tb_bats_accel.sv
./obj_dir/Vtb_bats_accel +verilator+rand+reset+2
```

Change the top module name to run another testbench. The packages must come
first; the other modules are found through `-y`.
`-Wno-fatal` keeps Verilator's width-extension lint warnings about
testbench arithmetic (mixing 32- and 64-bit integers) from stopping the
build. The RTL is lint-clean at Verilator's default warning level.
- The full-size end-to-end test builds in a minute or two and runs in
  seconds.
- `tb_bats_accel_exps` elaborates seven accelerators and takes about two
  minutes to build.

Assertions check:
- that no B bank is written while full or released while empty;
- that no output bank is filled before it has been allocated;
- that no read data arrives without an outstanding request.
