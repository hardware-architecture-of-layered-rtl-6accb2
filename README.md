# Layered decoder for PLDPC-Hadamard codes

PLDPC-Hadamard codes are protograph LDPC codes in which some single-parity-check
constraints are replaced by Hadamard codes. They work very close to the Shannon limit
at extremely low code rates (about 0.05 here). Decoding them is harder than decoding
an LDPC code. Each Hadamard check node (H-CN) connects r+2 = 6 ordinary variable
nodes (P-VNs) with 2^r − r − 2 = 10 degree-1 "D1H" variable nodes. The node must be
decoded by symbol-MAP over its 2^r = 16 codewords, not by a min-sum style rule.

This RTL is a layered decoder for such a code. The parity-check matrix is lifted twice
from a 7 × 11 base matrix, first by z1 = 32 and then by z2 = 512. That gives
m·z1 = 224 layers, and each layer is a block row of 512 H-CNs. The decoder processes
the layers one after another:

1. It reads the a-posteriori LLRs of the P-VNs the layer touches.
2. It subtracts the layer's previous extrinsic messages.
3. It decodes the H-CNs in N_h = 128 identical pipelined Hadamard sub-decoders.
4. It writes the new a-posteriori and extrinsic values back before the next layer
   starts.

A codeword is 180 224 P-VN bits plus 1 146 880 D1H bits, 1 327 104 bits in all. At the
default sizes, 20 iterations take 116 480 clock cycles. At 130 MHz that is 0.896 ms,
or 1.48 Gbit/s of coded throughput.

## Data layout: column sets, groups and banks

After lifting, every layer touches d = 6 *column sets* (blocks of 512 P-VNs). Each
touch is a z2 × z2 circulant with an offset p, so row t of the layer reads P-VN
(t + p) mod 512 of that column set. The 512 rows of a layer are spread over N_h
sub-decoders in G = z2/N_h = 4 *groups*. In group τ, sub-decoder l handles row
l·G + τ.

Every memory is a *bank* of N_h dual-port RAMs that share one address per port
(`llr_ram_bank`). For a column set c, word g of RAM l holds P-VN

    β = c·z2 + l·G + (g mod G)        at address  g = c·G + (β mod G)

Reading one address therefore gives N_h P-VNs spaced G apart. A single cyclic rotation
then lines them up with the sub-decoders. For offset p, let q_u = ⌊p/G⌋ and
r_e = p mod G. Group τ reads address offset a = (τ + r_e) mod G and rotates left by:

- q_u + 1, if a < r_e;
- q_u, otherwise.

Writing back applies the inverse rotation, to the same address. `qc_interleaver` does
this with a log2(N_h)-stage barrel rotator. Take z2 = 16, N_h = 4 and p = 9, with the
RAMs holding indices [0 4 8 12], [1 5 9 13], … at addresses 0, 1, …. The rotator then
delivers [9 13 1 5] for group 0 (address 1) and [12 0 4 8] for group 3 (address 0).

There are four banks:

| bank | depth (defaults) | word | content |
|---|---|---|---|
| PVN-CH  | n·z1·G = 1408 | 5 bit | channel LLRs of the P-VNs |
| PVN-APP | 1408 | 8 bit | a-posteriori LLRs of the P-VNs |
| H-EX    | m·z1·G·d = 5376 | 8 bit | extrinsic LLR of every H-CN edge, address (layer·G + τ)·d + j |
| D1H-CH  | 2·m·z1·G = 1792 | 10 × 5 bit | channel LLRs of the D1H-VNs of one H-CN, address half·m·z1·G + layer·G + τ |

H-EX and D1H-CH are never rotated. Sub-decoder l always uses RAM l, at one address
per group. The H-CN that sub-decoder l handles in group τ can be numbered in two ways,
which describe the same placement:

- as row l·G + τ of the layer's circulants (the numbering used here);
- as (layer·G + τ)·N_h + l, counting the H-CNs in group order.

D1H-CH holds two codewords. The host can load the next codeword into one half while
the decoder uses the other.

## One layer: read, decode, write

The `read_ctrl` block reads a group's six entries two per cycle: entry 2k on port A
and entry 2k+1 on port B of every bank. A group therefore takes d/2 = 3 cycles, and a
layer takes d·G/2 = 12. As each word returns, the block:

- selects CH or APP as the source (see the first-iteration section);
- rotates the word;
- forms L_ex^PVN = sat(L_app − L_ex^H);
- stores it in a collection register.

After the third pair, the group's 6 LLRs and the D1H word go to all sub-decoders
together.

The sub-decoders' results go into `out_fifo`. The `write_ctrl` block pops them once
the read side has finished the layer and the RAM ports are free. It writes two entries
per cycle, so it takes another d·G/2 cycles. The next layer's reads start in the cycle
after the last write. Layers never overlap, so no read can see a stale value. The
cycle count per layer is

    T_layer = max(d·G/2 + (2r+1) + d/2,  d·G) + t_δ,      t_δ = 2
            = 26 cycles for N_h = 128 (G = 4)
            = 50 cycles for N_h = 64  (G = 8)

t_δ is one RAM read cycle plus one FIFO cycle. There are two cases:

- **Case I (G = 4):** results arrive just as the write side can take them, and the
  FIFO holds at most one group.
- **Case II (G = 8):** the sub-decoders finish groups faster than the writes can
  start. The FIFO then holds up to five groups, and writing is bounded by d·G cycles.

These periods reproduce the published latencies at 130 MHz:

| N_h | 20 iterations | 150 iterations |
|---|---|---|
| 128 | 0.896 ms | 6.72 ms |
| 64 | 1.72 ms | 12.92 ms |

## The Hadamard sub-decoder

`hadamard_subdecoder` is a 9-stage pipeline (2r + 1) that accepts one H-CN per cycle:

1. **Input arrangement.** The six P-VN LLRs go to Hadamard positions 0, 1, 2, 4, 8
   and 15. The ten D1H LLRs fill the remaining positions in ascending order.
2. **FHT** (`fht`). r = 4 butterfly stages compute the correlation of the input with
   every Hadamard codeword. The word grows one bit per stage (8 → 12 bits), so it is
   exact.
3. **Metric.** ln γ(±h_j) = ±FHT_j / 2, saturated into the 9-bit DFHT format
   (1 sign, 6 integer, 2 fraction bits).
4. **Dual FHT in the log domain** (`dfht_reduced`). This is the same butterfly
   network, with addition replaced by max* and each node carrying a (P, N) pair:
   - lower outputs: (max*(P_i, P_j), max*(N_i, N_j));
   - upper outputs: (max*(P_i, N_j), max*(N_i, P_j)).
   
   Only the 6 outputs at P-VN positions are needed, so butterflies that feed nothing
   else are not built. The last stage has 12 max* units instead of 32.
5. **Output.** L_app = (S_P − S_N) is rescaled to 3 fraction bits and saturated to 8
   bits. L_ex^H = sat(L_app − L_ex^PVN), using the input delayed 8 cycles.

`max_star` adds a table-based correction to the larger input:
max*(a,b) = max(a,b) + ln(1 + e^−|a−b|). The table entry for difference x (in LSBs)
is round(2^f · ln(1 + e^(−x/2^f))):

- f = 2: 3,2,2,2,1,1,1,1,1 and then 0;
- f = 3: 6,5,5,4,4,3,3,3,3,2,2,2,2, then 1 for x = 13…21, then 0.

Widths are parameters:

| setting | W_CH | W_LLR | W_DF | DF_FRAC |
|---|---|---|---|---|
| S1 (default) | 5 | 8 | 9 | 2 |
| S2 | 5 | 9 | 10 | 2 |
| S3 | 5 | 9 | 11 | 3 |

## First iteration and codeword hand-over

There is no separate pass to copy channel LLRs into PVN-APP or to clear H-EX.
Instead, during the first iteration:

- `read_ctrl` keeps one *written* flag per column set (352 flags).
- A P-VN is read from PVN-CH until its column set has been written once in this
  codeword, and from PVN-APP afterwards.
- H-EX reads as zero.

This is exactly the initialisation L_app = L_ch, L_ex^H = 0.

After the first iteration, PVN-CH is no longer read. The host may then load the next
codeword's channel LLRs (`ch_wr_ready` is high), while the current codeword finishes
its remaining iterations. D1H LLRs go to the idle half at any time.

After the last iteration, the decoder streams PVN-APP word by word:

- `dec_valid`, `dec_addr` (0 … n·z1·G − 1) and `dec_bits` (the N_h sign bits, 1 = bit
  value 1) are output, one word per cycle.
- `done` marks the last word.
- Bit l of word g is P-VN ⌊g/G⌋·z2 + l·G + g mod G.

## Top-level interface (`pldpc_h_decoder`)

| port | dir | meaning |
|---|---|---|
| clk, rst_n | in | clock, asynchronous active-low reset |
| start, num_iter[7:0], bank | in | decode with num_iter iterations (0 counts as 1), using D1H half `bank` |
| busy, done | out | decoding or streaming / last decision word |
| ch_wr_en, ch_wr_addr, ch_wr_data[N_h][5] | in | one PVN-CH word per cycle; honour ch_wr_ready |
| ch_wr_ready | out | PVN-CH may be written (low during the first iteration) |
| d1h_wr_en, d1h_wr_addr, d1h_wr_data[N_h][50] | in | one D1H-CH word per cycle, any time, on its own port |
| dec_valid, dec_addr, dec_bits[N_h] | out | hard decisions (see above) |

LLRs are two's complement with 3 fraction bits. Positive means bit 0.

## Modules

| file | role |
|---|---|
| `pldpc_pkg.sv` | constants, base matrix, code-table formulas, saturation, max* table |
| `llr_ram_bank.sv` | N_h dual-port RAMs with a shared address per port, 1-cycle read |
| `qc_interleaver.sv` | q_u / r_e cyclic rotation, read or write direction |
| `fht.sv` | r-stage pipelined fast Hadamard transform |
| `max_star.sv` | Jacobian logarithm with correction table |
| `dfht_reduced.sv` | pruned log-domain dual FHT |
| `hadamard_subdecoder.sv` | one symbol-MAP H-CN decoder, 9-cycle pipeline |
| `qc_code_rom.sv` | per-layer column sets and CPM offsets, computed at elaboration |
| `read_ctrl.sv` | read sequencing, source selection, L_ex^PVN, group hand-over |
| `out_fifo.sv` | result FIFO, depth G |
| `write_ctrl.sv` | write-back sequencing, inverse rotation, written flags |
| `pldpc_h_decoder.sv` | top: sequencer, the four banks, N_h sub-decoders, port multiplexing |

## Where this design departs from or adds to the published decoder

- **The code table is this design's own.** The published base matrix is used. The two
  lifting steps' permutations are not available, so `pldpc_pkg::code_col` and
  `code_shift` generate a valid double lifting from a fixed formula:
  - layer k = i·z1 + a;
  - entry δ of base column j, copy e → column set j·z1 + ((a + 7i + 3j + e) mod z1);
  - offset (29k + 11·col + 5δ + 3) mod z2.
  
  The error-rate curves of the published code therefore cannot be reproduced. Any
  other table with the same shape can be dropped in.
- These are choices made here, because the published description does not fix them:
  - the host interface and the decision read-out;
  - the written-flag initialisation;
  - the start-writes-after-reads rule (`rd_done`);
  - the exact fixed-point rounding (truncating shifts, saturation at every narrowing);
  - the D1H position order;
  - the one-cycle RAM latency.
- Only P-VN decisions are output. The D1H bits are not estimated.
- The full-size design has 128 sub-decoders and about 19.3 Mbit of RAM. That is
  11.5 Mbit of D1H-CH, 5.5 Mbit of H-EX and 2.3 Mbit of PVN-CH plus PVN-APP. The
  RAMs are plain arrays, written to map onto block RAM.

## Simulation

Every testbench in `tb/` checks itself and ends with
`TB_RESULT checks=<n> failures=<n>`. A typical command is:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/pldpc_pkg.sv tb/tb_ref_pkg.sv \
        tb/tb_pldpc_h_decoder.sv --top-module tb_pldpc_h_decoder
    ./obj_dir/Vtb_pldpc_h_decoder

What the benches check:

- **`tb_ref_pkg`:** an independent bit-true model of the sub-decoder. It computes the
  FHT as direct inner products and the DFHT as an unpruned loop, with the max* term
  computed in real arithmetic.
- **Unit benches:** compare each block with that model or with direct formulas. These
  include the interleaver's published example, the layer table's lifting properties,
  RAM latency, FIFO behaviour, and the read/write addressing and timing.
- **`tb_pldpc_h_decoder`:** decodes two noisy codewords on a Case I instance
  (N_h = 4, z2 = 16) and a Case II instance (N_h = 2, z2 = 16, S2 widths).
  - It compares every hard decision with a layered reference decoder.
  - It checks the layer period.
  - It fails if any mechanism never happened: CH and APP sources, H-EX reads, FIFO
    holding several groups, write stalls, loading during decoding, the second D1H
    half.
- **`tb_pldpc_h_decoder_full`:** runs the same scenario on the default configuration
  (N_h = 128, z2 = 512, 2 iterations). Building it takes several minutes.
