# GateKeeper pre-alignment filter: SystemVerilog implementation

A short-read mapper spends most of its time checking candidate locations
with quadratic-time edit-distance alignment, and most candidates fail that
check. GateKeeper is a hardware filter that runs before the alignment. It
decides, for each read and reference segment, whether the pair *might* align
within an edit-distance threshold `E`. Pairs that pass go on to full
alignment. Pairs that fail are dropped. The filter uses only shifts, XORs,
ANDs, ORs and small lookup functions over the whole read. So one pair is
decided in a single clock cycle, and many pairs are checked in parallel.

This RTL implements the filter and the streaming engine around it: a read
controller, parallel processing cores and a mapping controller. It is an
independent implementation of the published GateKeeper architecture (Alser
et al., "GateKeeper: A New Hardware Architecture for Accelerating
Pre-Alignment in DNA Short Read Mapping"). It is not the authors' code. The
section "Where this design departs from, or adds to, the paper" lists every
place where the paper was silent and a choice was made.

## 1. The filter, step by step (`gk_filter`)

Bases are 2-bit codes: A=00, C=01, G=10, T=11. A read of `m` bases is a
`2m`-bit vector, with the first base in the most significant pair. The
reference segment uses the same layout and has the same length.

1. **Hamming masks** (`gk_mask_gen`). The read is XORed with the reference.
   Each 2-bit pair of the result is ORed into one bit, so the mask has `m`
   bits and 1 means "bases differ". This is done `2E+1` times:
   * once unshifted;
   * `E` times with the read shifted toward its end by 1..`E` bases, which
     realigns the bases after a deletion in the read;
   * `E` times shifted toward its start, which realigns them after an
     insertion.

   The shift is a plain logical shift of the code vector. The vacated bases
   therefore read as code 00 (A).
2. **Fast path.** If the unshifted mask holds at most `E` ones, the pair
   passes. This covers exact matches and pairs with only substitutions.
3. **Amending** (`gk_amend`). In every mask, an isolated `0` between ones
   (`101`) or a pair of zeros between ones (`1001`) is flipped to ones.
   Runs that short are not trustworthy matching sections. Left in place,
   they would hide mismatches after the AND in step 4. Each output bit
   depends only on its own bit and two neighbours on each side, so the
   network is one 5-input function per bit. The first and last bits are
   copied unchanged.

       A_i = E_i | (E_{i-1} ~E_i E_{i+1}) | (E_{i-2} ~E_{i-1} ~E_i E_{i+1})
                 | (E_{i-1} ~E_i ~E_{i+1} E_{i+2})

4. **AND.** The `2E+1` amended masks are ANDed. A position counts as a
   match if any shift explains it.
5. **Edit estimate** (`gk_edit_counter`). The final mask is split into
   non-overlapping 4-bit windows, starting at base 1. Each window adds to
   the estimate:
   * 0 for `0000`;
   * 2 for `0101`, `0110`, `1001`, `1010`, `1011` or `1101`;
   * 1 for any other pattern.

   A read length that is not a multiple of 4 is padded with zeros at the
   end.
6. **Indel path.** If the estimate is at most `E`, the pair passes.

The fast path and the indel path are both combinational. The result is
`pass = fast | indel`. This is the same decision as evaluating the indel
path only when the fast path fails. `gk_filter` also outputs the two
partial decisions, for observation.

Worked example of the amending network (35 bits):

    mask     01001000110100010101100111100010010
    amended  01111000111100011111111111100011110

Costs at the defaults (`m=100`, `E=2`): each filter has five 200-bit XOR
planes, five 100-bit OR planes, five 100-bit amending networks, a 500-input
AND plane, a 25-window counter and a 100-bit popcount.

## 2. The engine (`gatekeeper_top`)

    host stream (128 b) -> gk_read_controller -> FIFO -> gk_core #0..#4 -> FIFO -> gk_mapping_controller -> results
                              |  reference chunk (16 segments) -> all cores
                              +- round-robin read distribution

* **Stream format.** A transfer starts with `NUM_REFS` reference segments,
  followed by any number of reads. Each segment and each read is padded to
  whole 128-bit beats, first bases first. For 100 bp that is 200 bits in
  two beats, and the low 56 bits of the second beat are ignored. `in_last`
  marks the final beat of a transfer. The next beat starts a new reference
  chunk.
* **Read controller** (`gk_read_controller`). It stores the reference chunk
  in registers that feed every core. It then sends read 0 to core 0, read 1
  to core 1, and so on round-robin, through one FIFO per core. A read whose
  target FIFO is full stalls the stream (`in_ready` low). Before a new
  reference chunk is accepted, the controller also waits until all its
  FIFOs are empty and no core holds a read. This way no read is compared
  against a half-replaced reference set.
* **Processing core** (`gk_core`). A core holds one read and compares it
  with all `NUM_REFS` segments at once, using one `gk_filter` per segment.
  With the defaults, that is 5 reads × 16 segments = 80 alignments in
  flight.
* **Mapping controller** (`gk_mapping_controller`). It takes results from
  the per-core FIFOs in the same round-robin order the reads were handed
  out. Result `k` on the output therefore belongs to read `k` of the input.
  A result is `NUM_REFS` pass bits, where bit `r` is the decision against
  reference segment `r`. If `out_ready` is held low, the FIFOs fill, the
  cores stop and the input stalls. Nothing is dropped.

### Clocking and timing

The paper runs the system logic at 250 MHz and the cores at 50 MHz, in two
synchronous clock domains. Here both domains use one clock, `clk`, and the
core domain is a clock enable, `core_ce`, that is high one cycle in
`CORE_DIV` = 5.

* On each `core_ce` cycle, a core loads its next read into its read
  register. On the same cycle it pushes the result of the read it already
  held.
* The filter logic between the read register and the result FIFO therefore
  has 5 `clk` periods (20 ns) to settle. This is a multicycle path, and a
  timing constraint must declare it as one.
* Latency from a read arriving at the head of an idle core's FIFO to its
  result entering the mapping FIFO is two core-clock periods.
* A core accepts one read per core-clock period.
* The stream delivers one 100 bp read every two beats, so five cores at one
  read per five beats always keep up.
* At 250 MHz the stream carries 125 M reads/s, which is 2.0 G
  read-reference decisions per second with 16 segments. The paper measures
  about 3.3 GB/s and 4·10¹² mappings in 40 minutes, about 1.7 G/s.

All control state is reset by the asynchronous active-low `rst_n`. Data
registers (read registers, FIFO storage, reference registers) are not
reset. Nothing reads them before they are written.

## 3. Parameters

| parameter    | default | meaning |
|--------------|---------|---------|
| `READ_LEN`   | 100     | bases per read and per reference segment |
| `E`          | 2       | edit distance threshold, fixed at elaboration; gives `2E+1` masks |
| `BUS_W`      | 128     | host stream width |
| `NUM_CORES`  | 5       | processing cores (reads in flight) |
| `NUM_REFS`   | 16      | reference segments per read, and filters per core |
| `CORE_DIV`   | 5       | system cycles per core cycle |
| `FIFO_DEPTH` | 4       | entries of each per-core FIFO |

All defaults except `FIFO_DEPTH` are the values the paper reports for its
FPGA build. Its resource table also gives `E=5`, and its accuracy study
uses reads of 64, 150 and 300 bp. Each of these needs a new elaboration
with `E` or `READ_LEN` set; the logic is generic in both.

## 4. Where this design departs from, or adds to, the paper

* **Acceptance test.** The decision is "at most `E`", as in the paper's
  pseudocode. One sentence of the paper says "less than the threshold"
  instead.
* **Second and next-to-last amend bits.** The paper's formulas for these
  bits leave out the "copy a 1" term. The text says a 1 is always copied,
  and the RTL follows the text.
* **Shift fill.** Vacated bases after a shift read as A (code 00), because
  the pseudocode writes a plain `>>` / `<<`. The paper does not discuss the
  ends. Near the ends of a read, this can count an edge base as a mismatch
  or as a match depending on the reference base.
* **References.** The paper says the first data chunk becomes the reference
  for all cores. Its figure calls the input a "stream of binary pairs". The
  RTL follows the text: the first 16 segments of a transfer are the
  reference set.
* **This design's own choices.** The paper gives none of the following:
  * the stream framing and `in_last`;
  * the drain before a reference reload;
  * the valid/ready handshakes;
  * the FIFO depth;
  * the result word format;
  * the reset scheme.
* **Core clock.** The 50 MHz core clock is a clock enable, as described
  under "Clocking and timing".
* **Not included.** The following are outside this RTL:
  * the PCIe endpoint and the RIFFA host channel, which are third-party IP;
  * the host-side read encoder, which is software;
  * the alignment (verification) stage that follows the filter.

  The two streams of `gatekeeper_top` are where the PCIe/RIFFA channel
  would connect.

## 4a. Observed filter behaviour

In `tb_gk_workloads` (60 pairs per set and length), no pair whose true edit
distance was at most `E` was rejected. The paper also reports zero false
negatives. False positives appear mostly in two cases:
* low-indel reads, whose edits sit just above the threshold;
* long reads, where `E` is small relative to the read length.

Substitution-rich reads are almost always rejected. These counts come from
a small random sample. They show the filter's character, not the paper's
measured rates.

## 5. Files

`rtl/`:

* `gk_pkg.sv`: base codes and default sizes.
* `gk_mask_gen.sv`, `gk_amend.sv`, `gk_edit_counter.sv`: the filter's
  stages.
* `gk_filter.sv`: one complete filter.
* `gk_core.sv`: one processing core.
* `gk_fifo.sv`: the per-core FIFO.
* `gk_read_controller.sv`, `gk_mapping_controller.sv`: the two controllers.
* `gatekeeper_top.sv`: the engine.

`tb/`:

* `gk_model_pkg.sv` is a reference model written differently from the RTL.
  It compares bases position by position, amends by finding zero runs, and
  can generate reads with substitutions, insertions and deletions.
* `tb_<module>.sv` are self-checking testbenches, one per module. Each ends
  with `TB_RESULT checks=N failures=M`.
* `tb_gatekeeper_top.sv` runs the whole engine end to end, with 2
  reference segments per core so that it builds quickly. It runs two
  transfers: one at full stream rate, and one with gaps and a blocked
  output. It checks every result and the ordering. It also checks that
  each mechanism occurs at least once:
  * fast-path accept, indel-path accept and reject;
  * FIFO-full stall and output back-pressure;
  * reference-reload wait;
  * round-robin wrap.
* `tb_gatekeeper_full.sv` runs the same test with every parameter at its
  default.
* `tb_gk_filter.sv` also runs an `E=5` instance.
* `tb_gk_workloads.sv` runs filters at 64, 100, 150 and 300 bp, with `E`
  set to 2, 3, 4 and 5 respectively. It uses five kinds of generated read
  sets, modelled on the paper's simulated sets:
  * low-substitution and low-indel;
  * substitution-rich, insertion-rich and deletion-rich, with edits up to
    16 % of the read length.

  It checks every decision against the model. It also computes the true
  edit distance by dynamic programming and prints the false-negative and
  false-positive counts per set (see section 4a).

To simulate with Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        rtl/gk_pkg.sv tb/gk_model_pkg.sv tb/tb_gatekeeper_top.sv --top-module tb_gatekeeper_top
    ./obj_dir/Vtb_gatekeeper_top

The full-size build is large: 80 filters of 100 bp. Expect several minutes
of C++ compilation, and pass `-j` to use more cores.
