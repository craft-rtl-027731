# CRAFT: a stuck-at-fault-tolerant weight memory for DNN inference

Emerging non-volatile memories such as ReRAM and PCM are attractive for holding
the parameters of a deep neural network, but some of their cells are *stuck*: a
stuck-at-0 cell always reads 0 and a stuck-at-1 cell always reads 1, whatever is
written. A stuck cell only causes an error when the bit stored in it disagrees
with its stuck value, and an error only hurts the network when it changes a
weight by a lot: a flip in bit 30 of an FP32 weight (the top exponent bit, which
is 0 for every weight below 1) turns 0.05 into about 10^37, while a flip in the
mantissa is harmless.

CRAFT exploits both facts. The weights are stored in 64-byte blocks of sixteen
32-bit words. Before a block is written, the stuck cells it covers are found,
and the block is stored under whichever of 64 cheap encodings makes the weights
read back closest to the originals. The encoding is recorded in six auxiliary
bits per block (1.17 % storage overhead), and undone by a few gates on every
read, so inference reads run at full speed.

This repository is a synthesizable SystemVerilog implementation of that
architecture: the encode and decode logic, a hardware search for the best
encoding, a memory controller that programs and reads blocks, and a
behavioural model of a faulty NVM array.

## The three encodings

An encoding is the 6-bit value `aux = {rot, inv, xor[3:0]}`. Every word of the
block goes through the same three steps on its way into the memory:

1. **Intra-block address remapping.** Word `j` of the block is stored in
   physical slot `j ^ xor`. The 16 XOR patterns give 16 different placements of
   the weights over the block's cells (with `xor = 1111` the block is stored
   in reverse order). Only the index inside the block changes, so a block
   still occupies its own 64 bytes.
2. **Weight inversion.** If `inv` is set, the word is stored complemented.
   This alone removes the error of a block that has exactly one stuck cell.
3. **Criticality-aware bit switching.** If `rot` is set, every weight in the
   word is rotated left by `ROT` bits, so that its most significant bits land
   in the cells of its least significant ones and vice versa. For FP32 weights
   `ROT = 10`: bit 30 is stored in cell 8, bit 26 in cell 4. For 8-bit weights
   `ROT = 4`, i.e. the two nibbles of each byte are swapped. A stuck cell that
   would have hit a critical exponent bit now hits a mantissa bit.

Decoding is the mirror image: the read address is remapped with the same XOR,
and the word read is rotated right and complemented as the block's `aux`
says. Rotation is pure wiring and inversion is one XOR-like gate level, so
both `craft_encoder` and `craft_decoder` are purely combinational.

Inversion and rotation commute, so their order is immaterial; the encoder
inverts first and then rotates.

## Choosing an encoding: minimum net deviation

The number of bit errors is the wrong thing to minimise, because one error in
an exponent bit is far worse than several errors in low mantissa bits. CRAFT
instead minimises the *net deviation* of the block,

    D(aux) = sum over all weights i of | w_read,i(aux) - w_orig,i |

where `w_read,i(aux)` is what weight `i` would read back, after decoding, if the
block were stored under `aux`. A small example with four 4-bit unsigned
weights `0111 0101 1011 0110` and five stuck cells gives `D = 13` unremapped,
`10`, `12` and `2` for the XOR patterns `01`, `10`, `11`; the last one is
chosen. (The testbench of the selector reproduces these numbers.)

`craft_selector` evaluates the 64 candidates in increasing `aux` order, one per
clock. For each candidate and each word it instantiates the real encoder,
applies the slot's stuck-at masks, and the real decoder, so the search models
exactly the hardware that will later read the block. Ties keep the lowest
`aux`, so an unencoded block (aux = 0) is used whenever nothing is better; a
fault-free block is never encoded.

**Exact deviations for FP32.** Instead of subtracting in floating point, every
FP32 value is converted to an integer number of 2^-149 units (the smallest
subnormal): the 24-bit significand shifted left by `exponent - 1`, a 278-bit
magnitude. Differences and the block sum are then exact integers (284 bits),
so two candidates can never be misordered by rounding. An exponent field of
255 (which a stuck exponent cell can create) is treated as an ordinary, very
large exponent, so Inf/NaN patterns rank as the worst possible outcome. In the
quantized configuration (`FMT = FMT_UINT`) the weights are compared as unsigned
integers, which is proportional to their real value within a layer.

**Timing.** A `start` pulse while idle begins a search; `done` rises on the
64th clock edge after the edge that samples `start`, together with `best_aux`
and `best_dev`. The weights and stuck-at maps must stay stable meanwhile (the
controller holds them in its own registers). The search evaluates all 16 words
of a candidate per cycle (32 wide shifters and a tree of wide adders); a
smaller implementation could evaluate one word per cycle at 16 times the
latency.

## The memory controller

`craft_mem_ctrl` owns the two host channels and the auxiliary-bit table (one
6-bit entry per block).

**Programming a block** (`prog_valid`/`prog_ready`, a whole 512-bit block per
request) runs six phases, one word per clock:

| phase   | what happens                                                  |
|---------|---------------------------------------------------------------|
| PROBE0  | write all-zero words to the block's 16 slots (unencoded)       |
| READ0   | read them back; every bit that reads 1 is a stuck-at-1 cell   |
| PROBE1  | write all-one words                                           |
| READ1   | read back; every bit that reads 0 is a stuck-at-0 cell        |
| SELECT  | run the deviation search on the weights and the two maps      |
| WRITE   | write the 16 words through the encoder with the chosen `aux`, and store `aux` in the table |

`prog_done` pulses with `prog_aux` when the block is written, 5 x 16 + 64 + 2 =
146 clock edges after the edge that accepted the request. The probes overwrite
the block's previous contents, which is acceptable because a block is
programmed once, after training, before the network is deployed.

**Reading a weight** (`rd_valid`/`rd_ready`, one word address
`{block, index}`): the block's `aux` is looked up, the decoder remaps the index
to the physical slot, and the memory is read. The answer appears on
`rd_rsp_valid`/`rd_rsp_data` exactly one clock later, already decoded, and a new
read can be accepted every clock. The controller keeps the `aux` of each
outstanding read for one cycle, so back-to-back reads from blocks with
different encodings are decoded correctly.

Reads are accepted only while the controller is idle: a read offered during
programming stalls (`rd_ready` low) until `prog_done`. When a read and a
program request arrive together, the read goes first.

## The NVM model

`nvm_array` is a behavioural stand-in for the real array (a process-specific
macro). It is word-organised, with one write port and one synchronous read
port (one cycle of latency), and holds, besides the data, a stuck-at-0 and a
stuck-at-1 map per word. A read returns `(cells & ~sa0) | sa1`; stuck cells
therefore ignore writes and can still be read, which is how the controller
finds them. The maps are empty after reset and are set through the
fault-injection port (`fi_we`, `fi_addr`, `fi_sa0`, `fi_sa1`), which stands
for manufacturing defects and wear-out.

## Top level and configurations

`craft_top` connects host → controller → encoder → NVM → decoder →
controller → host, with the selector beside the controller. Its ports are the
two host channels and the fault-injection port.

| parameter | default      | meaning |
|-----------|--------------|---------|
| `WORD_W`  | 32           | bits per word, the remapping unit |
| `WORDS`   | 16           | words per block (64-byte block); `IDX_W = log2(WORDS)` XOR bits |
| `ELEM_W`  | 32           | bits per weight inside a word |
| `ROT`     | 10           | bit-switching rotation of each weight |
| `FMT`     | `FMT_FP32`   | how deviations are measured (`FMT_UINT` for quantized weights) |
| `NBLOCKS` | 1024         | memory size in blocks (64 KiB) |

For 8-bit quantized networks use `ELEM_W = 8, ROT = 4, FMT = FMT_UINT`: four
weights share a 32-bit word, the XOR still moves whole words, inversion acts on
the whole word and bit switching swaps the nibbles of every byte. Smaller
blocks (fewer `WORDS`) give finer-grained remapping at the price of more
auxiliary bits per data bit; the auxiliary width follows `WORDS`
automatically.

The overhead of the default is 6 auxiliary bits per 512 data bits (1.17 %).

## What follows the CRAFT method, and what is this design's own

Taken from the method: the 64-byte block of sixteen 32-bit words; the XOR
address remapping inside a block; inversion; rotation by 10 (FP32) or 4
(8-bit) bits; the six auxiliary bits; the net-deviation objective; the
combination of all three encodings; combinational decoding on the read path;
the division into memory controller, remap/encode, remap/decode and NVM.

Choices of this implementation:

* **Where the encoding is chosen.** The method picks encodings offline, when
  the trained network is mapped onto a known fault map. Here the search is a
  hardware block, and the fault map is measured by the controller with the
  all-zero/all-one probes, so that a block can be programmed without software
  help.
* The placement of the fields in `aux`, the rotation direction for FP32 (left,
  as for the 8-bit case), and the order in which candidates are tried (which
  decides ties).
* The exact integer deviation for FP32, and treating exponent 255 as finite.
* The auxiliary-bit table is ordinary fault-free storage inside the
  controller; where the six bits live is left open by the method.
* Handshakes, read priority, the one-cycle read latency and the 146-cycle
  programming sequence; the memory size; the NVM model's interface.
* One worked example of the method counts the unremapped deviation of the
  four-weight example as the sum of the erroneous bits' weights (17) rather
  than as the absolute difference of the values (13). This design uses the
  absolute difference, which is the stated objective.

Capacity: the networks CRAFT targets need far more than the default 64 KiB
(for example 43 MB of FP32 parameters for ResNet-18, about 672,000 blocks);
`NBLOCKS` is a parameter, and the controller's table grows with it.

## Files

`rtl/`

* `craft_pkg.sv` - shared constants, the weight-format enum, FP32 magnitude and
  absolute-difference functions.
* `craft_encoder.sv`, `craft_decoder.sv` - remap/encode and remap/decode logic.
* `craft_selector.sv` - minimum-net-deviation search.
* `craft_mem_ctrl.sv` - memory controller and auxiliary-bit table.
* `nvm_array.sv` - behavioural stuck-at NVM model (simulation only).
* `craft_top.sv` - the whole architecture.

`tb/` - one self-checking testbench per module, plus `tb_craft_top_q8.sv`, the
whole design in the 8-bit quantized configuration. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

## Simulating

With Verilator 5 (two-state simulation, so the testbenches reset or set
everything they read):

    verilator --binary --timing --assert -Wno-fatal -Mdir obj \
        rtl/craft_pkg.sv tb/tb_craft_top.sv -y rtl --top-module tb_craft_top
    obj/Vtb_craft_top

Replace `tb_craft_top` by any other testbench name. `tb_craft_top` runs the
design at its default parameters; it builds in about 15 s and runs in well
under a second. Lint a module with
`verilator --lint-only -Wall rtl/craft_pkg.sv rtl/<module>.sv -y rtl`.

## How it is verified

* `tb_craft_encoder` / `tb_craft_decoder`: random words and encodings against
  bit-level reference models; the 16-word remapping tables for XOR 0000, 0001
  and 1111; the 8-bit nibble-swap example (`0111 0101` → `0101 0111`);
  encode-then-decode round trips.
* `tb_nvm_array`: reads return `(data & ~sa0) | sa1` one cycle after the
  request; probes expose the stuck cells.
* `tb_craft_selector`: the four-weight example above (deviations 13, 10, 12,
  2 and the exact optimum over all 16 encodings of that size); random small
  blocks compared exactly; thirty random FP32 blocks, with column faults on
  bits 30 and 25, compared with a double-precision brute force over all 64
  encodings; the 64-cycle latency.
* `tb_craft_mem_ctrl`: the controller against a stand-in selector and memory:
  captured fault maps, words written to the remapped slots, aux table use on
  reads, the programming time, back-to-back reads across blocks, stalls and
  read priority.
* `tb_craft_top` (default sizes) and `tb_craft_top_q8` (8-bit): whole-design
  runs; each block's encoding must be optimal and every weight must read back
  as the reference predicts. The run counts and requires every mechanism:
  remapping, inversion and bit switching chosen, unencoded fault-free blocks,
  fully masked faults, stalled reads and read priority.

Not verified: gate-level timing and the behaviour with faults in the
auxiliary table. The encoder, decoder, selector and controller go through
generic synthesis; the NVM model (whose fault maps are reset register arrays)
and therefore the top level are too large for a quick generic synthesis run,
which is expected of a simulation model.
