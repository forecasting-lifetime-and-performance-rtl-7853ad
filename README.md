# Compressed non-volatile last-level cache with byte-level disabling

Non-volatile memories such as STT-RAM are dense and leak little, which makes them
attractive for a large last-level cache (LLC). Their weakness is write endurance:
every write wears the bitcells, and after some 10^11 writes a cell fails for good.
A SECDED code can ride out one failed bit in a block, but a second one is fatal, so
a conventional design switches off the whole 64-byte frame as soon as one bit has
failed. The cache then loses capacity quickly.

This design keeps degraded frames in service. Every block is compressed before it
is written, so it usually needs fewer than 64 bytes; each frame carries a bitmap of
its failed bytes, and the compressed block is spread over whichever bytes of the
chosen frame are still healthy. Only the bytes that receive data are written, and
the place where a block starts inside its frame rotates with a global counter, so
short blocks do not keep wearing the same bytes. A byte that fails is disabled
alone. The frame shrinks by one byte and keeps taking every block small enough to
fit.

The RTL here is the data path of such a cache: the write path in four steps
(compression, ECC, capacity-aware replacement, byte rearrangement), the matching
read path, the corrected-fault exception and the byte-disable port, the frame array
and its fault maps. Tag lookup, the cache controller and the set-index hash are not
included (see *Limits* below).

## Sizes

| quantity | value | origin |
|---|---|---|
| block | 64 bytes | published design |
| frame | 66 bytes: 64 data bytes + 2 check bytes | published design |
| compressed block (CB) | 0 ... 64 bytes | published design |
| protected block (ECB) | 1 ... 66 bytes | published design |
| compression class | 4 bits | published design |
| cache | 4 MB = 65 536 frames | published evaluation |
| organisation | 4096 sets x 16 ways | this design's choice (associativity not published) |

The package `nvllc_pkg` holds these constants, the class encoding and the block,
frame, mask and index-vector types.

## Write path

One block write happens per clock. The stages are combinational and the frame
array is written at the clock edge. `wr_resp_*` reports the result one clock later.

### 1. Compression (`bdi_compressor`)

The block is split into eight 64-bit words (or sixteen 32-bit words). Every
Base-Delta encoder checks whether all words lie within a signed d-byte distance of
the first word, the *base*. All encoders run in parallel, and a selector keeps the
smallest encoding that fits:

| class | code | CB bytes | rule |
|---|---|---|---|
| ZERO | 0 | 0 | all bytes zero |
| B8D1 | 1 | 15 | 8-byte base, seven 1-byte deltas |
| B4D1 | 8 | 19 | 4-byte base, fifteen 1-byte deltas |
| B8D2..B8D7 | 2..7 | 8 + 7d | 8-byte base, seven d-byte deltas |
| UNCOMP | 15 | 64 | raw block |

The list of encoders (B8D1..B8D7, B4D1, uncompressed) follows the published
design. The rest is this design's own choice: the zero class, the class codes,
the byte layout and the fact that the base's own delta is not stored. Without
that last choice B8D7 would take 64 bytes and save nothing. CB layout: base first,
little-endian, then the deltas of words 1, 2, ... in order, each little-endian and
truncated to d bytes. `bdi_decompressor` inverts this with one adder per word.

### 2. SECDED (`ecc_encoder`)

The check bits are an extended Hamming code over a 516-bit word: the 4 class bits
followed by the CB. Bytes beyond the CB length are zero. The code has 10 Hamming bits
plus one overall parity bit, so it needs two check bytes. While the class bits and the
CB fit in 120 bits, every data bit sits below Hamming position 128. The three upper
Hamming bits are then always zero, and the code shrinks to 7 + 1 bits, which is one
byte. With the encodings above, only the ZERO class is that short. So ECB length =
CB length + 1 for ZERO, + 2 otherwise. This reproduces the published 1..66-byte range
of the ECB.

Including the class bits in the code follows the published block diagram, in which
both the class and the CB enter the ECC logic. The accompanying text says only that
the check bits are computed from the CB. The class is also stored in the
frame's metadata, which is where the read path takes it from.

Check-byte layout, placed right after the CB:

    one byte : {parity, h[6:0]}
    two bytes: h[7:0], then {5'b0, parity, h[9:8]}

### 3. Replacement (`replacement_logic`)

A frame's capacity is 66 minus the number of set bits in its fault map. The victim
is chosen only among frames whose capacity is at least the ECB length. An empty
frame is preferred, lowest way first. Otherwise the frame with the largest LRU age
is taken. If no frame of the set is large enough, the block is not allocated
(`wr_resp_alloc` = 0). A worn set can therefore still cache compressible data
after it has lost room for raw blocks. LRU ages form a permutation of 0..WAYS-1 per
set. Writes and reads of valid frames make a way the youngest.

### 4. Rearrangement (`wear_level_counter`, `index_calc`, `crossbar`)

`wear_level_counter` holds a global byte position *s* (0..65). The index
calculation walks the victim frame circularly from *s*, skipping disabled bytes. The
n-th healthy byte it meets receives ECB byte n, for every n below the ECB length.
The walk produces two things:

* the index vector `idx[p]`, the ECB byte that frame byte *p* receives;
* the write-control bits `wr_en[p]`, one per frame byte that is written.

The crossbar is one 66:1 byte multiplexer per frame byte:
`recb[p] = ecb[idx[p]]`. The frame array stores only the bytes with `wr_en` set.
After each allocated write the counter advances by one position (parameter
`WL_STEP_WRITES` writes per step). Successive short blocks therefore start at
successive bytes, and wear spreads evenly over the frame, including frames that
have already lost bytes.

Example: fault map with bytes 3 and 4 disabled, *s* = 2, ECB of 4 bytes. ECB bytes
0, 1, 2, 3 go to frame bytes 2, 5, 6, 7, and only those four bytes are written.

The start position used is stored with the frame. The global counter has moved
on by the time the block is read.

## Read path and fault handling

A read names a set and a way. The array is read synchronously, and the frame's
metadata (valid, class, start) and its fault map are registered with it. In the
next clock, `index_calc` recomputes where the ECB lies and `block_gather` (the
inverse crossbar) collects it. Then `ecc_decoder` checks and corrects it, and
`bdi_decompressor` rebuilds the block. `rd_resp_*` is valid one clock after the
request.

The decoder recomputes the Hamming bits, forms the syndrome and checks the overall
parity. Three outcomes are possible:

* Clean: no error, the block is returned unchanged.
* Single error (odd parity): the bit is flipped back and `rd_resp_corrected` is
  raised. If the bit lies in the frame, `exc_valid` reports the frame and the
  *physical* byte that holds it: the decoder names the ECB byte, and the index
  vector maps it back to the frame byte. This corresponds to the operating-system
  exception of the scheme.
* Double error (even parity, non-zero syndrome), or a syndrome that points
  outside the stored bits: `rd_resp_uncorrectable` is raised.

The exception handler is software and is not part of this design. It disables the
byte through `dis_*`. That sets the byte's fault-map bit and invalidates the frame,
because the layout of the stored block was computed with the old map. Writing back a
dirty block before that is the cache controller's job. From then on the frame offers
one byte less.

A fresh array has no failed bytes. After reset the top clears the fault maps and
metadata one set per clock (`init_done` rises after 4096 clocks), and requests are
held off until then.

## Top-level interface (`nvllc_top`)

| group | signals | notes |
|---|---|---|
| write | `wr_valid`, `wr_ready`, `wr_set`, `wr_block` | one block per clock |
| write response | `wr_resp_valid`, `_alloc`, `_way`, `_cc`, `_ecb_len` | one clock after the write |
| read | `rd_valid`, `rd_ready`, `rd_set`, `rd_way` | |
| read response | `rd_resp_valid`, `_hit`, `_block`, `_cc`, `_corrected`, `_uncorrectable` | one clock after the read |
| exception | `exc_valid`, `exc_set`, `exc_way`, `exc_byte` | with the read response |
| byte disable | `dis_valid`, `dis_ready`, `dis_set`, `dis_way`, `dis_byte` | |

One operation is accepted per clock, in priority order disable, write, read: while
`wr_valid` is high, `rd_ready` is low. Parameters: `SETS` (4096), `WAYS` (16),
`WL_STEP_WRITES` (1). Two assertions in the top check the write-path invariants: the
victim has room, exactly ECB-length bytes are written, and a stored block always
fits its frame when read.

The write is a single cycle of compression, encoding, popcounts, replacement, index
calculation and crossbar. That is simple to simulate, but a real implementation
would pipeline it. The published design is a full-custom circuit whose timing is not
given, so no pipeline depth was imposed here.

## Files

| file | content |
|---|---|
| `rtl/nvllc_pkg.sv` | constants, class enum, types, SECDED position table |
| `rtl/bdi_compressor.sv`, `rtl/bdi_decompressor.sv` | step 1 and its inverse |
| `rtl/ecc_encoder.sv`, `rtl/ecc_decoder.sv` | step 2 and its inverse |
| `rtl/replacement_logic.sv` | step 3 |
| `rtl/wear_level_counter.sv`, `rtl/index_calc.sv`, `rtl/crossbar.sv`, `rtl/block_gather.sv` | step 4 and its inverse |
| `rtl/fault_map_array.sv`, `rtl/nvm_frame_array.sv` | fault maps, frame array |
| `rtl/nvllc_top.sv` | the data path |
| `tb/tb_ref_pkg.sv` | reference models and block generators for the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Verification

Every module has a self-checking testbench that ends with a line
`TB_RESULT checks=N failures=M`. The reference models in `tb/tb_ref_pkg.sv` are
written separately from the RTL:

* the compressor model tries the encodings with signed 64-bit arithmetic;
* the SECDED model builds the whole code word and computes each check bit as a
  parity over positions;
* the placement model walks the frame byte by byte.

`tb_nvllc_top` runs the full-size cache (4096 x 16). A model of the set state
predicts the class, ECB length and victim way of every write. The frame image in the
array is compared byte by byte with the reference placement, and every read must
return the stored block. The test also covers each mechanism, counts how often it
happened and fails if one never did:

* it injects single-bit faults into stored bytes, then expects a correction, an
  exception naming the right physical byte, and the byte disabled afterwards;
* it injects double faults and expects them to be detected;
* it degrades a whole set and expects an uncompressed block to be refused while a
  compressed one still goes into a degraded frame;
* it checks the write-over-read priority;
* it makes the wear-leveling position wrap.

`tb_nvllc_lifetime` ages a small cache of 4 sets x 4 ways until half of its bytes
are disabled. That is the end point at which the published lifetime study of a
4 MB cache stops. The test has two phases.

1. **Wear leveling.** A mix of raw and compressed blocks is written, about 30 %
   raw. Summed over all frames, the writes per frame byte position must stay
   within 25 % of each other. In a typical run they lie between 1731 and 1803.
2. **Aging.** Every byte gets an endurance drawn from a normal distribution. Its
   mean is 150 writes, scaled down from the published 10^11, with sigma = 0.2 x mean.
   A byte written past its endurance stores a wrong bit from then on. Each write is
   read back immediately. A single failed byte must be corrected and reported
   at its exact position, and is then disabled. Two bytes that die on the same
   write must be detected as a double fault.

A typical run ends as follows:

* after about 5600 writes, no frame can hold a raw block any more;
* the compressed blocks keep being cached after that;
* at 50 % capacity, about 55 % of writes are still allocated.

The test fails if 50 % is not reached, or if no compressed block is allocated
after raw blocks stopped fitting. The endurance model and the failing cells live in
the testbench, not in the RTL.

Running a testbench with Verilator, for example the top:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_nvllc_top rtl/nvllc_pkg.sv tb/tb_ref_pkg.sv tb/tb_nvllc_top.sv
    ./obj_dir/Vtb_nvllc_top

The testbenches use `$urandom` for stimulus and no constraint solver.

## Limits and departures

* **Not included:** the tag array and controller, the set-index hash function
  (the scheme relies on a good hash to spread writes over sets, but does not say
  which), the operating-system handler, and the wear-out of the bitcells. The
  lifetime forecasting procedure that accompanies the scheme (per-byte
  remaining-write and write-bandwidth maps, advanced in epochs) is a simulation
  method, not hardware, and is not included either.
* **Own choices, not published:** the zero class and byte layout of the
  compressed block; the SECDED construction (the code itself is not published);
  exact-capacity frame classes; LRU with empty frames first; the start-position
  step of one byte per write; the per-frame metadata; frame invalidation on a
  byte disable; the single-cycle write and one-cycle read timing; 16 ways.
* **Departure:** the published block diagram feeds the victim's fault map into
  the crossbar directly. Here it reaches the crossbar only through the
  write-control bits, which the index calculation derives from it.
* **The frame array** is a plain synchronous memory with byte write enables. It
  does not model STT-RAM latency, write energy or wear.
