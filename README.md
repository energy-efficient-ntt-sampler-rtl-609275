# A two-byte rejection sampler for Kyber's public matrix

Kyber builds its public matrix Â from polynomials sampled in the NTT domain.
Each one has 256 coefficients, uniformly distributed in [0, q) with q = 3329.
The standard sampler (SampleNTT) reads the SHAKE-128 output three bytes at a
time. From those 24 bits it takes two 12-bit candidates and keeps each
candidate below q.

The sampler here does the same job, but each pair of candidates comes from
only **two** bytes (β_i, β_i+1):

```
d1 = β_i   | (β_i+1 mod 16) << 8      i.e. (β_i   | 256·β_i+1) & 4095
d2 = β_i+1 | (β_i   mod 16) << 8      i.e. (β_i+1 | 256·β_i)   & 4095
keep d1 if d1 < q;  keep d2 if d2 < q and fewer than 256 are kept;  i += 2
```

The two candidates share the low nibbles of both bytes: each byte is used once
in full and once as a nibble. The acceptance rate stays 3329/4096 ≈ 81.3 %.
A polynomial therefore needs about 315 candidates, and so about 315 bytes
instead of about 473.

That figure matters because of the XOF. One SHAKE-128 squeeze gives 168
bytes, so two squeezes (336 bytes) are almost always enough. The standard
sampler always needs a third squeeze. The hardware gains for the same reason:

- there is no third byte register;
- the seed buffer is smaller;
- there is no idle cycle. The standard datapath spends 3 cycles per pair but
  uses the rejecter in only 2 of them. Here a byte arrives every cycle and a
  candidate is examined every cycle.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesisable, for one sampler
clock plus one XOF clock.

## Block structure

```
             clk_xof domain            |              clk domain
                                       |
 SHAKE-128 --xof_valid/xof_byte-->  seed_mem (336 B dual-clock FIFO) --B--+--> beta_block (β_i)   --+--> d1_gen --+
          <--xof_ready------------     ^  rd_en/wr_en/rst                  +--> beta_block (β_i+1) --+--> d2_gen --+--> rejecter --> coeff, coeff_valid
                                       |                                                                            |
                                 seed_mem_ctrl  <--en/clr--  ntt_ctrl (CTRL) --β enables, D enables, Rej_en/sel-----+
                                                                  ^ start            ^ rej_done
```

| file | block | job |
|---|---|---|
| `sampntt_pkg.sv` | – | q, n, widths, `byte_t`, `coeff_t`, the d1/d2 select enum |
| `seed_mem.sv` | SeedMem | dual-clock circular byte FIFO, 336 entries |
| `seed_mem_ctrl.sv` | SeedMem_ctrl | drives the FIFO's rd_en, wr_en and rst; XOF handshake; read address |
| `ntt_ctrl.sv` | CTRL | start/stop, steering of bytes, timing of all datapath enables |
| `beta_block.sv` | β_i and β_i+1 blocks | 8-bit enable register, instantiated twice |
| `d1_gen.sv`, `d2_gen.sv` | D1/D2 generators | shift, OR and truncation to 12 bits, registered |
| `rejecter.sv` | Rejecter | compares with q, emits coefficients, counts j up to n |
| `modified_sample_ntt.sv` | top | wires the blocks above |

SHAKE-128 itself is not part of this RTL. The sampler takes its bytes through
a valid/ready port, and any Keccak core can be attached there.

## The pipeline, cycle by cycle

This is the part that takes the most care. Cycle 0 is the first cycle after
`start` is sampled, and the buffer already holds bytes.

| cycle | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | … |
|---|---|---|---|---|---|---|---|---|---|
| read address (rd_en) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | |
| bus B (FIFO dout) | – | β0 | β1 | β2 | β3 | β4 | β5 | β6 | |
| β_i register | – | – | β0 | β0 | β2 | β2 | β4 | β4 | |
| β_i+1 register | – | – | – | β1 | β1 | β3 | β3 | β5 | |
| d1, d2 registers | – | – | – | – | d(0,1) | d(0,1) | d(2,3) | d(2,3) | |
| rejecter examines | – | – | – | – | d1(0,1) | d2(0,1) | d1(2,3) | d2(2,3) | |
| coeff_valid may be high | – | – | – | – | – | d1(0,1) | d2(0,1) | d1(2,3) | |

How the controller drives this:

- **Byte steering.** CTRL keeps a phase bit. Each byte that arrives is raised
  as `byte_valid` by SeedMem_ctrl, one cycle after its read. The phase bit
  sends it to the β_i register if it is the first byte of a pair, or to the
  β_i+1 register if it is the second.
- **Generators.** In the cycle after β_i+1 is loaded, both generators are
  enabled together.
- **Rejecter.** It takes d1 in the next cycle and d2 in the cycle after that
  (`rej_sel`). A pair needs two bytes, so the rejecter's two slots for one
  pair never overlap with the next pair's slots. An assertion in `ntt_ctrl`
  checks this.
- **d2 register hold.** The d2 register is loaded again only two cycles later,
  so it still holds the right value in the rejecter's second slot.

Candidate *c* (byte index of its pair's first byte, +1 for d2) leaves the
rejecter in cycle *c* + 5. The last of the 256 coefficients therefore appears
5 cycles after its candidate is read. After that come two more cycles: one to
see the count reach 256, and one in FLUSH. Then `done` pulses. On average this
is about 315 + 8 sampler cycles per polynomial.

**Stalls.** If the FIFO is empty, SeedMem_ctrl skips the read, and nothing
downstream moves until bytes arrive. All stage enables follow the bytes that
actually arrived, not a fixed schedule. A stall in any cycle therefore only
delays the pipeline and never corrupts it.

**End of a polynomial.** The rejecter stops at j = 256. A d2 examined after
the 256th coefficient is dropped, as the algorithm's `j < n` requires. CTRL
then spends one cycle in FLUSH. There it clears the FIFO, which still holds
the unused bytes of this polynomial's stream plus a few already read ahead.
It then returns to IDLE and pulses `done`. `bytes_read` then holds the number
of bytes this polynomial consumed. That is the bytes the algorithm needs, plus
at most four read ahead.

## The seed buffer across two clocks

SHAKE-128 and the sampler run on different clocks: in the FPGA build this
design comes from, 3.264 ns and 10 ns. `seed_mem` is therefore a dual-clock
FIFO. It is built as follows:

- Its depth, 336, is not a power of two. Each side therefore keeps two
  counters:
  - an array index that wraps at 336;
  - a free-running 9-bit byte counter.
- The byte counters cross to the other clock in Gray code, through two
  flip-flops.
- `full` (write side) and `empty` (read side) come from the difference of the
  two counters, taken modulo 512.
- A byte written becomes readable 2–3 sampler cycles later.
- The buffer is circular. In the rare case (under 1 %) where a polynomial
  needs more than 336 bytes, the XOF keeps refilling the buffer as it drains,
  and the sampler stalls only if it catches up.
- `rst` is an asynchronous clear of both sides. It is driven from a register
  in SeedMem_ctrl, so it is glitch-free.

## Interface of `modified_sample_ntt`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | sampler clock; synchronous active-high reset |
| `clk_xof` | in | 1 | XOF clock (may be the same as `clk`) |
| `xof_valid`, `xof_byte`, `xof_ready` | in, in, out | 1, 8, 1 | byte stream. A byte is taken on a `clk_xof` edge where valid and ready are both high |
| `start` | in | 1 | sampled while `busy` is low; starts one polynomial |
| `busy`, `done` | out | 1 | `done` pulses for one cycle when the polynomial is complete |
| `coeff`, `coeff_valid`, `coeff_index` | out | 12, 1, 9 | coefficients â_0 … â_255, in order, one per valid cycle |
| `bytes_read` | out | 16 | bytes read from the buffer for the current or last polynomial |

Parameters: `DEPTH` = 336, `Q` = 3329, `N` = 256. Offer the next polynomial's
XOF stream only after `done`, because bytes written before the flush are
discarded. Once `done` has pulsed, the XOF may fill the buffer with the next
stream before `start` arrives. A pre-filled buffer removes the first stalls.

## What follows the source design and what does not

These parts follow the published design:

- the sampling rule;
- the set of blocks and their connections;
- the two byte registers fed by one bus;
- the shift and truncate form of the generators;
- the comparison with q in the rejecter;
- the 336-byte, dual-clock seed FIFO and its seven base ports;
- the dataflow timing above, up to the rejecter.

These are this implementation's own choices:

- **D1 and D2 timing.** In the source timing diagram, D2 is produced one
  cycle after D1. By that cycle, though, the β_i register already holds the
  next pair's byte. Here both generators load together, and the rejecter
  takes d2 one cycle after d1. Seen from the rejecter, the timing is the same.
- **FIFO status.** The `full`/`empty` flags and the Gray-code clock crossing
  of the FIFO.
- **XOF port.** The valid/ready handshake.
- **Control.** `start`/`busy`/`done`, the FLUSH step, the coefficient counter
  in the rejecter, and `coeff_index`/`bytes_read`.
- **Start signal.** In the source diagram, `start` is a level that stays high.
  Here it is sampled only in IDLE, so a held `start` just begins the next
  polynomial after `done`.
- **Reset.** The datapath registers share the global synchronous reset. The
  controller clears only the FIFO and the coefficient count.
- **Sizes.** The resource figures of the source FPGA build (for example 3
  flip-flops in CTRL, 10 in the seed memory) are not reproduced.
  - CTRL has 8 flip-flops, because it also times the rejecter slots and the
    flush.
  - The FIFO has about 90, for its clock-crossing counters.
  - Energy figures are outside what RTL simulation can show.

## Verification

Each block has a self-checking testbench in `tb/`. All of them end with one
line, `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_beta_block` | load/hold against a model, 500 random cycles |
| `tb_d1_gen`, `tb_d2_gen` | all 65,536 byte pairs against the arithmetic form `(a + 256·(b mod 16)) mod 4096`; hold when not enabled |
| `tb_rejecter` | random candidates, many at q−1, q, q+1, 0 and 4095; order, index, stop at 256, restart |
| `tb_ntt_ctrl` | every output, every cycle, against a cycle model; random byte gaps; back-to-back polynomials |
| `tb_seed_mem` | two unrelated clocks; exact fill to 336; ordered drain; random traffic over 7 wraps; clear with data inside |
| `tb_seed_mem_ctrl` | every output, every cycle, against a model under random inputs |
| `tb_modified_sample_ntt` | whole design at default parameters, 11 polynomials against a software model (see below) |
| `tb_kyber_matrix` | the matrices of Kyber512, Kyber768 and Kyber1024 (4 + 9 + 16 polynomials) with a streaming XOF |

`tb_modified_sample_ntt` runs the whole design at its default parameters and
checks each polynomial against a software model of the algorithm. It drives
the design through these situations, counting each one and failing if any
never occurs:

- buffer-full back-pressure on the XOF;
- stalls on an empty buffer;
- polynomials that need more than 336 bytes;
- rejected d1 and rejected d2 candidates;
- a d2 dropped at j = 256;
- back-to-back polynomials.

With a pre-filled buffer it also checks the cycle of the last coefficient
exactly: cycle *c* + 5.

`tb_kyber_matrix` measured on average 318.8 bytes (2550 bits) and 325 sampler
cycles per polynomial over its 29 polynomials. 27 of the 29 fitted in 336
bytes. The expected value is about 315.5 bytes (2523.8 bits) per polynomial,
with 99 % fitting in two squeezes. The random bytes of the testbench stand in
for SHAKE-128 output.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/sampntt_pkg.sv tb/tb_modified_sample_ntt.sv \
          --top-module tb_modified_sample_ntt -o sim && ./obj_dir/sim
```

Each testbench finishes in under a second of wall-clock time.
