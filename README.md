# PUFBind: binding a program image to one FPGA

A soft processor on an FPGA normally runs whatever program sits in its block
RAM. PUFBind adds a small hardware gate in front of that memory: before the
processor may fetch a single instruction, the hardware hashes the whole
program image and combines the hash with a fingerprint of the chip itself,
taken from a physical unclonable function (PUF). Only if the result equals a
signature stored at the end of the image is the processor's memory port
enabled. A tampered program, a tampered signature, or the right program on
the wrong chip all leave the memory dark and light a single error LED.

There is no encryption and no stored secret key. The chip's identity comes
from manufacturing variation in a 128-cell Butterfly PUF. Integrity comes from
SHA-256. Checking a 4 kB image costs about a thousand clock cycles, once, at
start-up. After that the processor runs at full speed with nothing in its path.

This RTL implements the on-chip part of the scheme in SystemVerilog. It
includes a behavioural model of the PUF cells, which no RTL can synthesise
faithfully. The processor (Xilinx PicoBlaze/KCPSM6), the UART and the
software fuzzy extractor are not included. Their signals are ports of the top.

## The binding equation

Two digests are involved:

* `SHA_Prog_Bin` = SHA-256 of the program image, without its last 8 words.
* `SHA_BPUF` = SHA-256 of the chip's PUF key. The key is the 128-bit PUF
  response after error correction.

When the image is prepared for a particular chip (once, off-line), the
signature

    SHA_EXOR_Reference = SHA_Prog_Bin XOR SHA256(K0)

is written into the last 8 words of the image. Here K0 is the key recorded
when the chip was enrolled. At start-up the hardware recomputes both digests
and XORs them into `SHA_EXOR_Hardware`. It passes only if that equals the
stored signature:

| what changed | which term breaks |
|---|---|
| any bit of the program or of its zero fill | `SHA_Prog_Bin` |
| any bit of the stored signature | `SHA_EXOR_Reference` |
| the chip (another PUF, so another key) | `SHA_BPUF` |

The security argument depends on the assumption that whoever modifies the
binary does not hold the chip it is bound to. With the chip in hand, an
attacker could read its PUF and re-sign the image. Note also that
`SHA256(K0)` is the chip's published identifier: it travels with the chip
through the supply chain, together with the fuzzy extractor's helper data.
Anyone holding that identifier can compute a valid signature for a modified
image. The scheme therefore relies on keeping the identifier away from whoever
might modify the binary.

## Chip identifier

The same digest serves a second purpose, the platform check at enrolment.
When a chip is enrolled, its response R0 goes through the fuzzy extractor's
encoder, which produces a key K0 and public helper data HD0. `SHA256(K0)`
becomes the chip's identifier. Later, anyone can check a chip: read a fresh
response, decode it with HD0 into K1, and compare `SHA256(K1)` with the
identifier. The top brings `SHA256(K1)` out on `puf_id`. It is valid
(`puf_id_valid`) 16 cycles after `key_valid`, computed by the same engine
that checks the program, so the platform check needs no separate hash
hardware.

## Image layout

The memory is 1024 words of 32 bits (4 kB). Everything below follows from
that size:

```
word 0 .. P-1        instructions: 14 zero bits, then the 18-bit PicoBlaze opcode
word P .. 1015       zero fill
word 1016 .. 1023    SHA_EXOR_Reference, most significant 32 bits at word 1016
```

The processor receives bits [17:0] of each word. The hardware hashes words
0..1015 as a big-endian byte string of 4064 bytes, with standard SHA-256
padding:

* one `0x80000000` word;
* zeros;
* the 64-bit length 32512.

The padded message is 64 blocks of 512 bits. This is exactly what a
command-line `sha256sum` gives for those 4064 bytes. The host-side binding
step can therefore use ordinary tools:

    sig = sha256(bytes(words[0:1016])) XOR sha256(K0 as 16 big-endian bytes)

The key digest is SHA-256 of the 128-bit key as a 16-byte message. The key is
followed by a single 1 bit, zeros, and the length 128, all in one block.

Because the hashed length depends only on the memory depth, the program's own
length does not matter. Any program up to 1016 words gives the same hardware
sequence. To change the memory size, change `DEPTH`; the padding and block
count are computed from it.

## Start-up sequence

```
 puf_start ─► bpuf_ctrl ──excite/gate/clk_enable──► bpuf_array (128 cells)
                  │ puf_response (raw, noisy)
                  ▼
           [ host: fuzzy decoder with helper data ]      (outside the chip)
                  │ key, key_valid
                  ▼
 auth_controller ──► sha256_core ◄── block_buffer ◄── prog_bram port A
        │                 │ digests                      (words 0..1023)
        │           authenticator (XOR, =?)
        ▼
 mem_enable ──► prog_bram port B EN ──► proc_instr[17:0]     led_fail
```

1. **Load.** The image is written through `load_*`. In the prototype it came
   with the FPGA configuration. The load port works only while the controller
   is idle. Once authentication starts, writes are ignored until reset.
2. **Read the PUF.** A `puf_start` pulse runs `bpuf_ctrl`. It raises
   `excite`, then `gate`, then `clk_enable`, drops `excite` while both latches
   are transparent, and drops `gate`. It then registers the 128 response bits
   and raises `puf_valid`. This takes 12 cycles after the edge that samples
   `puf_start`.
3. **Correct the response (off chip).** The raw response differs from the
   enrolled one in a few bits. A fuzzy extractor with public helper data maps
   it back to the enrolled key K0. In the original work this runs as software
   on the host (n = 128 input bits, about 13 correctable errors).
4. **Authenticate.** The key comes back on `key` with `key_valid`. The
   controller immediately starts the SHA-256 engine on the key block. It also
   starts reading the image, one word per cycle, into the 512-bit block
   buffer. Each full block goes to the engine, which by then has finished the
   previous one. While the padding words are being inserted, the last 8 memory
   words are read into the reference register. After the last block, the
   authenticator compares, and the verdict is registered.
5. **Run or refuse.** On a pass, `auth_pass` (= `mem_enable`) drives the EN of
   the processor's memory port, and instructions appear on `proc_instr` one
   cycle after `proc_addr`. On a fail, the port stays disabled and its output
   stays zero, and `led_fail` lights. Both verdicts hold until reset.

## Keeping the reads and the hash in step

The rate target is one 512-bit block every 16 cycles, the time it takes to
read 16 words. `sha256_core` therefore performs 4 SHA-256 rounds per clock
(`ROUNDS_PER_CYCLE = 4`) over a 16-word sliding message schedule. The engine
shows `ready` in the last cycle of a block, so the next block can start in
that same cycle. The chaining value for the new block comes straight from the
final addition (`result`), with no idle cycle.

`block_buffer` is where the two streams meet:

* A word that arrives in the cycle a full block leaves becomes word 0 of the
  next block.
* With the 16-cycle engine the buffer never makes the memory wait.
* The design also works with a slower engine. If the engine is not ready, the
  one word already in flight from the memory goes into a skid register, and
  `issue_ok` stops further reads. The controller testbench exercises this with
  a 1-round-per-cycle engine.

One engine serves both digests:

* The key block is started in the cycle `key_valid` is seen. It finishes
  while the first 16 image words are still being read, so it adds no time.
* The key digest is the engine's first result and is held as `SHA_BPUF`.
* The image digest is the result of the 64th image block.

**Latency.** The verdict changes 1043 cycles after the clock edge that samples
`key_valid`:

* 64 blocks × 16 cycles = 1024;
* 16 for the last block's own compression;
* 1 for memory read latency;
* 1 for the buffer's hand-over;
* 1 for the compare.

The original estimate of 1025 cycles (1024 + compare) leaves out the last
compression and the two pipeline cycles. At 100 MHz the difference is
0.18 µs. In general the latency is 16 × blocks + 19.

## The Butterfly PUF and its model

Each cell is two cross-coupled latches. The upper latch (LDCE, asynchronous
clear) takes its D from the lower latch's Q. The lower latch (LDPE,
asynchronous preset) takes its D from the upper latch's Q. `excite` drives
both the clear and the preset, so while it is high the pair is held at 0/1.
`gate` goes to both G pins and `clk_enable` to both GE pins. The cell's output
is the upper Q. When `excite` falls with both latches transparent, the pair is
unstable. It settles to whichever value the tiny drive-strength mismatch
favours.

On the FPGA, the 128 cells are placed symmetrically in two banks of 64 with
matched routing, so that the layout adds no bias. That part is a placement
constraint, not RTL.

`bpuf_cell` is a behavioural model, not hardware:

* Each cell has a fixed bias `PREFERRED`.
* On each evaluation it settles the other way with probability
  `NOISE_PERMIL`/1000 (default 3 %).
* `bpuf_array` derives each cell's bias from a hash of `DEVICE_ID` and the
  cell index, so two `DEVICE_ID` values behave like two chips. About half of
  their bits differ.

For synthesis, replace these two files with the vendor-primitive netlist.
`bpuf_ctrl` and everything else is ordinary synthesizable RTL.

## Modules

| file | role |
|---|---|
| `pufbind_pkg.sv` | widths, `auth_result_e`, SHA-256 constants and functions |
| `pufbind_top.sv` | the on-chip system; port A of the memory goes to the loader while idle, then to the controller; `puf_id` brings out the key digest |
| `bpuf_cell.sv`, `bpuf_array.sv` | PUF cell and 128-cell array (behavioural) |
| `bpuf_ctrl.sv` | PUF evaluation sequencer and response register |
| `sha256_core.sv` | SHA-256 engine, 4 rounds per cycle |
| `block_buffer.sv` | 16-word block assembly with skid register |
| `auth_controller.sv` | authentication FSM: key block, image stream and padding, reference capture, verdict |
| `authenticator.sv` | XOR of the digests and 256-bit compare (combinational) |
| `prog_bram.sv` | 1024 × 32 memory; port A read/write, port B read with EN |

The top's parameters are `DEPTH` (1024), `PUF_BITS` (128), `KEY_BITS` (128),
`INSTR_W` (18), and the model-only `DEVICE_ID` and `NOISE_PERMIL`. The reset
is asynchronous and active low. All control registers and both memory output
registers are reset; the memory array is not.

## Where this RTL departs from the original design, or fills gaps

* **One parameterised FSM.** The original generates the controller FSM per
  program size with a C program. Here a single FSM covers any `DEPTH`.
* **Latency.** It is 1043 cycles instead of the quoted 1025 (see above).
* **One SHA engine.** It is time-shared by the key and the image, as in the
  text and the resource table; one block diagram draws two engine boxes. The
  engine's insides (4 rounds per cycle, sliding schedule) are this design's
  own choice. The original gives only the 16-cycles-per-block rate. This
  engine holds more registers (schedule window plus working variables plus
  buffer) than the roughly 1060 reported for the original.
* **Where the digests are held.** The controller keeps the three 256-bit
  values: the key digest, the image digest and the reference. It therefore
  has about 800 flip-flops, where the original reports about a dozen for its
  controller. Fewer would be needed if the image digest were read straight
  from the engine and the reference compared word by word. The function is
  the same.
* **Key padding.** The key block follows standard SHA-256 padding of the
  128-bit key. The original's description ("truncated to 448 bits and
  concatenated with 64 padding bits") is read this way so that the hardware
  digest equals the command-line digest it was checked against.
* **Design choices not fixed by the original:**
  * reference word order (most significant word first);
  * the load port and its lock-out;
  * the `key_valid` / `puf_start` / `puf_valid` handshakes;
  * the PUF timing (4 excite cycles, 4 settle cycles);
  * the response capture register;
  * zeroing of the disabled port's output;
  * a failed verdict being final until reset.
* **Not implemented:**
  * the fuzzy extractor, which was software on the host;
  * the UART, which was vendor code;
  * the PicoBlaze processor, which is vendor IP.
  
  The testbench uses a stand-in fuzzy decoder (`tb/fuzzy_decoder_model.sv`).
  Its "helper data" is simply the enrolled response. It corrects up to 13
  errors but has none of a real fuzzy extractor's secrecy.
* **Power-down.** The authentication logic could be clock-gated after a pass.
  That is not done here.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`.

* `tb_sha256_core` checks three things:
  * the engine against the FIPS 180-4 vectors ("abc", the empty message, the
    448-bit two-block message) and against an independent, round-by-round
    SHA-256 model (`tb/sha256_ref_pkg.sv`) on random multi-block messages;
  * 16 cycles per block;
  * back-to-back block acceptance.
* `tb_auth_controller` checks the controller's digests and verdicts in two
  small datapaths:
  * one where the padded stream is longer than the memory;
  * one with a slow engine that forces stalls.
  
  It also checks the 16 × blocks + 19 latency.
* `tb_pufbind_top` runs the whole top at its default sizes. It enrols the
  chip, binds a 200-instruction image, and checks that image's digest against
  a constant produced by an independent SHA-256 tool. It then authenticates
  four times, each with a fresh noisy PUF reading:
  * the authentic image (pass, and every instruction fetched correctly);
  * one flipped instruction bit (fail);
  * one flipped signature bit (fail);
  * the authentic image with another chip's PUF key (fail).
  
  It also checks:
  * the 1043-cycle latency;
  * that no instruction is delivered before or after a failed verdict;
  * that a write attempted mid-authentication has no effect.

To simulate with Verilator, for example the full system:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_pufbind_top \
  -y rtl -y tb rtl/pufbind_pkg.sv tb/sha256_ref_pkg.sv tb/tb_pufbind_top.sv
./obj_dir/Vtb_pufbind_top
```

The full-size run takes well under a second. Other testbenches build the same
way with their own top module. `tb_sha256_core`, `tb_auth_controller` and
`tb_block_buffer` need `tb/sha256_ref_pkg.sv` or `rtl/pufbind_pkg.sv` on the
command line as above.
