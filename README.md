# FlashVault RTL: cryptography inside a NAND flash die

A conventional SSD encrypts data in its controller or on the host. Every page
therefore leaves the flash chip as plaintext on the flash channel and moves
through the controller and DRAM before it is protected. FlashVault does the
work inside the NAND die instead. Next to the page buffers it places a small
programmable cryptographic unit. Pages are error-corrected, decrypted or
encrypted, and signed or hashed on their way between the memory array and
the chip's I/O. The root key never leaves the die, because it is derived
on-chip from a physically unclonable function (PUF).

This repository contains SystemVerilog for the digital part of such a die:
- the per-plane buffers;
- the interface unit that connects the planes to the cryptographic engines;
- two cryptographic engines, each with an LDPC decoder, a key generation
  engine, register files, a 16-lane block cipher engine (BCE) array and an
  asymmetric cipher engine (ACE);
- the control FSM that sequences them.

The code is written for IEEE 1800-2017 tools. It builds and simulates with
Verilator 5.

## Organisation of the die

```
            memory array (plane 0..3)         PUF root key     SSD controller
                 |  16-bit words                   |          cmd / host / config
        +--------v---------+  x4                   |                |
        |  plane_buffer    |  page buffer 4 KB     |        +-------v-------+
        |  (page + cache)  |  cache buffer 4 KB    |        | control_unit  |
        +--------+---------+                       |        +-------+-------+
                 | 64-bit                          |                | eng_ctrl_t / eng_stat_t
        +--------v---------+                       |                |
        |  iface_router    |  round-robin over planes, steer to one plane
        +---+----------^---+                       |                |
            |64        |64                         |                |
   +--------v----------+---------------------------v----------------v------+
   | crypto_engine (x2)                                                    |
   |  FIFO 64->1024 -> ldpc_decoder -> Data RF (1 KB) <-> Cache RF (1 KB)  |
   |  Data RF -> FIFO 512->64 (to planes)        ^ kge (SHA-256 KDF)       |
   |  Cache RF, bce_array, ace, output_register  <- crypto_router (512b) ->|
   |  output_register (512 B) <-> host, ace <-> output_register            |
   +-----------------------------------------------------------------------+
```

- **Planes.** There are four. Each `plane_buffer` has a page buffer facing
  the array and a cache buffer facing the interface unit. Each is 4 KB.
  - A page is copied between the two buffers one 16-bit word per cycle.
    This frees the page buffer for the next array operation while the cache
    buffer is being read or filled.
  - The array side is a 16-bit stream: the die senses into the page buffer
    and programs out of it.
- **Interface unit.** It has a router and width-changing FIFOs.
  - Towards the engines, `iface_router` arbitrates round-robin among the
    four cache buffers. It holds a grant until the end of a burst
    (`io_out_last`), so codewords of different planes never interleave.
  - The engine's inbound FIFO gathers 64-bit words into 1024-bit codewords.
  - Towards the planes, the engine's outbound FIFO splits 512-bit rows into
    64-bit words, and the router steers them to the cache buffer of the
    command's plane.
- **Cryptographic engines.** There are two, and they are identical. The
  control unit addresses one per command.
- **Outside the logic.** Three parts are ports of `flashvault_top`:
  - the memory array, through `sense_req`/`prog_req` and the `arr_*`
    streams;
  - the PUF, through `puf_key`, 256 bits held constant;
  - the SSD controller, through the `cmd_*`, `host_*`, `uop_*`, `bce_cfg`
    and `ace_cfg_*` ports.

## What a command does

`control_unit` accepts one `cmd_t` at a time and pulses `cmd_done` when the
command has finished.

| command | sequence |
|---|---|
| `CMD_READ` | See the numbered steps below. |
| `CMD_PROGRAM` | For each of 16 chunks of 256 bytes: the host fills output-register rows 0-3; router → BCE buffer; the micro-program (encryption); router → Cache RF 0-3; → Data RF 0-3; outbound FIFO → router → cache buffer. Then: cache → page buffer; 2048 words to the array. |
| `CMD_KEYGEN` | The KGE derives a 512-bit key, which goes to Cache RF row 15 and from there through the router into the BCE key register. |
| `CMD_KEY_ACE` | Cache RF row 15 → router → ACE buffer row `ace_row`. This delivers a derived key to the asymmetric side. |
| `CMD_ACE_LD` | One 512-bit host row → output register → ACE buffer row `ace_row`. |
| `CMD_ACE_EX` | Runs one ACE instruction (`cmd.instr`). |
| `CMD_ACE_ST` | ACE row `ace_row` → output register row `row` → host. |

A `CMD_READ` runs these steps:

1. Sense the page into the page buffer (2048 words).
2. Copy the page buffer into the cache buffer.
3. Then, for each of the 32 codewords:
   1. Stream its 16 words through the router into the FIFO.
   2. LDPC-decode it.
   3. Write its 896 data bits into Data RF rows 0-1.
   4. Copy them to Cache RF rows 0-1.
   5. Send them through the router into BCE buffer rows 0-1.
   6. Run the micro-program (decryption).
   7. Send the result through the router into output-register rows 0-1.
   8. Let the host drain it (16 words).
4. `cmd_err` flags a codeword that could not be corrected.

**Cache read.** A READ can overlap array work with transfer, which is the
point of having two buffers per plane.
- With `next_sense` set, the FSM asks the array for the next page as soon
  as the current page has been copied into the cache buffer. The page
  buffer then fills while the codewords of the current page flow through
  the engine.
- A following READ with `presensed` set skips its own sense request. It
  only waits until the page buffer is full.
- A small per-plane tracker in the control unit counts sensed words
  independently of the FSM, so the sense can finish at any time.

A few rules hold for every command:
- Host words are accepted only while the FSM waits for them. A fast host
  therefore cannot overwrite rows still in use.
- Register-file reads take one cycle, so the FSM moves a row out of a
  register file in two cycles: address first, then write.
- Everything the router moves is written in the cycle the FSM selects it.

### Latency of a READ

At 200 MHz the default 4 KB page behaves as follows. Array timing (tR) is
outside this logic.
- Sensing and the page-to-cache copy each take 2048 cycles.
- Each codeword then costs about:
  - 16 cycles of streaming;
  - 1 cycle of decoding, plus 1 per bit flipped;
  - 2 cycles into the Data RF;
  - 4 cycles each for the Data RF → Cache RF and Cache RF → BCE moves;
  - 5 cycles per micro-operation;
  - 2 cycles into the output register;
  - 16 or more cycles of host transfer.

## The block cipher engine array

This is the part of the design that is easiest to misread.

**One lane.** A BCE lane (`bce`) takes two 32-bit inputs. One of five units
produces its 64-bit output, chosen by Select2:

| unit | module | what it computes |
|---|---|---|
| AU | `arith_unit` | Two 16-bit arithmetic logics: add or multiply, each either plain or reduced modulo 2^8, 2^16, 2^16+1 or 2^4. 2^16+1 is the IDEA multiplication, in which 0 stands for 2^16. |
| LOU | `logic_unit` | Two logic-cell blocks. Cells A and B combine byte pairs with XOR, AND, OR or NOT; cell C combines A and B; a mux picks a byte, optionally inverted. |
| PU | `perm_unit` | Two 32-bit Beneš networks. Two outer switch columns join them into one 64-bit Beneš network. |
| SU | `shift_unit` | Two 32-bit barrel shifters, or one 64-bit shifter: logical, arithmetic or rotate, in either direction. |
| TU | `table_unit` | Two S-box units of four 256×8 tables each, writable at run time. |

- Each lane's output is registered.
- The PU switch settings come in two banks. They are written through
  `bce_cfg` and shared by all lanes.
- The S-box tables are also written through `bce_cfg` and shared by all
  lanes.

**The array.** `bce_array` runs 16 lanes in SIMD over a 256-byte buffer of
32 blocks of 64 bits.
- **One operation.** The FSM issues an operation as one `bce_op_t`: the
  lane control word plus `key_in1`. The array applies it to all 32 blocks in
  two passes and writes the results back in place. `op_done` comes 4 cycles
  after acceptance.
- **Lane inputs.** Input 0 is the low half of the block. Input 1 is either
  the high half or, with `key_in1`, the lane's 32-bit slice of the 512-bit
  key register.
- **Running a cipher.** A cipher is a micro-program of up to 16 such
  operations. The controller stores it through `uop_*`, and a command runs
  the first `n_uop` of them.

Most units produce zero-extended narrow results, as the lane schematic
shows: 16 significant bits per half from the AU, 8 from the LOU and the TU.
As a result a round often needs several micro-operations.

The 16-entry micro-program memory and the single key register fall well
short of complete ciphers such as AES, SM4 or 3DES. Those need tens to
hundreds of operations and several round keys. The micro-program memory is
the first thing to enlarge for real use.

## The asymmetric cipher engine

`ace` holds 256 bytes (four 512-bit rows, or 32 words of 64 bits) and has
three execution resources.

- **Hash ALU cluster.** Eight `hash_alu`s work lane-wise on two rows and
  write a third.
  - Their operations are 64-bit, 2×32-bit or modular addition; a three-cell
    logic function; a 64-bit Beneš permutation; and shifts and rotates.
  - This covers the mixing steps of SHA-2.
- **Padding unit.** `hash_pad` turns a final partial block into one or two
  SHA-2 padded blocks.
- **ACALU pair.** Two `acalu`s each read two words and write one.
  - Arithmetic: 64-bit add or subtract with a carry kept between
    instructions, for multi-limb arithmetic; low or high product; compare.
  - Modular: add, subtract and multiply modulo q (q ≤ 32 bits). The
    multiply uses Barrett reduction with a precomputed μ = ⌊2^64 / q⌋.
  - Also logic, permutation and shift.
  - Operands narrower than `opw` bits are zero-extended first.

One instruction is accepted per cycle, and its results are written at the
next edge. The modulus registers and the permutation settings are set
through `ace_cfg_*`.

## Error correction

`ldpc_decoder` decodes a quasi-cyclic code that this design chose. The code
has n = 1024, k = 896 and 64×64 circulants, with two check rows:

```
H = [ I    I    ...  I      | I  0 ]
    [ P^0  P^1  ...  P^13   | 0  I ]      P^s: identity rotated by s
```

The encoder is therefore trivial:
- p0[r] = XOR over c of d_c[r];
- p1[r] = XOR over c of d_c[(r+c) mod 64].

The testbenches use these equations.

The decoder works as follows:
1. Each cycle it evaluates both syndromes.
2. It scores every bit with the gradient-descent bit-flipping metric:
   +1 if the bit agrees with the received bit, and ±1 for each satisfied or
   failed check.
3. It flips the lowest-scoring bit.
4. It stops when all checks pass, or gives up after 32 flips.

With column weight 2, single-bit errors are always corrected. Heavier error
patterns may fail. A production code would use a stronger matrix and
parallel flipping, but the decoder's structure would not change.

The program path stores what the engine produced without adding parity.

## Key derivation

`kge` hashes the 256-bit PUF key, a 64-bit salt, a 64-bit context and a
32-bit counter with SHA-256 (`sha256_core`, 65 cycles per block). The input
fits one padded block of 416 message bits. Two counter values give a
512-bit key. The key leaves the KGE as pairs of 32-bit words. The engine
gathers them into a staging register, writes the key into Cache RF row 15,
and loads it into the BCE key register.

## Where this follows the source design and where it does not

**Taken from the source design:**
- the block set;
- plane and engine counts;
- buffer sizes: 4 KB page and cache buffers, 1 KB register files, 256-byte
  BCE and ACE buffers, a 512-byte output register;
- link widths: 16, 64, 512 and 1024 bits;
- the unit counts inside a BCE (two of each unit) and inside the ACE (8 hash
  ALUs, 2 ACALUs, two padding units);
- the BCE control-field widths;
- Beneš permutation networks;
- Barrett reduction;
- a bit-flipping LDPC decoder;
- a hash-based KDF on a PUF key.

**This design's own choices:**
- every encoding of a control field;
- the command set;
- the micro-program mechanism;
- the LDPC matrix;
- the choice of SHA-256 and the KDF input layout;
- the array-side handshake;
- round-robin arbitration;
- all timing.

**Known departures and limits:**
- The LDPC code rate is 0.875. The source design quotes 0.88 for a code
  whose matrix it does not give.
- The control unit runs one command at a time. Sensing can overlap the
  transfer of the previous page (cache read). Programming has no matching
  overlap: the cache-to-page copy and the array transfer end each PROGRAM.
- The program path adds no LDPC parity.
- Ciphers longer than 16 micro-operations, CTR counter generation, multiple
  round keys, and big-number operands larger than the 256-byte ACE buffer
  (RSA-3072, lattice polynomials) are not supported at the default sizes.

## Simulating

Every block has a self-checking testbench in `tb/` named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. For
example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/fv_pkg.sv tb/tb_flashvault_top.sv \
          --top-module tb_flashvault_top -o sim && ./obj_dir/sim
```

`tb_flashvault_top` runs the whole die at its default parameters. It
includes behavioural stand-ins for the array, the host and the PUF. It does
the following:
- writes a micro-program;
- derives keys on both engines and checks them against a SHA-256 model;
- reads two pages (one with injected single-bit errors) through different
  planes and engines;
- performs a cache read of two pages;
- programs one page;
- exercises ACE load, add, XOR and store;
- delivers a key to the ACE.

It checks every output word. It also counts the events it must see:
- LDPC corrections;
- micro-operations;
- host back-pressure on reads and writes;
- a full outbound FIFO;
- gaps in the array stream;
- sensing that overlaps a transfer;
- use of both engines.

The run takes about 31,000 clock cycles (a few minutes in Verilator, most of it compilation).
