# An IoT processing system with an HQC accelerator

HQC (Hamming Quasi-Cyclic) is a code-based key-encapsulation mechanism. On a
small 32-bit microcontroller almost all of its run time goes into four kernels:

- multiplying a sparse and a dense polynomial in R = F2[X]/(X^n - 1);
- SHAKE256 seed expansion and the rejection sampling of fixed-weight vectors;
- decoding the duplicated Reed-Muller code RM(1,7);
- multiplication in F(2^8) inside the Reed-Solomon code.

This design is a small processing system built around a RISC-V core. Each
kernel gets the cheapest hardware that removes it as a bottleneck:

- a DMA engine for `memcpy` and `memset`;
- a tiny F(2^8) multiply-add unit behind two custom instructions;
- a loosely coupled accelerator for the three large kernels.

The accelerator has one control unit, two SRAMs and three compute units. The
HQC-128 parameters are built in: n = 17669, so one polynomial is 277 64-bit words.

The RTL is IEEE 1800-2017 SystemVerilog. Two parts are not included:

- **The RV32IC core.** Its microarchitecture and custom-instruction encodings are not specified here. Its ports are brought out at the top.
- **The Keccak-f[1600] permutation core.** It is third-party IP. Its ports are brought out too. A behavioural model is in the testbenches.

## System

```
          JTAG   core-I   core-D   HQC master   DMA master       (masters 0..4)
            \       \       |        /           /
             +------------------------------------+
             |     AXI4-Lite interconnect          |  one transfer at a time,
             +------------------------------------+  round-robin, DECERR for holes
              /       |        |         \       \
        IMEM 20 KB  DMEM 32 KB  I/O ctrl  DMA regs  HQC regs    (slaves 0..4)
        0x0000_0000 0x1000_0000 0x2000_0000 0x3000_0000 0x4000_0000
```

### Memory map and bus
Address bits 31:28 select the slave. The interconnect is deliberately simple:

- It grants one master at a time, round-robin over the masters. Within one master, a write is served before a read.
- It forwards one complete AXI4-Lite transaction, then arbitrates again.
- An address with no slave behind it is answered with DECERR by an internal responder.

All bus types (`axil_req_t`, `axil_rsp_t`), the addresses and every register
offset are in `hqc_pkg`.

The two memories return data one cycle after the address. They take byte
strobes, and answer SLVERR past their size.

The instruction memory is writable, as in an FPGA build, so a program can be
loaded over JTAG. In an ASIC it would be a ROM.

### JTAG
The JTAG module is a standard 16-state TAP with a 4-bit instruction register.
Its pins are oversampled by the system clock, so TCK must run at no more than a
quarter of the system clock. After a TAP reset the IR holds IDCODE.

| IR  | name   | data register                                                              |
|-----|--------|----------------------------------------------------------------------------|
| 0x1 | IDCODE | 32 bits, default 0x1000_0001                                               |
| 0x2 | MEMACC | 66 bits `{op[1:0], addr[31:0], data[31:0]}`; op 1 read, op 2 write. Capture returns `{busy, err, addr, last read data}` |
| 0x3 | CTRL   | 2 bits `{reset, run}`; reset holds every bus block and the core in reset   |
| 0x4 | REGACC | 38 bits `{we, reg[4:0], data[31:0]}` to the core's register-file port     |
| 0xF | BYPASS | 1 bit                                                                      |

A MEMACC bus access starts on Update-DR. The result of a read is shifted out
by the next scan.

### DMA
Program the DMA in this order:

1. Write SRC, DST, LEN (in elements) and VALUE.
2. Write CTRL: bit 0 starts the transfer, bit 1 selects memset (0 is memcpy), and bits 3:2 give the element size (0 byte, 1 half-word, 2 word).

STATUS bit 0 is busy and bit 1 is a bus error. Elements must be aligned to
their size. Source and destination may have different byte lanes.

Each memcpy element costs one read and one masked write, and each memset
element costs one write.

### I/O controller
The I/O controller has four registers:

| offset | register | behaviour |
|--------|----------|-----------|
| 0x0 | OUT | output values |
| 0x4 | OE | output enables |
| 0x8 | IN | pin inputs, through a two-flop synchroniser |
| 0xC | TOGGLE | a write XORs its set bits into OUT, so one store flips pins |

### F(2^8) unit
The F(2^8) unit is combinational:
`d = a[15:8]·b + a[7:0]`, taken as polynomials over F2. The result is 15 bits
and is not reduced. Reduction by the field polynomial stays in software, which
also keeps the generator-polynomial choice there.

The core would feed `a` from rs1 and `b` from rs2 or the immediate.

## The HQC accelerator

```
 AXI slave (commands) --+                    +-- AXI master (operands)
                        |   HQC control unit |
            SRAM0 288x64 <------+------> SRAM1 566x64
                         |      |      |
                   Sampling-Unit R-Unit RM-Decoder
                   (+ Keccak port)
```

There is only one rule about concurrency: exactly one compute unit works at a
time. The two SRAMs serve all of them. Memory bandwidth, not arithmetic, limits
these kernels, so the SRAMs provide two accesses per cycle (one per SRAM)
instead of duplicating compute units.

The control unit owns both SRAM ports, except while the R-Unit runs. Then the
R-Unit drives them directly, and an assertion checks that the Sampling-Unit is
idle.

### Command interface
Commands go through the registers at 0x4000_0000:

| offset | register | meaning |
|--------|----------|---------|
| 0x00 | CMD | a write starts a command |
| 0x04 | STATUS | bit 0 busy, bit 1 error; a write clears the error |
| 0x08 | SRC | source address |
| 0x0C | DST | destination address |
| 0x10 | LEN | length |
| 0x14 | WEIGHT | number of sparse coordinates |
| 0x18 | CYCLES | cycles the last command took |

A command written while busy is refused and sets the error bit. The processor
does other work until it sees busy low.

| code | command   | effect |
|------|-----------|--------|
| 0  | LOAD0   | LEN 64-bit words from SRC into SRAM0 |
| 1  | LOAD1   | LEN words from SRC into SRAM1 |
| 2  | STORE0  | LEN words of SRAM0 to DST |
| 3  | STORE1  | LEN words of SRAM1 to DST |
| 4  | MUL     | SRAM1 = SRAM0 · (sparse polynomial) mod X^n - 1. The WEIGHT coordinates are 32-bit words at SRC |
| 5  | ADD     | SRAM1 ^= SRAM0 over one polynomial |
| 6  | SH_INIT | clear the SHAKE256 state |
| 7  | SH_ABS  | absorb LEN bytes read from SRC |
| 8  | SH_FIN  | pad and switch to squeezing |
| 9  | SH_SQZ  | squeeze LEN bytes to DST |
| 10 | SAMPLE  | WEIGHT distinct positions below n to DST, one 32-bit word each |
| 11 | RM_DEC  | decode LEN duplicated codewords from SRAM1 and write one byte per codeword to DST |

A 64-bit word crosses the 32-bit bus as two beats, low half first.

### R-Unit: sparse times dense in two cycles per word
Polynomials are little-endian bit vectors in 64-bit words: bit k is bit k mod 64
of word k/64. The last of the 277 words holds bits 17664..17668 and is zero
above them.

A sparse operand is a list of positions. Multiplying by X^c shifts the dense
polynomial by c bits. That shift is word offset q = c/64 plus bit offset
s = c mod 64.

For each coordinate the unit walks the dense words i = 0..276, taking two
cycles per word:

1. **Cycle 1 (read):** read dense word i from SRAM0 and result word q + i from SRAM1.
2. **Cycle 2 (compute and write):**
   - shift: `(dense << s) | carry`
   - XOR the shifted word into the result word and write the sum back to SRAM1
   - keep `dense >> (64 - s)` as the carry for the next word

One extra word flushes the last carry. The product is accumulated unreduced over
554 words, which is why SRAM1 is twice the size of SRAM0.

After the last coordinate, REDUCE folds bits n..2n-2 back onto bits 0..n-2. It
reads a sliding pair of high words and takes three cycles per word. Then it
masks the top word.

For HQC-128 with weight w the multiplication therefore takes about:

    (2·277 + 2)                        clear
  + w · (2·(277 + 1) + 2 + fetch)      shift-XOR passes
  + 3·277 + 3                          reduction

At w = 66 this is 38 218 cycles in the R-Unit, or about 38 750 including the
coordinate fetches over the bus.

### Sampling-Unit: incremental SHAKE256 and fixed-weight sampling
The unit keeps the 1600-bit sponge state and processes one byte per cycle. The
rate is 136 bytes. When the rate is full, the unit sends the state to the
external permutation and waits for done. The intended core needs 24 cycles, and
so does the model.

- **Absorb** can be called any number of times.
- **Finalize** adds the SHAKE padding: 0x1F at the current position, 0x80 in the last byte of the rate.
- **Squeeze** can also be called repeatedly.

Sampling reads three squeezed bytes b0, b1, b2, most significant first, and
forms v = b0·2^16 + b1·2^8 + b2. The unit then:

1. rejects v if v ≥ ⌊2^24/n⌋·n;
2. otherwise reduces v mod n by a restoring division;
3. compares the result against every position already accepted and rejects it if it is a duplicate.

Two counters count the two kinds of rejection, and a third counts permutations.

### RM-Decoder: duplicated RM(1,7)
The decoder handles one codeword of 384 bits, which is the 128-bit RM(1,7)
codeword sent three times. It arrives as six 64-bit words. The decoder works in
four steps:

1. **Expand and sum:** add the three copies of each bit position as ±1 into 128 signed 11-bit values. Because every bit is stored as 0/1, entry 0 is then corrected by subtracting 3·64.
2. **Hadamard transform:** run a 128-point fast Hadamard transform in seven passes, one pass per cycle over all 128 values.
3. **Peak search:** find the first index with the largest |T|, one value per cycle.
4. **Output:** the index gives message bits 6..0 and the sign gives bit 7.

Latency from the first input word is 6 + 7 + 128 + 2 = 143 cycles. RM_DEC packs
the decoded bytes into words in main memory.

## What follows the source design and what does not
These parts follow the source design:

- the block structure and the memory sizes (20 KB, 32 KB, 288 × 64 and 566 × 64);
- the AXI slave + AXI master accelerator, with one active compute unit;
- the two-cycle shift-XOR multiplication step;
- the DMA functions and granularities;
- the JTAG duties;
- the F(2^8) equation.

These are this design's own choices:

- the bus topology and memory map;
- all register maps and command codes;
- the JTAG instruction set;
- the reduction and RM-decoder schedules;
- the byte-serial sponge;
- the interface to the external Keccak core.

SHAKE256 and the sampler follow the FIPS 202 and HQC specifications. Each
module's opening comment spells out its share.

Not built:

- the RISC-V core, and with it the four-cycle custom instructions;
- the Keccak permutation IP;
- the ROM variant of the instruction memory;
- SRAM macros (the memories are plain arrays).

The KEM software is not part of the design either. The cycle counts for whole
Keygen/Encaps/Decaps runs therefore cannot be reproduced here. Only the
accelerator commands are measured.

### Size against the FPGA figures of the source design
The source design reports register counts per unit on an Artix-7: R-Unit 117,
Sampling-Unit 1814 including 1622 in the Keccak core, RM-Decoder 63. Here the
R-Unit has about 160 flip-flops and the Sampling-Unit about 1770 (it holds the
sponge state itself, the permutation core being external). The RM-Decoder is
the clear departure: it keeps all 128 transform values in flip-flops, about
1460 of them, and does a Hadamard pass per cycle, while the original unit is
the smallest of the three and must work largely out of memory. A decoder that
keeps the values in SRAM1 would trade the 7 parallel passes for 7·128
sequential steps per codeword.

## Fit of the HQC-128 workloads
| data | size | capacity | fits |
|------|------|----------|------|
| dense operand | 277 words | SRAM0, 288 words | yes |
| unreduced product | 554 words | SRAM1, 566 words | yes |
| 46 codewords of the decoder input | 276 words | SRAM1 | yes |
| stack of the optimised software (Keygen/Encaps/Decaps) | 10 / 24 / 31 KB | data memory, 32 KB | yes |
| stack of the unoptimised reference code | 53 to 78 KB | data memory, 32 KB | no |

The higher HQC security levels need larger SRAMs. Raise `N_BITS`, `S0_WORDS`
and `S1_WORDS` together.

## Simulation
Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Build one with plain
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hqc_pkg.sv tb/tb_iot_ps.sv --top-module tb_iot_ps
./obj_dir/Vtb_iot_ps
```

- **`tb_iot_ps`** runs the whole system at its default parameters, in about one second. It includes:
  - **Data-port master:** a bus-functional master on the core's data port performs a full-size multiplication, an addition, SHAKE256("abc") against its known answer, sampling until both rejection kinds have occurred, and decoding of 46 noisy codewords.
  - **Instruction-port master:** at the same time, a second master on the instruction port drives DMA copies and fills of every size, the I/O pins and unmapped addresses.
  - **JTAG:** the JTAG pins are then driven bit by bit.
  - **Event checks:** the testbench fails if contention, a refused command, a rejection kind, a DMA mode or a decode error never happened.
- **`tb_hqc_acc`** runs the same accelerator sequence (`hqc_flow`) without the rest of the system.
- **`tb_r_unit`** compares products at three values of n against a bit-level reference, and checks cycle counts.
- **`tb_sampling_unit`** checks SHAKE256 known answers and the sampler against a reference.
- **`tb_rm_decoder`** checks the decoder output and its latency.
- **Bus block testbenches:** the remaining bus blocks each have their own.

`keccak_f1600_model` in `tb/` is a behavioural Keccak-f[1600], one round per
cycle. It stands in for the permutation core.
