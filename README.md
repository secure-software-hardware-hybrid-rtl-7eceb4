# Keyed-hash response compaction for secure in-field SoC self-test

Built-in self-test exposes a chip's internals. A scan chain, or a
signature register that compacts scan data, gives a tester the raw or nearly
raw response of the logic under test. An attacker who controls the test can
read out key registers, or can work back from a compacted signature. A
classic SISR/MISR compactor has two more problems. It aliases: different
responses can give the same signature. And when the response is no longer
than the register (L <= n), the "signature" is the response itself.

This design uses a different output-response analyser: a **KMAC128 engine
keyed with a device-specific key**. The SoC's own processor runs a software
self-test library. It seeds an on-chip LFSR pattern generator (TPG), applies
the patterns to the component under test, and streams the responses into the
hash engine. The engine returns a fixed 256-bit signature. As a result:

* Any response length gives a 256-bit signature. This holds even for a
  14-bit response, and the signature reveals nothing about the response.
* Two different responses collide with probability about 2^-128. This is
  the collision resistance of a 256-bit KMAC128 output.
* Signatures depend on the key. A dictionary of signatures, or an attack
  that works on one device, is useless on another.
* No scan-chain or compactor hardware is added. The processor schedules the
  test when the component is idle, so the component stays available.

The signature is then compared with a golden one. The comparison happens
either on chip, against a small table in memory, or at a trusted remote
tester. The remote tester keeps a per-device *fault dictionary*: one
signature for each fault it can diagnose.

This repository holds the hardware part: the TPG, the KMAC128 engine with
its bus interface, and the bus decoder that places both in a SoC. The
processor, memory, I/O and key store belong to the host SoC and are ports
here.

## Structure

```
hybrid_test_soc                  top: test domain of the SoC
 ├─ apb_interconnect   u_bus     CPU port -> TPG | hash engine | rest of SoC
 ├─ tpg_lfsr           u_tpg     32-bit LFSR pattern generator (bus slave)
 └─ kmac_apb           u_kmac    hash-engine registers (bus slave)
     └─ kmac128        u_kmac    KMAC128 sponge sequencer
         └─ keccak_f1600 u_keccak  1600-bit state + Keccak-f[1600], 1 round/cycle
packages: apb_pkg (bus structs, address map), keccak_pkg (state type,
          round function, constants)
```

Top-level ports of `hybrid_test_soc`:

| port | dir | meaning |
|---|---|---|
| `clk_i`, `rst_ni` | in | clock, active-low asynchronous reset |
| `device_key_i[63:0]` | in | device key k. It comes from the key store and goes to the hash engine only. |
| `cpu_req_i` / `cpu_rsp_o` | in/out | the processor's bus port (`apb_req_t` / `apb_rsp_t`) |
| `ext_req_o` / `ext_rsp_i` | out/in | every other address: memory, I/O, the IPs under test |
| `sig_done_o` | out | a signature is complete (usable as an interrupt) |

The bus is APB-like. It has a setup phase with `psel`. It has an access phase
with `psel` and `penable`, which completes when `pready` is high. `pslverr`
flags an error. The decoder raises `psel`/`penable` only for the selected
slave. It adds no cycles.

## What the hash engine computes

The signature of a response X (a byte string) is the standard KMAC128 of
NIST SP 800-185. It uses the 64-bit key K, a 256-bit output and an empty
customisation string. On the Keccak sponge (rate 168 bytes), it is absorbed
as follows:

| sponge input | bytes |
|---|---|
| block 1 (constant) | `01 A8 01 20 4B 4D 41 43 01 00` then zeros to 168 bytes: the cSHAKE name "KMAC" |
| block 2 (key) | `01 A8 01 40` then K[0..7] then zeros to 168 bytes: `bytepad(encode_string(K),168)` |
| response | X, any number of bytes |
| length | `01 00 02` = `right_encode(256)` |
| padding | `04` after the last byte, `80` in byte 167 of that block (both in one byte if they meet) |

The signature is the first 32 bytes of the final state. Byte i of the
signature is bits 8i+7:8i of the `digest` vector. It is also byte i mod 4 of
DIGEST register i/4.

Conventions this design fixes, which software that computes golden
signatures must follow:

* The key byte order: `device_key_i[7:0]` is K[0].
* Responses are whole bytes. A response of L bits is zero-padded by software
  to ceil(L/8) bytes. The testbenches pack the responses of successive
  patterns LSB first.
* S is empty.

With these conventions, any SP 800-185 KMAC128 implementation produces the
golden signatures. The engine reproduces the published SP 800-185 KMAC128
sample (key 40..5F, data 00 01 02 03, output `E5 78 0B 0D ... 6E E1 4E`).

### Inside kmac128

`keccak_f1600` owns the only copy of the 1600-bit state. It offers three
operations: clear, XOR a 1600-bit mask, and run 24 rounds (one per cycle).
The KMAC sequencer around it has these states:

* IDLE/DONE: `start` clears the state.
* B1: XOR block 1, then permute.
* B2: XOR the key block, then permute.
* ABSORB: take response words.
* TAIL: absorb the three length bytes, one per cycle.
* PAD: XOR `04` and `80`, then permute.
* DONE: the signature is valid.

In ABSORB, each accepted word is XORed in place at the current byte position
`pos`. The barrel shift is `word << 8*pos`. When `pos` reaches 168, the block
is permuted, and `msg_ready` is low for those 26 cycles. Nothing is buffered.
The engine therefore adds no storage beyond the state, a byte counter and
the state machine (1626 flip-flops after synthesis).

The sequencer has three rules:

* A word may carry 1 to 4 bytes. It is accepted only if it fits the current
  block. Full words always fit, because 168 is a multiple of 4. So only the
  last word of a response should be partial. A word that would cross the
  block boundary sets `error` and is dropped.
* `digest` reads as zero unless the signature is done. Intermediate sponge
  states never reach the bus.
* `start` is accepted in IDLE, DONE or ABSORB. In ABSORB it abandons the
  response.

Latency, in clock edges after the one that samples the request:

| step | cycles |
|---|---|
| `start` to ready for data | 54 |
| a 168-byte block | 42 word cycles + 26 stall cycles |
| `finish` to `done` | 30. It is 56 when the three length bytes cross into a new block (response length mod 168 = 165..167). |

## Registers

TPG window at `0x1A12_0000`:

| offset | access | function |
|---|---|---|
| 0x0 SEED | W | Loads the LFSR and clears COUNT. A zero seed is refused with `pslverr`. |
| 0x0 SEED | R | The last seed written. |
| 0x4 PATTERN | R | The current pattern. The LFSR then steps once, so the first read after a seed returns the seed itself. |
| 0x8 COUNT | R | Patterns read since the seed. |

The LFSR is a 32-bit Fibonacci register with feedback polynomial
x^32 + x^22 + x^2 + x + 1. It shifts towards the MSB:
`q <= {q[30:0], q[31]^q[21]^q[1]^q[0]}`.

Hash-engine window at `0x1A12_1000`:

| offset | access | function |
|---|---|---|
| 0x000 CTRL | W | bit 0 START (absorb prefix and key; new signature). bit 1 FINISH. |
| 0x004 STATUS | R | bit 0 busy, 1 done, 2 error, 3 ready for data |
| 0x010, 0x014, 0x018, 0x01C DATA1..4 | W | absorb the low 1, 2, 3 or 4 bytes of the word (bits 7:0 first) |
| 0x100 + 4i DIGEST[i], i = 0..7 | R | signature bytes 4i..4i+3; zero until done |

Flow control: a DATA or FINISH write that arrives while the engine permutes
is held with `pready` low. Software can therefore write back to back and
never needs to poll between words. The bus answers at once with `pslverr` in
these cases:

* START while busy;
* DATA or FINISH when no signature is open;
* a read of a write-only register;
* an unknown offset.

There is no register that reads or writes the key.

## Running a test

On-chip test, as the self-test library does it:

1. Write a seed s_j to TPG.SEED. Write CTRL = START.
2. For each pattern:
   - read TPG.PATTERN;
   - apply the pattern to the component (for an IP on the bus, a write);
   - read the component's response;
   - append the response bits to a 32-bit word;
   - when the word is full, write it to DATA4.
3. Write the remaining bits with DATA1..4 (DATAn writes n bytes).
4. Write CTRL = FINISH and wait for STATUS.done (or `sig_done_o`).
5. Read DIGEST[0..7] and compare with the golden signature h_j stored for
   s_j.

Remote test: the tester sends s_j. The SoC runs the same steps and returns
h'_j instead of comparing it. The tester looks h'_j up in its dictionary of
signatures {fault-free, fault 1, fault 2, ...} for this device's key. A match
names the fault. A signature that is not in the dictionary is invalid.

The responses can also be collected in memory first and then streamed. The
engine then inserts its wait states at block boundaries.

## Design choices and departures

The published design fixes the following:

* the choice of KMAC128 with d = 256 and a 64-bit key;
* a degree-32 LFSR sized to the 32-bit bus;
* both units as memory-mapped IPs beside the processor;
* a key that is hidden from the system bus;
* software scheduling of the test.

Everything below is this design's own.

* **Bus protocol and address map.** An APB-style slave interface and 4 KiB
  windows at 0x1A12_0000 and 0x1A12_1000.
* **Feedback polynomial.** Only the degree (32) is fixed. x^32+x^22+x^2+x+1
  is a maximal-length choice.
* **Key formatting.** The signature follows SP 800-185 KMAC exactly. The key
  is absorbed as `bytepad(encode_string(K))` and the output length is
  appended. A plain `H(K || X)` would be shorter to describe but would not
  match standard KMAC software.
* **Byte granularity.** Responses are zero-padded to whole bytes. Two
  responses that differ only in how many trailing zero bits they have give
  the same signature. Software that needs to separate them should include
  the length in the response.
* **No cached keyed state.** Every signature re-absorbs the constant block
  and the key block (48 cycles). Caching the keyed state would save this
  time but would cost another 1600 flip-flops.
* **Size.** After coarse synthesis, `kmac_apb` has 1626 flip-flops. The
  reported FPGA implementation has 1646 registers for KMAC128. `tpg_lfsr`
  has 96 flip-flops (LFSR, seed read-back, COUNT), against 71 registers in
  the reported TPG. The COUNT register and the seed read-back are additions.
* **One round per cycle.** The Keccak core runs one round per cycle. No
  throughput was given. A wider unrolled core would shorten the 24-cycle
  permutation.
* **Optional LBIST path.** Logic BIST hardware could feed the engine as an
  optional extension. It is not included.

The following parts are outside this RTL, as ports:

* the processor and its self-test library;
* memory, which holds the seeds and golden signatures;
* the I/O link to the remote tester;
* the key store or key manager, whose key derivation is not specified;
* the components under test.

## Reproducing the benchmark compaction rates

The compaction rate of a 256-bit signature over an L-bit response is 1 - 256/L.
`tb_iscas85_lengths` streams responses of the eleven ISCAS-85 test sizes
through the SoC and checks each signature and rate:

| circuit | outputs x patterns | L (bits) | bytes | compaction |
|---|---|---|---|---|
| c17 | 2 x 7 | 14 | 2 | -1728.57 % |
| c432 | 7 x 63 | 441 | 56 | 41.95 % |
| c499 | 32 x 55 | 1760 | 220 | 85.45 % |
| c880 | 26 x 148 | 3848 | 481 | 93.35 % |
| c1355 | 32 x 100 | 3200 | 400 | 92.00 % |
| c1908 | 25 x 128 | 3200 | 400 | 92.00 % |
| c2670 | 140 x 444 | 62160 | 7770 | 99.59 % |
| c3540 | 22 x 264 | 5808 | 726 | 95.59 % |
| c5315 | 123 x 599 | 73677 | 9210 | 99.65 % |
| c6288 | 32 x 33 | 1056 | 132 | 75.76 % |
| c7552 | 108 x 455 | 49140 | 6143 | 99.48 % |

The engine has no length limit. The response contents in this testbench are
pseudo-random, because the benchmark netlists and patterns are not part of
the design. The exception is c17, whose six NAND gates are small enough to
model. `tb_hybrid_test_soc` runs the real c17 as a bus-attached IP under
test and checks the following:

* With 7 patterns, 17 of its 22 stuck-at faults change the response.
* Exactly those 17 change the signature.
* No two distinct responses share a signature.
* Diagnosis from the remote dictionary works.
* Another key gives other signatures.

## Simulation

All files are SystemVerilog 2017. The testbenches are self-checking. Each
prints `TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.
To build and run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    rtl/apb_pkg.sv rtl/keccak_pkg.sv tb/kmac_ref_pkg.sv \
    tb/tb_hybrid_test_soc.sv --top-module tb_hybrid_test_soc
./obj_dir/Vtb_hybrid_test_soc
```

| testbench | unit | what it checks |
|---|---|---|
| `tb_keccak_f1600` | permutation | The standard's zero-state answer (lane 0 = F1258F7940E1DDE7), random states against the model, and the 24-cycle latency. |
| `tb_kmac128` | engine | The SP 800-185 sample with a 256-bit key instance. Lengths 0 to 400 bytes with the 64-bit key, including length bytes across a block. Also the 54-cycle start latency, stalls, the zero digest before done, and the error on a block-crossing word. |
| `tb_kmac_apb` | engine registers | Signatures through the bus, wait states, STATUS, error responses. |
| `tb_tpg_lfsr` | TPG | Patterns against the bit recurrence s[t] = s[t-32]^s[t-22]^s[t-2]^s[t-1]. Also seed read-back, COUNT, and the refused zero seed. |
| `tb_apb_interconnect` | decoder | Routing, the default port, wait states and errors passed through. |
| `tb_hybrid_test_soc` | top, default parameters | The full on-chip and remote flows with c17 and fault injection. |
| `tb_iscas85_lengths` | top, default parameters | The benchmark response sizes and their compaction rates. |

The expected values come from `tb/kmac_ref_pkg.sv`. It is a separate
Keccak/KMAC model with a different structure from the RTL:

* round constants generated by the standard's rc(t) LFSR;
* rho offsets generated by their recurrence;
* a 5x5 lane array;
* the whole KMAC input built as one byte string.

The CPU is `tb/apb_master_bfm.sv`, a bus-functional model.
`tb/c17_apb_dut.sv` is the c17 circuit with stuck-at fault injection on its
11 nets.

Parameters: `KEY_BITS` (default 64; any multiple of 8 whose key block fits in
168 bytes) and `DIGEST_BITS` (default 256; up to 1344, a single squeeze) on
`hybrid_test_soc`, `kmac_apb` and `kmac128`. `WIDTH` and `TAPS` on
`tpg_lfsr`. `NSLV`, `BASE` and `MASK` on `apb_interconnect`.
