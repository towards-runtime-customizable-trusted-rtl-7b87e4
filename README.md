# A TrustZone-protected PL for a runtime-customizable FPGA-SoC TEE

A cloud FPGA-SoC (here a Zynq UltraScale+ class device) can host a trusted
execution environment that a remote user customizes at run time: the user
proves the device is genuine, loads an encrypted bitstream with their own
accelerators, and then calls those accelerators with private data. The trusted
OS (OP-TEE) on the Arm cores does the cryptography and the reconfiguration.
The programmable logic (PL) has two jobs:

1. **Give the trusted OS a device fingerprint and a source of entropy.** A
   ring-oscillator PUF (physical unclonable function) answers challenges
   with bits that depend on the silicon of this one chip. The answers to known
   challenges authenticate the device. Answers to pseudo-random challenges
   seed the attestation key pair.
2. **Keep the normal world out.** ARM TrustZone marks every bus access as
   secure or non-secure. The PL peripherals (the PUF and the user's IPs) are
   declared secure, so only the trusted OS can use them. Software in Linux,
   which the cloud operator controls, can neither query the PUF nor invoke the
   user's IPs.

This repository holds SystemVerilog for that PL side: the AXI4-Lite
interconnect with TrustZone slave protection, the RO-PUF and its AXI
peripheral, and the top that wires them as in the reference implementation.
It also holds self-checking testbenches for each part and for the whole design.
The processing system, the firmware, the trusted OS calls and the user IPs are
not hardware described here (see *What is outside this RTL*).

## System map

```
   PS (Arm cores: OP-TEE secure world, Linux normal world)
        |  AXI4-Lite, 32-bit, AxPROT[1] = non-secure bit
        v
 +----------------------------- rctee_pl_top -----------------------------+
 |  axi_tz_interconnect   slot 0  0xA000_0000  --> ro_puf_axi (RO-PUF)     |
 |  (all slots secure)    slot 1  0xA001_0000  --> ip1_axi_*  (user IP 1)  |
 |                        slot 2  0xA002_0000  --> ip2_axi_*  (user IP 2)  |
 +------------------------------------------------------------------------+
```

The three slaves and their order are those of the reference implementation:
an RO-PUF and two secure user IPs behind one AXI interconnect. The 32-bit
widths, the base address and the 64 KiB slots are choices of this design.

AXI ports are carried as two packed structs from `rctee_pkg`. `axil_req_t`
holds everything the master drives and `axil_rsp_t` everything the slave
drives.

## TrustZone in the PL: two checks

AXI carries the world of each access in AWPROT (writes) and ARPROT (reads).
Bit 1 set means *non-secure*. The design checks it in two places:

* **Interconnect (`axi_tz_interconnect`).** `SECURE_MASK` declares each slot
  secure or not. A non-secure access to a secure slot is answered by the
  interconnect itself, with DECERR (zero data for a read), one cycle after it
  is accepted. It never appears on the slave port. An address outside every
  slot also gets DECERR. This is the mechanism the TEE relies on. Concurrent
  assertions in the module state that no non-secure valid ever reaches a
  secure slot.
* **Peripheral (`ro_puf_axi`).** The PUF also refuses non-secure accesses,
  with SLVERR. A refused write is dropped and a refused read returns zero. So
  the PUF stays closed even if the interconnect is misconfigured. This second
  check is this design's addition.

The interconnect has one write engine and one read engine. Each handles one
transaction at a time. AW and W are taken together in one cycle; that is
enough for the single-beat accesses of a CPU master port. An allowed access
costs two cycles more than the slave's own latency.

## The ring-oscillator PUF

### Principle

N nominally identical ring oscillators run at slightly different
frequencies, because of manufacturing variation. A challenge picks two of
them through two N-input multiplexers. Each multiplexer feeds a counter, and
both counters count oscillations over the same fixed interval. A comparator
then answers 1 when the first oscillator is the faster one. The answer to a
given challenge is stable on one chip but unpredictable from chip to chip.

### How the core runs an evaluation (`ro_puf_core`)

```
start ─► CLEAR (2 cycles) ─► COUNT (WINDOW_CYCLES) ─► SETTLE (SETTLE_CYCLES) ─► COMPARE (1) ─► done
          counters cleared    selected pair enabled    oscillators stopped       response latched
```

* The challenge is `{sel_b, sel_a}` with `SEL_W = log2(NUM_RO)` bits each. It
  is latched at `start`, so the multiplexers never switch while an oscillator
  runs.
* Only the two selected oscillators are enabled, and only during COUNT. This
  keeps the other oscillators from heating the fabric and from coupling into
  the pair.
* The counters (`ro_counter`) are clocked by the oscillator outputs
  themselves. They need no synchronizer, because the bus clock reads them only
  after SETTLE, when the oscillators have stopped and the counts are frozen.
  The counters saturate instead of wrapping, so a very fast oscillator never
  looks slow.
* `done` rises exactly `2 + WINDOW_CYCLES + SETTLE_CYCLES + 1` clock edges
  after the edge that sampled `start`. With the defaults (1024, 4) that is
  1031 cycles, about 10.3 µs at 100 MHz. A `start` while busy is ignored.
* `response = (count_a > count_b)`. Equal counts give 0.
* Throughput: one bit per 1031 cycles. A 256-bit key seed therefore needs
  about 2.6 ms of PUF time at 100 MHz, plus the bus polling.

### The peripheral (`ro_puf_axi`)

| offset | name   | access | meaning |
|--------|--------|--------|---------|
| 0x00   | CTRL   | W      | bit 0 = 1 starts an evaluation |
| 0x04   | CHAL   | R/W    | challenge: bits [SEL_W-1:0] = RO a, next SEL_W bits = RO b |
| 0x08   | STATUS | R      | bit 0 busy, bit 1 response valid (cleared by a start) |
| 0x0C   | RESP   | R      | bit 0 response |

A write is accepted in the cycle that AWVALID and WVALID are both high, and
BVALID follows one cycle later. Reads work the same way. One evaluation gives
one bit. Software builds a seed or an authentication answer from many
evaluations.

### The oscillators are a model

A ring oscillator is a combinational loop, and a cycle-based simulator cannot
run it. `ro_cell` is therefore a **behavioural model**: while enabled, it
toggles after `HALF_PERIOD_NS`. `ro_puf_axi` gives every cell its own half
period: `RO_HALF_PERIOD_NS` plus a spread of 0 to `RO_SPREAD_PS - 1` ps. The
spread comes from a fixed integer hash of the oscillator index and
`DEVICE_SEED`, so `DEVICE_SEED` stands for one piece of silicon. On an FPGA,
replace `ro_cell` with an odd chain of inverting LUTs behind an enable gate,
kept from optimization and placed identically for every oscillator. Synthesis
tools that ignore delays warn about a combinational loop in `ro_cell`. That
loop is the oscillator itself.

Two pairs whose half periods differ by only a picosecond or two can count
equal or flip within the window. The testbenches skip pairs less than 5 ps
apart. This is the same filtering that an enrolment of challenge/response
pairs would do.

## Invoking a user IP

The trusted OS calls any user IP in one fixed format, so loading a new IP
needs no change to the OS. The OS writes the input words to the IP's input
addresses. It then starts the IP and polls an execution-state address until
the IP reports completion. Finally it reads the output addresses. In this
hardware the format shows up only as the address map of each user slot. The
format is a software convention, and the user IP implements the registers. The
end-to-end testbench uses a behavioural IP (`tb/secure_ip_model.sv`) with
this layout:

* inputs at 0x00–0x1C;
* state at 0x40: write 1 to start; it reads 0 when idle, 1 while running and
  2 when done;
* outputs at 0x80 and 0x84.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_ro_cell` | no edges while disabled, the programmed period, a clean stop, restart |
| `tb_ro_counter` | counting, the asynchronous clear, and saturation of a 4-bit instance |
| `tb_ro_puf_core` | Oscillators with periods set by the testbench. Checks the counts over the window (±1), the response, that only the selected pair runs and for exactly `WINDOW_CYCLES`, the exact latency, and that a start while busy is ignored |
| `tb_ro_puf_axi` | Register access. Challenge/response against a reference model of the device's oscillators. Evaluation time. Every non-secure access gets SLVERR and has no effect. A second instance with another `DEVICE_SEED` follows its own oscillators and answers some challenges differently |
| `tb_axi_tz_interconnect` | 300 random accesses over secure and non-secure slots and both worlds, against a scoreboard. Checks access counters in the slaves (a refused access never reaches one), AxPROT passed through, slave errors forwarded, and DECERR outside the window |
| `tb_rctee_pl_top` | The whole design at default parameters, from seed generation through authentication, normal-world attacks and invocation of both user IPs to unmapped accesses. Each mechanism is counted and must occur |

The end-to-end test runs the top with all parameters at their defaults: 16
oscillators and a 1024-cycle window. It takes a few seconds.

To simulate with Verilator (5.x, `--timing` is needed for the oscillator
model and the testbenches):

```
verilator --binary --timing --assert -Irtl -Itb rtl/rctee_pkg.sv tb/tb_rctee_pl_top.sv \
          --top-module tb_rctee_pl_top -Mdir obj && ./obj/Vtb_rctee_pl_top
```

Replace the testbench name to run any other. Every file starts with
`timescale 1ns/1ps`.

## Parameters

| parameter | default | where | origin |
|-----------|---------|-------|--------|
| `NUM_RO` (N) | 16 | PUF | The scheme leaves N open; 16 is this design's choice |
| `WINDOW_CYCLES` | 1024 | PUF | The scheme says only "fixed interval" |
| `SETTLE_CYCLES` | 4 | PUF | this design |
| `COUNT_W` | 16 | PUF | this design (about 3,400 counts per window at the defaults) |
| `RO_HALF_PERIOD_NS`, `RO_SPREAD_PS` | 1.5 ns, 100 ps | oscillator model | this design |
| `DEVICE_SEED` | 0x12345678 | oscillator model | this design |
| `NUM_SLAVES` | 3 | interconnect | RO-PUF plus two user IPs, as in the reference implementation |
| `SECURE_MASK` | all ones | interconnect | every PL slave is secure, as in the reference implementation |
| `BASE_ADDR`, slot span | 0xA000_0000, 64 KiB | interconnect | this design |

## How far it follows the scheme, and where it departs

Taken from the scheme:

* the PUF structure: N oscillators, two counters, one comparator, two
  multiplexers, the challenge as the select lines, and the response telling
  which oscillator is faster;
* the PUF as an AXI peripheral with AWPROT/ARPROT;
* an AXI interconnect that declares its slaves secure;
* the three-slave PL: the RO-PUF and two secure user IPs;
* that only secure-world software reaches any of them.

This design's own choices:

* the register map and the PUF controller's sequence, including enabling only
  the selected pair and the settle phase;
* saturating counters;
* the widths, the window length and N;
* the address map;
* the DECERR/SLVERR response codes;
* the second TrustZone check inside the PUF;
* the simple single-transaction interconnect, which stands in for a vendor
  interconnect IP.

Limits:

* The oscillators are a timing model. A synthesized PUF needs real LUT ring
  oscillators with placement constraints. The model's spread says nothing
  about the reliability or uniqueness of a real chip.
* No error correction or debiasing is applied to responses. The scheme
  doesn't describe any, and a key derived from the PUF would need it.
* In the reference system the user's full bitstream replaces the whole PL at
  run time, this design included. Here the two user-IP ports are kept at the
  top so that the interconnect can serve them. The user's own design has to
  provide the equivalent protection.

## What is outside this RTL

These parts of the TEE are not logic designed by the scheme:

* the Arm cores, the PMU, the 256 KiB OCM, and the configuration security unit
  with its AES/SHA3/RSA engines, DMA and PCAP configuration port;
* the eFuse/BBRAM key storage;
* the secure monitor, the OP-TEE system calls and the management application;
* the Linux proxy server;
* the user IPs, for example the LeNet accelerator used to evaluate the scheme.

The PS master port and the two user-IP ports are therefore ports of
`rctee_pl_top`.
