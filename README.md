# SAFE-SiP chiplet authentication in SystemVerilog

A System-in-Package (SiP) is assembled from chiplets made by different vendors,
usually in a packaging house nobody fully trusts. The integrator wants to know
at every boot that each chiplet is the one the vendor shipped. The vendor does
not want its chiplet signature exposed, either to the integrator or to anyone
probing the interposer. SAFE-SiP (Tashdid et al., GLSVLSI 2025) settles this
with a small multi-party computation:

* every vendor chiplet **garbles** its signature *S* with secret random labels,
  so what leaves the die is *G(S)*, never *S*;
* the chiplet also **hashes** *G(S)* with SHA-256 for attestation;
* a trusted **in-house chiplet** owned by the integrator hashes all garbled
  signatures together, *H = SHA-256(G(S1) ‖ G(S2) ‖ G(S3) ‖ G(S4))*, and
  **evaluates** the results against reference values;
* the first successful boot stores *H* in **one-time-programmable (OTP)**
  memory. Every later boot re-computes it and compares. A chiplet that
  mismatches is disabled, and the package only boots if all of them pass.

The transport uses the chiplets' existing IEEE 1500 test wrappers. The wrapper
instruction register (WIR) starts authentication. The wrapper boundary register
(WBR) carries the response. No separate security chiplet is added.

This repository is RTL for that scheme. It has four garbled vendor chiplets,
the in-house chiplet and the secure-boot sequencer. It is complete enough to
enroll a package, re-authenticate it after a power cycle, single out a
counterfeit chiplet and survive a chiplet that never answers.

## Block diagram

```
           secure_boot_ctrl  (WIR/WBR controls broadcast to all chiplets)
             |   |    ^ auth_ready[i]                  | eval_start / eval_done
             v   v    |                                v
 +---------------------------+   interposer   +-------------------------------+
 | garbled_chiplet  (x4)     |   wso -> wsi   | inhouse_chiplet               |
 |  signature ->garbling_circ|--------------->|  ieee1500_wbr x4 (receive)    |
 |  TRNG ---^      |         |                |  sha256_core over G1..G4 -> H |
 |             sha256_core   |                |  auth_eval   <->  otp_memory  |
 |  ieee1500_wir  ieee1500_wbr                |                               |
 +---------------------------+                +-------------------------------+
```

| File | Role |
|---|---|
| `rtl/safe_sip_pkg.sv` | sizes (W = 64, kappa = 64, four chiplets), WIR instruction codes, SHA-256 constants, cycle-count helpers |
| `rtl/sha256_core.sv` | FIPS 180-4 SHA-256 of a fixed-length message, one round per clock |
| `rtl/garbling_circuit.sv` | signature bit → kappa-bit label |
| `rtl/ieee1500_wir.sv`, `rtl/ieee1500_wbr.sv` | wrapper instruction and boundary registers |
| `rtl/garbled_chiplet.sv` | what a vendor adds to its chiplet |
| `rtl/otp_memory.sv` | write-once store for the enrolled values |
| `rtl/auth_eval.sv` | the Eval step: compare, enable, ask for enrollment |
| `rtl/inhouse_chiplet.sv` | the integrator's evaluator |
| `rtl/secure_boot_ctrl.sv` | boot and provisioning sequences |
| `rtl/safe_sip_top.sv` | the package |

## The garbling, and why the labels are fixed

Signature bit *i* becomes a kappa-bit label:

```
b_i = 0  ->  r_i  || L0
b_i = 1  ->  ~r_i || L1
```

*r_i* is one random masking bit per position. *L0* and *L1* are two random
labels of kappa−1 bits, shared by all positions. So a W-bit signature becomes
*g = W·kappa* bits: 4096 bits at the defaults. Label *i* sits in
`garbled[i*K +: K]`, with the masking bit on top.

The published description has the labels come from the chiplet's TRNG. Taken
literally, that means new labels at every boot. But re-authentication compares
this boot's hash with a stored one, and fresh labels would change the hash
every time. This implementation draws the labels from the TRNG **once**, on the
`WS_REKEY` wrapper instruction, which the vendor issues when enrolling the
chiplet. After that the labels are held. The label registers have no reset, to
stand in for the non-volatile storage a real chiplet would need. The TRNG
itself is outside the design: its bits are inputs (`trng_r`, `trng_l0`,
`trng_l1`).

The signature generator (the vendor's watermark circuit) is also outside. It
enters as the `signature` input.

## What travels over the interposer

Each chiplet answers with `{G(S), SHA-256(G(S))}`: 4096 + 256 = 4352 bits.
The in-house chiplet needs the garbled values to form *H*. It uses the
per-chiplet digests to find *which* chiplet failed, because one mismatch in *H*
would not say. The response is shifted out serially through the chiplet's WBR,
MSB first. The in-house chiplet has one receiving WBR per chiplet. All four
chiplets shift at the same time, so a readout costs 4352 cycles regardless of
the chiplet count.

## The secure boot sequence

`secure_boot_ctrl` drives one set of IEEE 1500 controls (`select_wir`,
`shift_wr`, `capture_wr`, `update_wr`, serial data), shared by all chiplets.
A boot (`boot_req` with `provision` low) goes:

1. `secure_boot` rises. `WS_AUTH` is shifted into every WIR (3 shift cycles
   and 1 update).
2. Each chiplet garbles (1 cycle) and hashes (`sha_cycles(4096)` = 594
   cycles). It raises `auth_ready` 597 cycles after the update.
3. The controller waits until all chiplets are ready or `TIMEOUT` cycles pass
   (default 1204). A chiplet that stays silent is marked not `responsive` and
   will be disabled. Because of this, one dead or hostile chiplet cannot block
   the boot of the others.
4. Capture, 4352 shift cycles, update: the responses are now in the in-house
   chiplet.
5. The in-house chiplet computes *H* (`sha_cycles(16384)` = 33 blocks × 66 =
   2178 cycles). `auth_eval` then decides:
   * **not yet enrolled** (OTP blank): chiplet *i* is enabled if its digest
     equals `vendor_digest[i]`, the value its vendor handed over. If all pass,
     the package is authenticated and *H* plus the four digests are written to
     OTP, one word per cycle.
   * **enrolled**: chiplet *i* is enabled if its digest equals the OTP copy.
     The package is authenticated if all are enabled **and** *H* equals the
     stored *H*.
6. `WS_BYPASS` goes back into the WIRs. `boot_done` pulses, `boot_ok` and
   `chiplet_en` hold the result, and `secure_boot` falls.

`provision` high instead shifts `WS_REKEY` only, so that each chiplet samples
its garbling labels.

At the default sizes a boot takes about 7145 cycles: 7148 for the enrolling
boot and 7143 for a later one. The outputs `hash_out` and `hash_otp` are the
*H* just computed and the stored *H*.

## Timing summary (defaults W = kappa = 64, four chiplets)

| Step | Cycles |
|---|---|
| WIR load | 4 |
| chiplet garble + hash + ready | 597 |
| response readout (capture, shift, update) | 4354 |
| in-house H + evaluation | 2180 (+5 when OTP is programmed) |
| return to bypass, finish | 5 |

Each SHA-256 block costs 66 cycles: one load, 64 rounds, one add.

## Where this differs from the published design, and why

* **Latency.** The published timing table gives 96, 160 and 192 clock cycles
  of authentication latency for kappa = 16, 32 and 64. Here a chiplet alone
  needs 201, 333 and 597 cycles (garbling plus SHA-256 over the W·kappa-bit
  garbled value), and a full boot needs 2096, 3780 and 7148. The publication
  does not say how its SHA-256 unit is organised or which steps its count
  covers. This implementation hashes the whole garbled value with a
  straightforward iterative core and moves the responses serially. Either
  choice could be replaced to save cycles.
* **Width of the masking bit.** The text calls *r* "a random bit" and also
  says kappa defines "the length of labels r and L". Here *r* is one bit and *L*
  is kappa−1 bits, so each label is exactly kappa bits and *g = W·kappa* holds
  as stated.
* **Fixed labels** (see above).
* **Things the publication leaves open** and that are chosen here:
  * the response format `{G, digest}` and the serial WBR transport;
  * the instruction codes `WS_AUTH` = 001 and `WS_REKEY` = 010;
  * the ready handshake and the timeout;
  * the OTP word map (word 0 = *H*, word *i*+1 = digest of chiplet *i*);
  * the concatenation order of *H* (chiplet 1 in the top bits);
  * the asynchronous active-low resets;
  * the return to `WS_BYPASS`.
* **What the WBR carries.** The publication says the boundary register
  also supplies handshake signals and inputs for signature generation. Here
  the signature generator is outside the design and its signature is a
  port, so the WBR carries only the response. The handshake is a separate
  `auth_ready` line per chiplet.
* **Not included:**
  * the vendors' signature generators and the TRNGs (inputs instead);
  * the optional analog-to-digital wrapper for analog IP, which is only named;
  * the interposer, which is just wiring.

  The area and power overhead tables concern the host designs the logic is
  added to and are not reproduced. For the fault-sensitivity figure, see the
  next section.

## Fault sensitivity

The published evaluation plots the Hamming distance between fault-free and
faulty outputs for kappa = 8, 16, 32 and 64 at W = 64, and for W = 64, 128,
256 and 512 at kappa = 64. It reports values from 25.59 % to 49.41 %, rising
with size, but does not say where the faults go or which output is compared.
`tb_workload_fault_hd` runs the vendor data path (garbling followed by
SHA-256) at all seven sizes with a fault model of its own:

* one signature bit flipped before garbling;
* one bit of *G* flipped on its way into the hash.

Measured over eight trials per size:

| size | HD of *G* | HD of digest, signature fault | HD of digest, *G* fault |
|---|---|---|---|
| W = 64, kappa = 8 | 1.17 % | 50.92 % | 50.09 % |
| W = 64, kappa = 16 | 0.29 % | 49.75 % | 49.60 % |
| W = 64, kappa = 32 | 0.63 % | 49.36 % | 50.14 % |
| W = 64, kappa = 64 | 0.73 % | 51.46 % | 52.00 % |
| W = 128, kappa = 64 | 0.37 % | 50.87 % | 50.78 % |
| W = 256, kappa = 64 | 0.20 % | 51.02 % | 50.48 % |
| W = 512, kappa = 64 | 0.10 % | 49.75 % | 50.09 % |

Every fault changes the digest, and the digest moves by about half its bits
at every size. Those are the properties that matter, because the evaluator
compares digests. The garbled value itself barely moves: a flipped signature
bit swaps exactly one label, so it changes 1 + popcount(L0 xor L1) bits out
of W·kappa. The published curve is therefore not reproduced. It must come
from a different fault model, which the publication does not give.

## Trust in the RTL

Every module has a self-checking testbench in `tb/` that compares against
values computed independently:

* `tb/sha256_ref_pkg.sv` is a separate behavioural SHA-256. It is checked
  against the FIPS 180-4 examples through `tb_sha256_core`.
* `tb/safe_sip_ref_pkg.sv` garbles and hashes straight from the definitions.

The testbenches check cycle counts wherever a latency is defined.
`tb_safe_sip_top` runs the whole package at the default sizes with no
parameter overrides. It covers provisioning, enrollment, re-authentication
after a reset, a counterfeit chiplet 2 (only that chiplet disabled, boot
refused), a chiplet held in reset (timeout) and recovery. It counts each of
these events and fails if one never happened.

`tb_workload_kappa` runs the same flow at kappa = 16 and 32 and prints the
cycle counts quoted above. `tb_workload_fault_hd` is the fault-sensitivity
sweep described above.

Assertions check two things:

* the wrapper controls (at most one of shift, capture and update at a time);
* the chiplet's hash is never restarted while it is still running.

## Simulating

Every testbench ends with a line `TB_RESULT checks=N failures=M`. With plain
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_safe_sip_top \
  -y rtl -y tb +libext+.sv rtl/safe_sip_pkg.sv \
  tb/sha256_ref_pkg.sv tb/safe_sip_ref_pkg.sv tb/tb_safe_sip_top.sv -o sim
./obj_dir/sim
```

Replace the top module and its file to run another testbench. The full-size
end-to-end test builds in about a minute and runs in seconds.

To change the configuration, set `W`, `K` (kappa) and `NC` on `safe_sip_top`.
The SHA message lengths, WBR length and timeout follow from them. The message
bit count `W*K` must be a multiple of 8 for the reference model in `tb/`;
the RTL itself has no such limit.

The OTP model starts blank through declaration initialisers. A real package
would use a fuse macro with the same write-once, read-parallel behaviour.
