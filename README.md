# EDAP memory-side trusted footprint

This design lets a processor compute on data whose owner does not trust the
platform. Outside the core, every 128-byte cache line exists only as
ciphertext plus an 8-byte digest. The line is XTS-AES encrypted with the
data owner's key pair K = <K1, K2>, using a tweak made from the session
identifier (SEID) and the line's effective address. Cleartext exists only in
the L1 caches and the core, and only while the authorized program runs in
problem state.

An encryption engine sits between the L2 and the L1 caches. It checks and
decrypts every fill, and it encrypts and signs every writeback. On every
transfer of control into or out of the program, both L1s are cleared and the
engine is switched off or on. Supervisor code therefore only ever sees
ciphertext. A line that was altered, moved to another address, or belongs
to another session fails its digest, and the fill raises an integrity fault
instead of returning data.

This is the Encrypted Data Processing (EDAP) architecture's L2/L1
configuration: the one that was evaluated at about 6% average slowdown on
commercial workloads.

## Line protection

The line is split into eight 16-byte sections P0..P7. X = <SEID[63:0], EA[63:7], 0000000>.

    T0 = E_K2(X)             T_i = T0 * alpha^i     (alpha = x in GF(2^128))
    C_i = E_K1(P_i ^ T_i) ^ T_i
    H  = E_K2(0)
    Y  = X*H ;  Y = (Y ^ C_i)*H for i = 0..7
    D  = leading 64 bits of (Y ^ T0)

- The XTS part follows IEEE 1619 conventions.
- The digest multiply uses GCM's bit order.
- Because X carries the SEID and the address, the digest binds each line to
  its session and its place.

## Blocks

| Module | Role |
|---|---|
| `aes_pkg` | AES parameters (`KEY_BITS` = 128 or 256), S-box computed in GF(2^8), round functions |
| `edap_pkg` | Line types, GF(2^128) multiply, alpha step, tweak layout |
| `aes_key_expand` | Key schedule, one word per clock; 40 cycles for AES-128 |
| `aes_core` | One AES unit, encrypt or decrypt; 2 cycles per round, 20 cycles per block |
| `xts_line` | Nine AES units: one for the tweak and one per section. The tweak can start ahead of the data. |
| `ghash_chain` | Digest chain; one GF(2^128) multiply per clock, 8 cycles per line |
| `edap_crypto_engine` | Fill path (L2 read → decrypt + digest check → L1) and writeback path (encrypt → sign → L2 write) |
| `edap_key_store` | SEID, K1 and K2 registers. An install sequencer expands both keys and computes H; keys are usable 62 cycles after install. |
| `edap_l1_cache` | EA-indexed cleartext L1 with the access guard, clear, acquire and release |
| `edap_ctl` | Transfer-of-control sequencer: clear, drain, then engage or disengage |
| `edap_top` | Connects the blocks: 32 kB 8-way L1D, 48 kB 6-way L1I, 128-byte lines |

## Timing

**Fill.** The engine starts encrypting the tweak as soon as it takes a fill,
so tweak work overlaps the L2 read. When the L2 line arrives, the eight
section decryptions run in parallel. Within the same 20 cycles, the digest
chain runs over the arriving ciphertext. So `fill_resp_valid` comes exactly
20 cycles after the L2 data, as long as the L2 takes at least about 20
cycles. With a faster L2, the fill waits for the tweak, up to 41 cycles from
request.

**Writeback.** A writeback is accepted into a one-line buffer, then encrypted
and signed (about 50 cycles), then written. Stores do not wait for it. A
fill for a line still in that buffer is stalled, and `fill_hazard_stall`
reports this.

**L1 hits.** The response comes on the clock edge after the request is
accepted.

## Rules enforced

- **Access guard.** While the engine is engaged, privileged requests to
  either L1 are refused (`denied`) and return no data.
- **Integrity.** A fill whose digest does not match returns `fault` with
  zero data, and the line is not installed. `integrity_fail` pulses.
- **Trap.** A trap raises `hold` and clears both L1s: dirty lines are
  written back encrypted, then every line is invalidated and zeroed. The
  sequencer then waits for the engine's writeback buffer to empty, and only
  then disengages the engine.
- **Resume.** Resume does the same clear, then engages the engine. Resume
  without installed keys is refused.
- **Acquire** (`OP_ACQUIRE`) gives the program a zeroed, dirty line without
  reading memory. The line is later written back encrypted.
- **Release** (`OP_RELEASE`) drops the L1 copy and writes an all-zero line
  with a zero digest. That memory can be handed back to the system.
- **Disengaged.** The engine passes lines unchanged and writes a zero
  digest.
- **Zeroize.** Erases all key material.

## Choices beyond the source description

- **Tweak layout and digest.** The tweak layout, keeping the leading 64 of
  the 128 digest bits, and the digest being carried as a side field of each
  L2 line are all this design's choices.
- **Cache geometry.** The L1 associativity (8-way D, 6-way I) and
  round-robin replacement are assumed; only the sizes are given. The L1s
  are blocking, and the core supplies the real address with each request.
- **Clearing.** The whole L1s are cleared on every transfer. Per-process
  clearing is not done.
- **Buffers and arbitration.** There is one writeback buffer and one L2 read
  outstanding. The data cache wins over the instruction cache for fills.
- **Key arrival.** Keys arrive already unwrapped. The public-key unwrap and
  the session-key stream receiver are not built: their algorithms and
  framing are not specified. The same holds for the register-state hash
  table and for Load-and-Hide / Store-and-Clear, which act on a register
  file that is not part of this design.
- **Core and memory.** The core, L2 and memory are outside the design. The
  testbenches use a behavioural L2 (`tb/l2_model.sv`) that stores a line
  and a digest per real address, with configurable latency.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference model
(`tb/tb_ref_pkg.sv`) is written separately from the RTL, using a table-free
S-box built a different way, a bit-reversed carry-less multiply for GCM, and
its own XTS.

| Testbench | Checks |
|---|---|
| `tb_aes_key_expand`, `tb_aes_core` | FIPS-197 vectors, random keys and blocks, 40-cycle and 20-cycle timing |
| `tb_ghash_chain` | GCM test case, 8-cycle latency |
| `tb_xts_line` | IEEE 1619 vectors, random lines, early-tweak and same-cycle-tweak latencies |
| `tb_edap_crypto_engine` | 20-cycle fill; changed digest, changed ciphertext and relocated lines refused, writeback ciphertext and digest, erase, raw mode, hazard |
| `tb_edap_key_store` | Expanded keys and H against the model, 62-cycle install, zeroize |
| `tb_edap_l1_cache` | Random traffic against a memory model, denial, faults, acquire / release, clear |
| `tb_edap_ctl` | Ordering of clear, drain and engage; refusal without keys |
| `tb_edap_top` | End to end on small caches. Counts each mechanism and fails if any count is zero: key install, refused resume, clears, encrypted fills and writebacks, integrity faults, denials, acquire, release, hazards, instruction fetches. |
| `tb_edap_top_full` | The same flow on the default full-size caches |

Example run with Verilator:

    verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_edap_top \
      rtl/aes_pkg.sv rtl/edap_pkg.sv rtl/*.sv tb/tb_ref_pkg.sv tb/l2_model.sv tb/tb_edap_top.sv
    ./obj_dir/Vtb_edap_top
