# InterPUF interposer authentication fabric (SystemVerilog)

This is RTL for an active interposer that proves it is genuine and then authenticates the chiplets mounted on it. It follows the architecture in *InterPUF: Distributed Authentication via Physically Unclonable Functions and Multi-party Computation for Reconfigurable Interposers*. The interposer's routing fabric itself is the PUF:

- Two routes through the mesh race each other, and an arbiter records which one arrives first.
- Many races are repeated and voted, and the stable outcomes are hashed into a 256-bit route digest R\*.
- A separate, golden-free self-check (the Z\* sweep) looks for extra delay, such as a hardware Trojan inserted into a route.
- Each chiplet commits a hash of its identity bound to R\*. Each run is bound to a per-session salt.
- A verifier compares commitments, issues tokens, rejects replays, rate-limits failures, applies a quorum policy and keeps an audit log.

The paper evaluates the commitment check inside a Yao garbled circuit (two-party computation with oblivious transfer). That cryptographic layer is **not** built here. The same function is computed in the clear by `auth_verifier`.

## Block map

| module | role | kind |
|---|---|---|
| `interpuf_pkg` | SHA-256 constants, field widths, padding helpers, enums | package |
| `sha256_core` | one SHA-256 block compression, 96 cycles | RTL |
| `router_tile` | 5-port switchbox (N, E, S, W, local), registered outputs | RTL |
| `interposer_mesh` | MESH×MESH grid of router tiles, one local port per tile | RTL |
| `delay_chain_model` | delay of one N-stage crossbar route (crossed stages are slower) | behavioural model |
| `diff_arbiter_model` | race arbiter at the sink, with noise | behavioural model |
| `challenge_obfuscator` | keyed invertible GF(2) map applied to the challenge | RTL |
| `challenge_scheduler` | turns (pair, permutation or Z) into route A/B stage settings in one cycle | RTL |
| `majority_voter` | K-fold majority vote, flip count, stability flag | RTL |
| `response_obfuscator` | gathers 256 stable bits and hashes them into R\* | RTL |
| `zstar_monitor` | stores each pair's Z\* at enrollment; flags drift and population outliers in the field | RTL |
| `auth_controller` | sequencer for enroll / verify / Z\*-check commands | RTL |
| `session_binder` | salt s = SHA256(R\* ‖ ch ‖ Epoch) | RTL |
| `chiplet_enc` | chiplet-side G'ᵢ = SHA256(IDᵢ ‖ SIGᵢ ‖ R\* ‖ EnrollTag) | RTL |
| `auth_log` | ring buffer of (i, ch, Epoch, Nonce, T'ᵢ) | RTL |
| `auth_verifier` | commitment store, bᵢ, token T'ᵢ, replay, lockout, quorum | RTL |
| `interpuf_top` | wires all of the above; NUM_CHIPLETS chiplet hashers | RTL |

The two behavioural models stand in for analog behaviour: wire and switch delay, and the arbiter's metastable race. They are synthesizable arithmetic, but they are not a physical implementation.

## How the PUF works

**Routes.** A path pair is two routes, A and B. Each has `N_STAGES = 32` crossbar stages. Each stage is either straight or crossed, and a crossed stage adds delay. `delay_chain_model` returns, for each route, the sum over its stages of a nominal delay plus a per-device offset. The offset comes from a hash of (DEVICE_SEED, route, pair, stage). So two "identical" routes differ only through this modelled process variation. `extra_dly` adds hidden delay, which is how a Trojan is modelled.

**Candidates.** There are `NUM_PAIRS = 80` pairs × `NUM_PERMS = 8` permutations, giving 640 candidate bits. This is the top of the paper's 40–80 pairs × 8 range. For candidate j = pair·8 + perm:
- The scheduler forms c_j = ch XOR (j · 0x9E3779B9).
- It passes c_j through `challenge_obfuscator`: a rotation, a polarity XOR, then y = f XOR ((f << 1) AND taps), which is invertible.
- The result drives both routes of the pair.

**Evaluation timing.** One race takes 6 cycles: 1 scheduling cycle and 5 evaluation cycles, as in the paper's latency breakdown. The arbiter is sampled in the fourth cycle, and its result arrives one cycle later. Each candidate is raced K = 16 times. `majority_voter` gives the majority bit, and the bit counts as stable when at most `MAX_FLIPS = 2` outcomes disagree. One more cycle is spent judging the bit, so each candidate takes 16·6 + 1 = 97 cycles.

**Enrollment (`CMD_ENROLL`).**
- A candidate is kept only if all 16 outcomes agree (`ENROLL_MAX_FLIPS = 0`). This is stricter bit pre-selection, so that field re-reads rarely lose a bit.
- The mask of kept candidates is `helper_out`. It is non-secret helper data, meant for NVM.
- The first 256 kept bits are hashed into R\*.
- `enroll_ok` requires at least 256 kept bits.

**Field verify (`CMD_VERIFY`).**
- Only the helper-mask candidates are re-evaluated.
- `puf_ok` = every one of them is still stable AND the new digest equals `rstar_golden`.

**Golden-free self-check (`CMD_ZCHECK`).**
- For each pair, route A is all crossed. Route B has its first z stages straight and the rest crossed, with z swept from 0 to N.
- Z\* is the first z at which B wins stably. It is N if B never wins.
- With `zenroll = 1`, the values are stored together with their sum, which gives the population mean.
- In the field, a pair is flagged in `drift_flags` if |Z\* − Z\*_enrolled| > `BAND` (2). It is flagged in `outlier_flags` if it is more than `AVG_BAND` (4) from the enrolled mean.
- A delay added to route B raises Z\*, so the flag fires without any golden reference chip.

## Protocol

1. **Enroll.**
   - The interposer produces R\*.
   - Each chiplet i computes Gᵢ = SHA256(IDᵢ ‖ SIGᵢ ‖ R\* ‖ EnrollTag) (384-bit message, one block).
   - Gᵢ is written once into the verifier (`commit_we`). A second write is refused (`commit_refused`).
2. **Session.**
   - `session_binder` computes s = SHA256(R\* ‖ ch ‖ Epoch) (320-bit message, one block, 96 cycles).
   - `session_ok` is high when the salt was derived while `puf_ok` was 1.
3. **Authenticate chiplet i** (`auth_req`).
   - The verifier receives G'ᵢ from the chiplet hasher, plus s, the Nonce and the session's PUF status.
   - It computes bᵢ = (G'ᵢ == Gᵢ) AND puf_ok, and T'ᵢ = SHA256(G'ᵢ ‖ s ‖ Nonce) (576 bits, two blocks).
   - The verdict is `auth_res`. In priority order: NOT_ENROLLED, BAD_COMMIT, PUF_FAIL, REPLAY (Nonce equals the last accepted Nonce for that chiplet), or ACCEPT.
   - The token is output only on ACCEPT and is zero otherwise.
   - Latency is 196 cycles for every verdict except LOCKED, which is answered in the next cycle.
4. **Policy.**
   - After `MAX_ATTEMPTS = 3` consecutive failures a chiplet is locked for `COOLDOWN = 1024` cycles.
   - `accepted` collects successes in the current epoch. `new_epoch` clears it.
   - `quorum_ok` is set when at least `QUORUM` (default: all) of the chiplets selected by `subset_mask` are accepted.
5. **Audit.** Each acceptance is appended to `auth_log` (depth 8). It is read by `log_rd_idx`, where 0 is the newest entry.

## SHA-256 timing

`sha256_core` takes exactly 96 cycles from `start` to `done`:
- 16 cycles load the message words one per cycle, starting in the start cycle;
- 64 cycles run the rounds;
- 16 cycles stream the digest as 16-bit words on `dist_data`.

This matches the paper's "Sched (16) / Comp (64) / Dist (16)". `h_out` is valid at `done`. Multi-block messages are chained through `h_in`. The padding helpers in `interpuf_pkg` build the exact blocks each unit hashes.

## Parameters (defaults)

| parameter | default | origin |
|---|---|---|
| MESH | 4 | paper: default grid size of four |
| NUM_CHIPLETS | 4 | paper: 4-chiplet experiments |
| NUM_PAIRS × NUM_PERMS | 80 × 8 | paper: 40–80 pairs × 8 permutations |
| digest | 256 bits | paper |
| PUF evaluation | 6 cycles | paper |
| SHA-256 | 96 cycles | paper |
| N_STAGES | 32 | own choice (paper: "N-stage") |
| K, MAX_FLIPS, ENROLL_MAX_FLIPS | 16, 2, 0 | own choice; K from the paper's "96/6 ≈ 16 evaluations per hash" |
| BAND, AVG_BAND | 2, 4 | own choice |
| MAX_ATTEMPTS, COOLDOWN, LOG_DEPTH | 3, 1024, 8 | own choice |
| LINK_W | 8 | own choice |
| ID/SIG/TAG/ch/Epoch/Nonce widths | 32/64/32/32/32/64 | own choice |
| delay model (D_STRAIGHT, D_CROSS, VAR_RANGE, NOISE) | 100, 120, 16, 3 | own choice |

## Departures from the paper

- **No garbled circuits or oblivious transfer.** The function fᵢ is computed in the clear. Chiplets receive R\* directly to form G'ᵢ, and a real build would deliver R\* through the 2PC.
- **HKDF simplified.** The salt is one SHA-256 over R\* ‖ ch ‖ Epoch.
- **Obfuscator key is a per-device input, not renewed each session.** A per-session key would change the enrolled digest. Freshness comes from the salt and the Nonce instead.
- **Registered mesh.** The mesh moves data one hop per cycle. The PUF routes are modelled per pair index and are not tied to particular tiles of the instantiated 4×4 mesh.
- **Stable-bit rate.** In the delay model about 95% of candidates are stable at enrollment. The paper reports 60–80% on silicon-like models.
- **Test hook.** `trojan_pair` and `trojan_dly` on the top add hidden delay to one route B. They exist to exercise the self-check.
- **Off-chip parts.** A true random nonce source, secure NVM for R\*/helper data, and the ATE/HSM enrollment flow are outside the RTL. Their values are top-level ports.
- **Scale.** The default build has 4 chiplets. The paper's 32-chiplet configuration needs `NUM_CHIPLETS = 32`, and a mesh of at least 6×6 if each chiplet is to get its own local port. `tb_interpuf_scale32` simulates exactly that. Area and power results for the SoC baselines are not reproduced.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`):
- Each one ends by printing `TB_RESULT checks=N failures=M` and has a watchdog.
- Cycle counts are checked where the paper gives them: 96-cycle hashing and 6-cycle evaluation.
- `tb/sha256_ref_pkg.sv` is a reference SHA-256 compression used to check every hash.

`tb_interpuf_top` runs the top at its default parameters, end to end:
- route traffic over the mesh;
- digest and Z\* enrollment;
- a field verify;
- a session;
- accepting all four chiplets and reaching quorum;
- replay rejection;
- a counterfeit chiplet;
- lockout and cooldown;
- a fresh token on a new nonce;
- Trojan detection by Z\* and the PUF gate;
- refusal of a second commitment write.

It counts each mechanism and fails any that never happened.

`tb_interpuf_scale32` runs the top with `NUM_CHIPLETS = 32` and `MESH = 6`. It:
- routes data corner to corner across the mesh (11 cycles);
- hashes all 32 chiplets in parallel in 96 cycles;
- authenticates each chiplet in 196 cycles against reference tokens;
- checks that quorum is reached only after the last acceptance;
- checks that the audit log keeps the newest 8 entries.

Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/interpuf_pkg.sv tb/sha256_ref_pkg.sv tb/tb_interpuf_top.sv --top-module tb_interpuf_top
./obj_dir/Vtb_interpuf_top
```

The RTL also goes through Yosys with the slang front end. It contains no latches.
