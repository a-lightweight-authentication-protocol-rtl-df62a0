# LFSR-obfuscated arbiter PUF and a covered-CRP authentication link

An arbiter PUF (APUF) answers a challenge with one bit. The bit comes from a race between two
nominally equal delay paths. It is cheap and unique to each chip. Its answer is also an almost
linear function of the challenge bits, so a few thousand observed challenge/response pairs (CRPs)
let logistic regression predict it. This design puts two obstacles between the attacker and that
linear model:

1. **Challenge obfuscation inside the PUF (the LFSR-APUF).** The APUF never sees the external
   challenge. Part of the challenge seeds an LFSR. Another part decides how many times the LFSR
   is stepped before its state drives the APUF. The mapping from external challenge to APUF
   challenge therefore changes with every challenge.
2. **Covered messages in the protocol.** Stored CRPs travel between server and device only
   inside a keyed bit shuffle called Cover. The responses the device does send answer challenges
   that the attacker never sees in the clear.

The RTL contains:
- the complete LFSR-APUF, with a behavioural model of the analog delay race;
- the Cover function and its inverse;
- the device's protocol sequencer;
- the logic parts of the server, which are Cover and the final response check.

The top-level `auth_top` wires one device to one server link.

## 1. The LFSR-APUF

```
 C (N+4 bits) ─► challenge_seg ─┬─ C1 (N bits) ─► galois_lfsr ──C_O──┬─► apuf_model ─R_O─► vote_mask ─► R, stable
                                └─ C2 (4 bits) ─► control_unit ─S_L──┘        ▲              ▲
                                    Base ────────►      │  └──────── S_A ─────┘              │
                                                        └──────── clear / voted bit ─────────┘
```

**Segmentation.** `challenge_seg` splits the 68-bit challenge into two parts:
- C2 is the top 4 bits.
- C1 is the remaining 64 bits.

The block also flags a C1 that is all zeros or all ones. Either value would lock the LFSR.
The parameter `C2_POS` is the bit position of C2's least significant bit. Its default, N, puts
C2 at the top. A value of 0 moves C2 to the bottom, and any value in between puts it in the
middle.

**LFSR.** `galois_lfsr` is a right-shifting Galois LFSR:

    state <= (state >> 1) ^ (state[0] ? poly : 0)

- `poly` is the tap mask of the device's primitive polynomial. Bit i of the mask stands for the
  term x^(i+1).
- The polynomial is a port because every device is meant to get its own.
- The package default is x^64+x^63+x^61+x^60+1 (`64'hD800_0000_0000_0000`), taken from standard
  maximal-length tables.

**Obfuscation count.** After loading C1, `control_unit` raises S_L for exactly `C2 * Base`
cycles. That is one LFSR step per cycle, between 0 and 15·Base steps. The resulting state is the
obfuscated challenge C_O.
- Base is an 8-bit input, so it can change per challenge, as the protocol requires.
- A Base of 10 is the recommended setting.
- Base = 0 switches the obfuscation off.

**Evaluation and voting.**
- The control unit pulses S_A NV = 5 times. Each pulse is one cycle high followed by one cycle
  low, and the APUF evaluates once on each rising edge.
- `vote_mask` counts the ones. It outputs the majority bit and a *stable* flag.
- The stable flag is set when at least 4 of the 5 votes agree. A bit without it is a "soft dark
  bit": it is still reported, and the server decides whether to keep that CRP.

**Multi-bit responses.** With `NSUB = 1`, the LFSR-APUF gives one bit per challenge. The
protocol needs an N-bit response, so the device instance uses `NSUB = N = 64`:
- sub-challenge 1 is C_O;
- each later sub-challenge is one further LFSR step;
- the bit from sub-challenge 1 ends up in the MSB of `resp`.

This is this design's reading of a sentence that only says "n sub-challenges are generated from
the obfuscated challenge".

**Timing.** `done` is high for one cycle, `1 + C2*Base + NSUB*(2*NV+1)` clock edges after the
edge that samples `start`. At the defaults with C2 = 15 and Base = 10, one 64-bit response takes
1 + 150 + 704 = 855 cycles.

S_A is never high in a cycle that loads or shifts the LFSR. An assertion in `lfsr_apuf` checks
this, so C_O is stable at every launch.

### The behavioural APUF (`apuf_model`)

The real part is an FPGA hard macro with hand-placed programmable delay lines (PDLs). It is not
logic, so `apuf_model` is a model of it with the real part's ports: `co`, `sa`, `tune_u`,
`tune_d` and `ro`. Its structure:
- **Switching stages.** There are N non-path-swapping stages. Each stage has two PDLs, and both
  are selected by challenge bit c_Oi. c_O1 is `co[N-1]`. The two paths never cross, so each stage
  only changes the delay of each path.
- **Tuning blocks.** There are K = 8 of them. Each set tuning bit adds `TUNE_STEP` to its path.
  This is how the path imbalance of an untuned macro is trimmed.
- **Arbiter.** The upper path drives D and the lower path drives CLK. So `ro = 1` when the upper
  edge arrives first.

Silicon variation is replaced by integer delays `1000 + (hash(SEED, pdl index) & 63)`.
- `SEED` plays the role of "which chip".
- `BIAS` adds a fixed delay to the upper path.
- A 16-bit LFSR adds jitter in `[-NOISE, NOISE]` to every evaluation. Bits whose delay
  difference is small therefore flip between evaluations, which gives the vote unit real work.

The answer appears one cycle after the clock edge that sees S_A rise. None of these numbers
describe real silicon. The model makes the surrounding logic testable; it does not predict
randomness, uniqueness or reliability. With SEED = 3 and no tuning, about 80 % of its answers
are 1, much like an untuned hardware APUF.

## 2. Cover and Uncover

Cover_k(X, Y) takes an L-bit message X and an L-bit random nonce Y. It produces an (L+T)-bit
word O in three combinational stages. Bit 1 of every vector is its MSB.

1. **Rearrangement, Z = Per(X, Y).** Walk X from x_1 to x_L and append every x_i whose y_i is 1.
   Then walk back from x_L to x_1 and append every x_i whose y_i is 0. In closed form, which is
   how `cover_enc` computes it:
   - if y_i = 1, x_i goes to z_(1 + number of ones in y_1..y_(i-1));
   - otherwise, x_i goes to z_(1 + ones(Y) + number of zeros in y_(i+1)..y_L).
2. **Cross XOR.** Swap every adjacent pair of Y to get Y'. Then W = Z xor Y'. In other words:
   - w_i = z_i xor y_(i+1) for odd i;
   - w_i = z_i xor y_(i-1) for even i.
3. **Filling.** T random bits F are inserted into W at T secret positions. The positions are
   given by the (L+T)-bit `fill_mask`, which must hold exactly T ones. This mask is the
   device-specific part of Cover_k. With L = 128 and T = 10 there are C(138,10) ≈ 4.9·10^14
   possible masks.

`uncover` undoes the stages in reverse order:
- it drops the masked positions;
- it XORs with Y' again;
- it scatters Z back through the same index formula.

Both blocks are purely combinational. They are large (about 3.9 k and 2.8 k cells at L = 128),
because every output bit is a mux over all positions. A small design would serialise them;
nothing in the protocol needs them in one cycle.

## 3. The authentication link

The top level uses numbered messages, as shown in the table below.

| Phase | Message | From → to | Content |
|---|---|---|---|
| registration | – | server → device | (n_ci, Base_i) from the server's TRNG |
| registration | – | device → server | r_i and "all bits stable" (`tx_kind = MSG_RESP_R`) |
| authentication | 1 | device → server | ID_k (`MSG_ID`) |
| authentication | 3 | device → server | nonce n_d and database index ind_i1 (`MSG_ND_IND`) |
| authentication | 6 | server → device | n_dc = Cover(n_ci‖Base_i‖r_i, n_d), n_s, n_sc = Cover(n_cj‖Base_j, n_s) |
| authentication | 9 | device → server | r_j' (`MSG_RESP_RJ`) |

**Device side (`device_ctrl`).** The device works through message 6 in this order:
1. It uncovers n_dc with its own n_d.
2. It reruns its LFSR-APUF on (n_ci, Base_i).
3. It compares the result with the r_i it received. If they differ, the server is not
   genuine: the device ends with `RES_ABORT` and sends nothing more.
4. Otherwise it uncovers n_sc with n_s.
5. It runs the PUF on (n_cj, Base_j) and sends r_j'.

**Server side (`auth_top`).** The server compares r_j' with its stored r_j and pulses either
`srv_dev_ok` or `srv_dev_fail`.

The device stores nothing between rounds. The Uncover block and the LFSR-APUF are each built
once and shared between the two halves of a round.

**Message layout.** Each covered message X is `{n_c (68), Base (8), r (64)}`, MSB first. For
n_sc the r field is zero. This needs 140 bits, so the link instantiates Cover/Uncover with
**L = 140** (see §4). n_c is the whole 68-bit external challenge, so the device can rebuild
C_O from it.

**Server parts that are ports.** These are:
- its key PUFs;
- its cipher and database;
- its random number generators.

Their outputs enter `auth_top` as ports: the decrypted entries `srv_nc_*`, `srv_base_*` and
`srv_r_*`; the nonce `srv_ns`; and the filler bits `srv_fill_*`.

**Device parts that are ports.** These are:
- its random number generator (`dev_trng_nd`, `dev_trng_ind`);
- its configuration (`dev_id`, `dev_poly`, `dev_fill_mask`, and the tuning bits).

## 4. Where this RTL departs from the protocol as published, and why

- **Cover width.** The protocol fixes l = 128. A message n_ci‖Base_i‖r_i with a 64-stage PUF
  and a 68-bit challenge needs at least 68 + 64 = 132 bits even before Base, so it cannot fit.
  `cover_enc` and `uncover` keep 128 as their default. The link uses 140 (`MSG_WIDTH` in the
  package).
- **n_ci width.** One passage calls n_ci n bits long. Others have the server reject n_ci whose
  C1 is all zeros, and derive both the seed and the shift count from it. That only works if
  n_ci is the full n+4-bit challenge, which is what is built.
- **Nonce length.** The security analysis gives n_d 138 bits, but Cover needs an l-bit nonce.
  n_d is L bits here. The database index is 138 bits, as the analysis says.
- **Cross XOR formula.** The summary equation of the cross XOR reads w_i = y_i xor z_(i+1). The
  step-by-step description and the worked 10-bit example (Y = 1110110010, Z = 0100100011 →
  W = 1001010010) both give w_i = z_i xor y_(i+1), which is what is built.
- **Choices this design makes where the protocol is silent:**
  - how the filler positions are derived from ID_k (`fill_mask` is a port);
  - how the n sub-challenges are drawn (§1);
  - the vote count (5) and stability threshold (4 of 5);
  - the Base width (8 bits);
  - the ID width (32 bits);
  - the default polynomial;
  - the K = 8 tuning stages;
  - asynchronous active-low resets everywhere.
- **Message 6.** All of message 6 arrives in one transfer (`srv_send`). The protocol also
  allows n_s and n_sc to follow n_dc separately.

## 5. How far to trust it

Every block has a self-checking testbench that compares it with reference models written
separately in `tb/tb_ref_pkg.sv`:
- the Galois step;
- the delay model;
- Cover, written as the literal pointer walk with queues.

The testbenches also check cycle counts where the design defines them.

The Cover test also reproduces three worked examples from the original description:
- in the rearrangement example, the first six bits of Z are 0,1,0,0,1,0;
- the 10-bit cross XOR example holds;
- the first eleven bits of the bit-filling example match.

`tb_auth_top` runs the whole link at the default sizes. It goes through:
- registration, checking every stable bit against the reference model;
- honest rounds;
- rounds in which a fake server sends a wrong r_i;
- rounds in which the server expects a different r_j.

It counts each mechanism and fails if any mechanism never occurred:
- registration;
- a masked CRP;
- an invalid seed;
- Base = 0;
- LFSR shifting;
- the device accepting and aborting;
- the server accepting and rejecting.

`tb_lfsr_apuf_base_sweep` runs the LFSR-APUF on six model instances:
- five 64-stage instances, standing for five chips;
- one 32-stage instance.

It first tunes each instance with its tuning bits. It measures the share of ones, then
lengthens whichever path loses too often, until that share is near one half. Then, for each
Base in {0, 1, 3, 5, 8, 10, 20}, it checks every response against the reference model and prints
four figures of the model:
- its share of ones;
- the pairwise distance between chips;
- the agreement between repeated evaluations;
- how often the obfuscated answer differs from that of a plain APUF.

The APUF responses are only as meaningful as the model in §1.

## 6. Simulating

Everything is plain SystemVerilog 2017. The testbenches use `$urandom` and no other simulator
features. With Verilator 5:

```sh
verilator --binary --timing --assert -y rtl \
  rtl/lfsr_apuf_pkg.sv tb/tb_ref_pkg.sv tb/tb_auth_top.sv \
  --top-module tb_auth_top -Mdir obj -o sim
./obj/sim          # prints mechanism counts and "TB_RESULT checks=... failures=0"
```

To run a block test, replace `tb_auth_top` with that block's testbench:
- `tb_galois_lfsr`
- `tb_control_unit`
- `tb_apuf_model`
- `tb_vote_mask`
- `tb_lfsr_apuf`
- `tb_cover_enc`
- `tb_uncover`
- `tb_device_ctrl`
- `tb_challenge_seg`
- `tb_lfsr_apuf_base_sweep`

Each test finishes in seconds and has a watchdog. `--assert` turns on the handshake assertions:
- no S_A while the LFSR moves;
- no `start` to a busy device;
- a voted bit arrives only while the control unit waits for one.

Useful knobs, all parameters of `auth_top` / `lfsr_apuf`:
- `N` sets the stage count. 32 also works; pass a 32-bit polynomial such as
  `lfsr_apuf_pkg::POLY32_DEFAULT`.
- `NV` and `STABLE_MIN` set the voting.
- `SEED`, `BIAS` and `NOISE` change the simulated chip.
- `L` and `T` set the Cover size. L must be even and at least 140 for the default message
  layout; an elaboration-time check enforces this.

## 7. File map

| File | Contents |
|---|---|
| `rtl/lfsr_apuf_pkg.sv` | shared constants, message and result enums |
| `rtl/challenge_seg.sv` | C → C1, C2; stuck-seed flag |
| `rtl/galois_lfsr.sv` | N-stage Galois LFSR with run-time polynomial |
| `rtl/control_unit.sv` | load / C2·Base shifts / S_A pulses / response assembly |
| `rtl/apuf_model.sv` | behavioural arbiter PUF with tuning blocks and jitter |
| `rtl/vote_mask.sv` | majority vote and soft dark-bit flag |
| `rtl/lfsr_apuf.sv` | the LFSR-APUF |
| `rtl/cover_enc.sv`, `rtl/uncover.sv` | Cover_k and its inverse |
| `rtl/device_ctrl.sv` | device protocol sequencer |
| `rtl/auth_device.sv` | Device_k: LFSR-APUF (64-bit responses) + Uncover + sequencer |
| `rtl/auth_top.sv` | device plus server-side Cover engines and response check |
| `tb/tb_ref_pkg.sv` | reference models shared by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_auth_top` end to end |
