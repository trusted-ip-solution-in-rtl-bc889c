# TrustToken: per-IP access tokens from an on-chip PUF

On a multi-tenant cloud FPGA, several tenants' accelerators share one
fabric, and any application on the host can address any accelerator over
the on-chip bus. TrustToken puts every untrusted IP core behind a wrapper
that accepts a bus access only if it carries the right credentials: the
IP's 8-bit ID and a 256-bit token. The tokens are not stored in eFuses or
battery-backed RAM. A ring-oscillator physical unclonable function (PUF)
generates them on the chip after every reset, and a central controller
keeps them in block RAM. An application holding the token of IP 3 therefore
cannot use IP 4, even though it can reach IP 4 on the bus.

This repository holds a SystemVerilog model of that system. The RTL is
synthesizable except for the ring oscillators, which are behavioural
models. Self-checking testbenches come with it, and one of them runs the
whole system at full size.

## System overview

```
                 Token Generator (PUF)                 Trust controller
  +-------------------------------------------+   +----------------------------+
  | 512 ring oscillators (2 banks x 256)      |   |  key generation sequencer  |
  |   bank A --MUX--> Counter A --+           |   |            |               |
  |                               +-- >? --> bit  ---> key --> key store        |
  |   bank B --MUX--> Counter B --+           |   |  256 x 256-bit block RAM   |
  +-------------------------------------------+   |     |               |      |
                                                  |  Key Assign   Token Author. |
                                                  +-----|---------------|------+
                                       token provisioning      auth req/rsp (one per wrapper)
                                                                        |
 host APB + {ar_id, ar_integrity, ar_token}                             |
   --> APB decoder --+--> TrustWrapper 0 --APB--> IP core (ID 1) <------+
                     +--> TrustWrapper 1 --APB--> IP core (ID 2)
                     +--> TrustWrapper 2 --APB--> IP core (ID 3)
                     +--> TrustWrapper 3 --APB--> IP core (ID 4)
```

| Module | Role |
|---|---|
| `trusttoken_pkg` | widths and the bus structs shared by all blocks |
| `ro_cell` | behavioural model of one enable-gated ring oscillator |
| `ro_counter` | edge counter clocked by the selected oscillator |
| `puf_ctrl` | challenge expansion, oscillator selection (MUX), counting, comparison |
| `token_generator` | the PUF: 512 `ro_cell`s plus `puf_ctrl` |
| `key_store` | 256 x 256-bit block RAM, one write port and two read ports |
| `key_assign` | returns the token of an ID (the stored key of that ID) |
| `token_auth` | checks wrappers' (ID, token) pairs, one at a time in round-robin order |
| `trust_controller` | fills the key store from the PUF; contains the three blocks above |
| `apb_decoder` | routes host accesses to wrappers by address |
| `trust_wrapper` | holds each access until it is authorized; blocks refused ones |
| `trusttoken_top` | the whole system with four wrappers |

The untrusted IP cores and the host processor are not part of the RTL. In
the published evaluation the four cores are AES, DES, a TRNG and RSA. The
IP-side APB ports (`ip_req`/`ip_rsp`) and the host APB port
(`host_req`/`host_rsp`) are ports of `trusttoken_top`.

## The credentials on the bus

Each host access is an APB3 transfer with three added fields
(`trusttoken_pkg::tt_sec_t`, most significant field first):

| field | width | meaning |
|---|---|---|
| `ar_token` | 256 | token of the IP the access claims to be allowed on |
| `ar_integrity` | 1 | integrity level the access asks for: 1 = isolated (secured), 0 = isolation off |
| `ar_id` | 8 | ID the token belongs to |

The IP behind a wrapper sees a plain APB3 transfer (`ip_req_t`) and never
sees the credentials. APB address and data are 32 bits wide. Each wrapper
owns a 4 KiB window: wrapper *i* answers `0x(i)000`–`0x(i)FFF`. Accesses
above the last window get PSLVERR from the decoder.

## How keys are made

### Oscillators and the comparison

There are 512 oscillators in two banks of 256. Each bank feeds one
multiplexer, and each multiplexer feeds one counter. One key bit is one
race:

1. **CLEAR** (1 cycle): both counters are cleared. All oscillators are off
   and the multiplexer selects are stable.
2. **RUN** (`WINDOW` cycles, default 16): only the two selected oscillators
   are enabled, one per bank. Each counter counts the rising edges of its
   oscillator.
3. **SETTLE** (`SETTLE` cycles, default 4): both oscillators are off again
   and their outputs return to 0.
4. **COMPARE** (1 cycle): the key bit is 1 if count A > count B and 0
   otherwise. A tie gives 0.

A bit takes `WINDOW + SETTLE + 2` = 22 cycles, so a 256-bit key takes 5632
cycles.

The counters are clocked by the oscillators themselves, which is a
separate clock domain. The sequence above is what makes crossing back to
the system clock safe without synchronizers. The counters are cleared only
while both oscillators are off. They are read only after the oscillators
have been stopped for `SETTLE` cycles. A count is therefore never read
while it can change. Keep `SETTLE` longer than one oscillator half-period
plus the counter's clock-to-out if you retarget the design.

### From a 2-byte challenge to 256 comparisons

The challenge is 16 bits. The published design gives its length but not
how it selects oscillator pairs. Here the challenge seeds a 16-bit Galois
LFSR, x^16+x^14+x^13+x^11+1 (taps `0xB400`, shifting right). For key bit
*i*, the low byte of the LFSR state selects the bank-A oscillator and the
high byte the bank-B oscillator. The LFSR then steps once. A zero challenge
is replaced by 1.

### Filling the key store

After reset the controller makes 256 keys, one per possible ID. Key *k* is
made with challenge `{k, ~k}` and written to word *k* of the key store.
When all 256 are stored, `keys_ready` rises. That takes
256 × (5632 + 3) = 1 442 560 cycles, 14.4 ms at 100 MHz. Until then every
secured access is refused and every token request is answered with
`prov_ok = 0`. The key store is never reset. Only `keys_ready` says whether
it holds keys.

### The oscillator model

`ro_cell` is `assign #(HALF_PERIOD_PS) osc = enable & ~osc`. This is the
enable gate and inverter loop with all the loop delay in one place. It is
the only part that is not synthesizable. On an FPGA it is replaced by a
placed loop of LUTs. The model represents manufacturing variation by giving
each oscillator its own half-period: 1000 ps plus a 0..255 ps offset from
an integer hash of (`DEVICE_SEED`, oscillator index); see
`token_generator.sv`. Two values of `DEVICE_SEED` behave as two chips of
the same design.

The model has no jitter and no temperature or voltage drift. The same
chip therefore always gives the same keys, which matches the 100 %
reliability reported for the real PUF but is not a test of it. The 40–60 %
key-to-key Hamming distance reported for the real PUF cannot be reproduced
by a model; it is a property of silicon. For this model at default
settings, the full-size testbench measures the numbers listed under
Verification.

## How an access is authorized

### TrustWrapper

Each wrapper has an integrity register. Its reset value is set by the
integrator through the `INTEGRITY` parameter; all four are HIGH in
`trusttoken_top`, as in the published evaluation. When the host starts an
access phase, the wrapper decides:

* **Integrity LOW and the access asks for LOW**: isolation is off. The
  access goes straight to the IP (setup phase, then access phase). No token
  is needed.
* **Otherwise**: the wrapper holds PREADY low and sends `ar_id` and
  `ar_token` to Token Authorization.
  * If the request is **granted**, the integrity register takes the
    access's `ar_integrity`, and the access is forwarded to the IP.
  * If it is **refused**, the access completes with PSLVERR = 1 and
    PRDATA = 0. The IP never sees it, and `violation` pulses for one cycle.

Because of this rule, an access that wants to change the integrity level,
in either direction, must itself carry a valid token. IP read data reaches
the bus only through a forwarded access.

Latency of the APB access phase, counted to the cycle in which PREADY is
high, with an IP that has no wait states:

| path | cycles |
|---|---|
| non-secured (bypass) | 4 |
| secured, Token Authorization idle | 8 |
| each IP wait state | +1 |

### Token Authorization

A request from wrapper port *p* is granted only if all of these hold:

1. the keys are ready;
2. `ar_id` equals `IP_IDS[p]`, the ID recorded for the IP behind that
   port. IDs are 1, 2, 3, 4 by default;
3. `ar_token` equals stored key number `ar_id`.

Rule 2 stops an application from opening another IP with its own valid
credentials. Rule 3 stops it from claiming another IP's ID without that
IP's token. The four wrappers share the key store's read port A. Requests
are served one at a time in round-robin order. The answer (`done`, `grant`)
comes 3 cycles after a request is first seen by an idle unit.

### Key Assign: handing out tokens

The token of ID *k* is key *k*. The `prov_req`/`prov_id` port reads it
from read port B of the key store and answers after 2 cycles with
`prov_valid`, `prov_ok` and `prov_token`. It accepts one request per
cycle, and answers come back in order. This port is meant for the trusted
runtime or integrator, which gives each application the token of the IP it
is allowed to use. It must not be reachable from tenant software. How
tokens reach software is outside the hardware and is not specified by the
published design.

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `N_RO` | 512 | top, PUF | published |
| key / token width | 256 | package | published |
| `N_KEYS` | 256 | top, controller | published |
| challenge width | 16 | package | published |
| ID width | 8 | package | published |
| `N_IP` | 4 | top | published evaluation (four cores) |
| `INTEGRITY` | all 1 | top, wrapper | published evaluation |
| `WINDOW` | 16 cycles | top, PUF | this design |
| `SETTLE` | 4 cycles | PUF | this design |
| counter width | 16 | PUF | this design |
| `DEVICE_SEED` | `32'h1234_5678` | top, PUF | model only |
| `IP_IDS` | {4,3,2,1} | top, controller | this design |
| APB address/data width | 32/32 | package | this design |
| window per IP (`SLOT_LSB`) | 4 KiB | decoder | this design |

`N_KEYS` may be made smaller for faster simulation. It must stay above the
largest ID in `IP_IDS`. `N_RO` must be a power of two, at least 4, with
N_RO/2 ≤ 256.

## What follows the published design and what does not

These parts follow the published design:

* the three parts: Token Generator, central controller, wrappers;
* the RO PUF structure: enable-gated oscillators, two multiplexers, two
  counters and a ">?" comparator giving one bit per comparison;
* 512 oscillators, 256 keys of 256 bits, and a 2-byte challenge;
* keys generated at run time and kept in block RAM inside the controller;
* ID and token carried as added APB signals with the widths above;
* integrity LOW disables isolation and integrity HIGH enforces it;
* a check on every access, refused accesses blocked;
* source/destination binding that refuses a valid token used on another IP;
* integrity changes that need authorization;
* four wrapped IPs, all with integrity HIGH.

These are this design's own choices, because the published description
does not give them:

* how a challenge selects oscillator pairs (the LFSR above);
* the challenge of each key (`{k, ~k}`);
* the measurement window, the settle time and tie handling;
* the APB timing and the error response of a refused access;
* the exact rule for changing integrity, and round-robin arbitration;
* the decoder's address map and the provisioning port;
* all latencies.

These are known departures and gaps:

* The published PUF is described as "enhanced" or "hybrid" and more
  stable than a plain RO PUF, without saying how. This design builds the
  plain RO PUF that the block diagram shows.
* The oscillator is a behavioural model, and its variation and statistics
  are synthetic.
* Nothing protects tokens on the bus itself: anyone who can observe a
  granted access learns that token. The published design does not address
  this either.
* There is no key regeneration or revocation at run time.
* The published text says the central controller protects itself by
  encrypting with a PUF-based key, but does not say what is encrypted or
  how. Nothing here is encrypted: the controller's protection is that
  its key store and comparison logic are reachable only through the
  authorization ports.
* The published text reports no latency or resource numbers, so none
  could be matched. The latencies given above are this RTL's own.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block
with values worked out inside the testbench and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|---|---|
| `tb_ro_cell` | edge counts match the half-period; the oscillator stops at 0 when disabled |
| `tb_ro_counter` | exact counts, asynchronous clear, saturation |
| `tb_puf_ctrl` | keys equal an independent model (LFSR selection + edge counts); latency 16·(8+2+2); at most one oscillator per bank runs |
| `tb_token_generator` | full-size PUF, two chips: keys equal the model; latency 5632; reproducible; chips differ |
| `tb_key_store` | 256 x 256-bit contents through both ports; read-during-write |
| `tb_key_assign` | refusal before keys are ready; 2-cycle answers; pipelining; out-of-range ID |
| `tb_token_auth` | grant rule; one-bit-wrong token refused; cross-IP refusal; latency 3; round-robin order |
| `tb_trust_controller` | challenge sequence; `keys_ready` timing; every token; authorization per port |
| `tb_trust_wrapper` | secured and bypass paths with latencies; refusal never reaches the IP; integrity changes; wait states |
| `tb_apb_decoder` | PSEL routing, response selection, unmapped addresses |
| `tb_trusttoken_top` | end to end at reduced size (16 oscillators, 8 keys), described below |
| `tb_trusttoken_full` | end to end with every parameter at its default, described below |

`tb_trusttoken_top` plays five applications against four IP models:

* accesses are refused before the keys exist;
* tokens are fetched and match a PUF model;
* each application uses its own IP;
* application 3 (mapped to the TRNG) attacks the RSA core with its own
  credentials and with RSA's ID. Both attempts are refused and the RSA
  core never sees them;
* an application with no token is refused;
* integrity is lowered with a token and the IP is then used without a
  token;
* an attempt to re-raise or bypass integrity without a token is refused;
* an unmapped address is answered with an error.

Every one of these mechanisms is counted and must occur at least once.

`tb_trusttoken_full` runs the top with all defaults:

* all 256 keys are generated and all 256 tokens are compared with the
  model;
* it reports the share of ones in the keys and the mean and extremes of
  the pairwise Hamming distance. The mean is required to lie between 40 %
  and 60 %;
* it then makes a protected access to each IP and repeats the cross-IP
  attack.

It takes about 4–5 minutes in Verilator, almost all of it spent toggling
oscillators during key generation.

Results of `tb_trusttoken_full` at `DEVICE_SEED = 32'h1234_5678`:

* `keys_ready` rises after 1 442 565 cycles.
* 50.61 % of the 65 536 key bits are ones.
* The mean pairwise Hamming distance between the 256 keys is 49.98 %; the
  smallest is 98 of 256 bits and the largest 158.
* All 15 checks pass.

These numbers describe the synthetic oscillator model, not silicon. For
comparison, the published figures for the real PUF are 46.62 % randomness
and 48.18 % uniqueness, with key distances between 40 % and 60 %.

### Running the testbenches

All files use `timeunit 1ns / timeprecision 1ps`. Testbenches need
Verilator's timing support. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/trusttoken_pkg.sv \
    tb/tb_trusttoken_top.sv --top-module tb_trusttoken_top -Mdir obj
./obj/Vtb_trusttoken_top
```

`-Itb` is needed for testbenches that use `tb/apb_ip_model.sv`, the
register-file stand-in for an IP core. It counts the accesses it receives.

The modules of `rtl/` other than `ro_cell` (and the two that instantiate
it, `token_generator` and `trusttoken_top`) contain no delays and are
meant for synthesis. Concurrent assertions in `trust_wrapper` check that
the host holds an APB transfer until PREADY and that a wrapper holds its
authorization request until it is answered.
