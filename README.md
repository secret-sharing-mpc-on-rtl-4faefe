# Three-party secret-sharing MPC on an FPGA

Secure multi-party computation (MPC) lets several parties compute a function of
data that none of them may see. In the scheme built here, each secret bit is split
into three *shares*. Each share goes to a different compute party. No single party
learns anything from its share, but the three parties together can evaluate any
Boolean circuit on the hidden data: XOR gates need no communication, and each AND
gate needs one bit sent from every party to its neighbour. The protocol is the
semi-honest three-party protocol of Araki et al. (CCS 2016). This RTL follows the
FPGA accelerator for it described in *Secret Sharing MPC on FPGAs in the
Datacenter* (Wolfe, Patel, Munafo, Varia, Herbordt). Every unit works on 128
independent bits at once, so one operation evaluates the same gate for 128 lanes.

The synthesizable design is the accelerator's test configuration. All three parties
sit on one device and are wired to each other exactly as three separate machines
would be. A host drives them over a 512-bit AXI port. This arrangement checks that
the protocol works in hardware. It is not secure, since one device holds all three
shares. A real deployment puts each party block on a different party's FPGA.

## 1. The sharing and why the gates work

Parties are P1, P2, P3. Indices wrap around, so P0 means P3 and P4 means P1. A
secret bit `v` is held as three pairs `(x_i, a_i)`:

* `x_1 ^ x_2 ^ x_3 = 0`, with `x_1` and `x_2` random and `x_3 = x_1 ^ x_2`;
* `a_i = x_{i-1} ^ v`. This is a one-time pad of `v` under a key that P_i does not hold.

Reconstruction is `a_1 ^ a_2 ^ a_3 = (x_1 ^ x_2 ^ x_3) ^ v = v`. The data holder
makes the shares and the output party rebuilds the result. Both live outside the
compute parties. In the testbenches they are the functions `share()` and
`reconstruct()` in `tb/tb_mpc_pkg.sv`.

**XOR** (`mpc_xor`): `z_i = x_i ^ y_i`, `c_i = a_i ^ b_i`. The pad is linear, so the
output is again a valid sharing, of `v ^ w`.

**AND** (`mpc_and_core`) takes three steps:

1. Correlated randomness. Each party gets a value `alpha_i` such that
   `alpha_1 ^ alpha_2 ^ alpha_3 = 0`.
2. Local step. `r_i = (x_i & y_i) ^ (a_i & b_i) ^ alpha_i`. Expanding
   `a_i & b_i = (x_{i-1} ^ v)(y_{i-1} ^ w)` and summing over i gives
   `r_1 ^ r_2 ^ r_3 = v & w`. P_i sends `r_i` to P_{i+1}.
3. Re-sharing. With `r_{i-1}` received, `z_i = r_i ^ r_{i-1}` and `c_i = r_i`.
   Then the `z` values XOR to 0 and `c_i = z_{i-1} ^ (v & w)`, so the output has
   the same form as the inputs and can feed further gates. No secret is rebuilt
   along the way.

## 2. Correlated randomness: keys, counter, and keeping three parties in step

`alpha` must come without communication for every AND. At start-up each party
draws a 128-bit key `K_i` from its RNG (`mpc_rng`) and hands it to the
*previous* party. After that, P_i holds `K_i` and `K_{i+1}`. For counter value `id`:

    alpha_i(id) = AES_{K_i}(id) ^ AES_{K_{i+1}}(id)

Every key appears in exactly two of the three alphas, so they XOR to zero. To any
single party, the alpha of another party looks random, because it lacks one of
the keys.

`mpc_corr_rand` has one AES-128 pipeline (`aes128_pipe`, 21 stages). It feeds the
pipeline `(K_i, id)` and `(K_{i+1}, id)` on two consecutive cycles and XORs the
pair when it comes out. After the one-time start-up latency, it delivers one alpha
every two cycles into a 16-entry buffer. A credit counter counts buffer entries
plus pairs still in the pipeline. A new counter value is started only while that
count is below the buffer depth. The generator therefore pauses (`stall`) instead
of overflowing, and no alpha is ever dropped.

**The subtle part.** The three alphas of one gate must come from the *same*
counter value, or they do not cancel and the AND result is garbage. Nothing is
sent between parties to agree on this. It holds because:

* every counter starts at 0 after reset and steps by one per alpha;
* alphas leave each buffer strictly in order, with none dropped;
* every party consumes exactly one alpha per AND, and the three parties see the
  same sequence of ANDs (XORs consume none).

So gate number k of every party uses `id = k`. If one party gets an extra AND or
misses one, every later AND is wrong. A host must issue the same gate sequence to
all three parties of a group.

## 3. The AND unit and its six cycles

An AND occupies a unit for six cycles, matching the published implementation. Each
step of the gate has its own state:

| state | work | waits for |
|-------|------|-----------|
| IDLE  | accept operands `(x,a)`, `(y,b)` | a request |
| ALPHA | take `alpha_i` from the buffer | buffer not empty |
| CALC  | `r_i = x&y ^ a&b ^ alpha_i` (one 3-input XOR) | - |
| TX    | offer `r_i` to P_{i+1} | P_{i+1}'s receive buffer not full |
| RX    | take `r_{i-1}` | an r from P_{i-1} in the receive buffer |
| FIN   | register `z_i = r_i ^ r_{i-1}`, `c_i = r_i`; `res_valid` next cycle | - |

If nothing waits, a unit accepts a new AND every 6 cycles. That is 128 ANDs per
6 cycles, or 2.67 Gbit/s of gate throughput per unit at 125 MHz. The unit holds one
gate at a time. The paper names a fully pipelined AND unit, with one operation per
cycle, only as a future improvement, and it is not built here.

## 4. The ring between parties

Two links join the parties of a group, and they run in opposite directions:

    keys:     P1 <- P2 <- P3 <- P1      (K_i goes to P_{i-1}, once, held)
    r values: P1 -> P2 -> P3 -> P1      (r_i goes to P_{i+1}, once per AND)

Each party has a 4-entry receive buffer for incoming `r` values (`mpc_fifo` inside
`mpc_party`). It is always ready while not full. This matters for two reasons.
First, the host starts the three parties of a gate at different times, so a party
may receive `r_{i-1}` before it has even started that gate. Second, a bare
valid/ready link would deadlock: all three parties sit in TX, and each waits for a
neighbour that is itself in TX. The buffer lets a party run up to four ANDs ahead
of its successor.

## 5. Host interface (`mpc_ss_fpga`)

One `mpc_axi_parser` serves all units. Unit `u = 3*g + p` is party `p` of group `g`,
and it owns the 64-byte slot at byte address `u << 6`. Transfers are single-beat
AXI4 with 32-bit addresses and 512-bit data. There are no bursts and no IDs, and
write strobes are ignored.

**Write (start a gate):** address `u << 6`, plus bit 20 set for XOR (clear for AND).

| bits of WDATA | 127:0 | 255:128 | 383:256 | 511:384 |
|---------------|-------|---------|---------|---------|
| field         | x_i   | a_i     | y_i     | b_i     |

The unit receives the operands one cycle after the beat is accepted, and BRESP
follows one cycle later. BRESP values:

* OKAY: the unit took the operands.
* SLVERR: the unit was busy and the write was dropped. The host retries after
  polling.
* DECERR: the slot has no unit.

A busy unit refuses the write instead of stalling it. A stalled write would block
the single write channel. The busy unit may be waiting for its partners, and their
writes would be stuck behind it.

**Read (poll a result):** address `u << 6`.

| bits of RDATA | 127:0 | 255:128 | 256 | 257 | 258 | 319:288 |
|---------------|-------|---------|-----|-----|-----|---------|
| field         | z_i   | c_i     | result valid | busy | keys ready | gates completed |

**Evaluating a gate.** Write each of the three units of a group. Then read each
unit until "result valid" is set. The three `(z_i, c_i)` pairs are the shares of
the output. They can be written back as operands of later gates, or rebuilt as
`c_1 ^ c_2 ^ c_3`. The first AND after reset waits until the keys are exchanged,
about 130 cycles, and for the first alpha, about 23 cycles more.

Status outputs: `keys_ready`, `unit_busy`, `alpha_stall` (one bit per unit) and
`err_count` (refused accesses).

## 6. Sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `N_GROUPS` (top) | 1 | groups of three parties, i.e. 3 AND units |
| `ALPHA_DEPTH` | 16 | alpha buffer per party |
| `RX_DEPTH` | 4 | receive buffer per party |
| `SEED_BASE` | constant | seeds of the per-party key RNGs |
| `SHARE_W` (`mpc_pkg`) | 128 | bits per share vector, one AES block |

The published evaluation used 3 AND units as its main comparison point: 8.0 Gbit/s
at 125 MHz, enough to replace a 20-core software implementation. It scaled the
design up to 60 units (160 Gbit/s) on one large device. Set `N_GROUPS` to 4, 8, 16
or 20 for the 12-, 24-, 48- and 60-unit points. An AES evaluated under MPC costs
5440 ANDs in the circuit used for those comparisons. A unit therefore completes
128·125e6/6/5440 ≈ 0.49 million secure AES per second at 125 MHz, each lane one AES.

## 7. Files

`rtl/`, bottom up:

* `aes_pkg.sv`: AES-128 helper functions. The S-box is computed at elaboration time
  as the inverse in GF(2^8) followed by the affine map.
* `mpc_pkg.sv`: share types, opcodes, AXI address and data layout.
* `aes128_pipe.sv`: 21-stage AES-128 with the key carried and expanded down the
  pipeline.
* `mpc_rng.sv`: key RNG, a 128-bit LFSR.
* `mpc_fifo.sv`: small synchronous FIFO.
* `mpc_corr_rand.sv`: alpha generator with its buffer.
* `mpc_xor.sv`, `mpc_and_core.sv`: the gate units.
* `mpc_party.sv`: one party, with RNG, keys, alpha generator, receive buffer and
  gate units.
* `mpc_axi_parser.sv`: host AXI slave.
* `mpc_ss_fpga.sv`: top level, groups of three parties behind the parser.

`tb/`: `tb_mpc_pkg.sv` holds the data-holder and output-party models. There is one
self-checking testbench per module: `tb_aes128_pipe` (FIPS-197 vectors, latency),
`tb_mpc_rng`, `tb_mpc_corr_rand`, `tb_mpc_xor`, `tb_mpc_and_core`, `tb_mpc_party`,
`tb_mpc_axi_parser` and `tb_mpc_ss_fpga`. `tb_mpc_ss_fpga` runs the top level at its
default size through AXI only. It evaluates single gates and a chained circuit
`((v & w) ^ u) & t`. It counts every mechanism above and fails if any one never
occurs. The mechanisms are: waiting for alpha, generator stall, waiting for
`r_{i-1}`, running ahead with buffered `r`, SLVERR on a busy unit, and DECERR.
Each testbench prints `TB_RESULT checks=N failures=M`.

Simulating with Verilator 5, for example the top level:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/aes_pkg.sv rtl/mpc_pkg.sv tb/tb_mpc_pkg.sv tb/tb_mpc_ss_fpga.sv \
        --top-module tb_mpc_ss_fpga -Mdir obj_top -o sim
    ./obj_top/sim

For the other testbenches, swap in their file and top-module name. Each one runs in
seconds. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/aes_pkg.sv rtl/mpc_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are of three kinds: unused package constants, unused
statistics bits, and `rst_n` also being used in assertion `disable iff` clauses.

## 8. What follows the published design, and what does not

Taken from the published design:

* the sharing format and the XOR and AND equations, and `r_i` sent to `P_{i+1}`;
* random keys drawn at start-up, each passed to one other party;
* one PRF per party, run in counter mode and alternating between the two keys on
  the same counter, with each output pair XORed into alpha;
* the 21-cycle PRF latency, paid only at start-up;
* 128-bit units, 6 cycles per AND, and 512-bit AXI messages carrying two shares;
* three parties on one device, duplicated in groups.

Choices made here where the source gives no detail:

* all handshakes, the buffer depths and the counter start value;
* the AXI address map, field order, status word and SLVERR/DECERR rules;
* the split of the six AND cycles into states;
* XOR being served by the same party block through an opcode bit;
* the internal structure of AES.

The source took its AES and RNG cores from third parties and does not describe
their insides.

Known limits:

* `mpc_rng` is an LFSR. It only gives each party a distinct key and is **not** a
  secure random source. Seeds are parameters, so every reset produces the same
  keys. A deployment needs a true random source, such as a ring-oscillator TRNG or
  a PUF.
* Keys travel in the clear between party blocks. That is harmless only in this
  single-device test arrangement.
* There is no link between separate FPGAs. In a multi-device system, the party's
  `tx_*`/`rx_*` and `key_*` ports would be carried by a network or serial link,
  which must also keep the r values in order.
* The security model is semi-honest: parties follow the protocol. Nothing here
  detects a cheating party.
