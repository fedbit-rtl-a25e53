# FedBit accelerator: BFV encryption and decryption for federated learning

In federated learning with homomorphic encryption, each client encrypts its model update and
the server adds the ciphertexts together without ever decrypting them. Two costs dominate.
Encryption is slow polynomial arithmetic, and ciphertexts are much larger than the weights
they carry. The FedBit scheme (Meng and Lyu, "FedBit: Accelerating Privacy-Preserving
Federated Learning via Bit-Interleaved Packing and Cross-Layer Co-Design") tackles both:

* **Bit-interleaved packing.** The host packs several quantized weights into each plaintext
  coefficient. Each weight gets a slot with a few spare carry bits, so that adding the
  ciphertexts of U clients adds the weights slot by slot with no carry between slots.
* **A client-side accelerator.** An accelerator for the BFV scheme does the client's
  encryption and decryption.

This repository is SystemVerilog RTL for that accelerator, at the configuration the scheme
was evaluated with: ring degree N = 4096, plaintext modulus t = 2281701377. Packing and
unpacking stay on the host, as in the original system. The testbenches do them in
SystemVerilog to drive the hardware end to end.

## 1. What the hardware computes

Polynomials live in R_q = Z_q[X]/(X^N + 1). A client holds a secret s with coefficients in
{0,1}. For each plaintext polynomial m it uses a fresh uniform a and a small error e:

| stage       | input                                     | output                                  |
|-------------|-------------------------------------------|-----------------------------------------|
| preparation | a, s, e (coefficient domain)              | NTT(-a), as + e                         |
| encryption  | NTT(-a), as + e, m                        | c1 = NTT(-a), c0 = as + e + DELTA*m     |
| decryption  | sum of c1 (NTT domain), sum of c0, NTT(s) | m' = round((c0 + c1*s) / DELTA) mod t   |

Here DELTA = floor(q/t). The server adds c0 in the coefficient domain and c1 in the NTT
domain, so decryption needs only one INTT. The decrypted m' is the sum of all clients'
plaintexts mod t. Because the weights were packed with carry margins, every slot of m' holds
the sum of one weight across clients. Dividing a slot by U gives the average.

Worked example (from the scheme's description, reproduced by `tb_fedbit_top`): 8-bit weights
in 10-bit slots, two per coefficient, coefficient = w0 + w1 * 2^10. Three clients contribute
(63, 111), (216, 240) and (0, 9). Their coefficients are 113727, 245976 and 9216, and they
add to 368919. The slots of 368919 are 279 (bits 9..0) and 360 (bits 19..10), which average
to 93 and 120.

Packing is correct only while two bounds hold:
* no carry out of a slot: U * (2^beta - 1) < 2^(beta + delta);
* no wrap mod t: U * (2^beta - 1) * (2^(m*(beta+delta)) - 1)/(2^(beta+delta) - 1) < t.

With 12-bit weights, 3 margin bits and 5 clients, two slots fit in a coefficient, so each
polynomial carries 8192 weights.

## 2. Number representation

q is kept in RNS form: QNUM = 3 limbs, each a 32-bit prime q_i = 1 (mod 2N):

    q_0 = 4294828033, q_1 = 4294729729, q_2 = 4294483969      (q is about 2^96)

Every polynomial is therefore three polynomials of N residues. All arithmetic is per limb and
runs in lockstep, except the final divide. `rtl/fedbit_pkg.sv` holds all the derived constants:
* the primitive 2N-th roots psi_i and their inverses;
* N^-1 mod q_i;
* the Barrett constants floor(2^64/q_i);
* DELTA and DELTA mod q_i;
* the CRT constants q/q_i and (q/q_i)^-1 mod q_i.

They were computed offline from the primes. To change the primes, recompute all of them.
The scheme's description names an RNS basis of "qNum" limbs but gives no primes; the choice
here stays below the 109-bit limit for 128-bit security at N = 4096.

## 3. Block structure

```
fedbit_top
├── fpga_controller      host command FIFO; dispatches in order to DMA or engine
├── dma_engine           DDR <-> buffer, whole polynomials, row gathering
└── crypto_engine
    ├── poly_buffer x3   BRAM0..BRAM2: 3 limbs x 64 banks x 64 rows
    ├── twiddle_mem      psi^bitrev(k) and psi^-bitrev(k) tables, filled after reset
    ├── ntt_unit         in-place negacyclic NTT / INTT (one butterfly per limb)
    ├── vec_alu          row-parallel add / mul / neg / DELTA-scale (192 lanes)
    ├── delta_decoder    CRT + rounding divide by DELTA, mod t
    └── engine_scheduler step lists for PREP / ENC / DEC, start/done handshakes
```

The leaf arithmetic cells are `barrett_reduce`, `mod_mult` (a 32x32 product followed by a
Barrett reduction), `mod_add` and `mod_sub`. All four are combinational, and the modulus is a
port, so one cell design serves every limb.

### Buffers

Each buffer stores one polynomial, all limbs. Per limb it is split into n = sqrt(N) = 64
banks of 64 words. Coefficient c sits in bank c % 64, at row c / 64. Every bank has a single
synchronous port, and all banks of a buffer share one request (`buf_req_t`):
* **row mode**: one whole row, 64 words per limb, in one cycle. The element-wise unit and
  the DMA engine use it.
* **word mode**: one coefficient, all limbs. The NTT unit and the divider use it.

Read data appear one cycle after the request. A per-limb write mask lets the DMA fill one
limb at a time.

## 4. The dataflow, step by step

The scheduler expands every macro operation into unit steps. A step starts one unit with a
one-cycle pulse and waits for that unit's `done` before the next step begins. B0..B2 are
the buffers.

| op   | steps                                                                  | result                 |
|------|------------------------------------------------------------------------|------------------------|
| PREP | NTT(B0); NTT(B1); B1 = B0*B1 and B0 = -B0 (one pass); INTT(B1); B1 += B2 | B0 = NTT(-a), B1 = as+e |
| ENC  | B2 = DELTA*B2; B2 += B1                                                 | B0 = c1, B2 = c0        |
| DEC  | B2 = B0*B2; INTT(B2); B1 += B2; DIVIDE(B1)                              | B1 = m' in every limb   |
| NTT / INTT | one transform of the named buffer                                 |                        |

The buffer contents before PREP, ENC and DEC are those in the table of section 1:
a, s, e in B0, B1, B2; then NTT(-a), as+e, m; then sum c1, sum c0, NTT(s).

The host obtains NTT(s) once, with `LOAD s -> B2; NTT B2; STORE B2`, and keeps it in DDR.

A complete client round is this host command sequence (also in the header of
`rtl/fedbit_top.sv`):

```
LOAD a->B0; LOAD s->B1; LOAD e->B2; PREP; STORE B0 (NTT(-a)); STORE B1 (as+e)
LOAD m->B2; ENC; STORE B0 (c1); STORE B2 (c0)
   ... server adds c0 and c1 of all clients, limb by limb mod q_i ...
LOAD sum c1->B0; LOAD sum c0->B1; LOAD NTT(s)->B2; DEC; STORE B1 (m')
```

A plaintext is written to DDR with the same value in every limb; m < t < q_i, so no limb
needs reducing. In DDR a polynomial occupies 3*N consecutive 32-bit words, limb-major:
word `base + l*N + c`.

## 5. The NTT unit and its ordering

This is the part most likely to trip up a change. The forward transform is Cooley-Tukey with
the negacyclic twist merged into the twiddles. It takes natural order in and gives
bit-reversed order out: the value A_k = sum_j a_j psi^((2k+1)j) ends at position bitrev(k).
The inverse is Gentleman-Sande: bit-reversed in, natural out, with a final pass that
multiplies by N^-1. Nothing ever reorders data. Element-wise products in the NTT domain only
need both operands in the same order, and the INTT undoes the permutation. A ciphertext's c1
is therefore stored in bit-reversed NTT order. The server adds c1 word by word, so it does
not need to know the order.

Stage s (0..11) and butterfly k (0..2047) set the addresses:
* forward: span t = 2^(11-s), pair (j, j+t) with j = (k / t) * 2t + k % t, twiddle index
  2^s + k / t;
* inverse: span t = 2^s, the same j formula, twiddle index 2^(11-s) + k / t.

The twiddle tables hold psi^bitrev(i) at index i. A generator fills them after reset, one
multiplication per cycle, so no table file is needed. `ready` rises after 4096 cycles.
Commands to the engine wait for it.

One butterfly takes four cycles: read U, read V, write U', write V'. Each bank has a single
port, so the two operands cannot be read together. The source points to a conflict-free
pipelined NTT, but its structure is not described. This unit gives the same results at a
fraction of that throughput (see section 8).

## 6. Decryption's divide by DELTA

After c0 + c1*s, the buffer holds x = DELTA*m + e in RNS form. `delta_decoder` handles one
coefficient at a time:
1. CRT: y_i = x_i * (q/q_i)^-1 mod q_i, then x = sum y_i * (q/q_i), reduced mod q by at most
   two subtractions.
2. Rounding divide: floor((x + floor(DELTA/2)) / DELTA), by 32-step restoring division. The
   quotient stays below 2^32 because x < q < DELTA*(t+1).
3. Reduction mod t, by one subtraction. This turns a small negative error on m = 0, which
   shows up as x close to q, into 0.

That is 35 cycles per coefficient. The result goes to all three limbs. The decoder follows the
formula m = round((c0 + c1*s)/DELTA) mod t literally. The more common round(t*x/q) would need
a wider multiplier and gives the same m for the error sizes seen here.

## 7. Interfaces of the top

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `cmd_valid`, `cmd_ready`, `cmd` | in/out/in | host command, `host_cmd_t` = {op, buf_id, ddr_addr}; taken when valid and ready are both high; the FIFO holds 4 commands |
| `cmd_done`, `done_count`, `idle` | out | one pulse per finished command, count of finished commands, nothing queued or running |
| `engine_ready` | out | twiddle tables filled |
| `mem_req`, `mem_we`, `mem_addr`, `mem_wdata` | out | DDR request, word address, 32-bit data; held until `mem_gnt` |
| `mem_gnt` | in | request taken this cycle |
| `mem_rvalid`, `mem_rdata` | in | read data, in request order, any latency |

Commands: LOAD, STORE (DMA); PREP, ENC, DEC, NTT, INTT (engine). Commands run strictly one at
a time, in order. That way a DMA transfer never meets an engine operation on a buffer, and the
buffers need no arbitration (an assertion in `crypto_engine` checks it).

## 8. Timing at N = 4096 (cycles)

| operation | cycles | at 250 MHz |
|-----------|--------|-----------|
| twiddle fill after reset | 4,096 | 16 us |
| NTT / INTT | 98,305 / 106,497 | 0.39 / 0.43 ms |
| element-wise pass | 128 | 0.5 us |
| PREP | 303,372 | 1.21 ms |
| ENC | 262 | 1 us |
| DEC | 250,122 | 1.0 ms |
| DMA load / store of one polynomial (12,288 words, 10 % grant stalls) | 13,602 / 14,050 | 54 / 56 us |

One client's whole encryption of a polynomial, from loading a to storing c0 (three loads, PREP, one load, ENC, two stores), takes about 386,000 cycles, or 1.55 ms. Encryption proper is cheap, and preparation dominates because of its three transforms. The
source reports 3.2 ms to encrypt a LeNet-5 update (about 8 polynomials) and 0.42 s for
ResNet-20 (about 34). By the table above, this RTL would take about 12 ms and 50 ms. The
slower NTT explains the first gap. For the second, how the source's timing is counted is not
known.

## 9. Where this RTL departs from the source, or fills gaps

Taken from the source:
* ring degree, plaintext modulus and the RNS limb structure;
* three buffers of sqrt(N) banks x sqrt(N) rows;
* Barrett reduction for modular multiplication;
* the unit list of the function unit: Barrett, add, sub, mult, twiddle memory, NTT/INTT;
* the three-stage dataflow and the contents of each buffer at each step;
* server aggregation of c1 in the NTT domain;
* divide by DELTA at the end of decryption.

Chosen here, because the source is silent:
* the number and values of the RNS primes, and the 32-bit limb width;
* the striping rule, single-ported banks and the request format;
* the NTT structure (iterative, not the cited high-throughput pipeline);
* how the divide by DELTA works on RNS data;
* the command set, the command FIFO and strict ordering;
* the DDR port (32-bit words, request/grant, in-order returns) and its layout;
* on-chip twiddle generation;
* how NTT(s) reaches buffer 2 for decryption (the host prepares it with the NTT command);
* the order NTT(a), then NTT(s), where the source draws them in one time slot.

Two inconsistencies in the source were resolved:
* Its encryption formula gives c1 = -a, but its dataflow sends NTT(-a). The RTL follows the
  dataflow.
* Its packing sentence writes c = w1*2^10 + w2 for (w1, w2) = (0, 9) yet gets 9216. Its
  packing equation and bit diagram put the first weight in the low slot. The testbench
  follows the equation: coefficient = w0 + w1*2^10, which indeed gives 9216.

Not in this RTL: PCIe and DDR controllers (vendor IP; only their sides are ports), the host,
and the bus as a separate block. The bus's connections are direct wires, since only one unit
uses the buffers at a time.

How far to trust it: every block has a self-checking testbench against independent
arithmetic. The NTT is checked against its definition; as+e against a schoolbook negacyclic
product; the divider against 128-bit integer arithmetic. The full design runs at full size
through three client encryptions, aggregation and decryption, and every coefficient of every
limb is compared. The RTL has not been run on an FPGA, and timing closure at 250 MHz has not
been checked. The combinational `mod_mult` (a 32x32 multiply followed by Barrett) would need
pipelining for that.

## 10. Simulating

The files are plain SystemVerilog-2017. The package must be read first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/fedbit_pkg.sv tb/tb_fedbit_top.sv --top-module tb_fedbit_top -Mdir obj
./obj/Vtb_fedbit_top
```

`-y rtl -y tb` lets Verilator find each module in the file of the same name. Any other
testbench runs the same way, with its name in place of `tb_fedbit_top`. The testbenches do not
depend on register power-up values: adding `+verilator+rand+reset+2` to the run starts every
register and memory at random, and they still pass.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A watchdog ends a hung
run with a failure.

| testbench | what it checks |
|-----------|----------------|
| `tb_barrett_reduce`, `tb_mod_add`, `tb_mod_sub`, `tb_mod_mult` | random and corner operands on all three moduli, against 64-bit integer arithmetic |
| `tb_twiddle_mem` | fill time; every table word against psi powers worked out in the testbench |
| `tb_poly_buffer` | row/word reads and writes, limb masks, 1-cycle read latency |
| `tb_ntt_unit` | NTT outputs against the definition; INTT round trip; cycle counts |
| `tb_vec_alu` | every element-wise op on every word; 128-cycle passes |
| `tb_delta_decoder` | x = DELTA*m + e to m, edge cases m = 0 and m = t-1; 35*N cycles |
| `tb_engine_scheduler` | the step list of each macro op, one unit at a time |
| `tb_crypto_engine` | PREP against a schoolbook a*s+e; ENC/DEC round trip; cycle bounds |
| `tb_dma_engine` | load and store of a polynomial through a stalling DDR model |
| `tb_fpga_controller` | in-order dispatch, FIFO back-pressure, waiting for engine ready |
| `tb_fedbit_workload` | the evaluated packing configuration, full size: 5 clients, 12-bit weights, 3-bit margins, two 15-bit slots per coefficient; every slot sum exact, including the all-4095 worst case; one client's encryption time |
| `tb_fedbit_top` | full-size run of three clients plus aggregation and decryption; the worked packing example; each command kind, DDR stall, full FIFO and twiddle wait happens at least once |

`tb/ddr_model.sv` is a behavioural DDR: a word array with random grant stalls and a fixed
read latency. The full-size end-to-end test takes about 18 million simulated ns (1.8 million
cycles) and runs in under 20 seconds.
