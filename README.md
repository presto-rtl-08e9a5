# Stream-key accelerators for HERA and Rubato

Hybrid homomorphic encryption lets a client encrypt with a cheap symmetric
cipher and lets the server turn that into a homomorphic ciphertext. HERA and
Rubato are two such ciphers over the integers modulo a 25-bit prime q. Both
produce a *stream key*, a vector of elements of Z_q, from a secret key k and a
public nonce. The client then adds the stream key to its scaled message. Most
of the cost is not the arithmetic of the rounds. It is drawing the many
pseudo-random round constants that every round needs.

This RTL implements the fully optimised variant of the two accelerators
described in "Presto: Hardware Acceleration of Ciphers for Hybrid Homomorphic
Encryption". It has three main ideas:

* **Vectorised units.** Every unit takes and delivers one row or one column
  of the state per cycle.
* **Transposition-invariant MixColumns/MixRows.** A fused unit accepts the
  state in whichever orientation it arrives. No cycles are lost reassembling
  columns.
* **RNG decoupling.** AES-driven samplers fill a small FIFO with round
  constants while the rounds run. The datapath waits only when a constant is
  really missing.

`presto_top` holds both accelerators:

* a HERA accelerator with two independent 4-wide lanes (Par-128a: n = 16,
  v = 4, r = 5);
* a Rubato accelerator with one 8-wide lane (Par-128L: n = 64, v = 8, r = 2,
  l = 60).

## The two ciphers in a few lines

The state x has n = v² elements. It is viewed as a v×v matrix X in row-major
order: element e sits in row e / v, column e mod v. With M_v a fixed circulant
matrix of small constants, the layers are:

| layer | what it does |
|---|---|
| ARK | x + k ⊙ rc, element-wise; rc is fresh for every use |
| MixColumns, MixRows | X ← M_v·X and X ← X·M_vᵀ; always used as the pair MRMC(X) = M_v·X·M_vᵀ |
| Cube (HERA) | x_i ← x_i³ |
| Feistel (Rubato) | x_1 unchanged, x_i ← x_i + x_{i−1}², over the row-major order |
| Tr (Rubato) | keep the first l elements |
| AGN (Rubato) | add a discrete Gaussian sample to each kept element |

One stream key is computed as follows:

1. ARK applied to ic = (1, 2, …, n).
2. r − 1 rounds of MRMC → NL → ARK, where NL is Cube or Feistel.
3. A final round of MRMC → NL → MRMC → ARK. Rubato then applies Tr and AGN.

HERA uses (r+1)·16 = 96 round constants per key. Rubato Par-128L uses
2·64 + 60 = 188 constants and 60 noise samples.

## How the state flows

Every unit works on *vectors*: v elements with two tags. `col` says whether
the vector is a row (0) or a column (1). `idx` says which row or column it is.
Lane j of row i is element v·i + j. Lane j of column i is element v·j + i.
ARK, Cube and AGN are element-wise. They take whatever orientation arrives and
pass the tags on, and they read their second operand (key, constant, noise)
in the same orientation (see *Operand buffers*).

### MRMC and the orientation flip

MixColumns needs whole columns and MixRows whole rows. A straightforward unit
that receives rows must wait for the whole state before it can start on the
columns, which leaves a bubble in every round. `mrmc` avoids this. Write Y
for the matrix of incoming vectors, one per column:

* If the vectors are columns of X, then Y = X.
* If they are rows of X, then Y = Xᵀ.

The unit computes M_v·Y·M_vᵀ in both cases:

1. **Stage 1.** Each incoming vector is multiplied by M_v as it arrives. The
   product is stored as column `idx` of an intermediate matrix Z, so the
   vectors may arrive in any order.
2. **Stage 2.** Once v vectors are in, the rows of Z leave one per cycle,
   each multiplied by M_v again.

Column input therefore gives MRMC(X), row by row. Row input gives
MRMC(Xᵀ) = MRMC(X)ᵀ row by row, which is MRMC(X) column by column. The
numbers are always right. Only the orientation of the output is the opposite
of the input (`out_col = ~in_col`). The orientation of the state thus
alternates from pass to pass, and every later unit follows the tags.

The constants of M_v are at most 6. Each multiplication is a sum of shifts of
the input, with one reduction per output element. Z is double-buffered, so the
next state can enter while the previous one leaves. The first output vector is
registered on the advancing clock edge after the one that took the last input
vector.

### Feistel in column order

In row order, Feistel is simple: lane j needs lane j−1 of the same row. Lane 0
needs the last element of the previous row, which is kept in a register. Every
row leaves one cycle after it arrives.

In column order, column c needs column c−1, which was the previous input.
Column 0 is the exception: element v·j needs element v·j − 1, which is in
column v−1. So `feistel` holds column 0 back and computes it when column v−1
arrives, with a second set of v squarers. It then emits it right after
column v−1. The columns leave as 1, 2, …, v−1, 0, which MRMC accepts because
it stores vectors by index. A new state must not enter during the cycle in
which the held column leaves. The datapath loop never does this, and an
assertion guards it.

## Randomness

### XOF

Each lane has its own AES-128 core (`aes128_core`). The core is fully unrolled
into 11 pipeline stages, takes one 128-bit block per cycle and is run in
counter mode. The plaintext block is {nonce[63:0], domain bit, 63-bit
counter}:

* domain bit 0 is for round constants;
* domain bit 1 is for noise.

The counter restarts at 0 for every stream key. Rubato's noise sampler has a
second AES core, so the two streams do not compete. A one-bit *epoch* tag
travels with each block through the pipeline. After a new start, blocks still
in flight from the previous nonce are recognised by their stale tag and
dropped.

### Round constants

`rejection_sampler` cuts each AES block into five 25-bit candidates, taken
from bit 0 upwards; the top 3 bits are unused. A candidate below q is kept.
Since q = 2²⁵ − 2¹⁸ + 1, about 0.8 % are rejected. `vec_packer` collects the
accepted samples into v-wide vectors and pushes exactly the stream's quota
(96 or 188) into an 8-deep FIFO (`vec_fifo`). The last vector is padded with
zeros. When the FIFO is full, the AES pipeline is frozen rather than drained,
so no samples are lost.

### Gaussian noise

`dgd_sampler` uses the inverse-CDF method with 64-bit table entries, which is
λ/2 bits for λ = 128. Each AES block gives two uniform 64-bit values u. For
each value:

* every entry of a 64-entry table CDF[0..63] is compared with u, in parallel;
* the sample is e = #{i : u ≥ CDF[i]} − 32, with support [−32, 32];
* e is stored in Z_q, so −e is written as q − e.

CDF[i] = ⌊2⁶⁴·P(E ≤ i − 32)⌋ for the intended distribution E. The table is
written by the host (`CMD_CDF`) because the noise width is part of the cipher
parameters, not of the hardware. The testbenches use a width of σ = 3.2.

### Operand buffers and the stall rule

The FIFO delivers constants in element order. The state may be flowing in
column order, so ARK cannot just pop the next v constants. The controller
therefore moves one whole pass worth of constants from the FIFO into an
operand buffer (`opnd_buf`). ARK reads that buffer by row or by column like
the key memory. There are two such buffers: pass p uses buffer p mod 2, so the
next pass's constants are loaded while the current pass runs. The last pass
needs only ⌈l/v⌉ rows. Noise goes into one further buffer, read by AGN.

The whole datapath shares one enable, `adv`. It drops when a vector reaches
ARK and its buffer is not yet full, or when a vector reaches AGN before the
noise is loaded. With decoupling this happens only while the AES pipeline
starts up, at the beginning of a stream. The `stall` outputs show those
cycles.

## Sequencing

`presto_ctrl` counts the vectors leaving each unit, so it knows which pass
each unit is in. It uses those counts to steer the two multiplexers:

| vector | goes to |
|---|---|
| ic ROM (pass 0) | ARK |
| ARK output, passes 0 … r−1 | MRMC |
| MRMC output, passes 0 … r−1 | NL |
| NL output, rounds 1 … r−1 | ARK |
| NL output, final round | MRMC |
| MRMC output, pass r | ARK (final) |
| final ARK output | AGN (Rubato) or data_out (HERA) |

A stream is done after v output vectors. START is accepted only when the lane
is idle and the AES key has been expanded.

## Host interface

Each accelerator has one command port, `cmd = {op[2:0], addr[7:0]}`, plus a
64-bit `data_in`. A command acts in the cycle it is presented.

| op | meaning |
|---|---|
| `CMD_KEY` (1) | key element `addr` ← `data_in[24:0]` (same element in every lane) |
| `CMD_XOF_KEY` (2) | AES key half `addr[0]` ← `data_in`; writing half 1 starts the 10-cycle key expansion |
| `CMD_CDF` (3) | Gaussian table entry `addr` ← `data_in` (Rubato) |
| `CMD_START` (4) | lane `addr` generates one stream key with nonce `data_in` |

The key stream leaves as vectors: `*_out_valid`, `*_out_col`, `*_out_idx` and
the elements. Rubato also gives `rubato_out_mask`, which marks the lanes whose
element index is below l. The host places each element by the mapping above;
the output orientation depends on the round count. `busy` is high while a
stream runs, and `done` pulses with the last vector.

Measured at the default sizes, from START to `done`:

* HERA: 67 cycles (the second lane, started one cycle later, 68).
* Rubato: 69 cycles. 27 of them are start-up stalls before the first
  constants are ready, so 42 cycles are datapath.

The published figures for the optimised designs are 90 cycles (HERA) and 66
cycles (Rubato). It is not stated where those counts begin and end, so treat
the comparison as rough.

Between two passes of one stream, MRMC waits for its next input. The
published waits are 5 cycles for HERA and 2 for Rubato. Here they are:

| wait | cycles |
|---|---|
| HERA, between any two passes | 4 |
| Rubato, inside the final round (MRMC → Feistel → MRMC) | 2 |
| Rubato, from one round into the next | 4 |

The last case also passes through ARK and waits for Feistel's held column.

## Files

* `rtl/presto_pkg.sv`: element type, modulus, Barrett reduction, M_v rows,
  command types.
* Datapath: `ark`, `mrmc`, `cube`, `feistel`, `agn`.
* Randomness: `aes128_core`, `rejection_sampler`, `dgd_sampler`,
  `vec_packer`, `vec_fifo`.
* Storage: `key_mem`, `ic_rom`, `opnd_buf`.
* Control: `presto_ctrl`.
* Assemblies:
  * `presto_core`: one lane, parameterised in scheme, v, r and l;
  * `hera_accel`: two HERA lanes;
  * `presto_top`: both accelerators.

Every module's opening comment gives its interface and timing and says what
is the design's own choice.

## Verification

Every block has a self-checking testbench in `tb/`, named `tb_<module>.sv`.
The expected values come from `tb/presto_ref_pkg.sv`, a plain software model
written separately from the RTL. It applies each cipher layer to the whole
state by its definition, with its own byte-wise AES (FIPS-197 vector
checked). The main tests are:

* `tb_presto_top`: both accelerators at their default parameters, three stream
  keys each with random keys and nonces, bit-exact against the model. It
  counts the mechanisms the design relies on and fails if one never occurs:
  * stalls for missing constants;
  * constants sampled while rounds run;
  * MRMC fed by rows and by columns;
  * Feistel's held column;
  * rejected candidates.
* `tb_presto_core`: a Rubato lane at the default size and one with v = 6,
  r = 3, l = 36.
* `tb_mrmc` and `tb_feistel`: random orientations, orders, gaps and stalls,
  plus the timing.
* The samplers' testbenches drive a real AES core and compare each sample
  with the model.

To run one with Verilator 5, for example the top-level test:

    verilator --binary --timing --assert -Irtl -Itb rtl/presto_pkg.sv \
        tb/presto_ref_pkg.sv rtl/*.sv tb/tb_presto_top.sv \
        --top-module tb_presto_top
    ./obj_dir/Vtb_presto_top

Each test prints `TB_RESULT checks=… failures=…` and has a cycle watchdog.

## Where this departs from, or goes beyond, the published description

* **Numbers not given in the description.** q = 33292289 and the rows of M_6
  and M_8, (4,2,4,3,1,1) and (5,3,4,3,6,2,1,1), come from the cipher
  specifications. M_4 = circ(2,3,1,1) and the 25-bit element size are in the
  description. ic = (1, …, n) also comes from the specifications. l = 60
  follows from 188 − 2·64.
* **The XOF formats are this design's own:** the counter-block layout, the
  5×25-bit candidate slicing and the two samples per block for noise. Outputs
  will therefore not match a software implementation that derives its
  constants differently.
* **The noise table is loaded, not fixed,** because the noise width is not
  part of the description.
* **Choices the description leaves open:** the FIFO depth (8 vectors), the
  double operand buffers, the stall rule, one AES core per lane plus one for
  noise, and independent HERA lanes.
* **Cycle counts differ from the published ones** (see *Host interface*),
  because the pipeline depths of the units are this design's own. Most
  visibly, Rubato's MRMC waits 4 cycles, not 2, between a round and the
  next.
* **Not included:** the FPGA platform, and the baseline and intermediate
  variants that the optimised design is compared against.
* **Assertions** guard the handshakes: FIFO and packer overflow, MRMC bank
  overrun, the Feistel collision and operand-buffer refill. Because they are
  disabled during the asynchronous reset, Verilator reports a sync/async mix
  on `rst_n`. That warning is expected and harmless.
