# Encrypted observer-based control on reduced GSW ciphers

A controller that runs on a remote machine can be attacked there. This design
keeps it blind: the remote controller computes the next control input of a
plant using only homomorphically encrypted numbers, never a key or a
plaintext. It uses the lattice scheme of Gentry, Sahai and Waters (GSW),
which allows both additions and multiplications of ciphers, in the
*reduced-cipher* form described in "A Fully Homomorphic Encryption Scheme
for Real-Time Safe Control". In that form a
homomorphic product needs no multiplier at all: it is a sum of cipher rows
selected by the bits of the other cipher. Everything in this RTL follows from
that one idea, in both units:

* the **adapter** sits next to the plant. It generates the keys, encrypts the
  controller gains once and the plant signals every step, then decrypts the
  results and drives the plant input;
* the **controller** sits at the far end of a link. It stores the encrypted
  gains and evaluates an observer with state feedback on the encrypted
  signals.

The example plant is an inverted double pendulum with a motor: 5 states,
1 input, 2 measured outputs. The default sizes are those of the paper: LWE
dimension n = 7, m = 7 public-key rows, l = 64-bit words, and Q10.22 fixed
point.

## The scheme, as this RTL computes it

All words are l bits wide and all arithmetic on them is modulo 2^l.

**Keys** (`fhe_keygen`). A secret t of n random words. A public matrix
A = [b, B], with B an m x n matrix of random words and b = B t + e, where e
holds m small random errors. So A s = e for the private key s = [1, -t]: the
public key is "almost orthogonal" to s.

**Reduced cipher.** A GSW cipher of a message mu is an N x N bit matrix C,
with N = l(n+1) = 512. The reduced cipher packs each group of l bits of a row
back into one word: C~ = C G, an N x (n+1) matrix of l-bit words. It holds
exactly the same bits (32 KiB per cipher), but in a form where the
operations are cheap. Here G = I_(n+1) ⊗ [1, 2, 4, ..., 2^(l-1)]^T.

**Encryption** (`fhe_encrypt`): C~ = mu G + R A, where R is an N x m matrix
of random bits. Row i is the sum of the rows of A picked by R's row i. The
term mu·2^(i mod l) is added into column i / l.

**Operations** (`fhe_hom_alu`), for reduced ciphers a~ and b~ and a
plaintext alpha:

| operation      | result                 | how the hardware does it |
|----------------|------------------------|--------------------------|
| sum            | a~ + b~                | word-wise add |
| product        | A·b~, where A = bit decomposition of a~ | output row i = sum of the rows c of b~ for which bit c of row i of a~ is set |
| scalar sum     | alpha G + a~           | add alpha << (i mod l) to column i / l of row i |
| scalar product | [alpha G]^l · a~       | output row i = sum of the l rows j·l + k of a~ (j = i / l) for which bit k of alpha << (i mod l) is set |

Because C~ = C G can be inverted, the bit matrix A of a product is read
straight from a~'s words. The product therefore costs N x N conditional row
additions and no multiplications. That is the paper's central point, and the
reason this design has no multipliers outside the testbenches.

**Decryption** (`fhe_decrypt`, `fhe_mpdec`). The first l entries of C·P,
where P = PowersOf2(s) has s_j << k at position j·l + k, are
v_k = mu·2^k + noise_k. This is the same as row k of C~·s, but the
hardware avoids the word multiplications with the same bit selection as the
product: for each bit k of each word j of the row, it adds s_j << k. The message is then
decoded one bit at a time, starting from the least significant. With the low
i bits of mu known, v_(l-1-i) − (mu_low << (l-1-i)) is mu[i]·2^(l-1) plus
noise. Rounding it to 0 or 2^(l-1) gives mu[i], which is
`r[l-1] ^ r[l-2]`. Decoding is exact while |noise| < 2^(l-2).

## Fixed point and the shift-back loop

Real numbers travel as two's-complement Q10.22 integers (10 integer bits,
sign included, and 22 fractional bits). Inside the scheme they are
sign-extended to 64 bits. Then a negative number is just a large residue
modulo 2^64, and products of signed values stay correct. (Kept as a 32-bit
pattern inside a 64-bit word, a negative number would behave like a large
positive one, and a product of two of them would be wrong.)

A product of two Q numbers has 44 fractional bits, and no homomorphic right
shift exists. So the encrypted state cannot be carried from step to step. It
makes a round trip instead. Each step:

1. The adapter sends E(v), with v = [x, u, y].
2. The controller returns E(x+) = W·E(v) and E(u+) = (K·W)·E(v).
3. The adapter decrypts both. It takes x = x+ >>> 22 and u = u+ >>> 22
   (arithmetic shifts), gives the low 32 bits of u to the plant, and keeps
   x and u as the next step's values.

The controller is an observer with state feedback,
x+ = Ad x + Bd u + L(y − Cd x) and u+ = K x+. Both lines are folded into
plaintext gain matrices before encryption:

* W = [Ad − L·Cd | Bd | L], 5 × 8, so x+ = W v with no subtraction;
* K·W, 1 × 8, so u+ = (K·W) v.

**Why K is folded into W.** The obvious route computes u+ = K·E(x+) on the
unshifted x+, then shifts u back by 2 × 22. That stacks two products, and
the result has 3 × 22 = 66 fractional bits. A 64-bit word cannot hold them:
the integer part of u would wrap away. With K·W precomputed, every output
is a single product of Q10.22 numbers. Its 44 fractional bits fit the word,
and one shift by 22 brings it back. The cost is 3 extra products per step
and one extra gain row. The host that writes the gain table must supply
K·W, rounded to Q10.22.

## Architecture

```
            plant y, u                      link (two ready/valid row streams)
               |                     downlink: E(gains) once, then E(x) E(u) E(y)
  +------------v------------------+  ------------------------------>  +---------------------------+
  | fhe_adapter                   |                                    | fhe_controller            |
  |  fhe_prng x2 -> fhe_keygen    |                                    |  fhe_cipher_ram (63 x 512 |
  |               -> fhe_encrypt  | ---------------------------------> |    rows of 512 bits)      |
  |  fhe_decrypt -> fhe_mpdec     | <--------------------------------- |  fhe_hom_alu              |
  |  gain table, x, u registers   |   uplink: E(x+) E(u+)              |  fhe_ctrl_seq             |
  +-------------------------------+                                    +---------------------------+
                         fhe_control_system (cipher_link_if for each direction)
```

A cipher crosses the link as 512 rows of 512 bits, row 0 first, one row per
handshake. The order on the link is fixed and known to both ends. First
come the 48 gain ciphers, once: W row-major, then K·W. Then,
each step, come x, u, y, and back x+, u+. The physical link between the two
boards is not modelled: `cipher_link_if` is ideal wires with handshake
assertions.

### Controller memory and program

`fhe_cipher_ram` holds one cipher row per word. Cipher slot s occupies words
s·512 to s·512+511. The slot map is:

| slots   | contents |
|---------|----------|
| 0–39    | W = [Ad − L·Cd \| Bd \| L], 5 rows × 8 |
| 40–47   | K·W, 1 row × 8 |
| 48–55   | v = [x (5), u (1), y (2)] |
| 56–60   | x+ |
| 61      | u+ |
| 62      | scratch product T |

`fhe_ctrl_seq` walks this map. The gain rows and the outputs share one
index o = 0..5, since u+ follows x+. For each o it computes
out_o = G[o][0]·v_0, then T = G[o][t]·v_t and out_o += T for t = 1..7.
That is 48 products and 42 sums per step. The gain is always the bit-decomposed (left) operand of a product.
This matters for the noise (below).

### The ALU row engine

`fhe_hom_alu` builds the result one output row at a time, in an accumulator
of n+1 = 8 words with one 64-bit adder per column. For a product it first
reads row i of a~ and keeps its 512 bits as select bits. It then streams all
512 rows of b~ from memory, one per cycle, and adds a row whenever its
select bit is set. Finally it writes the row to the destination slot. Reads
have one cycle of latency, so each read carries its select bit along.

Cycle counts per operation, with N = 512:

| operation      | cycles         |
|----------------|----------------|
| sum            | 6N + 1         |
| scalar sum     | 5N + 1         |
| scalar product | (l+4)N + 1     |
| product        | (N+5)N + 1 = 264,705 |

Sums are done in place (destination = source). Products and scalar products
must not write into one of their sources; an assertion checks this. The
controller program uses only sums and products. The scalar operations are
there for completeness, and the ALU testbench tests them.

## Noise budget

Each cipher carries noise: the term added to mu·2^k during decryption.

* A fresh cipher's noise is R·e: at most m · 8 = 56 in size with the 4-bit
  error chosen here.
* A sum adds noises.
* A product a·b gets noise mu_b·noise_a + A·noise_b. That is the right
  operand's *message* times the left operand's noise, plus up to N times the
  right operand's noise.

Putting the fresh gain cipher on the left keeps the first term small: it is
the signal's value times 56. Every output here is one product depth on
fresh ciphers. So its noise is at most 8 × (2^31 × 56 + 512 × 56), about
2^40 even for signals at the edge of the Q10.22 range. That is far below the
2^62 limit of the decoder.

## Timing

| phase | cycles |
|-------|--------|
| key generation | n + m·n + m + m·n·l = 3,199 |
| encryption of one cipher | 512, one row per cycle, at the link's pace |
| decryption of one cipher | about 64 × 65 + 448 + 64 |
| whole boot (keys + 48 gain ciphers) | 27,921 (measured) |
| one control step | 12,872,575 (measured), almost all in the 48 products |

At a 100 MHz clock a step takes about 129 ms. The paper reports a 100 Hz
update rate and one control input every 0.8 ms on its FPGAs. This
implementation, with one output row in flight and 8 adders, is 13× slower
than 100 Hz and about 160× slower than 0.8 ms. The paper does not describe
how its implementation is parallelised. The obvious extension is to keep
several output rows in flight, sharing each streamed row of b~. It is not
built here.

## What follows the paper and what is this design's choice

From the paper:

* the scheme: keys, encryption, the four reduced-cipher operations with
  their formulas, decryption through PowersOf2(s) and the first l values;
* the sizes n = 7, m = 7, l = 64, Q10.22, and the 5/1/2 controller;
* the two-unit loop and which ciphers cross it;
* the shift >> n_q of x after decryption.

Choices made here, where the paper is silent or where its numbers do not
work together:

* a xorshift64 generator in place of a random source. It is not
  cryptographically secure; replace it for real use;
* the error e uniform in [−8, 7], where the paper uses a chi distribution of
  unstated width;
* modulus exactly 2^l;
* the bit-serial MPDec decoder;
* B·t computed with shifts and adds;
* folding Ad − L·Cd into one encrypted matrix. The paper only says that
  the state-space matrices are encrypted and sent, and its general form of
  the controller names E(L) and E(K);
* folding K into K·W, with u shifted back by n_q. The paper's loop diagram
  shifts u by 2 n_q, which implies u+ = K·E(x+). With its own l = 64 and
  n_q = 22 that product wraps, as explained above;
* sign extension of Q10.22 values to the full word, where the paper writes a
  negative value as a two's-complement (m_q + n_q)-bit integer;
* the link protocol and cipher order, the memory organisation, the slot map,
  one row per ALU pass, the gain-table write port, the seed port and the
  start/sample handshake;
* the asynchronous active-low reset, whose reset state is x = 0, u = 0.

## The pendulum test case

The paper's plant is a double inverted pendulum driven by a motor with
torque lag. The state is [θ1, θ̇1, θ2, θ̇2, T], the outputs are the two
angles, and the feedback gain is K = [−12.6, −1.8, −9.8, −0.95, 0.015]. The
observer poles are 0.7, 0.5, 0.8, 0.6 and 0.85. The paper gives no
numbers for Ad, Bd, Cd or L, so `tb_fhe_pendulum` derives them:

* It linearises the equations of motion about the upright position, with
  the motor torque acting on the first joint.
* It discretises them at 10 ms with a matrix-exponential series.
* It places the observer poles with Ackermann's formula, using θ2 as the
  output. Using θ1 alone needs gains near 4·10^4, outside Q10.22.
* With this model's signs, the given K stabilises the loop as u = −K x
  (closed-loop pole radii 0.65 to 0.91). The testbench therefore loads −K.
* The plant itself is simulated with the linear model. During the
  observer's start-up transient the angles swing past 1 rad, where the
  nonlinear pendulum would fall.

The largest gain, in the K·W row, is about 43, well inside Q10.22. This
test shows that the encrypted loop computes exactly what the fixed-point
controller would. It does not reproduce the paper's figure.

## Simulating

Every module has a self-checking testbench in `tb/`. Each compares against
`tb_fhe_ref_pkg`, a plain software model of the scheme that uses
multiplications and full bit matrices. Each prints
`TB_RESULT checks=N failures=F`. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fhe_control_system \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/fhe_pkg.sv tb/tb_fhe_ref_pkg.sv \
  tb/tb_fhe_control_system.sv && obj_dir/Vtb_fhe_control_system
```

* `tb_fhe_control_system` runs four control steps of the whole loop at
  reduced sizes (l = 32, n = 1, m = 2, 2 states) in well under a second. It
  compares u and x with a plaintext model of the controller, and reports how
  often each mechanism occurred.
* `tb_fhe_control_system_full` runs one complete step at the default sizes,
  about 10 s of simulation.
* `tb_fhe_pendulum` closes the loop around the double pendulum for 120
  steps (1.2 s at 100 Hz) with l = 64, m = 7 and Q10.22, and n reduced to
  1. It takes about 70 s. It builds the controller from the plant's
  physical constants, as described below, and checks every u and state
  estimate bit for bit against a plaintext model. The angles start at
  0.03 and 0.12 rad and end within 2·10^-4 rad of upright.
* `tb_fhe_hom_alu` checks all four operations word for word. It also checks
  that product, sum, scalar product and scalar sum of real ciphers decrypt to
  15, 8, 35 and 12.
* `tb_fhe_adapter` lets the testbench play the remote controller.
* `tb_fhe_controller` feeds random ciphers and checks the returned results
  word for word.

Sizes are changed through the `P_*` parameters of each module, whose
defaults come from `fhe_pkg`. The ALU and RAM scale with `P_ELL` and `P_N`;
the memory needs 63 × l(n+1) words of l(n+1) bits.
