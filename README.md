# RNS datapath for neural-network inference

Most of the work in a neural network's inference is multiply-and-accumulate. This design
does that arithmetic in a **residue number system (RNS)**. An integer is not stored as one
28-bit binary word. It is stored as four small remainders, one per modulus, and each
remainder is computed in its own narrow channel. An addition or multiplication never carries
from one channel to another. Each channel is only 7 to 9 bits wide, so its multiplier is far
smaller than a 28- or 32-bit one.

RNS makes comparison hard: in the residues there is no bit that says which number is larger.
A network needs comparison twice: for the ReLU nonlinearity, and to pick the winning class
at the output. The most involved part of this RTL is a comparator that turns a comparison
into a parity check (is the number even or odd?). The parity is computed from the residues
alone.

The moduli set, the adder, multiplier, residue-generator and parity circuits, and the use of
a half comparator for ReLU and a full comparator for the final maximum follow M. Abdelhamid
and S. Koppula, "Applying the Residue Number System to Network Inference". That work
describes and synthesizes the blocks one at a time. The inference core that connects them
here is this design's own, and so is every detail the paper leaves open (listed below).

The RTL provides the building blocks and a small inference core that strings them together:

| block | module | what it does |
|---|---|---|
| modulo 2^k-1 adder | `rns_modadd_m1` | parallel-prefix adder with end-around carry |
| modulo 2^k+1 adder | `rns_modadd_p1` | add, then correct at the output |
| modulo 2^k-1 multiplier | `rns_modmul_m1` | rotated partial products, end-around-carry CSA, prefix adder |
| modulo 2^k+1 multiplier | `rns_modmul_p1` | inverted-rotation partial products, modulo CSA, modulo adder |
| RNS adder / multiplier | `rns_add`, `rns_mul` | the four channels side by side |
| residue generator | `rns_convert` (+ `rns_residue_tree`) | binary to RNS |
| parity unit | `rns_parity` | X mod 2 from the residues |
| full comparator | `rns_compare` | A >= B |
| ReLU (half comparator) | `rns_relu` | zero the negative values |
| argmax | `rns_argmax` | index of the largest final-layer output |
| MAC | `rns_mac` | dot product, one product per clock |
| inference core (top) | `rns_inference_core` | input conversion, MAC, ReLU or argmax |

Shared types and constants are in `rns_pkg`. Everything except the MAC, the argmax and the
top is purely combinational.

## Number format

The moduli form the conjugate set {2^n-1, 2^n+1, 2^(n+1)-1, 2^(n+1)+1}. With n = 7 they are
{127, 129, 255, 257}. All four are pairwise coprime, and together they cover the range

    M = (2^2n - 1)(2^(2n+2) - 1) / 3 = 357,886,635      (a little over 2^28)

An RNS word `rns_t` is a 32-bit packed struct:

| field | modulus | width | bits |
|---|---|---|---|
| `x1`  | 2^n-1 = 127     | 7 | [6:0] |
| `x1s` | 2^n+1 = 129     | 8 | [14:7] |
| `x2`  | 2^(n+1)-1 = 255 | 8 | [22:15] |
| `x2s` | 2^(n+1)+1 = 257 | 9 | [31:23] |

Three rules hold everywhere:

* **Canonical residues.** A residue mod 2^k-1 lies in [0, 2^k-2]. The all-ones pattern would
  be a second code for zero, and every block avoids producing it (see the adder below). A
  residue mod 2^k+1 lies in [0, 2^k] in normal binary form (not diminished-1), so it needs
  k+1 bits.
* **Signed values wrap around.** A negative value v is stored as M + v. A stored value in
  [(M+1)/2, M-1] is negative, and one in [0, (M-1)/2] is non-negative. The constant
  `RELU_THR = (M+1)/2 = 178,943,318` marks the boundary.
* **No reverse conversion.** Nothing ever converts a result back to binary. The network's
  answer is a class index, found by comparisons done in RNS.

`rns_pkg::rns_of(v)` gives the residues of a constant at elaboration time, and
`rns_pkg::rns_neg` gives the additive inverse. The inverse is a bitwise inversion for the
2^k-1 residues and 2^k+1-x for the 2^k+1 residues.

## Modulo adders

**Mod 2^k-1 (`rns_modadd_m1`).** Since 2^k = 1 (mod 2^k-1), a carry out of the top bit is
worth 1. It is fed back into bit 0 (the end-around carry). The adder is a parallel-prefix
adder:

1. Per bit, (g, p) = (a&b, a^b).
2. A Sklansky tree of log2(k) levels of dot operators, (G,P)∘(G',P') = (G | P&G', P&P'), gives
   G[i:0] and P[i:0] for every prefix.
3. One more row of dot operators applies the end-around carry to every bit:
   c_i = G[i:0] | P[i:0]&cin.
4. s_i = p_i ^ c_(i-1).

For k = 7 the carry path is three tree levels plus the correction row.

The textbook end-around carry is cin = cout = G[k-1:0]. With that choice, a+b = 2^k-1 gives
all ones, the second code of zero. This design uses **cin = G[k-1:0] | P[k-1:0]**. The
all-propagate case is then also incremented and wraps to 0, so the output is always
canonical. The extra cost is one OR gate. The parity unit relies on this: it reads the
least significant bit of a mod 2^14-1 difference, and that bit is wrong if zero comes out as
all ones. The adder accepts one operand equal to all ones, but not both.

**Mod 2^k+1 (`rns_modadd_p1`).** This adder forms t = a+b (k+2 bits) and t-(2^k+1), and the
sign of the difference picks one of them. It is a plain output correction. The adder
architecture is left to synthesis.

## Modulo multipliers

**Mod 2^k-1 (`rns_modmul_m1`).** Multiplying by 2^i mod 2^k-1 is a rotation, so partial
product i is `x_i ? rotl(y, i) : 0` and is k bits wide. A carry-save array of full adders
reduces the k partial products to a sum word and a carry word. In each row the carry that
leaves bit k-1 re-enters at bit 0. The modulo adder above then adds the two words. No row
sees three all-ones words, so the final adder never receives two all-ones operands and the
product is canonical.

**Mod 2^k+1 (`rns_modmul_p1`).** Here 2^k = -1. Shifting y left by i pushes its top i bits
to weights where they count negatively. Taking their one's complement turns that into an
addition plus a constant:

    PP_i = x_i ? { y[k-1-i:0], ~y[k-1:k-i] } : { 0..0, 1..1 (i ones) }
    x*y  = sum_i PP_i + (k + 2)        (mod 2^k+1),  for x, y < 2^k

When x_i = 0 the partial product is 2^i-1 rather than 0. This makes the correction the same
constant k+2 for every x.

The partial products are reduced by a modulo carry-save array. The carry leaving bit k-1 of
a row is worth 2^k = -1. It re-enters bit 0 inverted, since -c = ~c - 1, so each row's output
pair exceeds its true sum by exactly one. There are k partial products plus one constant
word, which takes k-1 rows. The constant word is therefore (k+2) - (k-1) = 3 for every k.
A mod 2^k+1 adder combines the resulting sum and carry words.

The residue 2^k (that is, -1) cannot appear in a k-bit partial product. It is handled by an
output multiplexer: -1·y = -y, x·-1 = -x, and -1·-1 = 1.

## Forward conversion (`rns_convert`)

Because 2^k is ±1 modulo 2^k∓1, a binary word can be cut into k-bit chunks and the chunks
summed:

* mod 2^k-1: every chunk has weight +1. An all-ones chunk is replaced by 0.
* mod 2^k+1: chunk j has weight (-1)^j, so the odd chunks enter as 2^k+1-c.

Each modulus has its own balanced tree of modulo adders (`rns_residue_tree`). The input has
`IN_W` = 28 bits. Every 28-bit value is below M, so the conversion loses nothing.

## Parity and comparison

### Why parity decides a comparison

Take A, B in [0, M) and the RNS difference C = A - B (mod M). Then C = A-B when A >= B, and
C = M+A-B when A < B. M is odd, so the two candidates have opposite parity:

    A >= B   <=>   parity(C) == parity(A) xor parity(B)

So a comparator needs an RNS subtractor and a parity unit.

### Computing the parity (`rns_parity`)

The parity of X cannot be read from the residues directly. The unit rebuilds X on the two
modulus pairs:

    X1 = x1s + (2^n+1)     * ( 2^(n-1) * (x1 - x1s)  mod 2^n-1 )      = X mod 2^2n-1     (14 bits)
    X2 = x2s + (2^(n+1)+1) * ( 2^n     * (x2 - x2s)  mod 2^(n+1)-1 )  = X mod 2^(2n+2)-1 (16 bits)
    parity(X) = LSB(X2) xor LSB( (X1 - X2) mod 2^2n-1 )

Each step maps to cheap hardware:

* **-x1s mod 2^n-1.** x1s has n+1 bits and its top bit is worth 2^n = 1. So
  -x1s = ~x1s[n-1:0], except that bit 0 becomes XNOR(x1s[n], x1s[0]). The x2s side works the
  same way with bit n+1.
* **x1 - x1s** uses one mod 2^n-1 adder.
* **Times 2^(n-1)** is a rotate right by one bit, because 2^(n-1) is the inverse of 2
  mod 2^n-1.
* **Times (2^n+1)** is two adds. An (n+1)-bit add forms t + x1s. A 2n-bit add then places t
  above it (t·2^n, zero padding on the right).
* **X2 mod 2^2n-1** adds X2[15:14] to X2[13:0], which works because 2^14 = 1. This is done
  in an end-around-carry adder, because the sum can overflow 14 bits.
* **X1 - X2** inverts the reduced X2 and adds it in a 14-bit modulo adder.

The last adder must return 0, not all ones, when X1 = X2. This is why every 2^k-1 adder in
the design gives a canonical result.

### Full comparator and ReLU

`rns_compare` negates B, adds it to A in an `rns_add`, and evaluates three parity units in
parallel. It compares as **unsigned** numbers in [0, M).

`rns_relu` compares against a fixed threshold, so it is a half comparator. The threshold is
`RELU_THR = (M+1)/2`. Its additive inverse is a constant adder operand, and its parity is a
constant bit. Only two parity units remain. The output is 0 when the input encodes a
negative value, and the input unchanged otherwise. The `negative` output reports which case
occurred.

## MAC, argmax and the inference core

`rns_mac` multiplies an activation by a weight (`rns_mul`) and adds the product to an
accumulator (`rns_add`), one pair per clock. `first` restarts the sum. `done` pulses in the
cycle after the clock edge that accepted the pair marked `last`. Sums wrap modulo M, which is
exactly how negative partial sums are meant to be represented.

`rns_argmax` receives `N_CLASSES` (10) final-layer sums, one per valid cycle, and keeps the
running maximum and its index. It compares **signed** values: both operands are first shifted
by (M-1)/2, which maps [-(M-1)/2, (M-1)/2] in order onto [0, M-1]. On a tie the lower index
wins. `idx_valid` pulses in the cycle after the edge that accepts the tenth value.

`rns_inference_core` is a neuron-serial datapath:

    in_bin --rns_convert--+
                          +-- mux (in_is_bin) --> rns_mac --acc--> rns_relu --> act / act_clamped   (final_layer = 0)
    in_rns ---------------+          ^                      \
    in_w ----------------------------+                       +--> rns_argmax --> class_idx / class_max   (final_layer = 1)

* The caller streams a neuron's (activation, weight) pairs with
  `in_valid / in_first / in_last`.
* Each activation is either binary (converted on the fly, e.g. input pixels) or already in
  RNS (from a previous layer), chosen by `in_is_bin`.
* `final_layer`, sampled with the last pair, sends the neuron's sum to the ReLU or to the
  argmax.
* Neurons may follow each other back to back.

Timing, counting the edge that accepts a neuron's last pair as edge 0:

    edge 0   last pair accepted          acc = complete sum, done = 1
    edge 1   ReLU result registered      act_valid = 1 (hidden layer)
             argmax takes the sum        class_valid = 1 after the 10th final-layer neuron

There is no weight or activation memory. The core computes; storing and scheduling a
network's tensors is left to the surrounding system.

## Fitting a network

A dot product stays correct as long as its true value lies inside ±(M-1)/2 = ±178,943,317.
Take a network with 6-bit weights and activations: signed weights in [-32, 31], and unsigned
activations in [0, 63] after ReLU. One product is at most 2016 in magnitude, so a neuron may
have up to about 88,000 inputs before any risk of overflow. 32-bit integer weights and
activations do not fit, because the range is only about 28 bits.

## How far to trust it, and where it departs from the paper

Every block's testbench compares it with integer arithmetic computed independently of the
RTL. The checks by block:

* **Modulo adders and multipliers:** every operand pair at k = 7 and k = 8, and random pairs
  at k = 14 (2^k-1 blocks) or k = 9 (2^k+1 blocks).
* **Parity unit:** the first and last 1000 values of [0, M) and values near multiples of
  16383 and 65535, plus 100,000 random values. It never disagreed with X mod 2.
* **Comparator, ReLU, converter, RNS adder and multiplier:** random values plus the edges of
  the range and of the ReLU threshold.
* **MAC, argmax and core:** the cycle on which each result appears is checked as well as its
  value.
* **Core end to end:** the test runs at the default parameters. It counts binary
  conversions, RNS bypasses, ReLU clamps and passes, back-to-back neurons, argmax
  replacements and class results, and fails if any of them never happens.
* **Small network:** `tb_rns_network` runs a 64-input, 16-hidden, 10-class network with
  6-bit weights and pixels through the core. Pixels enter in binary. The hidden activations
  leave the core in RNS and are fed back in unchanged. Hidden activations, class index and
  winning sum are compared with the same network evaluated in integers.

No timing, power or area figures are claimed.

Choices that differ from the paper's description, or fill in what it leaves open:

* **Mod 2^k-1 adder:** canonical (single-zero) result, using cin = G | P instead of cin = cout.
* **Mod 2^k+1 adder:** normal-form residues with a compare-and-subtract correction. It is
  not a diminished-1 prefix adder.
* **Mod 2^k+1 multiplier:** the constant word 3 and the inverted end-around carry are
  derived here, not given in the paper. The multiplier handles the value 2^k separately.
* **Both multipliers:** the carry-save stage is a linear array, not a Wallace-style tree.
  The result is the same and the depth is larger.
* **Parity unit:** the X2 reduction uses an end-around-carry adder, not a plain 14-bit add.
* **Thresholds and ordering:** the ReLU threshold "M/2" is taken as (M+1)/2. The argmax
  compares signed values and breaks ties to the lower index.
* **Core:** the streaming core, its framing and its latencies are this design's own. So are
  the 28-bit converter input, the serial argmax and the asynchronous active-low reset.

## Simulating

Every testbench is self-checking, ends with a line
`TB_RESULT checks=<n> failures=<n>`, and has a watchdog. Compile the package files first.
For example, the end-to-end test:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
        -y rtl -y tb rtl/rns_pkg.sv tb/tb_rns_ref_pkg.sv tb/tb_rns_inference_core.sv \
        --top-module tb_rns_inference_core --Mdir obj_core
    ./obj_core/Vtb_rns_inference_core

Replace the last testbench with `tb/tb_<module>.sv` (and the top with `tb_<module>`) for any
block. `tb_rns_ref_pkg` holds the integer reference: residues by `%`, and signed encoding
and decoding. The simulator used has two-state logic, so every register read by the design
is reset.

To change the number system, change `N` in `rns_pkg`. The widths, moduli, M and the
threshold constants follow from it. The testbenches' reference constants assume n = 7.
