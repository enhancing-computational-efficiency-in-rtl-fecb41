# SD-RNS arithmetic unit: signed-digit residue arithmetic in SystemVerilog

Binary adders and multipliers get slower as words get wider, because a carry
may have to travel the whole word. This design combines two known ways around
that:

* **Residue number system (RNS).** A number X is held as its remainders
  modulo the three coprime moduli 2^n-1, 2^n and 2^n+1. Addition and
  multiplication then act on each remainder on its own: three narrow
  n-digit channels replace one 3n-bit word. The dynamic range is
  M = (2^n-1)·2^n·(2^n+1) = 2^n(2^2n-1).
* **Signed digits (SD).** Each remainder is itself held redundantly, as n
  digits from {-1, 0, 1} (value Σ d_i·2^i). With that slack an addition can
  be done without carry propagation: each output digit depends on three
  input digit positions, whatever n is.

The combination, here called SD-RNS, gives modular adders whose delay does
not grow with n, and modular multipliers built from those adders. Numbers
enter through a forward converter (binary to SD residues) and leave through
a reverse converter (SD residues to binary). Both conversions are paid once
per operand and once per result, not once per operation. The cost of a
computation with x additions and y multiplications is therefore

    T = T_FC + x·T_add + y·T_mul + T_RC

and the scheme pays off when x + y is large. Neural-network
multiply-accumulate, digital filters and modular cryptography are such
workloads.

The RTL follows the published description of SD-RNS arithmetic in
"Enhancing Computational Efficiency in Intensive Domains via Redundant
Residue Number Systems" (Mousavi, Rahmati, Gorgin, Lee). That paper is a
comparative study. It fixes the moduli set, the digit set, the end-around
carry of the modular adders, the rotation rule for partial products and the
four sizes used below. It takes the digit-level cells from earlier work and
prints no circuit for them, and it describes no converter circuits, control
or registers. Those parts are this design's own. Section "Where the design
goes beyond the paper" below lists them.

## Sizes

| operand bits P | channel digits n | moduli                 | M = 2^n(2^2n-1) |
|----------------|------------------|------------------------|-----------------|
| 16             | 5                | 31, 32, 33             | 32 736          |
| 24             | 8                | 255, 256, 257          | 16 776 960      |
| **32**         | **11**           | **2047, 2048, 2049**   | **≈ 8.6·10^9**  |
| 64             | 21               | 2^21-1, 2^21, 2^21+1   | ≈ 9.2·10^18     |

These are the four (P, n) pairs of the published evaluation. Every module
takes `N` (= n) and, where relevant, `P` as parameters. The default is
P = 32, n = 11. It is the only pair whose range M exceeds 2^P, so every
32-bit operand has a distinct residue triple. For the other three pairs M is
slightly smaller than 2^P. Results are always exact modulo M.

## Digit encoding

A signed digit is a posibit/negabit pair (p, n) with value p − n. An n-digit
residue therefore travels as two n-bit buses, `x_p` and `x_n`. The pair
(1,1) is accepted on every input and means 0. No module produces it.
Negating a residue swaps the two buses, so subtraction is free.

The encoding is redundant: the same residue has many digit patterns. In
particular, modulo 2^n-1 zero is also "all digits +1" or "all digits -1".
Only the reverse converter resolves this: it reduces each channel to one
ordinary binary residue. Everything else works on any pattern.

For 2^n+1, n digits are enough: they span [-(2^n-1), 2^n-1], which covers
all 2^n+1 residue classes. All three channels therefore have the same width.

## The carry-free modular adder (`sd_mod_adder`)

This is the heart of the design and the least obvious part. At each
position i the digit sum s_i = a_i + b_i lies in [-2, 2]. It is split into a
transfer t_{i+1} to the next position and an interim digit w_i, with
s_i = 2·t_{i+1} + w_i:

| s_i | s_{i-1} ≥ 0       | s_{i-1} < 0       |
|-----|-------------------|-------------------|
|  2  | t = 1, w = 0      | t = 1, w = 0      |
|  1  | t = 1, w = −1     | t = 0, w = 1      |
|  0  | t = 0, w = 0      | t = 0, w = 0      |
| −1  | t = 0, w = −1     | t = −1, w = 1     |
| −2  | t = −1, w = 0     | t = −1, w = 0     |

If s_{i-1} ≥ 0, the transfer arriving at position i is 0 or +1, so w_i is
chosen from {−1, 0}. If s_{i-1} < 0, the arriving transfer is 0 or −1, so
w_i is chosen from {0, +1}. Either way the output digit z_i = w_i + t_i
stays in {−1, 0, 1}. No carry chain exists, and z_i depends only on
positions i, i−1 and i−2.

The transfer out of the top digit has weight 2^n. Each channel handles it
differently:

* **mod 2^n:** the transfer is dropped.
* **mod 2^n−1:** since 2^n ≡ 1, it re-enters at digit 0. This is the
  end-around carry.
* **mod 2^n+1:** since 2^n ≡ −1, it re-enters at digit 0 negated.

Digit 0 also needs a "lower neighbour" for its decision. It uses the top
position through the same wrap: the sign of s_{n−1}, flipped for 2^n+1,
because the wrapped transfer is negated there. The transfers come from the
input sums alone, so the wrap forms no combinational loop.

## The modular multiplier (`sd_mod_multiplier`)

The multiplier b is read in radix 4. Digit pair i is worth
2·b_{2i+1} + b_{2i} ∈ [−3, 3]. For each pair:

1. The radix-4 product is formed as rp_i = ⟨a·b_{2i} + (2a)·b_{2i+1}⟩_m.
   Multiplying by one signed digit is a select, or a bus swap for −1. This
   takes one carry-free modular addition.
2. It is scaled by rotation: pp_i = ⟨2^{2i}·rp_i⟩_m. Modulo these moduli,
   multiplying by 2^k is wiring only:
   * mod 2^n−1: digits shifted out of the top re-enter at the bottom;
   * mod 2^n: they are lost, and zeros enter;
   * mod 2^n+1: they re-enter at the bottom negated (bus swap).
3. The ⌈n/2⌉ partial products are summed by a balanced tree of carry-free
   modular adders (`sd_mod_sum`).

The product is again n signed digits, ready for the next operation. Its
depth is about 1 + ⌈log2⌈n/2⌉⌉ adder delays: 4 at n = 11 and 5 at n = 21.

## Conversions

**Forward (`forward_converter`).** The P-bit two's-complement operand is
read as P signed digits: ordinary bits are +1 digits and the sign bit is a
−1 digit. The digits are cut into ⌈P/n⌉ chunks of n digits. Chunk j has
weight 2^{jn}, which is:

* 1 modulo 2^n−1;
* (−1)^j modulo 2^n+1, so odd chunks enter with their buses swapped;
* 0 modulo 2^n for j > 0.

The chunks are added by the same carry-free adder tree. At the default size
the tree has 3 chunks and is 2 levels deep.

**Reverse (`reverse_converter`, with `sd_to_residue`).** Each channel's SD
residue is first made an ordinary binary residue. This takes one subtraction
p − n and a single ±m correction. The three residues r1 (mod 2^n−1),
r0 (mod 2^n) and r3 (mod 2^n+1) are then combined by the Chinese remainder
theorem in two steps:

    Z = ⟨ r1·(2^n+1)·2^(n−1) + r3·(2^n−1)·2^(n−1) ⟩ mod 2^2n−1
    Y = ⟨ 2^n·(Z − r0) ⟩ mod 2^2n−1
    X = Y·2^n + r0        (i.e. the bits {Y, r0})

The modular inverse of 2^n+1 mod 2^n−1 and the inverse of 2^n−1 mod 2^n+1
are both 2^(n−1). Modulo 2^2n−1, multiplying by a power of two is a
rotation and negating is a bit inversion. So Z and Y need only 2n-bit
end-around-carry adders and wiring. The converter outputs X in [0, M) and,
reading X ≥ M/2 as negative, a signed value in [−M/2, M/2).

## The unit (`sd_rns_unit`, top level)

The top holds one accumulator as three SD residues and performs one
operation per clock:

| `op`      | effect            |
|-----------|-------------------|
| `OP_LOAD` | acc = a           |
| `OP_ADD`  | acc = acc + a     |
| `OP_SUB`  | acc = acc − a     |
| `OP_MUL`  | acc = acc · a     |
| `OP_MAC`  | acc = acc + a · b |

Each channel contains:

* two forward converters, for a and b;
* one modular multiplier, whose first input is a mux: acc for `OP_MUL`,
  b for `OP_MAC`;
* one modular adder, whose second input is a, −a or the product.

The reverse converter reads the accumulator register directly.

Ports and timing:

* `clk`, `rst_n`: synchronous, active-low reset that clears the accumulator
  to 0.
* `op_valid`, `op`, `a`, `b`: sampled at the rising edge. With
  `op_valid` = 0 the accumulator holds its value.
* `result` [3n−1:0] and `result_signed` [3n:0]: the accumulator in binary,
  valid from the cycle after the operation. Both are combinational from the
  register, through the reverse converter.
* Throughput is one operation per cycle. Nothing stalls or handshakes. An
  assertion flags an op code outside the five above.

In a real pipeline the reverse converter would be used only at the end of a
run; here it is always present, so the result can be observed after every
step.

## Where the design goes beyond the paper

The paper fixes:

* the moduli set {2^n−1, 2^n, 2^n+1};
* the digit set {−1, 0, 1} and the parallel, identical adder cells;
* the end-around carry of the modular adder;
* radix-4 partial products generated by rotation, including the negated
  wrap for 2^n+1;
* the T_FC + x·T_add + y·T_mul + T_RC cost model;
* the four (P, n) sizes.

The following are this design's choices:

* the posibit/negabit encoding and the transfer/interim digit rule of the
  adder cell;
* the negated end-around transfer of the 2^n+1 adder (the paper states the
  negated wrap only for partial products);
* forming rp_i with one adder and summing partial products with a binary
  tree;
* the chunk-summing forward converter and its two's-complement input;
* the whole reverse converter;
* the accumulator, the operation set, MAC, the reset and the one-cycle
  timing;
* P = 32, n = 11 as the default.

The paper reports post-synthesis delays for its circuits, for example
0.21 ns for the modular adder at every n. This RTL has not been synthesized
to a cell library, so those figures are not reproduced. Only the
structural property behind them is: the adder's depth does not depend on n.

Left out on purpose: the plain binary, plain RNS and plain signed-digit
adders and multipliers. The paper uses them only as baselines for
comparison.

## Verification

Every testbench is self-checking. It compares against integer arithmetic
done in the testbench, prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

| testbench               | what it covers |
|-------------------------|----------------|
| `tb_sd_mod_adder`       | all three moduli at n = 5 and 11; random operands including (1,1) digits; sum ≡ a+b (mod m); no (1,1) output digits |
| `tb_sd_mod_multiplier`  | the same for products |
| `tb_forward_converter`  | all three moduli at (16, 5) and (32, 11); random and extreme signed operands |
| `tb_reverse_converter`  | n = 5, 11 and 21; every residue given a random SD form; exact X and signed X, including 0, M/2−1, M/2 and M−1 |
| `tb_sd_rns_unit`        | the top at its default size: 20 000 random cycles of all operations, idle cycles and a reset, checked every cycle (this also checks the one-cycle latency). It counts, and requires at least once, every operation, an idle cycle, the reset, additions that wrap each odd modulus, and negative and non-negative results |
| `tb_sd_rns_configs`     | the top at all four (P, n) sizes: load + x additions + y multiplications for x, y ∈ {0, 50, 150, 300}, with a cycle count check; and a 4608-term dot product of 8-bit values, the length of one VGG16 3×3×512 convolution output. Exact where the range allows (n = 11, 21); modulo M otherwise |

Example, with plain Verilator:

    verilator --binary --timing --assert -Irtl -y rtl rtl/sdrns_pkg.sv \
        tb/tb_sd_rns_unit.sv --top-module tb_sd_rns_unit -o sim
    ./obj_dir/sim

Any other testbench builds the same way: the package first, then the
testbench file, with `-y rtl` to find the modules.

Known limits:

* Only the accumulator is clocked. Multiplier, converters and adder form one
  combinational path per cycle, so the clock rate is set by the forward
  converter plus the multiplier tree plus the adder.
* Range overflow is not detected. Results wrap modulo M, as residue
  arithmetic always does.
