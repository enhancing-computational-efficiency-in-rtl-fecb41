// reverse_converter: three signed-digit residues back to one binary number.
//
// Inputs are the n-digit signed-digit residues of X modulo 2^n-1 (m1),
// 2^n (m0) and 2^n+1 (p1). The dynamic range is M = 2^n (2^{2n}-1).
// Step 1 turns each SD residue into a binary residue r1, r0, r3
// (sd_to_residue). Step 2 combines r1 and r3 by the Chinese remainder theorem
// into Z = X mod (2^{2n}-1):
//   Z = < r1 (2^n+1) 2^{n-1} + r3 (2^n-1) 2^{n-1} >_{2^{2n}-1}
// (both inverses, of 2^n+1 mod 2^n-1 and of 2^n-1 mod 2^n+1, equal 2^{n-1}).
// Modulo 2^{2n}-1 a product by 2^k is a 2n-bit rotation and a negation is a
// bitwise inversion, so r1 (2^n+1) is {r1, r1}, r3 (2^n-1) is
// rot_n(r3) + ~r3, and all sums are end-around-carry additions.
// Step 3 adds the 2^n channel: X = r0 + 2^n Y with
//   Y = < 2^n (Z - r0) >_{2^{2n}-1},
// so X is simply {Y, r0}. x is X in [0, M); x_signed reads X >= M/2 as X - M.
//
// Interface: m1_p/m1_n, m0_p/m0_n, p1_p/p1_n in; x (3n bits), x_signed
// (3n+1 bits) out. Timing: purely combinational.
//
// The paper counts a reverse conversion in its delay model but gives no
// circuit for it; this CRT formulation is this design's choice.
module reverse_converter
  import sdrns_pkg::*;
#(
  parameter int N = 11
) (
  input  logic [N-1:0]           m1_p,
  input  logic [N-1:0]           m1_n,
  input  logic [N-1:0]           m0_p,
  input  logic [N-1:0]           m0_n,
  input  logic [N-1:0]           p1_p,
  input  logic [N-1:0]           p1_n,
  output logic [3*N-1:0]         x,
  output logic signed [3*N:0]    x_signed
);

  localparam int W = 2 * N;

  // Addition modulo 2^W - 1 with end-around carry; all-ones (the second
  // code for zero) is folded to zero so every result is in [0, 2^W-2].
  function automatic logic [W-1:0] eac_add(input logic [W-1:0] u,
                                           input logic [W-1:0] v);
    logic [W:0]   s;
    logic [W-1:0] f;
    s = {1'b0, u} + {1'b0, v};
    f = s[W-1:0] + W'(s[W]);
    return (f == '1) ? '0 : f;
  endfunction

  // Multiplication by 2^k modulo 2^W - 1.
  function automatic logic [W-1:0] rotl(input logic [W-1:0] u, input int k);
    return (u << k) | (u >> (W - k));
  endfunction

  // r1 < 2^n - 1 and r0 < 2^n: their top bit is always zero.
  logic [N:0] r1w, r0w, r3;
  logic [N-1:0] r1, r0;
  sd_to_residue #(.N(N), .MOD(MOD_2N_M1)) u_r1 (.x_p(m1_p), .x_n(m1_n), .r(r1w));
  sd_to_residue #(.N(N), .MOD(MOD_2N))    u_r0 (.x_p(m0_p), .x_n(m0_n), .r(r0w));
  assign r1 = r1w[N-1:0];
  assign r0 = r0w[N-1:0];
  sd_to_residue #(.N(N), .MOD(MOD_2N_P1)) u_r3 (.x_p(p1_p), .x_n(p1_n), .r(r3));

  logic [W-1:0] t1, a3, t3, z, y;
  always_comb begin
    t1 = rotl({r1, r1}, N - 1);
    a3 = eac_add(rotl(W'(r3), N), ~W'(r3));
    t3 = rotl(a3, N - 1);
    z  = eac_add(t1, t3);
    y  = rotl(eac_add(z, ~W'(r0)), N);
    x  = {y, r0};
  end

  localparam logic [3*N:0] M = {1'b0, {(2*N){1'b1}}, {N{1'b0}}};

  always_comb begin
    if ({1'b0, x} >= (M >> 1)) x_signed = signed'({1'b0, x} - M);
    else                       x_signed = signed'({1'b0, x});
  end

endmodule
