// forward_converter: binary operand to signed-digit residue, one channel.
//
// Converts a P-bit two's-complement operand x into an n-digit signed-digit
// residue modulo 2^n, 2^n-1 or 2^n+1. The operand is read as P signed digits:
// every bit is a positive digit except the sign bit, which is a negative
// digit of weight -2^{P-1}. These digits are cut into C = ceil(P/n) chunks of
// n digits. Chunk j has weight 2^{jn}, which is 1 modulo 2^n-1, (-1)^j modulo
// 2^n+1 (odd chunks enter negated, a posibit/negabit swap) and 0 modulo 2^n
// for j > 0. The weighted chunks are summed carry-free by a tree of SD
// modular adders (sd_mod_sum), so conversion time grows with log2(C) only.
//
// Interface: x in, r_p/r_n out (posibit/negabit buses). Timing: purely
// combinational.
//
// The paper states that operands are first converted into residues and counts
// the forward conversion in its delay model; the chunk-summing structure and
// the two's-complement reading are this design's choices.
module forward_converter
  import sdrns_pkg::*;
#(
  parameter int   N   = 11,
  parameter int   P   = 32,
  parameter mod_e MOD = MOD_2N
) (
  input  logic [P-1:0] x,
  output logic [N-1:0] r_p,
  output logic [N-1:0] r_n
);

  localparam int C = (P + N - 1) / N;   // number of n-digit chunks

  logic [C*N-1:0] dig_p, dig_n;         // operand as signed digits
  always_comb begin
    dig_p = '0;
    dig_n = '0;
    dig_p[P-2:0] = x[P-2:0];
    dig_n[P-1]   = x[P-1];
  end

  logic [N-1:0] ch_p [C], ch_n [C];
  for (genvar j = 0; j < C; j++) begin : g_chunk
    if (MOD == MOD_2N && j > 0) begin : g_drop
      assign ch_p[j] = '0;
      assign ch_n[j] = '0;
    end else if (MOD == MOD_2N_P1 && (j % 2) == 1) begin : g_neg
      assign ch_p[j] = dig_n[j*N +: N];
      assign ch_n[j] = dig_p[j*N +: N];
    end else begin : g_pos
      assign ch_p[j] = dig_p[j*N +: N];
      assign ch_n[j] = dig_n[j*N +: N];
    end
  end

  sd_mod_sum #(.N(N), .MOD(MOD), .K(C)) u_sum (
    .x_p(ch_p), .x_n(ch_n), .s_p(r_p), .s_n(r_n)
  );

endmodule
