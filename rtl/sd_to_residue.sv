// sd_to_residue: signed-digit residue to ordinary binary residue.
//
// Takes an n-digit signed-digit residue (value p - n, in [-(2^n-1), 2^n-1])
// of a channel with modulus m in {2^n-1, 2^n, 2^n+1} and returns its unique
// representative in [0, m) as an (n+1)-bit binary number. It is one
// carry-propagate subtraction p - n followed by a single correction: +m when
// the difference is negative, -m when it is m or above (possible only for
// m = 2^n-1). This is the first step of the reverse conversion; the paper
// does not describe the reverse converter's insides, so this structure is
// this design's choice.
//
// Interface: x_p/x_n in, r out (bit n is set only for r = 2^n, modulus
// 2^n+1). Timing: purely combinational.
module sd_to_residue
  import sdrns_pkg::*;
#(
  parameter int   N   = 11,
  parameter mod_e MOD = MOD_2N
) (
  input  logic [N-1:0] x_p,
  input  logic [N-1:0] x_n,
  output logic [N:0]   r
);

  localparam logic signed [N+1:0] M =
      (MOD == MOD_2N_M1) ? (N+2)'((1 << N) - 1) :
      (MOD == MOD_2N_P1) ? (N+2)'((1 << N) + 1) : (N+2)'(1 << N);

  logic signed [N+1:0] d, c;
  always_comb begin
    d = signed'({2'b00, x_p}) - signed'({2'b00, x_n});
    if (d < 0)       c = d + M;
    else if (d >= M) c = d - M;
    else             c = d;
    r = c[N:0];
  end

endmodule
