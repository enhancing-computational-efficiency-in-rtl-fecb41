// sd_mod_adder: carry-free signed-digit adder for one residue channel.
//
// Adds two n-digit signed-digit (SD) numbers, digits in {-1,0,1}, modulo
// 2^n (MOD_2N), 2^n-1 (MOD_2N_M1) or 2^n+1 (MOD_2N_P1), giving an n-digit SD
// sum. No carry ripples: at every position the digit sum s_i in [-2,2] is
// split into a transfer t_{i+1} in {-1,0,1} and an interim digit w_i with
// s_i = 2*t_{i+1} + w_i. The split at position i looks at the sign of s_{i-1}:
// when s_{i-1} >= 0 the incoming transfer is 0 or +1, so w_i is taken as 0 or
// -1; otherwise the incoming transfer is 0 or -1 and w_i is 0 or +1. The
// output digit z_i = w_i + t_i therefore stays in {-1,0,1}, and each output
// digit depends on three input positions only, whatever n is.
//
// The transfer out of the top digit has weight 2^n. Modulo 2^n it is dropped;
// modulo 2^n-1 it re-enters at digit 0 (2^n = 1, the end-around carry);
// modulo 2^n+1 it re-enters negated (2^n = -1). Digit 0 then reads the sign of
// s_{n-1} (negated for 2^n+1) as its "lower position", so the scheme stays
// closed and loop-free.
//
// Interface: a_p/a_n, b_p/b_n in, s_p/s_n out (posibit/negabit buses, digit
// value p - n; an input pair (1,1) reads as 0). Output digits never use (1,1).
// Timing: purely combinational.
//
// From the paper: the SD digit set, the moduli set, the parallel identical
// cells and the end-around carry of the modular adder. The paper takes the
// cell itself from earlier work and does not print it; the transfer/interim
// rule above is a standard choice made here.
module sd_mod_adder
  import sdrns_pkg::*;
#(
  parameter int   N   = 11,
  parameter mod_e MOD = MOD_2N
) (
  input  logic [N-1:0] a_p,
  input  logic [N-1:0] a_n,
  input  logic [N-1:0] b_p,
  input  logic [N-1:0] b_n,
  output logic [N-1:0] s_p,
  output logic [N-1:0] s_n
);

  // Per-position digit sum, transfer and interim digit.
  logic signed [2:0] s   [N];
  logic signed [1:0] t   [N+1];   // t[i] enters position i
  logic signed [1:0] w   [N];
  logic              low_nonneg [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      s[i] = 3'(signed'({2'b00, a_p[i]})) + 3'(signed'({2'b00, b_p[i]}))
           - 3'(signed'({2'b00, a_n[i]})) - 3'(signed'({2'b00, b_n[i]}));
    end

    // Sign of the lower position. Digit 0 sees the top digit through the
    // end-around path (its sign flipped for 2^n+1).
    for (int i = 1; i < N; i++) low_nonneg[i] = (s[i-1] >= 0);
    case (MOD)
      MOD_2N_M1: low_nonneg[0] = (s[N-1] >= 0);
      MOD_2N_P1: low_nonneg[0] = (s[N-1] <= 0);
      default:   low_nonneg[0] = 1'b1;
    endcase

    for (int i = 0; i < N; i++) begin
      case (s[i])
        3'sd2:   begin t[i+1] =  2'sd1; w[i] =  2'sd0; end
        -3'sd2:  begin t[i+1] = -2'sd1; w[i] =  2'sd0; end
        3'sd1:   if (low_nonneg[i]) begin t[i+1] = 2'sd1; w[i] = -2'sd1; end
                 else               begin t[i+1] = 2'sd0; w[i] =  2'sd1; end
        -3'sd1:  if (low_nonneg[i]) begin t[i+1] =  2'sd0; w[i] = -2'sd1; end
                 else               begin t[i+1] = -2'sd1; w[i] =  2'sd1; end
        default: begin t[i+1] = 2'sd0; w[i] = 2'sd0; end
      endcase
    end

    case (MOD)
      MOD_2N_M1: t[0] =  t[N];
      MOD_2N_P1: t[0] = -t[N];
      default:   t[0] =  2'sd0;
    endcase

    for (int i = 0; i < N; i++) begin
      s_p[i] = ((w[i] + t[i]) ==  2'sd1);
      s_n[i] = ((w[i] + t[i]) == -2'sd1);
    end
  end

endmodule
