// sd_mod_multiplier: signed-digit modular multiplier for one residue channel.
//
// Multiplies two n-digit signed-digit residues modulo 2^n, 2^n-1 or 2^n+1.
// The multiplier b is read in radix 4: digit pair i has value
// 2*b_{2i+1} + b_{2i} in [-3,3]. For each pair a radix-4 product
// rp_i = <a * (2*b_{2i+1} + b_{2i})>_m is formed by one carry-free modular
// addition of a*b_{2i} and (2a)*b_{2i+1}; multiplying by a digit in
// {-1,0,1} is a select or a posibit/negabit swap. The partial product
// pp_i = <2^{2i} * rp_i>_m is then pure wiring, a rotation by 2i digits:
//   mod 2^n-1 : digits leaving the top re-enter at the bottom,
//   mod 2^n   : they are dropped and zeros enter,
//   mod 2^n+1 : they re-enter at the bottom negated.
// The ceil(n/2) partial products are added by a tree of SD modular adders
// (sd_mod_sum), so the product is again n SD digits.
//
// Interface: a_p/a_n (multiplicand), b_p/b_n (multiplier) in, p_p/p_n out.
// A multiplier digit encoded (1,1) reads as 0. Timing: purely combinational.
//
// From the paper: the radix-4 partial products pp_i = <2^{2i} <rp_i>>_m and
// the three rotation rules. The form of rp_i and the adder tree are this
// design's choices.
module sd_mod_multiplier
  import sdrns_pkg::*;
#(
  parameter int   N   = 11,
  parameter mod_e MOD = MOD_2N
) (
  input  logic [N-1:0] a_p,
  input  logic [N-1:0] a_n,
  input  logic [N-1:0] b_p,
  input  logic [N-1:0] b_n,
  output logic [N-1:0] p_p,
  output logic [N-1:0] p_n
);

  localparam int K = (N + 1) / 2;   // radix-4 digit pairs

  // Rotation by k digits following the channel's rule. Returns {pos, neg}.
  function automatic logic [2*N-1:0] rot(input logic [N-1:0] xp,
                                         input logic [N-1:0] xn,
                                         input int k);
    logic [N-1:0] rp, rn;
    for (int j = 0; j < N; j++) begin
      if (j >= k) begin
        rp[j] = xp[j-k];
        rn[j] = xn[j-k];
      end else begin
        case (MOD)
          MOD_2N_M1: begin rp[j] = xp[N-k+j]; rn[j] = xn[N-k+j]; end
          MOD_2N_P1: begin rp[j] = xn[N-k+j]; rn[j] = xp[N-k+j]; end
          default:   begin rp[j] = 1'b0;      rn[j] = 1'b0;      end
        endcase
      end
    end
    return {rp, rn};
  endfunction

  // a scaled by one multiplier digit: 0, a or -a.
  function automatic logic [2*N-1:0] dsel(input logic [N-1:0] xp,
                                          input logic [N-1:0] xn,
                                          input logic dp, input logic dn);
    if (dp && !dn)      return {xp, xn};
    else if (dn && !dp) return {xn, xp};
    else                return '0;
  endfunction

  logic [N-1:0] a2_p, a2_n;           // 2a mod m
  assign {a2_p, a2_n} = rot(a_p, a_n, 1);

  logic [N-1:0] lo_p [K], lo_n [K];   // a * b_{2i}
  logic [N-1:0] hi_p [K], hi_n [K];   // 2a * b_{2i+1}
  logic [N-1:0] rp_p [K], rp_n [K];   // radix-4 product rp_i
  logic [N-1:0] pp_p [K], pp_n [K];   // pp_i = rp_i rotated by 2i

  for (genvar i = 0; i < K; i++) begin : g_pp
    assign {lo_p[i], lo_n[i]} = dsel(a_p, a_n, b_p[2*i], b_n[2*i]);
    if (2*i + 1 < N) begin : g_hi
      assign {hi_p[i], hi_n[i]} = dsel(a2_p, a2_n, b_p[2*i+1], b_n[2*i+1]);
    end else begin : g_nohi
      assign hi_p[i] = '0;
      assign hi_n[i] = '0;
    end
    sd_mod_adder #(.N(N), .MOD(MOD)) u_rp (
      .a_p(lo_p[i]), .a_n(lo_n[i]), .b_p(hi_p[i]), .b_n(hi_n[i]),
      .s_p(rp_p[i]), .s_n(rp_n[i])
    );
    assign {pp_p[i], pp_n[i]} = rot(rp_p[i], rp_n[i], 2*i);
  end

  sd_mod_sum #(.N(N), .MOD(MOD), .K(K)) u_tree (
    .x_p(pp_p), .x_n(pp_n), .s_p(p_p), .s_n(p_n)
  );

endmodule
