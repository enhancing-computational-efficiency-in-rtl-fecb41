// sd_rns_unit: SD-RNS arithmetic unit with an accumulator in residue form.
//
// A number is held as three residues, modulo 2^n-1, 2^n and 2^n+1, each as n
// signed digits, so additions and multiplications never propagate a carry
// across the word or between channels. The unit keeps an accumulator in this
// form and executes one operation per clock:
//   OP_LOAD acc = a      OP_ADD acc = acc + a      OP_SUB acc = acc - a
//   OP_MUL  acc = acc*a  OP_MAC acc = acc + a*b
// Operands a and b (P-bit two's complement) pass through forward converters;
// each channel has one carry-free modular adder and one modular multiplier
// (multiplying acc*a for OP_MUL, a*b for OP_MAC). The accumulator is read out
// through the reverse converter, which gives its value modulo
// M = 2^n (2^{2n}-1), both in [0, M) and as a signed number in [-M/2, M/2).
// A run of one load, x additions and y multiplications thus costs one forward
// conversion per operand, x + y carry-free operations and one reverse
// conversion at the end, which is the cost model the design targets.
//
// Interface: op_valid/op/a/b sampled on the rising clock edge; result and
// result_signed show the accumulator from the cycle after the operation
// (combinational from the accumulator register). rst_n is synchronous and
// active low and clears the accumulator to zero. Nothing stalls: an
// operation is accepted every cycle.
//
// From the paper: the moduli set, the SD digits per channel, the carry-free
// modular adders and the rotation-based multipliers, forward and reverse
// conversion around a sequence of operations, and the sizes n and P of its
// four configurations (default P = 32, n = 11). The accumulator register, the
// operation set, the one-cycle timing and the reset are this design's own.
module sd_rns_unit
  import sdrns_pkg::*;
#(
  parameter int N = 11,
  parameter int P = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 op_valid,
  input  op_e                  op,
  input  logic [P-1:0]         a,
  input  logic [P-1:0]         b,
  output logic [3*N-1:0]       result,
  output logic signed [3*N:0]  result_signed
);

  localparam mod_e CH_MOD [3] = '{MOD_2N_M1, MOD_2N, MOD_2N_P1};

  logic [N-1:0] acc_p [3], acc_n [3];   // accumulator, one SD residue per channel
  logic [N-1:0] nxt_p [3], nxt_n [3];

  for (genvar c = 0; c < 3; c++) begin : g_ch
    logic [N-1:0] fa_p, fa_n, fb_p, fb_n;   // converted operands
    logic [N-1:0] ad_p, ad_n;               // adder second input
    logic [N-1:0] mx_p, mx_n;               // multiplier first input
    logic [N-1:0] sum_p, sum_n, prd_p, prd_n;

    forward_converter #(.N(N), .P(P), .MOD(CH_MOD[c])) u_fca (
      .x(a), .r_p(fa_p), .r_n(fa_n));
    forward_converter #(.N(N), .P(P), .MOD(CH_MOD[c])) u_fcb (
      .x(b), .r_p(fb_p), .r_n(fb_n));

    // OP_MAC multiplies a*b, OP_MUL multiplies acc*a.
    assign mx_p = (op == OP_MAC) ? fb_p : acc_p[c];
    assign mx_n = (op == OP_MAC) ? fb_n : acc_n[c];

    sd_mod_multiplier #(.N(N), .MOD(CH_MOD[c])) u_mul (
      .a_p(mx_p), .a_n(mx_n), .b_p(fa_p), .b_n(fa_n), .p_p(prd_p), .p_n(prd_n));

    // Adder operand: a, -a (digit swap) or the product a*b.
    always_comb begin
      case (op)
        OP_SUB:  begin ad_p = fa_n;  ad_n = fa_p;  end
        OP_MAC:  begin ad_p = prd_p; ad_n = prd_n; end
        default: begin ad_p = fa_p;  ad_n = fa_n;  end
      endcase
    end

    sd_mod_adder #(.N(N), .MOD(CH_MOD[c])) u_add (
      .a_p(acc_p[c]), .a_n(acc_n[c]), .b_p(ad_p), .b_n(ad_n),
      .s_p(sum_p), .s_n(sum_n));

    always_comb begin
      case (op)
        OP_LOAD:                begin nxt_p[c] = fa_p;  nxt_n[c] = fa_n;  end
        OP_ADD, OP_SUB, OP_MAC: begin nxt_p[c] = sum_p; nxt_n[c] = sum_n; end
        OP_MUL:                 begin nxt_p[c] = prd_p; nxt_n[c] = prd_n; end
        default:                begin nxt_p[c] = acc_p[c]; nxt_n[c] = acc_n[c]; end
      endcase
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        acc_p[c] <= '0;
        acc_n[c] <= '0;
      end else if (op_valid) begin
        acc_p[c] <= nxt_p[c];
        acc_n[c] <= nxt_n[c];
      end
    end
  end

  reverse_converter #(.N(N)) u_rc (
    .m1_p(acc_p[0]), .m1_n(acc_n[0]),
    .m0_p(acc_p[1]), .m0_n(acc_n[1]),
    .p1_p(acc_p[2]), .p1_n(acc_n[2]),
    .x(result), .x_signed(result_signed));

  // An operation code outside op_e is never expected.
  always_ff @(posedge clk) begin
    if (rst_n && op_valid)
      assert (op inside {OP_LOAD, OP_ADD, OP_SUB, OP_MUL, OP_MAC})
        else $error("sd_rns_unit: undefined op %0d", op);
  end

endmodule
