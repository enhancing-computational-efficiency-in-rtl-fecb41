// sd_mod_sum: sums K signed-digit residues of one channel with a balanced
// binary tree of carry-free modular adders (sd_mod_adder).
//
// The K operands are placed at the leaves of a tree padded to the next power
// of two (missing leaves are zero); each inner node adds its two children, so
// the depth is ceil(log2 K) adder delays. K = 1 passes the operand through.
// Used for the partial products of sd_mod_multiplier and for the chunks of
// forward_converter. The tree shape is this design's choice; the paper does
// not say how partial products are accumulated.
//
// Interface: x_p/x_n[K] in, s_p/s_n out, same digit encoding as
// sd_mod_adder. Timing: purely combinational.
module sd_mod_sum
  import sdrns_pkg::*;
#(
  parameter int   N   = 11,
  parameter mod_e MOD = MOD_2N,
  parameter int   K   = 2
) (
  input  logic [N-1:0] x_p [K],
  input  logic [N-1:0] x_n [K],
  output logic [N-1:0] s_p,
  output logic [N-1:0] s_n
);

  localparam int K2 = (K <= 1) ? 1 : (1 << $clog2(K));

  // Heap-ordered nodes: node 1 is the root, leaves are K2 .. 2*K2-1.
  logic [N-1:0] nd_p [1:2*K2-1];
  logic [N-1:0] nd_n [1:2*K2-1];

  for (genvar l = 0; l < K2; l++) begin : g_leaf
    if (l < K) begin : g_in
      assign nd_p[K2+l] = x_p[l];
      assign nd_n[K2+l] = x_n[l];
    end else begin : g_zero
      assign nd_p[K2+l] = '0;
      assign nd_n[K2+l] = '0;
    end
  end

  for (genvar i = 1; i < K2; i++) begin : g_node
    sd_mod_adder #(.N(N), .MOD(MOD)) u_add (
      .a_p(nd_p[2*i]),   .a_n(nd_n[2*i]),
      .b_p(nd_p[2*i+1]), .b_n(nd_n[2*i+1]),
      .s_p(nd_p[i]),     .s_n(nd_n[i])
    );
  end

  assign s_p = nd_p[1];
  assign s_n = nd_n[1];

endmodule
