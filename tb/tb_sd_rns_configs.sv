// tb_sd_rns_configs: workload test of the SD-RNS unit in the four operand
// precision / channel width pairs of the design's evaluation:
// (P, n) = (16, 5), (24, 8), (32, 11) and (64, 21).
//
// Each instance runs two workloads, checked against a 128-bit integer model:
//  1. Delay-model sweeps: one load, x additions and y multiplications with
//     full-width random operands, for x, y in {0, 50, 150, 300}, checked
//     modulo M = 2^n (2^{2n}-1) after every operation.
//  2. A convolution output as a neural network computes it: a dot product
//     of 3 x 3 x 512 = 4608 terms (a VGG16 3x3 layer with 512 input
//     channels) of 8-bit signed activations and weights, run as MAC
//     operations. Where the exact sum fits the signed range [-M/2, M/2) the
//     signed result must equal it exactly; otherwise it must agree modulo M.
// Each operation takes one clock, so a run of k operations must take k
// cycles; the cycle count of every run is checked.
module tb_sd_rns_configs;
  import sdrns_pkg::*;

  localparam int NCFG = 4;
  localparam int NS [NCFG] = '{5, 8, 11, 21};
  localparam int PS [NCFG] = '{16, 24, 32, 64};
  localparam int DOT = 3 * 3 * 512;

  int checks = 0, failures = 0;
  int exact_runs = 0, modular_runs = 0;
  logic clk = 0;
  logic done [NCFG];
  longint unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    localparam int N = NS[k];
    localparam int P = PS[k];
    localparam logic [127:0] M = ((128'd1 << (2*N)) - 1) << N;

    logic rst_n = 0, op_valid = 0;
    op_e  op = OP_LOAD;
    logic [P-1:0] a = '0, b = '0;
    logic [3*N-1:0]      result;
    logic signed [3*N:0] result_signed;
    logic [127:0] ref_acc = 0;

    sd_rns_unit #(.N(N), .P(P)) dut (.*);

    function automatic logic [127:0] to_mod(input logic [P-1:0] v);
      logic signed [127:0] s = 128'(signed'(v));
      return (s < 0) ? 128'(s + signed'(M)) : 128'(s);
    endfunction

    function automatic logic [P-1:0] rnd_full();
      logic [63:0] r = {$urandom, $urandom};
      return P'(r);
    endfunction

    task automatic step(input op_e o, input logic [P-1:0] av, input logic [P-1:0] bv,
                        input bit check_now);
      logic [127:0] fa = to_mod(av), fb = to_mod(bv);
      op_valid = 1; op = o; a = av; b = bv;
      case (o)
        OP_LOAD: ref_acc = fa;
        OP_ADD:  ref_acc = (ref_acc + fa) % M;
        OP_SUB:  ref_acc = (ref_acc + M - fa) % M;
        OP_MUL:  ref_acc = (ref_acc * fa) % M;
        OP_MAC:  ref_acc = (ref_acc + (fa * fb) % M) % M;
        default: ;
      endcase
      @(posedge clk); #1;
      op_valid = 0;
      if (check_now) begin
        checks++;
        if (128'(result) != ref_acc) begin
          failures++;
          if (failures < 10) $display("FAIL P=%0d n=%0d op=%s", P, N, o.name());
        end
      end
    endtask

    initial begin
      int xs [4] = '{0, 50, 150, 300};
      longint unsigned c0;
      longint signed exact;
      logic signed [7:0] av, bv;
      done[k] = 0;
      @(posedge clk); #1 rst_n = 1;
      // 1. load, x additions, y multiplications
      foreach (xs[i]) foreach (xs[j]) begin
        c0 = cycle;
        step(OP_LOAD, rnd_full(), '0, 1);
        for (int t = 0; t < xs[i]; t++) step(OP_ADD, rnd_full(), '0, 1);
        for (int t = 0; t < xs[j]; t++) step(OP_MUL, rnd_full(), '0, 1);
        checks++;
        if (cycle - c0 != longint'(1 + xs[i] + xs[j])) begin
          failures++;
          $display("FAIL P=%0d cycles %0d for %0d operations", P, cycle - c0, 1 + xs[i] + xs[j]);
        end
      end
      // 2. dot product of DOT 8-bit terms
      exact = 0;
      c0 = cycle;
      step(OP_LOAD, '0, '0, 0);
      for (int t = 0; t < DOT; t++) begin
        av = 8'($urandom); bv = 8'($urandom);
        exact += longint'(av) * longint'(bv);
        step(OP_MAC, P'(av), P'(bv), 0);
      end
      checks++;
      if (cycle - c0 != longint'(1 + DOT)) failures++;
      checks++;
      if (128'(result) != ref_acc) failures++;
      // 8-bit x 8-bit products are below 2^14 in magnitude
      if (128'(DOT) * (128'd1 << 14) < M / 2) begin
        exact_runs++;
        checks++;
        if (longint'(result_signed) != exact) begin
          failures++;
          $display("FAIL P=%0d dot product %0d, got %0d", P, exact, result_signed);
        end
      end else modular_runs++;
      $display("P=%0d n=%0d: sweeps and %0d-term dot product done (exact range: %0d)",
               P, N, DOT, 128'(DOT) * (128'd1 << 14) < M / 2);
      done[k] = 1;
    end
  end

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks++; if (exact_runs == 0)   failures++;
    checks++; if (modular_runs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
