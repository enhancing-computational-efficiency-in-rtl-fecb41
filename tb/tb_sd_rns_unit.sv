// tb_sd_rns_unit: end-to-end self-checking test of the SD-RNS unit at its
// default size (P = 32-bit operands, n = 11, M = 2^11 (2^22 - 1)).
//
// Random streams of LOAD, ADD, SUB, MUL and MAC operations, with idle cycles
// and a mid-run reset, are applied one per clock. A reference model keeps the
// accumulator as an ordinary integer modulo M (128-bit arithmetic); after
// every clock the unit's binary result and signed result must match it, which
// also checks the one-cycle latency. Runs of the form "load, x additions,
// y multiplications" are included. The test counts how often each mechanism
// happened and fails if any never did: each operation, an idle cycle, the
// reset, additions that wrap around the 2^n-1 and the 2^n+1 channel moduli
// (the cases the end-around and negated end-around transfers fold back), and
// results on both sides of zero.
module tb_sd_rns_unit;
  import sdrns_pkg::*;

  localparam int N = 11;
  localparam int P = 32;
  localparam int CYCLES = 20000;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, op_valid = 0;
  op_e  op = OP_LOAD;
  logic [P-1:0] a = '0, b = '0;
  logic [3*N-1:0]      result;
  logic signed [3*N:0] result_signed;

  sd_rns_unit dut (.*);

  always #5 clk = ~clk;

  localparam logic [127:0] M = ((128'd1 << (2*N)) - 1) << N;
  localparam logic [127:0] M1 = (128'd1 << N) - 1;
  localparam logic [127:0] P1 = (128'd1 << N) + 1;

  logic [127:0] ref_acc = 0;
  int cnt_op [5];
  int cnt_idle = 0, cnt_reset = 0, cnt_eac_m1 = 0, cnt_eac_p1 = 0, cnt_neg = 0, cnt_pos = 0;

  function automatic logic [127:0] to_mod(input logic [P-1:0] v);
    logic signed [127:0] s = 128'(signed'(v));
    return (s < 0) ? 128'(s + signed'(M)) : 128'(s);
  endfunction

  task automatic step(input logic v, input op_e o, input logic [P-1:0] av, input logic [P-1:0] bv);
    logic [127:0] fa, fb;
    logic signed [3*N:0] exp_s;
    op_valid = v; op = o; a = av; b = bv;
    #1;
    fa = to_mod(av); fb = to_mod(bv);
    // Modular wrap-around of the 2^n-1 and 2^n+1 channel additions, worked
    // out on ordinary residues: the sum leaves [0, m) and must be folded back.
    if (v && o == OP_ADD) begin
      if ((ref_acc % M1) + (fa % M1) >= M1) cnt_eac_m1++;
      if ((ref_acc % P1) + (fa % P1) >= P1) cnt_eac_p1++;
    end
    if (v) begin
      cnt_op[int'(o)]++;
      case (o)
        OP_LOAD: ref_acc = fa;
        OP_ADD:  ref_acc = (ref_acc + fa) % M;
        OP_SUB:  ref_acc = (ref_acc + M - fa) % M;
        OP_MUL:  ref_acc = (ref_acc * fa) % M;
        OP_MAC:  ref_acc = (ref_acc + (fa * fb) % M) % M;
        default: ;
      endcase
    end else cnt_idle++;
    @(posedge clk); #1;
    exp_s = (ref_acc >= M / 2) ? (3*N+1)'(ref_acc - M) : (3*N+1)'(ref_acc);
    checks++;
    if (128'(result) != ref_acc || result_signed != exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s acc=%0d got=%0d signed exp %0d got %0d",
                                  o.name(), ref_acc, result, exp_s, result_signed);
    end
    if (result_signed < 0) cnt_neg++; else cnt_pos++;
  endtask

  function automatic logic [P-1:0] rnd_op(input int kind);
    case (kind)
      0: return P'($urandom);                         // full width
      1: return P'(signed'(8'($urandom)));            // small signed (8-bit)
      default: return P'($urandom_range(3, 0));
    endcase
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kind;
    // reset
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (result != 0) failures++;
    // A load, x additions, y multiplications (the cost model's sequence).
    for (int run = 0; run < 20; run++) begin
      kind = run % 2;
      step(1, OP_LOAD, rnd_op(kind), '0);
      repeat ($urandom_range(20, 0)) step(1, OP_ADD, rnd_op(kind), '0);
      repeat ($urandom_range(20, 0)) step(1, OP_MUL, rnd_op(kind), '0);
    end
    // Random mix.
    for (int c = 0; c < CYCLES; c++) begin
      kind = $urandom_range(2, 0);
      if (c == CYCLES / 2) begin
        rst_n = 0; @(posedge clk); #1 rst_n = 1;
        ref_acc = 0; cnt_reset++;
        checks++;
        if (result != 0) begin failures++; $display("FAIL reset"); end
      end
      step($urandom_range(9, 0) != 0, op_e'($urandom_range(4, 0)), rnd_op(kind), rnd_op(kind));
    end
    for (int i = 0; i < 5; i++) $display("op %s: %0d", op_e'(i), cnt_op[i]);
    $display("idle %0d reset %0d wrap(2^n-1) %0d wrap(2^n+1) %0d negative %0d non-negative %0d",
             cnt_idle, cnt_reset, cnt_eac_m1, cnt_eac_p1, cnt_neg, cnt_pos);
    for (int i = 0; i < 5; i++) begin checks++; if (cnt_op[i] == 0) failures++; end
    checks++; if (cnt_idle == 0)   failures++;
    checks++; if (cnt_reset == 0)  failures++;
    checks++; if (cnt_eac_m1 == 0) failures++;
    checks++; if (cnt_eac_p1 == 0) failures++;
    checks++; if (cnt_neg == 0)    failures++;
    checks++; if (cnt_pos == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
