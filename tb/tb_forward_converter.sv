// tb_forward_converter: self-checking test of the binary-to-SD-residue
// converter.
//
// Converters for the three moduli are tested at two sizes of the design's
// range: P = 16, n = 5 (the operand has more bits than three chunks hold,
// so the sign bit lands in a fourth chunk) and the default P = 32, n = 11.
// Random two's-complement operands plus the corners 0, -1, the most negative
// and the most positive value are applied; each output residue's digit value
// must be congruent to the signed operand modulo its channel's modulus.
module tb_forward_converter;
  import sdrns_pkg::*;

  localparam int NA = 5,  PA = 16;
  localparam int NB = 11, PB = 32;
  localparam int ITER = 20000;
  localparam mod_e MODS [3] = '{MOD_2N_M1, MOD_2N, MOD_2N_P1};

  int checks = 0, failures = 0;

  logic [PB-1:0] xb;
  logic [PA-1:0] xa;
  logic [NA-1:0] ra_p [3], ra_n [3];
  logic [NB-1:0] rb_p [3], rb_n [3];

  for (genvar c = 0; c < 3; c++) begin : g_dut
    forward_converter #(.N(NA), .P(PA), .MOD(MODS[c])) u_a (.x(xa), .r_p(ra_p[c]), .r_n(ra_n[c]));
    forward_converter #(.N(NB), .P(PB), .MOD(MODS[c])) u_b (.x(xb), .r_p(rb_p[c]), .r_n(rb_n[c]));
  end

  function automatic longint sdval(input logic [63:0] p, input logic [63:0] n, input int w);
    longint v = 0;
    for (int i = 0; i < w; i++) v += (longint'(p[i]) - longint'(n[i])) <<< i;
    return v;
  endfunction

  function automatic longint modulus(input int c, input int w);
    return (c == 0) ? (64'sd1 <<< w) - 1 : (c == 1) ? (64'sd1 <<< w) : (64'sd1 <<< w) + 1;
  endfunction

  function automatic longint pmod(input longint v, input longint m);
    longint r = v % m;
    return (r < 0) ? r + m : r;
  endfunction

  task automatic check_all();
    longint va, vb;
    va = longint'(signed'(xa));
    vb = longint'(signed'(xb));
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (pmod(sdval(64'(ra_p[c]), 64'(ra_n[c]), NA) - va, modulus(c, NA)) != 0
          || (ra_p[c] & ra_n[c]) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL P=%0d mod#%0d x=%0d", PA, c, va);
      end
      checks++;
      if (pmod(sdval(64'(rb_p[c]), 64'(rb_n[c]), NB) - vb, modulus(c, NB)) != 0
          || (rb_p[c] & rb_n[c]) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL P=%0d mod#%0d x=%0d", PB, c, vb);
      end
    end
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xa = '0;                xb = '0;                #1 check_all();
    xa = '1;                xb = '1;                #1 check_all();
    xa = {1'b1, {(PA-1){1'b0}}}; xb = {1'b1, {(PB-1){1'b0}}}; #1 check_all();
    xa = {1'b0, {(PA-1){1'b1}}}; xb = {1'b0, {(PB-1){1'b1}}}; #1 check_all();
    for (int it = 0; it < ITER; it++) begin
      xa = PA'($urandom);
      xb = PB'($urandom);
      #1 check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
