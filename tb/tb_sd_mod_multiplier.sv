// tb_sd_mod_multiplier: self-checking test of the SD modular multiplier.
//
// Six multipliers are tested side by side: moduli 2^n-1, 2^n, 2^n+1 at n = 5 and
// at the default n = 11. Random signed-digit operands (every digit encoding,
// the redundant (1,1) pair included) are applied; for every multiplier the test
// checks that the product is congruent to a * b modulo its modulus, computed here
// from the digit values, and that no output digit uses the (1,1) code.
// Corner operands (all +1, all -1 digits) are applied first.
module tb_sd_mod_multiplier;
  import sdrns_pkg::*;

  localparam int NA = 5;
  localparam int NB = 11;
  localparam int ITER = 5000;

  int checks = 0, failures = 0;

  logic [NB-1:0] a_p, a_n, b_p, b_n;
  logic [NA-1:0] sa_p [3], sa_n [3];
  logic [NB-1:0] sb_p [3], sb_n [3];

  localparam mod_e MODS [3] = '{MOD_2N_M1, MOD_2N, MOD_2N_P1};

  for (genvar c = 0; c < 3; c++) begin : g_dut
    sd_mod_multiplier #(.N(NA), .MOD(MODS[c])) u_a (
      .a_p(a_p[NA-1:0]), .a_n(a_n[NA-1:0]), .b_p(b_p[NA-1:0]), .b_n(b_n[NA-1:0]),
      .p_p(sa_p[c]), .p_n(sa_n[c]));
    sd_mod_multiplier #(.N(NB), .MOD(MODS[c])) u_b (
      .a_p(a_p), .a_n(a_n), .b_p(b_p), .b_n(b_n),
      .p_p(sb_p[c]), .p_n(sb_n[c]));
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
    for (int c = 0; c < 3; c++) begin
      longint m, va, vb, vs;
      // n = 5
      m  = modulus(c, NA);
      va = sdval(64'(a_p[NA-1:0]), 64'(a_n[NA-1:0]), NA);
      vb = sdval(64'(b_p[NA-1:0]), 64'(b_n[NA-1:0]), NA);
      vs = sdval(64'(sa_p[c]), 64'(sa_n[c]), NA);
      checks++;
      if (pmod(vs - va * vb, m) != 0 || (sa_p[c] & sa_n[c]) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d mod#%0d a=%0d b=%0d s=%0d", NA, c, va, vb, vs);
      end
      // n = 11
      m  = modulus(c, NB);
      va = sdval(64'(a_p), 64'(a_n), NB);
      vb = sdval(64'(b_p), 64'(b_n), NB);
      vs = sdval(64'(sb_p[c]), 64'(sb_n[c]), NB);
      checks++;
      if (pmod(vs - va * vb, m) != 0 || (sb_p[c] & sb_n[c]) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d mod#%0d a=%0d b=%0d s=%0d", NB, c, va, vb, vs);
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
    // corners: all +1 times all +1, all -1 times all -1, +1 times -1
    a_p = '1; a_n = '0; b_p = '1; b_n = '0; #1 check_all();
    a_p = '0; a_n = '1; b_p = '0; b_n = '1; #1 check_all();
    a_p = '1; a_n = '0; b_p = '0; b_n = '1; #1 check_all();
    a_p = '1; a_n = '1; b_p = '1; b_n = '0; #1 check_all();
    for (int it = 0; it < ITER; it++) begin
      a_p = NB'($urandom); a_n = NB'($urandom);
      b_p = NB'($urandom); b_n = NB'($urandom);
      #1 check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
