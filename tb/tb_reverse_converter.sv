// tb_reverse_converter: self-checking test of the SD-residue-to-binary
// converter.
//
// Converters at n = 5, 11 and 21 (three of the design's sizes) receive the
// residues of a random X in [0, M), M = 2^n (2^{2n}-1). Each residue is given
// a random one of its signed-digit forms: the value r or r - m, split into a
// random posibit/negabit pair (the (1,1) digit included), so the redundancy
// the arithmetic produces is exercised. x must equal X and x_signed must be
// X, or X - M when X >= M/2. The corners X = 0, 1, M/2 - 1, M/2 and M - 1 are
// applied first.
module tb_reverse_converter;
  localparam int ITER = 20000;
  localparam int NS [3] = '{5, 11, 21};

  int checks = 0, failures = 0;

  logic [20:0] m1_p [3], m1_n [3], m0_p [3], m0_n [3], p1_p [3], p1_n [3];
  logic [62:0] xo [3];
  logic [63:0] xs [3];

  for (genvar k = 0; k < 3; k++) begin : g_dut
    localparam int N = NS[k];
    logic [3*N-1:0]      x;
    logic signed [3*N:0] x_signed;
    reverse_converter #(.N(N)) u_dut (
      .m1_p(m1_p[k][N-1:0]), .m1_n(m1_n[k][N-1:0]),
      .m0_p(m0_p[k][N-1:0]), .m0_n(m0_n[k][N-1:0]),
      .p1_p(p1_p[k][N-1:0]), .p1_n(p1_n[k][N-1:0]),
      .x(x), .x_signed(x_signed));
    assign xo[k] = 63'(x);
    assign xs[k] = 64'(x_signed);
  end

  function automatic longint unsigned rnd64();
    return {$urandom, $urandom};
  endfunction

  // A random SD form of residue r modulo m with n digits: {pos, neg}.
  function automatic logic [41:0] sd_form(input longint r, input longint m, input int n);
    longint v, lim, p, q;
    lim = (64'sd1 <<< n) - 1;
    v = r;
    if ((r - m) >= -lim && $urandom_range(1, 0) == 1) v = r - m;
    if (v > lim) v = r - m;
    if (v >= 0) begin
      q = longint'(rnd64() % 64'(lim - v + 1));
      p = q + v;
    end else begin
      p = longint'(rnd64() % 64'(lim + v + 1));
      q = p - v;
    end
    return {21'(p), 21'(q)};
  endfunction

  task automatic apply(input int k, input longint unsigned X);
    int n = NS[k];
    longint mm1 = (64'sd1 <<< n) - 1, mm0 = 64'sd1 <<< n, mp1 = (64'sd1 <<< n) + 1;
    {m1_p[k], m1_n[k]} = sd_form(longint'(X % 64'(mm1)), mm1, n);
    {m0_p[k], m0_n[k]} = sd_form(longint'(X % 64'(mm0)), mm0, n);
    {p1_p[k], p1_n[k]} = sd_form(longint'(X % 64'(mp1)), mp1, n);
  endtask

  task automatic check(input int k, input longint unsigned X);
    int n = NS[k];
    longint unsigned M = ((64'd1 << (2*n)) - 1) << n;
    longint sgn = (X >= M / 2) ? longint'(X) - longint'(M) : longint'(X);
    longint got_s = longint'(xs[k]);
    if (n < 21) got_s = longint'(xs[k] << (64 - 3*n - 1)) >>> (64 - 3*n - 1);
    checks++;
    if (64'(xo[k]) != X || got_s != sgn) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d X=%0d got %0d signed %0d", n, X, xo[k], got_s);
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
    longint unsigned X [3];
    longint unsigned M [3];
    for (int k = 0; k < 3; k++) M[k] = ((64'd1 << (2*NS[k])) - 1) << NS[k];
    for (int it = -5; it < ITER; it++) begin
      for (int k = 0; k < 3; k++) begin
        case (it)
          -5: X[k] = 0;
          -4: X[k] = 1;
          -3: X[k] = M[k] / 2 - 1;
          -2: X[k] = M[k] / 2;
          -1: X[k] = M[k] - 1;
          default: X[k] = rnd64() % M[k];
        endcase
        apply(k, X[k]);
      end
      #1;
      for (int k = 0; k < 3; k++) check(k, X[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
