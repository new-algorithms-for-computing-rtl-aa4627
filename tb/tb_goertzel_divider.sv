// tb_goertzel_divider: self-checking test of goertzel_divider for k/N = 128/1024
// (A = sqrt 2) and 1/12 (A = sqrt 3). Random integer polynomials of 2 to NUM_IN coefficients
// are fed highest first; the expected remainder r_0 + r_1 x of division by x^2 - A x + 1 is
// found by floating-point long division with the exact A, and V = r_0 + r_1 W^k is also
// compared with direct evaluation of the polynomial at W^k.
module tb_goertzel_divider;
  import jco_pkg::*;

  localparam int IN_W = 26;
  localparam int FRAC = 20;
  localparam int NI   = 8;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic clear, valid;
  logic signed [IN_W-1:0] data;
  localparam int RW = IN_W + bits_for(longint'(NI) * longint'(NI + 1) / 2) + FRAC + 2;
  logic signed [RW-1:0] a0, a1, b0, b1;

  goertzel_divider #(.N(1024), .K(128), .IN_W(IN_W), .FRAC(FRAC), .NUM_IN(NI)) da (
    .clk, .rst_n, .clear, .in_valid(valid), .in_data(data), .r0(a0), .r1(a1));
  goertzel_divider #(.N(12), .K(1), .IN_W(IN_W), .FRAC(FRAC), .NUM_IN(NI)) db (
    .clk, .rst_n, .clear, .in_valid(valid), .in_data(data), .r0(b0), .r1(b1));

  real p [0:NI-1];

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(input int n);
    real w [0:NI-1];
    real A1, A2, s, tol, th1, th2, er, ei;
    for (int i = 0; i < n; i++) p[i] = real'($signed(26'($urandom)) >>> ($urandom % 12));
    for (int i = n - 1; i >= 0; i--) begin
      valid = 1'b1;
      clear = (i == n - 1);
      data  = IN_W'($rtoi(p[i]));
      @(negedge clk);
    end
    valid = 1'b0;
    clear = 1'b0;
    th1 = 2.0 * PI * 128.0 / 1024.0;
    th2 = 2.0 * PI / 12.0;
    A1 = 2.0 * $cos(th1);
    A2 = 2.0 * $cos(th2);
    tol = 64.0 * 33554432.0 / real'(1 << FRAC) + 1.0;
    for (int t = 0; t < 2; t++) begin
      real A, g0, g1, th;
      A  = (t == 0) ? A1 : A2;
      th = (t == 0) ? th1 : th2;
      for (int i = 0; i < n; i++) w[i] = p[i];
      for (int i = n - 1; i >= 2; i--) begin
        s = w[i];
        w[i] = 0.0;
        w[i-1] += s * A;
        w[i-2] -= s;
      end
      if (n < 2) w[1] = 0.0;
      g0 = (t == 0) ? real'(a0) / real'(1 << FRAC) : real'(b0) / real'(1 << FRAC);
      g1 = (t == 0) ? real'(a1) / real'(1 << FRAC) : real'(b1) / real'(1 << FRAC);
      check("r0", g0, w[0], tol);
      check("r1", g1, w[1], tol);
      // p(W^k) directly, W^k = cos th - j sin th
      er = 0.0; ei = 0.0;
      for (int i = 0; i < n; i++) begin
        er += p[i] * $cos(th * i);
        ei -= p[i] * $sin(th * i);
      end
      check("V re", g0 + g1 * $cos(th), er, 2.0 * tol);
      check("V im", -g1 * $sin(th), ei, 2.0 * tol);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clear = 1'b0; valid = 1'b0; data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int r = 0; r < 60; r++) run(2 + r % (NI - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
