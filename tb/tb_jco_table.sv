// tb_jco_table: runs the component sizes of the published complexity table through the top
// level, one jco_dft instance per (N, k) row: N = 12, 32, 48, 120 with k = 1..4, and N = 83
// with k = 1 and 4. For every row it checks the table's order L of W_N^k and its
// multiplication counts (JCO-Goertzel: phi(L); JCO: 2 (phi(L) - 1); plain Goertzel: N unless
// phi(L) = 2, when every method costs 2), then feeds three random blocks and compares both
// engines' V_k with a floating-point DFT sum: the JCO filter within 1.0, the JCO-Goertzel
// engine within 5e-5 of full scale N * 2^15 (its Goertzel division amplifies the rounding of
// A = 2cos(2 pi k / N) roughly with the square of the remainder length phi(L)).
module tb_jco_table;
  import jco_pkg::*;

  localparam int NR = 18;
  localparam int DATA_W = 16, FRAC = 20;
  //                          N    k  Goertzel JCO  JCO-G  L      (table values)
  localparam int TN [NR] = '{12, 12, 12, 12, 32, 32, 32, 32, 48, 48, 48, 48, 83, 83, 120, 120, 120, 120};
  localparam int TK [NR] = '{ 1,  2,  3,  4,  1,  2,  3,  4,  1,  2,  3,  4,  1,  4,   1,   2,   3,   4};
  localparam int TG [NR] = '{12,  2,  2,  2, 32, 32, 32, 32, 48, 48, 48, 48, 83, 83, 120, 120, 120, 120};
  localparam int TJ [NR] = '{ 6,  2,  2,  2, 30, 14, 30,  6, 30, 14, 14,  6,162,162,  62,  30,  30,  14};
  localparam int TC [NR] = '{ 4,  2,  2,  2, 16,  8, 16,  4, 16,  8,  8,  4, 82, 82,  32,  16,  16,   8};
  localparam int TL [NR] = '{12,  6,  4,  3, 32, 16, 32,  8, 48, 24, 16, 12, 83, 83, 120,  60,  40,  30};

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                     valid [NR];
  logic                     ready [NR];
  logic signed [DATA_W-1:0] data;
  int                       nj [NR], ng [NR];
  real                      jr [NR], ji [NR], gr [NR], gi [NR];

  for (genvar t = 0; t < NR; t++) begin : g_row
    localparam int OW = out_w(TN[t], DATA_W, FRAC);
    logic stall, jv, gv;
    logic signed [OW-1:0] a_re, a_im, b_re, b_im;
    jco_dft #(.N(TN[t]), .K(TK[t]), .DATA_W(DATA_W), .FRAC(FRAC)) dut (
      .clk, .rst_n, .in_valid(valid[t]), .in_ready(ready[t]), .in_data(data), .stall_o(stall),
      .jco_valid(jv), .jco_re(a_re), .jco_im(a_im),
      .jcog_valid(gv), .jcog_re(b_re), .jcog_im(b_im));
    always @(posedge clk) begin
      if (rst_n && jv) begin
        jr[t] = real'(a_re) / real'(1 << FRAC); ji[t] = real'(a_im) / real'(1 << FRAC); nj[t]++;
      end
      if (rst_n && gv) begin
        gr[t] = real'(b_re) / real'(1 << FRAC); gi[t] = real'(b_im) / real'(1 << FRAC); ng[t]++;
      end
    end
  end

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(input int t);
    real v [0:127];
    real er, ei;
    int n, k, j0, g0;
    bit rdy;
    n = TN[t];
    k = TK[t];
    er = 0.0; ei = 0.0;
    for (int i = 0; i < n; i++) begin
      v[i] = real'($signed(16'($urandom)));
      er += v[i] * $cos(2.0 * PI * k * i / n);
      ei -= v[i] * $sin(2.0 * PI * k * i / n);
    end
    j0 = nj[t];
    g0 = ng[t];
    for (int i = 0; i < n; i++) begin
      valid[t] = 1'b1;
      data = DATA_W'($rtoi(v[i]));
      do begin rdy = ready[t]; @(negedge clk); end while (!rdy);
      valid[t] = 1'b0;
    end
    while (nj[t] == j0 || ng[t] == g0) @(negedge clk);
    check($sformatf("N=%0d k=%0d JCO re", n, k), jr[t], er, 1.0);
    check($sformatf("N=%0d k=%0d JCO im", n, k), ji[t], ei, 1.0);
    check($sformatf("N=%0d k=%0d JCO-G re", n, k), gr[t], er, 5.0e-5 * n * 32768.0);
    check($sformatf("N=%0d k=%0d JCO-G im", n, k), gi[t], ei, 5.0e-5 * n * 32768.0);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; data = '0;
    for (int t = 0; t < NR; t++) begin valid[t] = 1'b0; nj[t] = 0; ng[t] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < NR; t++) begin
      int l, ph;
      l  = order_l(TN[t], TK[t]);
      ph = totient(l);
      checks++;
      if (l != TL[t]) begin failures++; $display("FAIL N=%0d k=%0d: L %0d, table %0d", TN[t], TK[t], l, TL[t]); end
      checks++;
      if (ph != TC[t]) begin failures++; $display("FAIL N=%0d k=%0d: phi %0d, table %0d", TN[t], TK[t], ph, TC[t]); end
      checks++;
      if ((ph == 2 ? 2 : 2 * (ph - 1)) != TJ[t]) begin
        failures++; $display("FAIL N=%0d k=%0d: JCO count %0d, table %0d", TN[t], TK[t], 2 * (ph - 1), TJ[t]);
      end
      checks++;
      if ((ph == 2 ? 2 : TN[t]) != TG[t]) begin
        failures++; $display("FAIL N=%0d k=%0d: Goertzel count, table %0d", TN[t], TK[t], TG[t]);
      end
      for (int r = 0; r < 3; r++) run(t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
