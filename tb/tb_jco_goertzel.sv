// tb_jco_goertzel: self-checking test of jco_goertzel. Four instances:
//   N = 1024, k = 128 (L = 8)   fed v_(N-1) first (the method's order) and in arrival order
//   N = 12,   k = 1   (L = 12)  fed v_(N-1) first
//   N = 83,   k = 1   (L = 83)  fed in arrival order; phi(83) = 82, the case where the JCO
//                               remainder is as long as the block
// Every block is compared with a direct floating-point DFT sum. With samples offered every
// cycle, the time from the first sample to out_valid is also checked: N + phi(L) + 1 cycles,
// one more in arrival order (the appended zero).
module tb_jco_goertzel;
  import jco_pkg::*;

  localparam int DATA_W = 16;
  localparam int FRAC   = 20;
  localparam int NT     = 4;
  localparam int NS [NT] = '{1024, 1024, 12, 83};
  localparam int KS [NT] = '{128, 128, 1, 1};
  localparam bit AO [NT] = '{1'b0, 1'b1, 1'b0, 1'b1};

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic              valid [NT];
  logic              ready [NT];
  logic              ovalid [NT];
  logic signed [DATA_W-1:0] data;
  real               gr [NT], gi [NT];
  int                nout [NT], first [NT], ocyc [NT];

  for (genvar t = 0; t < NT; t++) begin : g_dut
    localparam int OW = out_w(NS[t], DATA_W, FRAC);
    logic signed [OW-1:0] re, im;
    jco_goertzel #(.N(NS[t]), .K(KS[t]), .DATA_W(DATA_W), .FRAC(FRAC), .ARRIVAL_ORDER(AO[t])) dut (
      .clk, .rst_n, .in_valid(valid[t]), .in_ready(ready[t]), .in_data(data),
      .out_valid(ovalid[t]), .out_re(re), .out_im(im));
    always @(posedge clk) begin
      if (valid[t] && ready[t] && first[t] < 0) first[t] = cycle;
      if (ovalid[t]) begin
        gr[t] = real'(re) / real'(1 << FRAC);
        gi[t] = real'(im) / real'(1 << FRAC);
        ocyc[t] = cycle;
        nout[t]++;
      end
    end
  end

  real v [0:1023];

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(input int t, input int kind, input bit gaps);
    int n, k, n0, ph;
    real er, ei, tol;
    bit rdy;
    n = NS[t];
    k = KS[t];
    ph = totient(order_l(n, k));
    for (int i = 0; i < n; i++)
      v[i] = (kind == 0) ? real'($signed(16'($urandom))) :
             (kind == 1) ? ((i == 5) ? 32767.0 : 0.0) :
             (kind == 2) ? -32768.0 : $floor(30000.0 * $cos(2.0 * PI * k * i / n) + 0.5);
    er = 0.0; ei = 0.0;
    for (int i = 0; i < n; i++) begin
      er += v[i] * $cos(2.0 * PI * k * i / n);
      ei -= v[i] * $sin(2.0 * PI * k * i / n);
    end
    n0 = nout[t];
    first[t] = -1;
    for (int i = 0; i < n; i++) begin
      valid[t] = 1'b1;
      data = DATA_W'($rtoi(v[AO[t] ? i : n - 1 - i]));
      do begin rdy = ready[t]; @(negedge clk); end while (!rdy);
      valid[t] = 1'b0;
      if (gaps && $urandom % 4 == 0) @(negedge clk);
    end
    while (nout[t] == n0) @(negedge clk);
    tol = 1.0e-4 * real'(n) * 32768.0 + 2.0;
    check($sformatf("N=%0d re", n), gr[t], er, tol);
    check($sformatf("N=%0d im", n), gi[t], ei, tol);
    if (!gaps) begin
      checks++;
      if (ocyc[t] - first[t] != n + ph + 1 + int'(AO[t])) begin
        failures++;
        $display("FAIL N=%0d latency %0d want %0d", n, ocyc[t] - first[t], n + ph + 1 + int'(AO[t]));
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; data = '0;
    for (int t = 0; t < NT; t++) begin valid[t] = 1'b0; nout[t] = 0; first[t] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int kind = 0; kind < 4; kind++) run(t, kind, 1'b0);
      run(t, 0, 1'b1);
      if (NS[t] < 100) for (int r = 0; r < 10; r++) run(t, 0, r[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
