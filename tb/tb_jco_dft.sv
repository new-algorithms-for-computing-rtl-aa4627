// tb_jco_dft: end-to-end test of the top level at its default size, N = 1024, k = 128.
// A stream of blocks of real samples is offered; every block must produce V_k from both
// engines (JCO filter and JCO-Goertzel), each within rounding of a floating-point DFT sum,
// in block order. The stream mixes back-to-back blocks and random idle cycles. The test
// counts how often each mechanism of the design happened and fails if one never did:
//   zero     the JCO filter's internal zero cycle (one per block, seen as a JCO result)
//   drain    the JCO-Goertzel remainder drain (one per block, seen as a JCO-Goertzel result)
//   stall    a valid sample held back because an engine was busy (stall_o)
//   gap      an idle input cycle inside a block
// It also checks the steady block rate with samples offered every cycle:
// N + phi(L) + 2 = 1030 cycles per block, set by the slower JCO-Goertzel engine.
module tb_jco_dft;
  import jco_pkg::*;

  localparam int N = 1024, K = 128, DATA_W = 16, FRAC = 20;
  localparam int OW  = out_w(N, DATA_W, FRAC);
  localparam int NBLK = 8;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid, in_ready, stall, jco_valid, jcog_valid;
  logic signed [DATA_W-1:0] in_data;
  logic signed [OW-1:0] jco_re, jco_im, jcog_re, jcog_im;

  jco_dft dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .stall_o(stall),
    .jco_valid, .jco_re, .jco_im, .jcog_valid, .jcog_re, .jcog_im);

  real exp_re [NBLK], exp_im [NBLK];
  int  n_jco = 0, n_jcog = 0, n_stall = 0, n_gap = 0;
  int  jco_cyc [NBLK], jcog_cyc [NBLK];

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  // Results arrive in block order; compare each with its block's expected value.
  localparam real TOL = 64.0;
  always @(posedge clk) begin
    if (rst_n && stall) n_stall++;
    if (rst_n && jco_valid) begin
      if (n_jco < NBLK) begin
        check($sformatf("JCO re blk %0d", n_jco), real'(jco_re) / real'(1 << FRAC), exp_re[n_jco], TOL);
        check($sformatf("JCO im blk %0d", n_jco), real'(jco_im) / real'(1 << FRAC), exp_im[n_jco], TOL);
        jco_cyc[n_jco] = cycle;
      end
      n_jco++;
    end
    if (rst_n && jcog_valid) begin
      if (n_jcog < NBLK) begin
        check($sformatf("JCOG re blk %0d", n_jcog), real'(jcog_re) / real'(1 << FRAC), exp_re[n_jcog], TOL);
        check($sformatf("JCOG im blk %0d", n_jcog), real'(jcog_im) / real'(1 << FRAC), exp_im[n_jcog], TOL);
        jcog_cyc[n_jcog] = cycle;
      end
      n_jcog++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    bit rdy;
    rst_n = 1'b0; in_valid = 1'b0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int b = 0; b < NBLK; b++) begin
      exp_re[b] = 0.0;
      exp_im[b] = 0.0;
      for (int i = 0; i < N; i++) begin
        case (b % 4)
          0: v = real'($signed(16'($urandom)));
          1: v = $floor(32000.0 * $cos(2.0 * PI * K * i / N + 0.3) + 0.5);
          2: v = (i % 3 == 0) ? 32767.0 : -32768.0;
          default: v = real'($signed(16'($urandom)) >>> 3);
        endcase
        exp_re[b] += v * $cos(2.0 * PI * K * i / N);
        exp_im[b] -= v * $sin(2.0 * PI * K * i / N);
        in_valid = 1'b1;
        in_data  = DATA_W'($rtoi(v));
        do begin rdy = in_ready; @(negedge clk); end while (!rdy);
        in_valid = 1'b0;
        // blocks 0..3 back to back, blocks 4..7 with random idle cycles
        if (b >= 4 && $urandom % 5 == 0) begin n_gap++; @(negedge clk); end
      end
    end
    while (n_jcog < NBLK) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (n_jco != NBLK || n_jcog != NBLK) begin
      failures++;
      $display("FAIL result count jco %0d jcog %0d, want %0d", n_jco, n_jcog, NBLK);
    end
    // Steady rate of the back-to-back blocks.
    for (int b = 1; b < 4; b++) begin
      checks++;
      if (jcog_cyc[b] - jcog_cyc[b-1] != N + 4 + 2) begin
        failures++;
        $display("FAIL block period %0d, want %0d", jcog_cyc[b] - jcog_cyc[b-1], N + 6);
      end
    end
    $display("mechanisms: zero %0d drain %0d stall %0d gap %0d", n_jco, n_jcog, n_stall, n_gap);
    checks++; if (n_jco == 0)   begin failures++; $display("FAIL zero step never happened"); end
    checks++; if (n_jcog == 0)  begin failures++; $display("FAIL drain never happened"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL stall never happened"); end
    checks++; if (n_gap == 0)   begin failures++; $display("FAIL gap never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
