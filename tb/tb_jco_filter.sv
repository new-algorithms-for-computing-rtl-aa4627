// tb_jco_filter: self-checking test of jco_filter for the worked case N = 1024, k = 128
// (L = 8) and for N = 12, k = 1 (L = 12, denominator 1 - z^-2 + z^-4).
//
// Each block of real samples is compared with a direct DFT sum computed here in floating
// point. Blocks: random full-scale data, a single impulse, a constant block, a cosine at bin k
// and random data with gaps in in_valid. The test also checks that V_k appears exactly
// N + 1 cycles after the first sample when samples arrive every cycle (N samples plus the
// internal zero cycle) and that in_ready drops for exactly one cycle per block.
module tb_jco_filter;
  import jco_pkg::*;

  localparam int DATA_W = 16;
  localparam int FRAC   = 20;
  localparam int NA = 1024, KA = 128;
  localparam int NB = 12,   KB = 1;
  localparam int OWA = out_w(NA, DATA_W, FRAC);
  localparam int OWB = out_w(NB, DATA_W, FRAC);

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // DUT A
  logic a_valid, a_ready, a_ovalid;
  logic signed [DATA_W-1:0] a_data;
  logic signed [OWA-1:0] a_re, a_im;
  jco_filter #(.N(NA), .K(KA), .DATA_W(DATA_W), .FRAC(FRAC)) dut_a (
    .clk, .rst_n, .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
    .out_valid(a_ovalid), .out_re(a_re), .out_im(a_im));

  // DUT B
  logic b_valid, b_ready, b_ovalid;
  logic signed [DATA_W-1:0] b_data;
  logic signed [OWB-1:0] b_re, b_im;
  jco_filter #(.N(NB), .K(KB), .DATA_W(DATA_W), .FRAC(FRAC)) dut_b (
    .clk, .rst_n, .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
    .out_valid(b_ovalid), .out_re(b_re), .out_im(b_im));

  real v [0:NA-1];

  function automatic void ref_dft(input int n, input int k, output real re, output real im);
    re = 0.0;
    im = 0.0;
    for (int i = 0; i < n; i++) begin
      re += v[i] * $cos(2.0 * PI * k * i / n);
      im -= v[i] * $sin(2.0 * PI * k * i / n);
    end
  endfunction

  function automatic void fill(input int n, input int kind);
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: v[i] = real'($signed(16'($urandom)));
        1: v[i] = (i == 3) ? 32767.0 : 0.0;
        2: v[i] = -32768.0;
        3: v[i] = $floor(30000.0 * $cos(2.0 * PI * 128.0 * i / n) + 0.5);
        default: v[i] = real'($signed(16'($urandom)) >>> 4);
      endcase
    end
  endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Output and handshake monitors, sampled on the rising edge.
  int   a_nout = 0, b_nout = 0, a_first = -1, a_outcyc = 0, a_notready = 0;
  real  a_gr, a_gi, b_gr, b_gi;
  always @(posedge clk) begin
    if (a_valid && a_ready && a_first < 0) a_first = cycle;
    if (rst_n && !a_ready) a_notready++;
    if (a_ovalid) begin
      a_gr = real'(a_re) / real'(1 << FRAC);
      a_gi = real'(a_im) / real'(1 << FRAC);
      a_outcyc = cycle;
      a_nout++;
    end
    if (b_ovalid) begin
      b_gr = real'(b_re) / real'(1 << FRAC);
      b_gi = real'(b_im) / real'(1 << FRAC);
      b_nout++;
    end
  end

  // Inputs change on the falling edge; a sample is taken at the next rising edge if in_ready
  // is high then (in_ready is a function of registered state only).
  task automatic push_a(input logic signed [DATA_W-1:0] x);
    bit rdy;
    a_valid = 1'b1;
    a_data  = x;
    do begin
      rdy = a_ready;
      @(negedge clk);
    end while (!rdy);
    a_valid = 1'b0;
  endtask

  task automatic push_b(input logic signed [DATA_W-1:0] x);
    bit rdy;
    b_valid = 1'b1;
    b_data  = x;
    do begin
      rdy = b_ready;
      @(negedge clk);
    end while (!rdy);
    b_valid = 1'b0;
  endtask

  // Runs one block through DUT A; gaps = 1 inserts random idle cycles.
  task automatic run_a(input int kind, input bit gaps);
    real er, ei, tol;
    int n0, nr0;
    fill(NA, kind);
    ref_dft(NA, KA, er, ei);
    tol = 4.0 * real'(filt_gain(NA, KA)) * 32768.0 / real'(1 << FRAC) + 2.0;
    n0 = a_nout;
    nr0 = a_notready;
    a_first = -1;
    for (int i = 0; i < NA; i++) begin
      push_a(DATA_W'($rtoi(v[i])));
      if (gaps && ($urandom % 4 == 0)) @(negedge clk);
    end
    while (a_nout == n0) @(negedge clk);
    check("A re", a_gr, er, tol);
    check("A im", a_gi, ei, tol);
    if (!gaps) begin
      checks++;
      if (a_outcyc - a_first != NA + 1) begin
        failures++;
        $display("FAIL latency %0d, want %0d", a_outcyc - a_first, NA + 1);
      end
      checks++;
      if (a_notready - nr0 != 1) begin
        failures++;
        $display("FAIL in_ready low %0d cycles, want 1", a_notready - nr0);
      end
    end
  endtask

  task automatic run_b(input int kind);
    real er, ei, tol;
    int n0;
    fill(NB, kind);
    ref_dft(NB, KB, er, ei);
    tol = 4.0 * real'(filt_gain(NB, KB)) * 32768.0 / real'(1 << FRAC) + 2.0;
    n0 = b_nout;
    for (int i = 0; i < NB; i++) push_b(DATA_W'($rtoi(v[i])));
    while (b_nout == n0) @(negedge clk);
    check("B re", b_gr, er, tol);
    check("B im", b_gi, ei, tol);
  endtask

  // Watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    a_valid = 1'b0; a_data = '0;
    b_valid = 1'b0; b_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int kind = 0; kind < 5; kind++) run_a(kind, 1'b0);
    run_a(4, 1'b1);
    run_a(0, 1'b1);
    for (int kind = 0; kind < 5; kind++) run_b(kind);
    for (int r = 0; r < 20; r++) run_b(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
