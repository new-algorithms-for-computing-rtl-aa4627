// tb_cyclo_divider: self-checking test of cyclo_divider. Three instances reduce random
// polynomials modulo Phi_8(x) = x^4 + 1 (N = 1024, k = 128), Phi_12(x) = x^4 - x^2 + 1
// (N = 12, k = 1) and Phi_30(x) = x^8 + x^7 - x^5 - x^4 - x^3 + x + 1 (N = 30, k = 1). The
// cyclotomic polynomials are written out here from tables, and the expected remainder comes
// from schoolbook long division of the whole polynomial, independently of the division
// register. Blocks are fed back to back with clear coinciding with the first coefficient,
// and also with idle cycles between coefficients.
module tb_cyclo_divider;
  import jco_pkg::*;

  localparam int DATA_W = 16;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic clear, valid;
  logic signed [DATA_W-1:0] data;

  localparam int W8  = DATA_W + bits_for(rem_gain(1024, 128)) + 1;
  localparam int W12 = DATA_W + bits_for(rem_gain(12, 1)) + 1;
  localparam int W30 = DATA_W + bits_for(rem_gain(30, 1)) + 1;
  logic signed [W8-1:0]  rem8  [4];
  logic signed [W12-1:0] rem12 [4];
  logic signed [W30-1:0] rem30 [8];

  cyclo_divider #(.N(1024), .K(128), .DATA_W(DATA_W)) d8 (
    .clk, .rst_n, .clear, .in_valid(valid), .in_data(data), .rem(rem8));
  cyclo_divider #(.N(12), .K(1), .DATA_W(DATA_W)) d12 (
    .clk, .rst_n, .clear, .in_valid(valid), .in_data(data), .rem(rem12));
  cyclo_divider #(.N(30), .K(1), .DATA_W(DATA_W)) d30 (
    .clk, .rst_n, .clear, .in_valid(valid), .in_data(data), .rem(rem30));

  // Cyclotomic polynomials, ascending powers.
  int phi8  [5] = '{1, 0, 0, 0, 1};
  int phi12 [5] = '{1, 0, -1, 0, 1};
  int phi30 [9] = '{1, 1, 0, -1, -1, -1, 0, 1, 1};

  longint p [0:1023];   // polynomial, p[i] = coefficient of x^i
  longint w [0:1023];

  // Long division of p (degree n-1) by the monic polynomial f of degree d; remainder in w.
  function automatic void ref_rem(input int n, input int d, input int f [9]);
    for (int i = 0; i < n; i++) w[i] = p[i];
    for (int i = n - 1; i >= d; i--) begin
      longint q;
      q = w[i];
      for (int j = 0; j <= d; j++) w[i - d + j] -= q * f[j];
    end
  endfunction

  task automatic feed(input int n, input bit gaps);
    for (int i = n - 1; i >= 0; i--) begin
      valid = 1'b1;
      data  = DATA_W'(p[i]);
      clear = (i == n - 1);
      @(negedge clk);
      valid = 1'b0;
      clear = 1'b0;
      if (gaps && $urandom % 3 == 0) @(negedge clk);
    end
  endtask

  task automatic run(input int which, input int n, input int kind, input bit gaps);
    int f [9];
    int d;
    for (int i = 0; i < n; i++)
      p[i] = (kind == 0) ? longint'($signed(16'($urandom))) : (kind == 1) ? 32767 : -32768;
    feed(n, gaps);
    f = '{default: 0};
    if (which == 8)       begin d = 4; for (int j = 0; j <= 4; j++) f[j] = phi8[j];  end
    else if (which == 12) begin d = 4; for (int j = 0; j <= 4; j++) f[j] = phi12[j]; end
    else                  begin d = 8; for (int j = 0; j <= 8; j++) f[j] = phi30[j]; end
    ref_rem(n, d, f);
    for (int j = 0; j < d; j++) begin
      longint got;
      got = (which == 8) ? longint'(rem8[j]) : (which == 12) ? longint'(rem12[j]) : longint'(rem30[j]);
      checks++;
      if (got != w[j]) begin
        failures++;
        $display("FAIL Phi_%0d R_%0d: got %0d expected %0d", which, j, got, w[j]);
      end
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
    // The three instances share the stream; each block length is that instance's N.
    for (int kind = 0; kind < 3; kind++) run(8, 1024, kind, 1'b0);
    run(8, 1024, 0, 1'b1);
    for (int r = 0; r < 10; r++) run(12, 12, (r < 3) ? r : 0, r[0]);
    for (int r = 0; r < 10; r++) run(30, 30, (r < 3) ? r : 0, r[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
