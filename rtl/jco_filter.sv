// jco_filter: computes one DFT component V_k of an N-point block of real samples with the
// JCO autoregressive filter
//
//          1 + a_1 z^-1 + ... + a_M z^-M
//   H(z) = -------------------------------- ,   M = phi(L) - 1,  L = N / gcd(N, k),
//          1 + b_1 z^-1 + ... + z^-phi(L)
//
// whose denominator is the cyclotomic polynomial Phi_L(z^-1). Samples v_0 .. v_(N-1) enter in
// arrival order, followed by one zero, and V_k = y_N. The structure is the direct form of the
// figure for the JCO filter: one adder closes the recursion w_n = x_n - sum_j b_j w_(n-j) over
// a phi(L)-stage shift register, and the output adders form y_n = w_n + sum_j a_j w_(n-j).
//
// Following the method, the b_j are small integers (0, +1, -1 for L < 105), so the recursion
// has no multiplier; the complex a_j products are formed only once per block, in the cycle
// that takes the closing zero, because only y_N is wanted. For N = 1024, k = 128 (L = 8) the
// filter is 1 / (1 + z^-4) with a_1 = (1+j)/sqrt2, a_2 = j, a_3 = (-1+j)/sqrt2.
//
// Choices of this design: real two's-complement samples of DATA_W bits; a valid/ready input;
// the closing zero is generated internally (in_ready is low for that one cycle); a_j rounded
// to FRAC fraction bits; register width sized from the filter's worst-case gain so nothing
// overflows; outputs carry FRAC fraction bits. Synchronous active-low reset.
//
// Timing: N accepted samples, one internal zero cycle, then out_valid pulses for one cycle
// with V_k on the next edge; a new block may start right after the zero cycle.
module jco_filter
  import jco_pkg::*;
#(
  parameter int N      = 1024,  // DFT length
  parameter int K      = 128,   // component index
  parameter int DATA_W = 16,    // input sample width
  parameter int FRAC   = 20     // fraction bits of the a_j coefficients and of the output
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic signed [DATA_W-1:0]              in_data,
  output logic                                  out_valid,
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] out_re,   // Re V_k * 2^FRAC
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] out_im    // Im V_k * 2^FRAC
);

  localparam int     L     = order_l(N, K);
  localparam int     PHI   = totient(L);
  localparam ipoly_t B     = den_coef(N, K);            // 1, b_1, ..., b_phi
  localparam ipoly_t AR    = num_coef(N, K, FRAC, 1'b0); // Re a_0 .. a_M
  localparam ipoly_t AI    = num_coef(N, K, FRAC, 1'b1); // Im a_0 .. a_M
  localparam longint GAIN  = filt_gain(N, K);
  localparam int     ACC_W = DATA_W + bits_for(GAIN) + 1;
  localparam int     COEF_W = FRAC + bits_for(longint'(PHI) + 1) + 2;
  localparam int     SUM_W = ACC_W + COEF_W + bits_for(longint'(PHI)) + 1;
  localparam int     OUT_W = out_w(N, DATA_W, FRAC);
  localparam int     CNT_W = bits_for(longint'(N));

  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [SUM_W-1:0] sum_t;

  acc_t             w [1:PHI];   // w_(n-1) .. w_(n-phi)
  logic [CNT_W-1:0] cnt;         // samples accepted in this block
  logic             flush;       // the cycle that feeds the closing zero

  acc_t x, wn;
  sum_t yr, yi;

  assign in_ready = !flush;
  assign x        = flush ? '0 : acc_t'(in_data);

  // Recursion: w_n = x_n - sum_j b_j w_(n-j); b_j are integers, normally 0 or +-1.
  always_comb begin
    wn = x;
    for (int j = 1; j <= PHI; j++) begin
      if (B[j] == 1)       wn = wn - w[j];
      else if (B[j] == -1) wn = wn + w[j];
      else if (B[j] != 0)  wn = wn - acc_t'(B[j]) * w[j];
    end
  end

  // Numerator, used once per block: y_N = w_N + sum_(j=1..M) a_j w_(N-j). A tap whose
  // coefficient has equal real and imaginary magnitude (a_1 and a_3 of the N = 1024, k = 128
  // case) uses one product for both parts, so that case costs two real multiplications.
  sum_t pr [1:PHI];
  sum_t pi [1:PHI];
  always_comb begin
    yr = sum_t'(wn) <<< FRAC;
    yi = '0;
    for (int j = 1; j <= PHI; j++) begin
      pr[j] = '0;
      pi[j] = '0;
      if (j < PHI) begin
        pr[j] = sum_t'(w[j]) * sum_t'(AR[j]);
        if (AI[j] == AR[j])       pi[j] = pr[j];
        else if (AI[j] == -AR[j]) pi[j] = -pr[j];
        else                      pi[j] = sum_t'(w[j]) * sum_t'(AI[j]);
      end
      yr = yr + pr[j];
      yi = yi + pi[j];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 1; j <= PHI; j++) w[j] <= '0;
      cnt       <= '0;
      flush     <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (flush) begin
        out_valid <= 1'b1;
        out_re    <= OUT_W'(yr);
        out_im    <= OUT_W'(yi);
        for (int j = 1; j <= PHI; j++) w[j] <= '0;
        cnt       <= '0;
        flush     <= 1'b0;
      end else if (in_valid) begin
        w[1] <= wn;
        for (int j = 2; j <= PHI; j++) w[j] <= w[j-1];
        if (cnt == CNT_W'(N - 1)) begin
          cnt   <= '0;
          flush <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // The denominator must be Phi_L with a unit leading term, and the tables must be in range.
  initial begin
    assert (B[0] == 1) else $error("jco_filter: denominator not normalised");
    assert (cyclo_peak_deg(L) <= MAXDEG) else $error("jco_filter: L too large for MAXDEG");
  end

endmodule
