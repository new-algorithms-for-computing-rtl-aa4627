// goertzel_divider: the two-register autoregressive circuit that divides a polynomial, fed
// highest coefficient first, by p_k(x) = x^2 - A x + 1 with A = 2 cos(2 pi k / N), leaving the
// remainder r(x) = r_0 + r_1 x. Then V_k = r_0 + r_1 W_N^k when the polynomial is a signal
// polynomial (or its remainder modulo Phi_L, as in the JCO-Goertzel method).
//
// Per input u the registers update as in the Goertzel division figure:
//   r_0 <- u - r_1          (the -1 feedback)
//   r_1 <- r_0 + A r_1      (the A feedback)
// which is x r(x) + u reduced with x^2 = A x - 1. One real multiplication per step.
//
// Choices of this design: A is rounded to FRAC fraction bits, the registers keep FRAC
// fraction bits and the product A r_1 is truncated back to FRAC fraction bits; the integer
// part is sized for NUM_IN inputs of IN_W bits (|r| grows at most like NUM_IN^2 / 2).
// clear is synchronous and may coincide with in_valid (the input then starts a new
// division). Synchronous active-low reset. r0/r1 are registered.
module goertzel_divider
  import jco_pkg::*;
#(
  parameter int N      = 1024,  // DFT length
  parameter int K      = 128,   // component index
  parameter int IN_W   = 26,    // input coefficient width (integer)
  parameter int FRAC   = 20,    // fraction bits of A and of r_0, r_1
  parameter int NUM_IN = 5,     // most inputs fed per division
  // Register width, derived; not meant to be overridden.
  parameter int R_W    = IN_W + bits_for(longint'(NUM_IN) * (longint'(NUM_IN) + 1) / 2) + FRAC + 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  output logic signed [R_W-1:0]  r0,    // r_0 * 2^FRAC
  output logic signed [R_W-1:0]  r1     // r_1 * 2^FRAC
);

  localparam int A_Q  = goertzel_a(N, K, FRAC);
  localparam int AC_W = FRAC + 3;                // |A| <= 2
  localparam int P_W  = R_W + AC_W;

  typedef logic signed [R_W-1:0] r_t;
  typedef logic signed [P_W-1:0] p_t;

  localparam logic signed [AC_W-1:0] A_C = AC_W'(A_Q);

  r_t b0, b1, n0, n1;
  p_t prod;

  always_comb begin
    b0   = clear ? '0 : r0;
    b1   = clear ? '0 : r1;
    prod = p_t'(b1) * p_t'(A_C);
    n0   = (r_t'(in_data) <<< FRAC) - b1;
    n1   = b0 + r_t'(prod >>> FRAC);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r0 <= '0;
      r1 <= '0;
    end else if (in_valid) begin
      r0 <= n0;
      r1 <= n1;
    end else if (clear) begin
      r0 <= '0;
      r1 <= '0;
    end
  end

endmodule
