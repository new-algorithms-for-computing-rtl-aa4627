// jco_dft: single-DFT-component processor. One stream of real samples v_0, v_1, ... in
// arrival order, grouped in blocks of N, feeds two engines that each return the same
// component V_k of every block:
//
//   jco_filter    the JCO autoregressive filter (denominator Phi_L(z^-1), no multiplier in
//                 the loop, the numerator products formed once per block); V_k after N + 1
//                 cycles per block
//   jco_goertzel  the JCO-Goertzel engine (reduction modulo Phi_L, Goertzel division of the
//                 remainder, evaluation with two multiplications), run in its arrival-order
//                 form; V_k after N + phi(L) + 2 cycles per block
//
// The stream is shared: a sample is taken only when both engines are ready, so the faster
// JCO filter waits at each block boundary for the JCO-Goertzel engine to finish draining
// (stall_o reports those cycles). Both results are returned so that either can be used;
// they differ only by rounding of the constants.
//
// Defaults are the worked case of the method: N = 1024, k = 128, where W_1024^128 has order
// L = 8, Phi_8(x) = x^4 + 1 and the JCO filter is 1 / (1 + z^-4) with three numerator taps.
// Sample width, fraction bits, handshakes and the pairing of the two engines are this
// design's choices. Synchronous active-low reset.
module jco_dft
  import jco_pkg::*;
#(
  parameter int N      = 1024,  // DFT length
  parameter int K      = 128,   // component index
  parameter int DATA_W = 16,    // sample width (two's complement)
  parameter int FRAC   = 20     // fraction bits of all V_k outputs
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic signed [DATA_W-1:0]               in_data,
  output logic                                   stall_o,     // valid sample held back
  output logic                                   jco_valid,
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] jco_re,      // Re V_k * 2^FRAC
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] jco_im,      // Im V_k * 2^FRAC
  output logic                                   jcog_valid,
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] jcog_re,     // Re V_k * 2^FRAC
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] jcog_im      // Im V_k * 2^FRAC
);

  logic f_ready, g_ready, take;

  assign in_ready = f_ready && g_ready;
  assign take     = in_valid && in_ready;
  assign stall_o  = in_valid && !in_ready;

  jco_filter #(.N(N), .K(K), .DATA_W(DATA_W), .FRAC(FRAC)) u_filter (
    .clk, .rst_n, .in_valid(take), .in_ready(f_ready), .in_data,
    .out_valid(jco_valid), .out_re(jco_re), .out_im(jco_im));

  jco_goertzel #(.N(N), .K(K), .DATA_W(DATA_W), .FRAC(FRAC), .ARRIVAL_ORDER(1'b1)) u_jcog (
    .clk, .rst_n, .in_valid(take), .in_ready(g_ready), .in_data,
    .out_valid(jcog_valid), .out_re(jcog_re), .out_im(jcog_im));

endmodule
