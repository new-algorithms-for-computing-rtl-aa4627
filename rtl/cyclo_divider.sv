// cyclo_divider: reduces a polynomial, fed one coefficient per cycle highest power first,
// modulo the cyclotomic polynomial Phi_L(x), L = N / gcd(N, k). After the last coefficient
// the phi(L) registers hold the remainder R(x) = v(x) mod Phi_L(x), R_0 in rem[0].
//
// This is the first stage of the JCO-Goertzel method: because Phi_L(W_N^k) = 0,
// R(W_N^k) = v(W_N^k) = V_k. It is a Galois-form division register: every step computes
// x R(x) + v_n and folds the x^phi term back with the monic Phi_L. The coefficients of Phi_L
// are 0 and +-1 for L < 105, so each tap is a plain add, subtract or nothing; other integer
// coefficients become small constant multiplies.
//
// The method gives the division and that it needs no multiplier; the register form, the
// clear input and the widths are this design's. Registers are sized from the worst-case
// coefficient growth of N + 1 inputs of DATA_W bits (rem_gain), so the remainder is exact.
//
// Interface: clear (synchronous, has priority over in_valid and may coincide with it: the
// sample then starts a new division), in_valid/in_data (one coefficient per cycle), rem
// (the current remainder, registered). Synchronous active-low reset.
module cyclo_divider
  import jco_pkg::*;
#(
  parameter int N      = 1024,  // DFT length
  parameter int K      = 128,   // component index
  parameter int DATA_W = 16,    // input coefficient width
  // Width of each remainder coefficient, derived; not meant to be overridden.
  parameter int REM_W  = DATA_W + bits_for(rem_gain(N, K)) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  output logic signed [REM_W-1:0] rem [totient(order_l(N, K))]
);

  localparam int     L   = order_l(N, K);
  localparam int     PHI = totient(L);
  localparam ipoly_t C   = cyclo(L);   // Phi_L, ascending, C[PHI] = 1

  typedef logic signed [REM_W-1:0] rem_t;

  rem_t base [PHI];  // remainder the new coefficient is added to (zero after clear)
  rem_t nxt  [PHI];
  rem_t top;

  always_comb begin
    for (int i = 0; i < PHI; i++) base[i] = clear ? '0 : rem[i];
    top = base[PHI-1];
    nxt[0] = rem_t'(in_data);
    for (int i = 1; i < PHI; i++) nxt[i] = base[i-1];
    for (int i = 0; i < PHI; i++) begin
      if (C[i] == 1)       nxt[i] = nxt[i] - top;
      else if (C[i] == -1) nxt[i] = nxt[i] + top;
      else if (C[i] != 0)  nxt[i] = nxt[i] - rem_t'(C[i]) * top;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < PHI; i++) rem[i] <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < PHI; i++) rem[i] <= nxt[i];
    end else if (clear) begin
      for (int i = 0; i < PHI; i++) rem[i] <= '0;
    end
  end

  initial begin
    assert (C[PHI] == 1) else $error("cyclo_divider: Phi_L not monic");
  end

endmodule
