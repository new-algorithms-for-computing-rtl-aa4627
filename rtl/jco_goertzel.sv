// jco_goertzel: computes one DFT component V_k of an N-point block of real samples with the
// JCO-Goertzel method. The block polynomial v(x) is first reduced modulo the cyclotomic
// polynomial Phi_L(x) (L = N / gcd(N, k)) without any multiplication, leaving R(x) of degree
// phi(L) - 1; R(x) is then divided by the Goertzel polynomial p_k(x) = x^2 - 2cos(2 pi k/N) x + 1,
// leaving r_0 + r_1 x; finally V_k = r_0 + r_1 W_N^k. That costs phi(L) - 2 multiplications in
// the division plus two in the evaluation, phi(L) in all, instead of N for plain Goertzel.
//
// Sequence (one block):
//   LOAD   N cycles with a valid sample: cyclo_divider takes one coefficient per cycle
//   ZERO   (ARRIVAL_ORDER = 1 only) one internal zero coefficient
//   DRAIN  phi(L) cycles: R_(phi-1) .. R_0 go into goertzel_divider, highest first
//   EVAL   one cycle: V_k = r_0 + r_1 (cos t - j s sin t) is registered, out_valid pulses,
//          both dividers are cleared
// so a block takes N + phi(L) + 1 cycles (+1 with ARRIVAL_ORDER) and in_ready is low outside
// LOAD.
//
// Sample order. With ARRIVAL_ORDER = 0 the samples are fed v_(N-1) first, as in the Goertzel
// division circuit, and t = 2 pi k / N, s = +1 (evaluation at W_N^k). With ARRIVAL_ORDER = 1
// the samples are fed in arrival order v_0 first, followed by one zero, exactly like the JCO
// filter: the division register then reduces x * v~(x), v~ the reversed polynomial, and
// x v~(x) at W_N^-k equals V_k, so the evaluation uses s = -1. The arrival-order variant is
// this design's own addition (it lets one sample stream feed both engines); the reduction by
// Phi_L, the Goertzel division and r_0 + r_1 W_N^k follow the method.
//
// Choices of this design: valid/ready input, FRAC-bit rounding of the cosine and sine, FSM
// encoding, synchronous active-low reset; outputs carry FRAC fraction bits.
module jco_goertzel
  import jco_pkg::*;
#(
  parameter int N             = 1024,  // DFT length
  parameter int K             = 128,   // component index
  parameter int DATA_W        = 16,    // input sample width
  parameter int FRAC          = 20,    // fraction bits of constants and outputs
  parameter bit ARRIVAL_ORDER = 1'b0   // 0: v_(N-1) first; 1: v_0 first, zero appended
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic signed [DATA_W-1:0]               in_data,
  output logic                                   out_valid,
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] out_re,   // Re V_k * 2^FRAC
  output logic signed [out_w(N,DATA_W,FRAC)-1:0] out_im    // Im V_k * 2^FRAC
);

  localparam int L     = order_l(N, K);
  localparam int PHI   = totient(L);
  localparam int REM_W = DATA_W + bits_for(rem_gain(N, K)) + 1;
  localparam int R_W   = REM_W + bits_for(longint'(PHI) * (longint'(PHI) + 1) / 2) + FRAC + 2;
  localparam int OUT_W = out_w(N, DATA_W, FRAC);
  localparam int CNT_W = bits_for(longint'(N));
  localparam int IDX_W = bits_for(longint'(PHI));
  localparam int C_W   = FRAC + 2;
  localparam int P_W   = R_W + C_W;
  localparam logic signed [C_W-1:0] COS_C = C_W'(cos_q(N, K, FRAC));
  localparam logic signed [C_W-1:0] SIN_C = C_W'(sin_q(N, K, FRAC));

  typedef enum logic [1:0] {S_LOAD, S_ZERO, S_DRAIN, S_EVAL} state_t;

  state_t              state;
  logic [CNT_W-1:0]    cnt;
  logic [IDX_W-1:0]    idx;

  logic                       cd_valid, gd_valid, clr;
  logic signed [DATA_W-1:0]   cd_data;
  logic signed [REM_W-1:0]    rem [PHI];
  logic signed [REM_W-1:0]    gd_data;
  logic signed [R_W-1:0]      r0, r1;
  logic signed [P_W-1:0]      pc, ps;
  logic signed [OUT_W-1:0]    vr, vi;

  assign in_ready = (state == S_LOAD);
  assign clr      = (state == S_EVAL);
  assign cd_valid = (state == S_LOAD && in_valid) || state == S_ZERO;
  assign cd_data  = (state == S_LOAD) ? in_data : '0;
  assign gd_valid = (state == S_DRAIN);
  assign gd_data  = rem[PHI - 1 - int'(idx)];

  cyclo_divider #(.N(N), .K(K), .DATA_W(DATA_W)) u_cyclo (
    .clk, .rst_n, .clear(clr), .in_valid(cd_valid), .in_data(cd_data), .rem);

  goertzel_divider #(.N(N), .K(K), .IN_W(REM_W), .FRAC(FRAC), .NUM_IN(PHI)) u_goertzel (
    .clk, .rst_n, .clear(clr), .in_valid(gd_valid), .in_data(gd_data), .r0, .r1);

  // Evaluation r_0 + r_1 W^(+-k): the two real multiplications of the method.
  always_comb begin
    pc = P_W'(r1) * P_W'(COS_C);
    ps = P_W'(r1) * P_W'(SIN_C);
    vr = OUT_W'(r0 + R_W'(pc >>> FRAC));
    vi = ARRIVAL_ORDER ? OUT_W'(R_W'(ps >>> FRAC)) : OUT_W'(-R_W'(ps >>> FRAC));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cnt       <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == CNT_W'(N - 1)) begin
            cnt   <= '0;
            idx   <= '0;
            state <= ARRIVAL_ORDER ? S_ZERO : S_DRAIN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_ZERO: state <= S_DRAIN;
        S_DRAIN: begin
          if (idx == IDX_W'(PHI - 1)) state <= S_EVAL;
          else                        idx   <= idx + 1'b1;
        end
        S_EVAL: begin
          out_valid <= 1'b1;
          out_re    <= vr;
          out_im    <= vi;
          state     <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
