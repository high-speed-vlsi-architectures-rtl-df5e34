// fir_polymult -- length-N weight-stationary systolic multiplier for
// P(x) = A(x) * B(x) mod (x^N + 1, 2^QW).
//
// Structure (transpose-form FIR with negacyclic wrap-around):
//   * N taps (mod_tap), tap j holding weight b[j]; partial sums run from tap 0
//     to tap N-1 through N-1 delay elements; the last tap's sum is p_out.
//   * an N-stage shift register on the input stream; its output, negated
//     (sign-bit flip), is the operand -a[.] of the previous polynomial.
//   * N-1 switches: tap j (j >= 1) takes the current input when control bit
//     ctrl_sw[j-1] is 1 and the negated shift-register output when it is 0.
//     Tap 0 always takes the current input.
//   * ctrl_sw is cleared when the phase counter is 0 and otherwise shifts left
//     taking in a 1, so tap j uses the input node in phases j..N-1.
//   * one register stage after the switches (a pipelining cut-set across all
//     tap operands) to break the fan-out of the input node and shift register.
//
// Interface and timing. The coefficients of A enter one per cycle, highest
// degree first: a[N-1-k] is applied when phase == k. Polynomials may follow
// each other back to back with no idle cycles. The weights b[j] must stay
// constant from the first coefficient of the first polynomial until the last
// result has left. The product leaves in the same order, p[N-1-k] on p_out
// when phase == k, N cycles after a[N-1-k] entered: the response time is N
// cycles and one polynomial takes 2N-1 cycles from first input to last
// output; L back-to-back polynomials take N*(L+1)-1.
//
// Taken from the paper: taps, shift register with negation, switch schedule,
// ctrl_sw generation, buffer registers after the switches, order of inputs and
// outputs, latency. This design's choices: the phase counter comes from
// outside (shared by all arrays of a parallel multiplier) and the buffers also
// cover tap 0's operand so all taps stay aligned.
module fir_polymult
  import polymult_pkg::*;
#(
  parameter int unsigned N    = 256, // polynomial length (number of taps), >= 2
  parameter int unsigned BMAG = 3,   // weight magnitude bits
  localparam int unsigned PW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [PW-1:0]           phase,  // 0..N-1, position of a_in in its polynomial
  input  coef_sm_t                a_in,   // a[N-1-phase]
  input  logic [N-1:0]            b_sign, // weights b[0..N-1], sign
  input  logic [N-1:0][BMAG-1:0]  b_mag,  //   and magnitude
  output coef_t                   p_out   // p[N-1-phase] of the polynomial that entered N cycles ago
);

  // shift register of N delays on the input node
  coef_sm_t sr [N];
  coef_sm_t neg_a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) sr[i] <= '0;
    end else begin
      sr[0] <= a_in;
      for (int i = 1; i < int'(N); i++) sr[i] <= sr[i-1];
    end
  end

  assign neg_a = sm_neg(sr[N-1]);

  // switch control: all zero in phase 0, then shift left padding a 1
  logic [N-2:0] ctrl_sw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       ctrl_sw <= '0;
    else if (phase == PW'(N-1))       ctrl_sw <= '0;
    else                              ctrl_sw <= (ctrl_sw << 1) | (N-1)'(1);
  end

  // switches followed by the buffer registers (pipelining cut-set)
  coef_sm_t op [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(N); j++) op[j] <= '0;
    end else begin
      op[0] <= a_in;
      for (int j = 1; j < int'(N); j++) op[j] <= ctrl_sw[j-1] ? a_in : neg_a;
    end
  end

  // tap chain
  coef_t acc [N];

  for (genvar j = 0; j < int'(N); j++) begin : g_tap
    mod_tap #(
      .BMAG    (BMAG),
      .REG_OUT (j != int'(N) - 1)
    ) u_tap (
      .clk     (clk),
      .rst_n   (rst_n),
      .a       (op[j]),
      .b_sign  (b_sign[j]),
      .b_mag   (b_mag[j]),
      .acc_in  ((j == 0) ? coef_t'(0) : acc[(j == 0) ? 0 : j-1]),
      .acc_out (acc[j])
    );
  end

  assign p_out = acc[N-1];

endmodule
