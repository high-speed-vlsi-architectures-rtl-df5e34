// fast2_polymult -- fast 2-parallel multiplier for
// P(x) = A(x) * B(x) mod (x^N + 1, 2^QW), two coefficients per cycle.
//
// Polyphase split with y = x^2: A = A0(y) + A1(y) x, B = B0(y) + B1(y) x, all
// of length K = N/2. Three length-K systolic multipliers (fir_polymult), each
// already reducing modulo y^K + 1, compute
//   U = A0*B0,  V = A1*B1,  W = (A0+A1)*(B0+B1).
// Post-processing:
//   P1 = W - U - V                  (two subtractors, then one delay)
//   P0 = U + V*y mod (y^K + 1)      (U delayed by one cycle and added to V)
// Delaying U by one cycle lines u[i] up with v[i-1]; the coefficient that
// falls off the top, v[K-1], is caught in a hold register in the cycle it
// leaves V and its negative replaces V one period later, when u[0] is added
// (p0[0] = u[0] - v[K-1]).
//
// Interface and timing. Inputs a0_in/a1_in carry a[2(K-1-k)] and
// a[2(K-1-k)+1] when phase == k (highest degree first, back-to-back
// polynomials allowed). Weights b0 (even b[]) and b1 (odd b[]) are constant
// while polynomials are in flight. Outputs p0_out/p1_out carry p[2(K-1-k)] and
// p[2(K-1-k)+1] when phase == (k+1) mod K, i.e. K+1 cycles after the
// matching inputs: one polynomial takes 2K = N cycles from first input to last
// output.
//
// Taken from the paper: the three sub-multipliers, the pre-adder on A, the
// subtractor pair and delay on P1, the U delay, the hold register and switches
// for -v[K-1], and the output timing printed in its n = 8 timing diagram (U and
// V leave the sub-multipliers in the cycle the phase counter wraps, P one cycle
// later). This design's choices: the switch instants are expressed in the
// shared input phase counter (both switches act when phase == 0, which is the
// last slot of the delayed output frame) and the pre-added weights B0+B1 are
// formed here from the stored weights, one magnitude bit wider.
module fast2_polymult
  import polymult_pkg::*;
#(
  parameter int unsigned N    = 256,  // full polynomial length, even, >= 4
  parameter int unsigned BMAG = 3,    // weight magnitude bits of b0/b1
  localparam int unsigned K   = N / 2,
  localparam int unsigned PW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [PW-1:0]           phase,   // 0..K-1, position of the inputs
  input  coef_sm_t                a0_in,   // A0(y) coefficient
  input  coef_sm_t                a1_in,   // A1(y) coefficient
  input  logic [K-1:0]            b0_sign, // B0(y) = b[0], b[2], ...
  input  logic [K-1:0][BMAG-1:0]  b0_mag,
  input  logic [K-1:0]            b1_sign, // B1(y) = b[1], b[3], ...
  input  logic [K-1:0][BMAG-1:0]  b1_mag,
  output coef_t                   p0_out,  // P0(y) coefficient (combinational adder output)
  output coef_t                   p1_out   // P1(y) coefficient (registered)
);

  // ---------------- pre-processing ----------------
  coef_sm_t aw_in;
  assign aw_in = mod_to_sm(coef_t'(sm_to_mod(a0_in) + sm_to_mod(a1_in)));

  // pre-added weights B0+B1, range +-2(2^BMAG-1), one more magnitude bit
  logic [K-1:0]           bw_sign;
  logic [K-1:0][BMAG:0]   bw_mag;

  weight_preadd #(.K(K), .BMAG(BMAG)) u_bsum (
    .x_sign(b0_sign), .x_mag(b0_mag), .y_sign(b1_sign), .y_mag(b1_mag),
    .s_sign(bw_sign), .s_mag(bw_mag)
  );

  // ---------------- intermediate multiplications ----------------
  coef_t u, v, w;

  fir_polymult #(.N(K), .BMAG(BMAG)) u_mul_u (
    .clk, .rst_n, .phase, .a_in(a0_in), .b_sign(b0_sign), .b_mag(b0_mag), .p_out(u)
  );

  fir_polymult #(.N(K), .BMAG(BMAG + 1)) u_mul_w (
    .clk, .rst_n, .phase, .a_in(aw_in), .b_sign(bw_sign), .b_mag(bw_mag), .p_out(w)
  );

  fir_polymult #(.N(K), .BMAG(BMAG)) u_mul_v (
    .clk, .rst_n, .phase, .a_in(a1_in), .b_sign(b1_sign), .b_mag(b1_mag), .p_out(v)
  );

  // ---------------- post-processing ----------------
  coef_t u_d, v_hold, p1_q, v_sel;
  logic  wrap;  // phase in which V carries v[K-1] and P0 needs u[0] - v[K-1]

  assign wrap = (phase == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_d    <= '0;
      v_hold <= '0;
      p1_q   <= '0;
    end else begin
      u_d  <= u;
      p1_q <= coef_t'(w - u - v);
      if (wrap) v_hold <= v;
    end
  end

  assign v_sel  = wrap ? coef_t'(-v_hold) : v;
  assign p0_out = coef_t'(u_d + v_sel);
  assign p1_out = p1_q;

endmodule
