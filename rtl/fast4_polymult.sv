// fast4_polymult -- fast 4-parallel multiplier for
// P(x) = A(x) * B(x) mod (x^N + 1, 2^QW), four coefficients per cycle.
//
// The fast 2-parallel algorithm applied twice. With z = x^2 and y = x^4, lane r
// (r = 0..3) carries the sub-polynomial of the coefficients with index = r
// mod 4, each of length K = N/4:
//   lane 0: A00 = a[0],a[4],..   lane 1: A10 = a[1],a[5],..
//   lane 2: A01 = a[2],a[6],..   lane 3: A11 = a[3],a[7],..
// so A0(z) = A00(y) + A01(y) z and A1(z) = A10(y) + A11(y) z (same for B).
// Three fast2_polymult blocks of length N/2 compute, in polyphase form,
//   A0*B0           = C0(y) + C1(y) z     (upper,  inputs A00, A01)
//   (A0+A1)*(B0+B1) = C2(y) + C3(y) z     (middle, inputs A00+A10, A01+A11)
//   A1*B1           = C4(y) + C5(y) z     (lower,  inputs A10, A11)
// each already reduced modulo z^(N/2) + 1. The six post-processing adders
// then form
//   P0 = C0 + C5*y mod (y^K + 1)   (C0 delayed one cycle, plus C5; the
//                                   falling-off c5[K-1] is held and its
//                                   negative used one period later)
//   P1 = C2 - C0 - C4,  P2 = C1 + C4,  P3 = C3 - C1 - C5   (each then delayed)
// and P(x) = P0(y) + P1(y) x + P2(y) x^2 + P3(y) x^3.
//
// Interface and timing. a_in[r] carries a[4(K-1-k)+r] when phase == k; the
// stationary weights are given per lane the same way (b_*[r][k] = b[4k+r]).
// p_out[r] carries p[4(K-1-k)+r] when phase == (k+2) mod K, K+2 cycles after
// the matching inputs; one polynomial takes 2K+1 = N/2+1 cycles from first
// input to last output, L back-to-back ones N(L+1)/4 + 1.
//
// Taken from the paper: the three sub-multipliers and their inputs, the six
// adders, the output delays, the hold register and switches for the C5
// wrap-around. Departure: the paper's Algorithm 2 and its block diagram give
// P1 = C2 - C1 - C4 and P3 = C3 - C0 - C5; expanding the products (and a
// simulation with B(x) = 1) shows that C0 and C1 must be exchanged in those two
// lines, which is what is built here. This design's choices: switch instants
// in terms of the shared phase counter (hold and release when phase == 1, the
// slot in which C5 carries its top coefficient), and the pre-added weights
// formed in hardware.
module fast4_polymult
  import polymult_pkg::*;
#(
  parameter int unsigned N    = 256, // full polynomial length, multiple of 4, >= 16
  parameter int unsigned BMAG = 3,   // weight magnitude bits
  localparam int unsigned K   = N / 4,
  localparam int unsigned PW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [PW-1:0]                phase,  // 0..K-1, position of the inputs
  input  coef_sm_t [3:0]               a_in,   // lane r: a[4(K-1-phase)+r]
  input  logic [3:0][K-1:0]            b_sign, // lane r, index k: b[4k+r]
  input  logic [3:0][K-1:0][BMAG-1:0]  b_mag,
  output coef_t [3:0]                  p_out   // lane r: p[4(K-1-k)+r], k = phase-2 mod K
);

  // ---------------- pre-processing ----------------
  coef_sm_t am0, am1;  // A00+A10, A01+A11
  assign am0 = mod_to_sm(coef_t'(sm_to_mod(a_in[0]) + sm_to_mod(a_in[1])));
  assign am1 = mod_to_sm(coef_t'(sm_to_mod(a_in[2]) + sm_to_mod(a_in[3])));

  logic [K-1:0]          bm0_sign, bm1_sign;  // B00+B10, B01+B11
  logic [K-1:0][BMAG:0]  bm0_mag,  bm1_mag;

  weight_preadd #(.K(K), .BMAG(BMAG)) u_bsum0 (
    .x_sign(b_sign[0]), .x_mag(b_mag[0]), .y_sign(b_sign[1]), .y_mag(b_mag[1]),
    .s_sign(bm0_sign), .s_mag(bm0_mag)
  );

  weight_preadd #(.K(K), .BMAG(BMAG)) u_bsum1 (
    .x_sign(b_sign[2]), .x_mag(b_mag[2]), .y_sign(b_sign[3]), .y_mag(b_mag[3]),
    .s_sign(bm1_sign), .s_mag(bm1_mag)
  );

  // ---------------- intermediate fast 2-parallel multiplications ----------------
  coef_t c0, c1, c2, c3, c4, c5;

  fast2_polymult #(.N(N/2), .BMAG(BMAG)) u_upper (
    .clk, .rst_n, .phase,
    .a0_in(a_in[0]), .a1_in(a_in[2]),
    .b0_sign(b_sign[0]), .b0_mag(b_mag[0]), .b1_sign(b_sign[2]), .b1_mag(b_mag[2]),
    .p0_out(c0), .p1_out(c1)
  );

  fast2_polymult #(.N(N/2), .BMAG(BMAG + 1)) u_middle (
    .clk, .rst_n, .phase,
    .a0_in(am0), .a1_in(am1),
    .b0_sign(bm0_sign), .b0_mag(bm0_mag), .b1_sign(bm1_sign), .b1_mag(bm1_mag),
    .p0_out(c2), .p1_out(c3)
  );

  fast2_polymult #(.N(N/2), .BMAG(BMAG)) u_lower (
    .clk, .rst_n, .phase,
    .a0_in(a_in[1]), .a1_in(a_in[3]),
    .b0_sign(b_sign[1]), .b0_mag(b_mag[1]), .b1_sign(b_sign[3]), .b1_mag(b_mag[3]),
    .p0_out(c4), .p1_out(c5)
  );

  // ---------------- post-processing ----------------
  coef_t c0_d, c5_hold, c5_sel, p1_q, p2_q, p3_q;
  logic  wrap;  // phase in which C5 carries c5[K-1] and P0 needs c0[0] - c5[K-1]

  assign wrap = (phase == PW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c0_d    <= '0;
      c5_hold <= '0;
      p1_q    <= '0;
      p2_q    <= '0;
      p3_q    <= '0;
    end else begin
      c0_d <= c0;
      p1_q <= coef_t'(c2 - c0 - c4);
      p2_q <= coef_t'(c1 + c4);
      p3_q <= coef_t'(c3 - c1 - c5);
      if (wrap) c5_hold <= c5;
    end
  end

  assign c5_sel   = wrap ? coef_t'(-c5_hold) : c5;
  assign p_out[0] = coef_t'(c0_d + c5_sel);
  assign p_out[1] = p1_q;
  assign p_out[2] = p2_q;
  assign p_out[3] = p3_q;

endmodule
