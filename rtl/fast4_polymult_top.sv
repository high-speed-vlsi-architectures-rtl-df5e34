// fast4_polymult_top -- fast 4-parallel modular polynomial multiplier for
// R_q = Z_q[x]/(x^N + 1), q = 2^13, with its weight store and control unit.
// Default N = 256 with 3-bit weight magnitudes: the multiplier of Saber
// (medium security), where B(x) is the small secret with coefficients in
// [-4, 4] and A(x) the public polynomial with 13-bit coefficients.
//
// Use:
//   1. Load B(x): write b[i] (sign and magnitude) at address i with b_wr_en,
//      one coefficient per cycle, in any order. The weights are stationary:
//      do not write while a product is still in flight.
//   2. Stream A(x): starting in a cycle where phase0 is high, apply four
//      coefficients per cycle with in_valid high for K = N/4 consecutive
//      cycles; in cycle k lane r carries a[4(K-1-k)+r] (highest degree
//      first). Further polynomials may follow immediately or after idle
//      periods, and always start when phase0 is high.
//   3. Collect P(x) = A(x)B(x) mod (x^N+1, q): when out_valid is high lane r
//      of p_out carries p[4(K-1-k)+r], k counting from the cycle where
//      out_first is high. The outputs lag the inputs by K+2 cycles; one
//      product takes N/2+1 cycles from first input to last output, L
//      back-to-back products N(L+1)/4+1.
//
// A coefficient of A is a residue 0..q-1 (it enters the arrays as a
// sign-magnitude operand with sign 0). The weight store, the write port and
// the valid/first signals are this design's choices: the paper only says the
// operands come from a host or from on-chip RAM.
module fast4_polymult_top
  import polymult_pkg::*;
#(
  parameter int unsigned N    = 256, // polynomial length, multiple of 4, >= 16
  parameter int unsigned BMAG = 3,   // magnitude bits of B's coefficients
  localparam int unsigned K   = N / 4,
  localparam int unsigned AW  = $clog2(N),
  localparam int unsigned PW  = $clog2(K)
) (
  input  logic             clk,
  input  logic             rst_n,
  // weight (B) load port
  input  logic             b_wr_en,
  input  logic [AW-1:0]    b_wr_addr,
  input  logic             b_wr_sign,
  input  logic [BMAG-1:0]  b_wr_mag,
  // A stream
  output logic             phase0,
  input  logic             in_valid,
  input  coef_t [3:0]      a_in,
  // P stream
  output logic             out_valid,
  output logic             out_first,
  output coef_t [3:0]      p_out
);

  // weight store, kept by lane: b_sign_q[r][k] = sign of b[4k+r]
  logic [3:0][K-1:0]            b_sign_q;
  logic [3:0][K-1:0][BMAG-1:0]  b_mag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_sign_q <= '0;
      b_mag_q  <= '0;
    end else if (b_wr_en) begin
      b_sign_q[b_wr_addr[1:0]][b_wr_addr[AW-1:2]] <= b_wr_sign;
      b_mag_q [b_wr_addr[1:0]][b_wr_addr[AW-1:2]] <= b_wr_mag;
    end
  end

  // control unit
  logic [PW-1:0] phase;

  polymult_ctrl #(.K(K), .LAT(K + 2)) u_ctrl (
    .clk, .rst_n, .in_valid, .phase, .phase0, .out_valid, .out_first
  );

  // datapath
  coef_sm_t [3:0] a_sm;
  for (genvar r = 0; r < 4; r++) begin : g_a
    assign a_sm[r] = mod_to_sm(a_in[r]);
  end

  fast4_polymult #(.N(N), .BMAG(BMAG)) u_fast4 (
    .clk, .rst_n, .phase,
    .a_in(a_sm), .b_sign(b_sign_q), .b_mag(b_mag_q),
    .p_out
  );

endmodule
