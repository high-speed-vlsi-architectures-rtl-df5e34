// weight_preadd -- pre-processing adder for the stationary weights of the
// fast parallel multipliers.
//
// Adds two vectors of K sign-magnitude weights element by element (exact
// integer sum, no modular reduction) and returns the sums in sign-magnitude
// form with one more magnitude bit, e.g. B0(y)+B1(y). Purely combinational;
// since the weights are stationary the sums settle once per weight load.
// The paper draws these sums as the weights of the middle sub-multipliers;
// computing them in hardware from the stored weights is this design's choice.
module weight_preadd #(
  parameter int unsigned K    = 128, // vector length
  parameter int unsigned BMAG = 3    // magnitude bits of the inputs
) (
  input  logic [K-1:0]           x_sign,
  input  logic [K-1:0][BMAG-1:0] x_mag,
  input  logic [K-1:0]           y_sign,
  input  logic [K-1:0][BMAG-1:0] y_mag,
  output logic [K-1:0]           s_sign,
  output logic [K-1:0][BMAG:0]   s_mag
);

  for (genvar i = 0; i < int'(K); i++) begin : g_add
    logic signed [BMAG+1:0] sx, sy, ss;
    always_comb begin
      sx = x_sign[i] ? -$signed({2'b00, x_mag[i]}) : $signed({2'b00, x_mag[i]});
      sy = y_sign[i] ? -$signed({2'b00, y_mag[i]}) : $signed({2'b00, y_mag[i]});
      ss = sx + sy;
      s_sign[i] = ss[BMAG+1];
      s_mag[i]  = ss[BMAG+1] ? (BMAG+1)'(-ss) : (BMAG+1)'(ss);
    end
  end

endmodule
