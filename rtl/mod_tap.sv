// mod_tap -- one tap (processing node) of the weight-stationary systolic
// polynomial multiplier.
//
// The tap holds no weight of its own: the stationary coefficient b[j] is
// applied on b_sign/b_mag and stays constant while polynomials stream
// through. Each cycle the tap forms the modular product of the operand a[i]
// with b[j] (product of the magnitudes, low QW bits kept) and adds it to, or
// subtracts it from, the partial sum acc_in coming from the previous tap:
//   sum = acc_in - prod  if a.sign XOR b_sign
//   sum = acc_in + prod  otherwise                    (all modulo 2^QW)
// With REG_OUT = 1 the sum is registered (the tap's delay element D) and
// acc_out follows one cycle later; with REG_OUT = 0 acc_out is the
// combinational sum (the last tap of an array, whose sum is the output).
//
// The multiply-then-add node, its delay, and the sign rule of the adder follow
// the paper. The weight magnitude width BMAG is a parameter: 3 bits for
// Saber's secret coefficients in [-4,4], wider for the pre-added weights of
// the fast parallel multipliers. The product is written as a plain multiply of
// a QW-bit by a BMAG-bit magnitude, which for small BMAG is a few adders.
// In the combinational form clk and rst_n are unused; they stay on the port
// list so that all taps of an array share one interface.
module mod_tap
  import polymult_pkg::*;
#(
  parameter int unsigned BMAG    = 3,   // weight magnitude bits
  parameter bit          REG_OUT = 1'b1 // 1: registered sum, 0: combinational
) (
  input  logic            clk,
  input  logic            rst_n,   // asynchronous, active low; clears the delay
  input  coef_sm_t        a,       // operand a[i] from the switch / input node
  input  logic            b_sign,  // stationary weight b[j], sign
  input  logic [BMAG-1:0] b_mag,   //   and magnitude
  input  coef_t           acc_in,  // partial sum from the previous tap
  output coef_t           acc_out  // partial sum to the next tap
);

  coef_t prod, sum;

  always_comb begin
    prod = coef_t'(a.mag * b_mag);
    sum  = (a.sign ^ b_sign) ? coef_t'(acc_in - prod) : coef_t'(acc_in + prod);
  end

  if (REG_OUT) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) acc_out <= '0;
      else        acc_out <= sum;
    end
  end else begin : g_comb
    assign acc_out = sum;
  end

endmodule
