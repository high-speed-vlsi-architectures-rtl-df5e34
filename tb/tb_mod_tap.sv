// tb_mod_tap -- checks one systolic tap in both forms (registered and
// combinational sum) with random sign-magnitude operands and weights against
// acc +/- (|a|*|b| mod 2^13), signed by a.sign XOR b.sign.
module tb_mod_tap;
  import polymult_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coef_sm_t a;
  logic b_sign;
  logic [2:0] b_mag;
  coef_t acc_in, out_reg, out_comb;

  mod_tap #(.BMAG(3), .REG_OUT(1'b1)) dut_reg (
    .clk, .rst_n, .a, .b_sign, .b_mag, .acc_in, .acc_out(out_reg));
  mod_tap #(.BMAG(3), .REG_OUT(1'b0)) dut_comb (
    .clk, .rst_n, .a, .b_sign, .b_mag, .acc_in, .acc_out(out_comb));

  int checks = 0, failures = 0;

  function automatic coef_t expect_sum(coef_sm_t x, logic bs, logic [2:0] bm, coef_t acc);
    int v;
    v = int'(x.mag) * int'(bm);
    if (x.sign ^ bs) v = int'(acc) - v;
    else             v = int'(acc) + v;
    return coef_t'(v & 32'h1fff);
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    coef_t exp_prev;
    a = '0; b_sign = 0; b_mag = 0; acc_in = '0;
    repeat (2) @(posedge clk);
    #1;
    if (out_reg !== '0) failures++;
    checks++;
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      a.sign = 1'($urandom);
      a.mag  = coef_t'($urandom);
      b_sign = 1'($urandom);
      b_mag  = 3'($urandom);
      acc_in = coef_t'($urandom);
      #1;
      exp_prev = expect_sum(a, b_sign, b_mag, acc_in);
      checks++;
      if (out_comb !== exp_prev) begin
        failures++;
        $display("comb mismatch: got %0d exp %0d", out_comb, exp_prev);
      end
      @(posedge clk); #1;
      checks++;
      if (out_reg !== exp_prev) begin
        failures++;
        $display("reg mismatch: got %0d exp %0d", out_reg, exp_prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
