// tb_polymult_ctrl -- checks the control unit (K = 5, LAT = 7): the phase
// counter counts 0..K-1 from reset and wraps, phase0 marks phase 0, and
// out_valid / out_first repeat in_valid / (in_valid and phase 0) exactly LAT
// cycles later, over a random pattern of whole valid and idle periods.
module tb_polymult_ctrl;
  localparam int K   = 5;
  localparam int LAT = 7;
  localparam int PW  = $clog2(K);
  localparam int CYC = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid;
  logic [PW-1:0] phase;
  logic          phase0, out_valid, out_first;

  polymult_ctrl #(.K(K), .LAT(LAT)) dut (.clk, .rst_n, .in_valid, .phase, .phase0, .out_valid, .out_first);

  int checks = 0, failures = 0;
  bit vhist [CYC];
  bit fhist [CYC];

  initial begin : watchdog
    repeat (CYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit period_valid;
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < CYC; c++) begin
      // outputs of cycle c
      checks += 4;
      if (phase !== PW'(c % K)) begin failures++; $display("cycle %0d phase %0d", c, phase); end
      if (phase0 !== (c % K == 0)) begin failures++; $display("cycle %0d phase0 %0b", c, phase0); end
      if (out_valid !== (c >= LAT ? vhist[c-LAT] : 1'b0)) begin failures++; $display("cycle %0d out_valid", c); end
      if (out_first !== (c >= LAT ? fhist[c-LAT] : 1'b0)) begin failures++; $display("cycle %0d out_first", c); end
      // inputs of cycle c: whole periods valid or idle
      if (c % K == 0) period_valid = ($urandom_range(2) != 0);
      in_valid = period_valid;
      vhist[c] = period_valid;
      fhist[c] = period_valid && (c % K == 0);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
