// tb_arch_workloads -- runs the multiplication counts of the evaluation on the
// two smaller configurations of the architecture, which the 4-parallel top is
// built from: the serial systolic multiplier (fir_polymult, one coefficient
// per cycle) and the 2-parallel multiplier (fast2_polymult).
//   serial,     n = 256: 1, 9, 12 and 15 products (one product and the
//                        medium-security Saber key generation, encapsulation
//                        and decapsulation counts)
//   2-parallel, n = 256: 1, 9, 12 and 15 products
//   2-parallel, n = 180: 1 and 9 products
// Each run is one back-to-back stream with a fixed weight polynomial; every
// coefficient and the total latency (N(L+1)-1 serial, N(L+1)/2 2-parallel)
// are checked.
module tb_arch_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 10;
  localparam int RM [NR] = '{1, 1, 1, 1, 2, 2, 2, 2, 2, 2};
  localparam int RN [NR] = '{256, 256, 256, 256, 256, 256, 256, 256, 180, 180};
  localparam int RL [NR] = '{1, 9, 12, 15, 1, 9, 12, 15, 1, 9};

  logic done [NR];
  int   chk  [NR], fail [NR], lat [NR];

  for (genvar i = 0; i < NR; i++) begin : g_run
    tb_arch_run #(.M(RM[i]), .N(RN[i]), .NPROD(RL[i])) u_run (
      .clk, .rst_n, .done(done[i]), .checks(chk[i]), .failures(fail[i]), .latency(lat[i]));
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (6000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      @(negedge clk);
      all = 1'b1;
      for (int i = 0; i < NR; i++) all &= done[i];
    end while (!all);
    for (int i = 0; i < NR; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("M=%0d n=%0d, %0d products: %0d cycles", RM[i], RN[i], RL[i], lat[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
