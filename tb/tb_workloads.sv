// tb_workloads -- runs the multiplication counts the evaluation uses, each as
// one back-to-back stream with a fixed weight polynomial:
//   n = 256: 9, 12 and 15 products (the medium-security Saber key generation,
//            encapsulation and decapsulation counts),
//   n = 180: 9 products and 1 product with the 4-parallel multiplier.
// Each run checks every coefficient and the total latency N(L+1)/4 + 1.
module tb_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 5;
  logic done [NR];
  int   chk  [NR], fail [NR], lat [NR];

  tb_workload_run #(.N(256), .NPROD(9))  u_keygen (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]), .latency(lat[0]));
  tb_workload_run #(.N(256), .NPROD(12)) u_encaps (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]), .latency(lat[1]));
  tb_workload_run #(.N(256), .NPROD(15)) u_decaps (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]), .latency(lat[2]));
  tb_workload_run #(.N(180), .NPROD(9))  u_n180_9 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]), .latency(lat[3]));
  tb_workload_run #(.N(180), .NPROD(1))  u_n180_1 (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]), .latency(lat[4]));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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
    end
    $display("latency in cycles: n=256 x9 %0d, x12 %0d, x15 %0d; n=180 x9 %0d, x1 %0d",
             lat[0], lat[1], lat[2], lat[3], lat[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
