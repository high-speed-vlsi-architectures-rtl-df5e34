// tb_workload_run -- drives one fast4_polymult_top of length N through NPROD
// products streamed back to back with one weight polynomial B (random in
// [-4, 4]) and random A polynomials, checks every output coefficient against
// the schoolbook negacyclic reference, and measures the total latency: cycles
// from the first input group to the last output group, expected
// N(NPROD+1)/4 + 1. Results are reported on its ports when done rises.
module tb_workload_run
  import polymult_pkg::*;
  import polymult_ref_pkg::*;
#(
  parameter int N     = 256,
  parameter int NPROD = 9
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   latency
);
  localparam int K  = N / 4;
  localparam int AW = $clog2(N);

  logic          b_wr_en;
  logic [AW-1:0] b_wr_addr;
  logic          b_wr_sign;
  logic [2:0]    b_wr_mag;
  logic          phase0, in_valid, out_valid, out_first;
  coef_t [3:0]   a_in, p_out;

  fast4_polymult_top #(.N(N)) dut (
    .clk, .rst_n, .b_wr_en, .b_wr_addr, .b_wr_sign, .b_wr_mag,
    .phase0, .in_valid, .a_in, .out_valid, .out_first, .p_out);

  int b [];
  int a [NPROD][];
  int p [NPROD][];
  int cycle = 0;
  int first_in = -1, last_out = -1;
  int prod_idx = -1, grp = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    done = 1'b0; checks = 0; failures = 0; latency = -1;
    b_wr_en = 1'b0; b_wr_addr = '0; b_wr_sign = 1'b0; b_wr_mag = '0;
    in_valid = 1'b0; a_in = '0;
    b = new[N];
    for (int i = 0; i < N; i++) b[i] = rand_small(4);
    for (int l = 0; l < NPROD; l++) begin
      a[l] = new[N];
      for (int i = 0; i < N; i++) a[l][i] = int'($urandom_range(8191));
      negacyclic(N, a[l], b, p[l]);
    end
    @(posedge rst_n);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      b_wr_en = 1'b1; b_wr_addr = AW'(i);
      b_wr_sign = (b[i] < 0); b_wr_mag = 3'(b[i] < 0 ? -b[i] : b[i]);
      @(negedge clk);
    end
    b_wr_en = 1'b0;
    while (!phase0) @(negedge clk);
    first_in = cycle;
    for (int l = 0; l < NPROD; l++)
      for (int k = 0; k < K; k++) begin
        in_valid = 1'b1;
        for (int r = 0; r < 4; r++) a_in[r] = coef_t'(a[l][4*(K-1-k)+r]);
        @(negedge clk);
      end
    in_valid = 1'b0;
    repeat (K + 8) @(negedge clk);
    checks++;
    if (prod_idx != NPROD - 1 || grp != K) begin
      failures++; $display("N=%0d: only %0d products seen", N, prod_idx + 1);
    end
    latency = last_out - first_in;
    checks++;
    if (latency != N * (NPROD + 1) / 4 + 1) begin
      failures++; $display("N=%0d, %0d products: latency %0d, expected %0d", N, NPROD, latency, N * (NPROD + 1) / 4 + 1);
    end
    done = 1'b1;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (out_first) begin prod_idx++; grp = 0; end
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (prod_idx < 0 || prod_idx >= NPROD || p_out[r] !== coef_t'(p[prod_idx][4*(K-1-grp)+r])) begin
          failures++;
          if (failures < 5) $display("N=%0d product %0d group %0d lane %0d: got %0d", N, prod_idx, grp, r, p_out[r]);
        end
      end
      grp++;
      last_out = cycle;
    end
  end
endmodule
