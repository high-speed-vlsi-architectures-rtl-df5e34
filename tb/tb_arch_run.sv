// tb_arch_run -- drives one serial (M = 1, fir_polymult) or 2-parallel
// (M = 2, fast2_polymult) multiplier of length N through NPROD products
// streamed back to back with one weight polynomial B (random in [-4, 4]) and
// random A polynomials whose coefficients carry random signs. Every output
// coefficient is compared with the schoolbook negacyclic reference, and the
// total latency is measured: cycles from the first input to the last output,
// expected N(NPROD+1)-1 for M = 1 and N(NPROD+1)/2 for M = 2. The runner
// makes its own phase counter (0..N/M-1 from reset) and starts streaming at
// phase 0. Results are reported on its ports when done rises.
module tb_arch_run
  import polymult_pkg::*;
  import polymult_ref_pkg::*;
#(
  parameter int M     = 2,
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
  localparam int K   = N / M;
  localparam int PW  = $clog2(K);
  localparam int D   = (M == 1) ? N : K + 1;       // first input to first output
  localparam int EXP = (M == 1) ? N * (NPROD + 1) - 1 : K * (NPROD + 1);

  logic [PW-1:0]       phase;
  coef_sm_t [M-1:0]    a_in;
  coef_t    [M-1:0]    p_out;
  logic [M-1:0][K-1:0]            b_sign;
  logic [M-1:0][K-1:0][2:0]       b_mag;

  if (M == 1) begin : g_fir
    fir_polymult #(.N(N), .BMAG(3)) dut (
      .clk, .rst_n, .phase, .a_in(a_in[0]), .b_sign(b_sign[0]), .b_mag(b_mag[0]),
      .p_out(p_out[0]));
  end else begin : g_fast2
    fast2_polymult #(.N(N), .BMAG(3)) dut (
      .clk, .rst_n, .phase, .a0_in(a_in[0]), .a1_in(a_in[1]),
      .b0_sign(b_sign[0]), .b0_mag(b_mag[0]), .b1_sign(b_sign[1]), .b1_mag(b_mag[1]),
      .p0_out(p_out[0]), .p1_out(p_out[1]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)              phase <= '0;
    else if (phase == PW'(K - 1)) phase <= '0;
    else                     phase <= phase + 1'b1;

  int b [];
  int a [NPROD][];
  int p [NPROD][];
  int cycle = 0;
  int first_in = -1, last_out = -1, seen = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic coef_sm_t to_sm(int v);
    coef_sm_t s;
    s.sign = (v < 0);
    s.mag  = coef_t'(v < 0 ? -v : v);
    return s;
  endfunction

  initial begin
    done = 1'b0; checks = 0; failures = 0; latency = -1;
    a_in = '0;
    b = new[N];
    for (int i = 0; i < N; i++) b[i] = rand_small(4);
    for (int j = 0; j < K; j++)
      for (int r = 0; r < M; r++) begin
        b_sign[r][j] = (b[M*j+r] < 0);
        b_mag[r][j]  = 3'(b[M*j+r] < 0 ? -b[M*j+r] : b[M*j+r]);
      end
    for (int l = 0; l < NPROD; l++) begin
      a[l] = new[N];
      for (int i = 0; i < N; i++) a[l][i] = int'($urandom_range(16382)) - 8191;
      negacyclic(N, a[l], b, p[l]);
    end
    @(posedge rst_n);
    @(negedge clk);
    while (phase != '0) @(negedge clk);
    first_in = cycle;
    for (int l = 0; l < NPROD; l++)
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < M; r++) a_in[r] = to_sm(a[l][M*(K-1-k)+r]);
        @(negedge clk);
      end
    a_in = '0;
    repeat (D + 4) @(negedge clk);
    checks++;
    if (seen != NPROD * K) begin
      failures++; $display("M=%0d N=%0d: %0d output groups seen, expected %0d", M, N, seen, NPROD * K);
    end
    latency = last_out - first_in;
    checks++;
    if (latency != EXP) begin
      failures++; $display("M=%0d N=%0d, %0d products: latency %0d, expected %0d", M, N, NPROD, latency, EXP);
    end
    done = 1'b1;
  end

  // output group t (counted over the whole stream) leaves D cycles after
  // input group t entered
  always @(negedge clk) begin
    if (first_in >= 0 && cycle - first_in >= D && cycle - first_in < D + NPROD * K) begin
      int t, l, k;
      t = cycle - first_in - D;
      l = t / K;
      k = t % K;
      for (int r = 0; r < M; r++) begin
        checks++;
        if (p_out[r] !== coef_t'(p[l][M*(K-1-k)+r])) begin
          failures++;
          if (failures < 5) $display("M=%0d N=%0d product %0d group %0d lane %0d: got %0d", M, N, l, k, r, p_out[r]);
        end
      end
      seen++;
      last_out = cycle;
    end
  end
endmodule
