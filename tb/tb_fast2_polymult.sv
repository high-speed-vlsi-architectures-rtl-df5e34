// tb_fast2_polymult -- checks the fast 2-parallel multiplier (N = 16, two
// sub-multipliers of length K = 8 per product half) against the schoolbook
// negacyclic reference.
//
// Three polynomials back to back, two idle periods of junk input, one more
// polynomial. Lane 0 carries even coefficients, lane 1 odd ones, highest
// first. Each output pair p[2(K-1-k)], p[2(K-1-k)+1] is checked in cycle
// start + K + 1 + k, which fixes the latency: N cycles from first input to last
// output of one product, N(L+1)/2 for L back-to-back products. A count of the
// cycles in which the held -v[K-1] was non-zero when added shows the
// wrap-around path was exercised.
module tb_fast2_polymult;
  import polymult_pkg::*;
  import polymult_ref_pkg::*;

  localparam int N  = 16;
  localparam int K  = N / 2;
  localparam int PW = $clog2(K);
  localparam int NP = 4;
  localparam int START [NP] = '{K, 2*K, 3*K, 6*K};
  localparam int TOTAL = 8 * K + 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [PW-1:0]     phase;
  coef_sm_t          a0_in, a1_in;
  logic [K-1:0]      b0_sign, b1_sign;
  logic [K-1:0][2:0] b0_mag, b1_mag;
  coef_t             p0_out, p1_out;

  fast2_polymult #(.N(N), .BMAG(3)) dut (
    .clk, .rst_n, .phase, .a0_in, .a1_in,
    .b0_sign, .b0_mag, .b1_sign, .b1_mag, .p0_out, .p1_out);

  int checks = 0, failures = 0, wraps = 0;
  int a_val [NP][];
  int p_ref [NP][];
  int b_val [];
  int last_out = -1;

  initial begin : watchdog
    repeat (TOTAL + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coef_sm_t to_sm(int v);
    coef_sm_t s;
    s.sign = (v < 0);
    s.mag  = coef_t'(v < 0 ? -v : v);
    return s;
  endfunction

  initial begin
    b_val = new[N];
    for (int j = 0; j < N; j++) b_val[j] = rand_small(4);
    for (int k = 0; k < K; k++) begin
      b0_sign[k] = (b_val[2*k] < 0);   b0_mag[k] = 3'(to_sm(b_val[2*k]).mag);
      b1_sign[k] = (b_val[2*k+1] < 0); b1_mag[k] = 3'(to_sm(b_val[2*k+1]).mag);
    end
    for (int l = 0; l < NP; l++) begin
      a_val[l] = new[N];
      for (int i = 0; i < N; i++) a_val[l][i] = int'($urandom_range(8191));
      negacyclic(N, a_val[l], b_val, p_ref[l]);
    end

    phase = '0; a0_in = '0; a1_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < TOTAL; c++) begin
      phase = PW'(c % K);
      #1;
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l] - K - 1;
        if (k >= 0 && k < K) begin
          checks += 2;
          if (p0_out !== coef_t'(p_ref[l][2*(K-1-k)]) || p1_out !== coef_t'(p_ref[l][2*(K-1-k)+1])) begin
            failures++;
            $display("poly %0d pair %0d: got %0d,%0d exp %0d,%0d (cycle %0d)", l, K-1-k, p0_out, p1_out,
                     p_ref[l][2*(K-1-k)], p_ref[l][2*(K-1-k)+1], c);
          end
          if (k == K - 1 && dut.v_hold != '0) wraps++;
          if (l == 2 && k == K - 1) last_out = c;
        end
      end
      a0_in = to_sm(int'($urandom_range(8191)));
      a1_in = to_sm(int'($urandom_range(8191)));
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l];
        if (k >= 0 && k < K) begin
          a0_in = to_sm(a_val[l][2*(K-1-k)]);
          a1_in = to_sm(a_val[l][2*(K-1-k)+1]);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (last_out - START[0] != N * (3 + 1) / 2) begin
      failures++; $display("latency %0d, expected %0d", last_out - START[0], N * 2);
    end
    checks++;
    if (wraps == 0) begin
      failures++; $display("wrap-around path never carried a non-zero value");
    end
    $display("wrap-around used %0d times", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
