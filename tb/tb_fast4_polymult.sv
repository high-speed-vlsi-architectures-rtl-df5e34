// tb_fast4_polymult -- checks the fast 4-parallel multiplier (N = 32, K = 8)
// against the schoolbook negacyclic reference.
//
// Three polynomials back to back, two idle periods of junk input, one more
// polynomial. Lane r carries the coefficients of index = r mod 4, highest
// first. Every output group is checked in cycle start + K + 2 + k, which fixes
// the latency: N/2+1 cycles from first input to last output of one product,
// N(L+1)/4+1 for L back-to-back products. The held -c5[K-1] wrap-around must
// be used with a non-zero value at least once.
module tb_fast4_polymult;
  import polymult_pkg::*;
  import polymult_ref_pkg::*;

  localparam int N  = 32;
  localparam int K  = N / 4;
  localparam int PW = $clog2(K);
  localparam int NP = 4;
  localparam int START [NP] = '{K, 2*K, 3*K, 6*K};
  localparam int TOTAL = 8 * K + 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [PW-1:0]               phase;
  coef_sm_t [3:0]              a_in;
  logic [3:0][K-1:0]           b_sign;
  logic [3:0][K-1:0][2:0]      b_mag;
  coef_t [3:0]                 p_out;

  fast4_polymult #(.N(N), .BMAG(3)) dut (.clk, .rst_n, .phase, .a_in, .b_sign, .b_mag, .p_out);

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

  initial begin
    b_val = new[N];
    for (int j = 0; j < N; j++) begin
      b_val[j] = rand_small(4);
      b_sign[j % 4][j / 4] = (b_val[j] < 0);
      b_mag[j % 4][j / 4]  = 3'(b_val[j] < 0 ? -b_val[j] : b_val[j]);
    end
    for (int l = 0; l < NP; l++) begin
      a_val[l] = new[N];
      for (int i = 0; i < N; i++) a_val[l][i] = int'($urandom_range(8191));
      negacyclic(N, a_val[l], b_val, p_ref[l]);
    end

    phase = '0; a_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < TOTAL; c++) begin
      phase = PW'(c % K);
      #1;
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l] - K - 2;
        if (k >= 0 && k < K) begin
          for (int r = 0; r < 4; r++) begin
            checks++;
            if (p_out[r] !== coef_t'(p_ref[l][4*(K-1-k)+r])) begin
              failures++;
              $display("poly %0d p[%0d]: got %0d exp %0d (cycle %0d)", l, 4*(K-1-k)+r, p_out[r],
                       p_ref[l][4*(K-1-k)+r], c);
            end
          end
          if (k == K - 1 && dut.c5_hold != '0) wraps++;
          if (l == 2 && k == K - 1) last_out = c;
        end
      end
      for (int r = 0; r < 4; r++) a_in[r] = '{sign: 1'b0, mag: coef_t'($urandom)};
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l];
        if (k >= 0 && k < K)
          for (int r = 0; r < 4; r++) a_in[r] = '{sign: 1'b0, mag: coef_t'(a_val[l][4*(K-1-k)+r])};
      end
      @(negedge clk);
    end
    checks++;
    if (last_out - START[0] != N * (3 + 1) / 4 + 1) begin
      failures++; $display("latency %0d, expected %0d", last_out - START[0], N + 1);
    end
    checks++;
    if (wraps == 0) begin
      failures++; $display("c5 wrap-around path never carried a non-zero value");
    end
    $display("c5 wrap-around used %0d times", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
