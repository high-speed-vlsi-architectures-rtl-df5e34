// tb_fir_polymult -- checks the length-N systolic multiplier (N = 16 here)
// against the schoolbook negacyclic reference.
//
// Three polynomials with random sign-magnitude coefficients follow each other
// back to back, then two idle periods of random junk on the input, then a
// fourth polynomial on its own. Weights are random in [-4, 4]. Every output
// coefficient is checked in the cycle the timing rule puts it in: p[N-1-k]
// exactly N cycles after a[N-1-k] entered. That fixes the response time
// (N cycles) and the total latency for L back-to-back products (N(L+1)-1).
module tb_fir_polymult;
  import polymult_pkg::*;
  import polymult_ref_pkg::*;

  localparam int N  = 16;
  localparam int PW = $clog2(N);
  localparam int NP = 4;                                   // polynomials
  localparam int START [NP] = '{N, 2*N, 3*N, 6*N};         // first-input cycles
  localparam int TOTAL = 8 * N;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [PW-1:0]           phase;
  coef_sm_t                a_in;
  logic [N-1:0]            b_sign;
  logic [N-1:0][2:0]       b_mag;
  coef_t                   p_out;

  fir_polymult #(.N(N), .BMAG(3)) dut (.clk, .rst_n, .phase, .a_in, .b_sign, .b_mag, .p_out);

  int checks = 0, failures = 0;
  int a_sgn [NP][N];
  int a_val [NP][];
  int p_ref [NP][];
  int b_val [];
  int first_out = -1, last_out = -1;

  initial begin : watchdog
    repeat (TOTAL + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b_val = new[N];
    for (int j = 0; j < N; j++) begin
      b_val[j]  = rand_small(4);
      b_sign[j] = (b_val[j] < 0);
      b_mag[j]  = 3'(b_val[j] < 0 ? -b_val[j] : b_val[j]);
    end
    for (int l = 0; l < NP; l++) begin
      a_val[l] = new[N];
      for (int i = 0; i < N; i++) begin
        int m;
        m = int'($urandom_range(8191));
        a_sgn[l][i] = int'($urandom_range(1));
        a_val[l][i] = a_sgn[l][i] ? -m : m;
      end
      negacyclic(N, a_val[l], b_val, p_ref[l]);
    end

    phase = '0; a_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < TOTAL; c++) begin
      phase = PW'(c % N);
      #1;
      // check: output of cycle c
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l] - N;
        if (k >= 0 && k < N) begin
          checks++;
          if (p_out !== coef_t'(p_ref[l][N-1-k])) begin
            failures++;
            $display("poly %0d p[%0d]: got %0d exp %0d (cycle %0d)", l, N-1-k, p_out, p_ref[l][N-1-k], c);
          end
          if (l == 0 && k == 0)     first_out = c;
          if (l == 2 && k == N - 1) last_out  = c;
        end
      end
      // drive: input of cycle c
      a_in.sign = 1'($urandom);
      a_in.mag  = coef_t'($urandom);
      for (int l = 0; l < NP; l++) begin
        int k;
        k = c - START[l];
        if (k >= 0 && k < N) begin
          a_in.sign = 1'(a_sgn[l][N-1-k]);
          a_in.mag  = coef_t'(a_sgn[l][N-1-k] ? -a_val[l][N-1-k] : a_val[l][N-1-k]);
        end
      end
      @(negedge clk);
    end
    // response time and total latency of the 3-polynomial batch
    checks++;
    if (first_out - START[0] != N) begin
      failures++; $display("response time %0d, expected %0d", first_out - START[0], N);
    end
    checks++;
    if (last_out - START[0] != N * (3 + 1) - 1) begin
      failures++; $display("latency %0d, expected %0d", last_out - START[0], N * 4 - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
