// tb_fast4_polymult_top -- end-to-end test of the 4-parallel multiplier at its
// default size (N = 256, q = 2^13, weights in [-4, 4], the Saber setting).
//
// Sequence: load B through the write port (shuffled addresses), stream three
// A polynomials back to back, idle for more than a period, stream one more,
// reload a new B with extreme values, stream two more back to back. Every
// output coefficient is compared with the schoolbook negacyclic reference.
// Timing checks: each product's first output group comes K+2 cycles after
// its first input group, and the three-product batch ends N(L+1)/4+1 cycles
// after it began. Mechanism counters (each must be non-zero): back-to-back
// products, restart after an idle period, weight reload, the negated shift-
// register operand in the systolic arrays, the held -v wrap-around in the
// 2-parallel post-processing and the held -c5 wrap-around in the 4-parallel
// post-processing.
module tb_fast4_polymult_top;
  import polymult_pkg::*;
  import polymult_ref_pkg::*;

  localparam int N  = 256;
  localparam int K  = N / 4;
  localparam int AW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          b_wr_en;
  logic [AW-1:0] b_wr_addr;
  logic          b_wr_sign;
  logic [2:0]    b_wr_mag;
  logic          phase0, in_valid, out_valid, out_first;
  coef_t [3:0]   a_in, p_out;

  fast4_polymult_top dut (
    .clk, .rst_n, .b_wr_en, .b_wr_addr, .b_wr_sign, .b_wr_mag,
    .phase0, .in_valid, .a_in, .out_valid, .out_first, .p_out);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected products, in order, and the cycle each product's input began
  int exp_q [$][];
  int start_q [$];
  int b_cur [];

  // mechanism counters
  int n_back2back = 0, n_restart = 0, n_reload = 0;
  int n_sr_neg = 0, n_vwrap = 0, n_c5wrap = 0;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(input bit extreme);
    int perm [];
    b_cur = new[N];
    perm  = new[N];
    for (int i = 0; i < N; i++) begin
      b_cur[i] = extreme ? (($urandom_range(1) != 0) ? 4 : -4) : rand_small(4);
      if (extreme && i % 5 == 0) b_cur[i] = rand_small(4);
      perm[i] = i;
    end
    perm.shuffle();
    for (int i = 0; i < N; i++) begin
      b_wr_en   = 1'b1;
      b_wr_addr = AW'(perm[i]);
      b_wr_sign = (b_cur[perm[i]] < 0);
      b_wr_mag  = 3'(b_cur[perm[i]] < 0 ? -b_cur[perm[i]] : b_cur[perm[i]]);
      @(negedge clk);
    end
    b_wr_en = 1'b0;
  endtask

  // stream one polynomial; call at a negedge, returns at the negedge after its last group
  task automatic send_poly();
    int a [];
    int p [];
    a = new[N];
    for (int i = 0; i < N; i++) a[i] = int'($urandom_range(8191));
    negacyclic(N, a, b_cur, p);
    while (!phase0) @(negedge clk);
    exp_q.push_back(p);
    start_q.push_back(cycle);
    for (int k = 0; k < K; k++) begin
      in_valid = 1'b1;
      for (int r = 0; r < 4; r++) a_in[r] = coef_t'(a[4*(K-1-k)+r]);
      @(negedge clk);
    end
  endtask

  task automatic idle(input int cycles);
    in_valid = 1'b0;
    repeat (cycles) begin
      for (int r = 0; r < 4; r++) a_in[r] = coef_t'($urandom);
      @(negedge clk);
    end
  endtask

  // output monitor
  int cur [];
  int grp = -1;
  int batch_first_in = -1, batch_last_out = -1, products_done = 0;
  bit prev_out_valid = 1'b0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (out_first) begin
        int s;
        if (prev_out_valid) n_back2back++;
        cur = exp_q.pop_front();
        s = start_q.pop_front();
        grp = 0;
        checks++;
        if (cycle - s != K + 2) begin
          failures++;
          $display("first output %0d cycles after first input, expected %0d", cycle - s, K + 2);
        end
      end
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (grp < 0 || p_out[r] !== coef_t'(cur[4*(K-1-grp)+r])) begin
          failures++;
          if (failures < 10)
            $display("p[%0d]: got %0d exp %0d (cycle %0d)", 4*(K-1-grp)+r, p_out[r],
                     grp < 0 ? -1 : cur[4*(K-1-grp)+r], cycle);
        end
      end
      if (grp == K - 1) begin
        products_done++;
        if (products_done == 3) batch_last_out = cycle;
      end
      grp++;
    end
    prev_out_valid <= out_valid;
  end

  // internal mechanism monitors
  always @(negedge clk) begin
    if (rst_n) begin
      if (dut.u_fast4.u_upper.u_mul_u.ctrl_sw != '1 && dut.u_fast4.u_upper.u_mul_u.neg_a.mag != '0)
        n_sr_neg++;
      if (dut.u_fast4.u_upper.wrap && dut.u_fast4.u_upper.v_hold != '0) n_vwrap++;
      if (dut.u_fast4.wrap && dut.u_fast4.c5_hold != '0 && out_valid) n_c5wrap++;
    end
  end

  initial begin
    b_wr_en = 1'b0; b_wr_addr = '0; b_wr_sign = 1'b0; b_wr_mag = '0;
    in_valid = 1'b0; a_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // batch 1: three products back to back
    load_weights(1'b0);
    while (!phase0) @(negedge clk);
    batch_first_in = cycle;
    repeat (3) send_poly();
    // idle for more than a period, then one product alone
    idle(K + 7);
    n_restart++;
    send_poly();
    idle(2 * K + 8);
    // batch 2: new weights, two products back to back
    load_weights(1'b1);
    n_reload++;
    repeat (2) send_poly();
    idle(2 * K + 8);

    checks++;
    if (exp_q.size() != 0 || products_done != 6) begin
      failures++; $display("%0d products checked, %0d missing", products_done, exp_q.size());
    end
    checks++;
    if (batch_last_out - batch_first_in != N * (3 + 1) / 4 + 1) begin
      failures++;
      $display("3-product latency %0d, expected %0d", batch_last_out - batch_first_in, N + 1);
    end
    $display("mechanisms: back-to-back %0d, restart after idle %0d, weight reload %0d, negated shift-register operand %0d, v wrap-around %0d, c5 wrap-around %0d",
             n_back2back, n_restart, n_reload, n_sr_neg, n_vwrap, n_c5wrap);
    checks += 6;
    if (n_back2back == 0) failures++;
    if (n_restart == 0)   failures++;
    if (n_reload == 0)    failures++;
    if (n_sr_neg == 0)    failures++;
    if (n_vwrap == 0)     failures++;
    if (n_c5wrap == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
