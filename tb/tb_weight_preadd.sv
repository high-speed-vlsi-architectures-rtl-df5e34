// tb_weight_preadd -- checks the weight pre-adder (K = 8, 3-bit magnitudes)
// exhaustively over every pair of sign-magnitude inputs, including -0, against
// the integer sum in sign-magnitude form (a zero sum must have sign 0).
module tb_weight_preadd;
  localparam int K = 8;
  localparam int BMAG = 3;

  logic [K-1:0]           x_sign, y_sign, s_sign;
  logic [K-1:0][BMAG-1:0] x_mag, y_mag;
  logic [K-1:0][BMAG:0]   s_mag;

  weight_preadd #(.K(K), .BMAG(BMAG)) dut (.x_sign, .x_mag, .y_sign, .y_mag, .s_sign, .s_mag);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int xv = 0; xv < 16; xv++)
      for (int yv = 0; yv < 16; yv++) begin
        for (int i = 0; i < K; i++) begin
          // lane i sees the pair rotated by i so every lane gets every pair
          int xx, yy;
          xx = (xv + i) % 16;
          yy = (yv + 3 * i) % 16;
          x_sign[i] = xx[3]; x_mag[i] = BMAG'(xx[2:0]);
          y_sign[i] = yy[3]; y_mag[i] = BMAG'(yy[2:0]);
        end
        #1;
        for (int i = 0; i < K; i++) begin
          int xi, yi, sum, got;
          xi = x_sign[i] ? -int'(x_mag[i]) : int'(x_mag[i]);
          yi = y_sign[i] ? -int'(y_mag[i]) : int'(y_mag[i]);
          sum = xi + yi;
          got = s_sign[i] ? -int'(s_mag[i]) : int'(s_mag[i]);
          checks++;
          if (got != sum || (sum == 0 && s_sign[i])) begin
            failures++;
            $display("lane %0d: %0d + %0d gave sign %0b mag %0d", i, xi, yi, s_sign[i], s_mag[i]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
