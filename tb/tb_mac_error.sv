// tb_mac_error: numerical accuracy of the Q(16,15) MAC unit across kernel
// widths. Seven mac_unit instances (k = 3 .. 9) share one set of random real
// weights in [-1, 1) and see the same random real input window, drawn from
// [0, R) for R = 1, 10, 50 and 100. Weights and inputs are rounded down to
// Q(16,15) before they enter the hardware; the hardware result is compared
// with the exact real-valued dot product of the unrounded values.
//
// Checked:
//  * every sample is within the worst-case bound k*k*(R + 2) * 2^-15, which
//    covers rounding of the input, of the weight and of the product;
//  * the average error for input ranges up to 50 is below 0.1 for every kernel
//    width, the accuracy claimed for this number format;
//  * the average error grows with the input range and with the kernel width.
// The measured averages are printed as a table (kernel width x input range).
// Each window is held for 10 cycles, longer than the deepest MAC latency
// (8 cycles for k = 9), before the results are sampled.
module tb_mac_error;
  localparam int NK = 7;                 // k = 3 .. 9
  localparam int NR = 4;
  localparam int NS = 150;               // samples per input range
  localparam real LSB = 1.0 / 32768.0;
  localparam real RANGES [NR] = '{1.0, 10.0, 50.0, 100.0};

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, flush, we;
  logic [6:0] widx;
  logic [31:0] wdata;
  logic [80:0][31:0] win;
  logic [31:0] res [NK];

  for (genvar g = 0; g < NK; g++) begin : g_mac
    localparam int K  = g + 3;
    localparam int NW = K * K;
    mac_unit #(.K(K)) dut (
      .clk, .rst_n, .flush,
      .w_wr_en(we && (widx < 7'(NW))), .w_wr_idx(widx[$clog2(NW)-1:0]), .w_wr_data(wdata),
      .window(win[NW-1:0]), .result(res[g]));
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q_floor(real v);
    return $rtoi($floor(v * 32768.0));
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom_range(0, 1000000)) / 1000000.0);
  endfunction

  initial begin
    real w [81];
    real x [81];
    real avg [NK][NR];
    real exact, err, bound;
    int  k;
    rst_n = 0; flush = 0; we = 0; widx = 0; wdata = 0; win = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 81; i++) begin
      w[i]  = urand(-1.0, 1.0);
      wdata = q_floor(w[i]); widx = 7'(i); we = 1;
      @(negedge clk);
    end
    we = 0;
    for (int r = 0; r < NR; r++) begin
      for (int g = 0; g < NK; g++) avg[g][r] = 0.0;
      for (int s = 0; s < NS; s++) begin
        for (int i = 0; i < 81; i++) begin
          x[i]   = urand(0.0, RANGES[r]);
          win[i] = q_floor(x[i]);
        end
        repeat (10) @(negedge clk);
        for (int g = 0; g < NK; g++) begin
          k = g + 3;
          exact = 0.0;
          for (int i = 0; i < k * k; i++) exact += w[i] * x[i];
          err   = real'($signed(res[g])) * LSB - exact;
          if (err < 0.0) err = -err;
          bound = real'(k * k) * (RANGES[r] + 2.0) * LSB;
          checks++;
          if (err > bound) begin
            failures++;
            $display("FAIL k=%0d R=%0.0f: error %f above bound %f", k, RANGES[r], err, bound);
          end
          avg[g][r] += err / real'(NS);
        end
      end
    end
    $display("average |error| of one MAC, rows k = 3..9, columns input range 1, 10, 50, 100");
    for (int g = 0; g < NK; g++)
      $display("  k=%0d  %9.6f %9.6f %9.6f %9.6f", g + 3, avg[g][0], avg[g][1], avg[g][2], avg[g][3]);
    for (int g = 0; g < NK; g++) begin
      for (int r = 0; r < NR; r++) begin
        if (RANGES[r] <= 50.0) begin
          checks++;
          if (avg[g][r] >= 0.1) begin
            failures++; $display("FAIL k=%0d R=%0.0f: average error %f not below 0.1", g + 3, RANGES[r], avg[g][r]);
          end
        end
      end
      checks++;
      if (!(avg[g][NR-1] > avg[g][0])) begin
        failures++; $display("FAIL k=%0d: error does not grow with the input range", g + 3);
      end
    end
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (!(avg[NK-1][r] > avg[0][r])) begin
        failures++; $display("FAIL R=%0.0f: error does not grow with the kernel width", RANGES[r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
