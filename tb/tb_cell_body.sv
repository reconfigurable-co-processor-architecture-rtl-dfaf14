// tb_cell_body: a cell body with 3x3 kernels and depth 2. Loads random
// weights (through the per-channel write port) and a bias, then streams
// 6x6 maps of random windows, one per cycle, under every activation setting
// and pooling widths 1 and 2. Outputs are compared with a reference
// convolution + bias + activation + max pooling; without pooling each value
// must appear exactly OUT_LAT = 9 cycles after its window. A final flush
// must clear weights and bias (all-zero outputs).
module tb_cell_body;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 3, D = 2, NW = 9, OUT_LAT = 9, M = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, flush, w_wr_en, b_wr_en, win_valid, win_sof, win_eol, out_valid;
  logic [0:0] w_wr_ch;
  logic [3:0] w_wr_idx;
  qword_t w_wr_data, b_wr_data, out_data;
  af_sel_e sel_af;
  logic [1:0] conf_p;
  logic [D-1:0][NW-1:0][31:0] window;
  int wt[D][NW];
  int bias;
  int expq[$], exp_cycle[$];
  int cyc = 0;

  cell_body #(.K(K), .D_IN(D), .P_MAX(3), .MAX_OW(16)) dut (
    .clk, .rst_n, .sel_af, .conf_p, .flush, .w_wr_en, .w_wr_ch, .w_wr_idx, .w_wr_data,
    .b_wr_en, .b_wr_data, .win_valid, .win_sof, .win_eol, .window, .out_valid, .out_data);

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      if (out_data !== expq[0]) begin failures++; $display("FAIL got %0d exp %0d", out_data, expq[0]); end
      if (exp_cycle[0] >= 0 && cyc != exp_cycle[0]) begin
        failures++; $display("FAIL latency: at %0d expected %0d", cyc, exp_cycle[0]);
      end
      void'(expq.pop_front());
      void'(exp_cycle.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_map(int sel, int P, bit gaps);
    int v[M * M];
    sel_af = af_sel_e'(sel);
    conf_p = 2'(P);
    for (int r = 0; r < M; r++)
      for (int c = 0; c < M; c++) begin
        int acc;
        while (gaps && $urandom_range(2) == 0) begin win_valid = 0; @(negedge clk); end
        acc = 0;
        for (int d = 0; d < D; d++)
          for (int i = 0; i < NW; i++) begin
            window[d][i] = rnd_q(4 * ONE);
            acc += qmul(wt[d][i], window[d][i]);
          end
        v[r * M + c] = af_ref(sel, acc + bias);
        win_valid = 1; win_sof = (r == 0 && c == 0); win_eol = (c == M - 1);
        if (P == 1) begin
          expq.push_back(v[r * M + c]);
          exp_cycle.push_back(cyc + OUT_LAT);
        end else if (r % P == P - 1 && c % P == P - 1) begin
          int mx;
          mx = v[r * M + c];
          for (int i = 0; i < P; i++) for (int j = 0; j < P; j++)
            if (v[(r - i) * M + c - j] > mx) mx = v[(r - i) * M + c - j];
          expq.push_back(mx);
          exp_cycle.push_back(cyc + OUT_LAT);
        end
        @(negedge clk);
      end
    win_valid = 0; win_sof = 0; win_eol = 0;
    repeat (OUT_LAT + 2) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; flush = 0; w_wr_en = 0; b_wr_en = 0; win_valid = 0; win_sof = 0; win_eol = 0;
    w_wr_ch = 0; w_wr_idx = 0; w_wr_data = 0; b_wr_data = 0; window = '0;
    sel_af = AF_NONE; conf_p = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < D; d++)
      for (int i = 0; i < NW; i++) begin
        wt[d][i] = rnd_q(ONE);
        w_wr_en = 1; w_wr_ch = 1'(d); w_wr_idx = 4'(i); w_wr_data = wt[d][i];
        @(negedge clk);
      end
    w_wr_en = 0;
    bias = rnd_q(ONE);
    b_wr_en = 1; b_wr_data = bias;
    @(negedge clk);
    b_wr_en = 0;
    for (int s = 0; s < 4; s++) run_map(s, 1, 0);
    run_map(1, 2, 1);
    run_map(0, 2, 0);
    run_map(3, 3, 1);
    // flush clears the caches
    flush = 1; @(negedge clk); flush = 0;
    for (int d = 0; d < D; d++) for (int i = 0; i < NW; i++) wt[d][i] = 0;
    bias = 0;
    run_map(0, 1, 0);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
