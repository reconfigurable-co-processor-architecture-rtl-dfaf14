// tb_data_cache: streams random input maps (channels interleaved per pixel)
// into a data cache with k = 3, D_IN = 2, and compares every issued window,
// its sof/eol markers and the window count with windows cut from the map in
// the testbench, for several widths, depths, strides and with and without
// zero padding. Input gaps and a randomly withheld issue_ok exercise both
// stalls. In a run without stalls the windows of one output row must come
// out on consecutive cycles (one window per cycle).
module tb_data_cache;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 3, D = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, cfg_zpad, in_valid, in_ready, issue_ok, win_valid, win_sof, win_eol, scan_done;
  logic [11:0] cfg_width, cfg_depth;
  logic [3:0] cfg_stride;
  qword_t in_data;
  logic [D-1:0][K*K-1:0][31:0] window;
  int stalls_in = 0, stalls_out = 0;

  data_cache #(.K(K), .D_IN(D), .MAX_W(16)) dut (
    .clk, .rst_n, .start, .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad,
    .in_valid, .in_data, .in_ready, .issue_ok, .win_valid, .win_sof, .win_eol, .window, .scan_done);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int W, int dep, int S, bit zp, int random_stalls);
    int img[];
    int pad, OW, n_win, got, oy, ox, last_win_cycle, cyc;
    bit feeding;
    int idx;
    img = new[W * W * dep];
    foreach (img[i]) img[i] = rnd_q(50 * ONE);
    pad = zp ? 1 : 0;
    OW = (W + 2 * pad - K) / S + 1;
    n_win = OW * OW;
    cfg_width = 12'(W); cfg_depth = 12'(dep); cfg_stride = 4'(S); cfg_zpad = zp;
    start = 1; @(negedge clk); start = 0;
    idx = 0; got = 0; cyc = 0; last_win_cycle = -10;
    while (got < n_win || idx < W * W * dep) begin
      // drive inputs for this cycle
      in_valid = (idx < W * W * dep) && (!random_stalls || $urandom_range(3) != 0);
      in_data = (idx < W * W * dep) ? img[idx] : 0;
      issue_ok = (random_stalls == 0) || ((random_stalls == 1) ? ($urandom_range(4) != 0) : ($urandom_range(9) == 0));
      if (!issue_ok) stalls_out++;
      if (in_valid && !in_ready) stalls_in++;
      @(posedge clk);
      if (in_valid && in_ready) idx++;
      #1;
      cyc++;
      if (win_valid) begin
        oy = got / OW; ox = got % OW;
        checks++;
        if (win_sof !== (got == 0) || win_eol !== (ox == OW - 1)) begin
          failures++; $display("FAIL markers window %0d", got);
        end
        if (!random_stalls && ox != 0) begin
          checks++;
          if (last_win_cycle != cyc - 1) begin failures++; $display("FAIL rate: window %0d not back to back", got); end
        end
        last_win_cycle = cyc;
        for (int d = 0; d < D; d++)
          for (int i = 0; i < K; i++)
            for (int j = 0; j < K; j++) begin
              int r, c, e;
              r = oy * S - pad + i; c = ox * S - pad + j;
              e = (r < 0 || r >= W || c < 0 || c >= W || d >= dep) ? 0 : img[(r * W + c) * dep + d];
              checks++;
              if (window[d][i * K + j] !== e) begin
                failures++;
                if (failures < 10) $display("FAIL W=%0d S=%0d win (%0d,%0d) d%0d [%0d,%0d] got %0d exp %0d",
                                           W, S, oy, ox, d, i, j, window[d][i * K + j], e);
              end
            end
        got++;
      end
      @(negedge clk);
      if (got > n_win) break;
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (got != n_win || !scan_done) begin failures++; $display("FAIL count %0d exp %0d done %0b", got, n_win, scan_done); end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; in_data = 0; issue_ok = 0;
    cfg_width = 0; cfg_depth = 0; cfg_stride = 1; cfg_zpad = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 2, 1, 1, 0);
    run(8, 2, 1, 1, 1);
    run(9, 1, 2, 0, 1);
    run(7, 2, 3, 1, 1);
    run(10, 1, 1, 0, 0);
    run(16, 2, 2, 1, 1);
    run(11, 2, 5, 0, 1);
    run(12, 2, 1, 1, 2);
    checks++;
    if (stalls_in == 0 || stalls_out == 0) begin failures++; $display("FAIL stalls not exercised"); end
    $display("stalls: input %0d output %0d", stalls_in, stalls_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
