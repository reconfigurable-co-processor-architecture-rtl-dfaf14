// tb_matrix_web: a Matrix Web of 4 cell bodies (k = 3, D_IN = 2) of which 3
// are enabled. Loads each enabled cell body's filter and bias, streams input
// maps and compares every cell body's output map with a reference layer, for
// several sizes, strides, padding, activations and pooling widths. The
// disabled cell body must never produce output (crossbar gating). The output
// space credit is withheld at random in some runs (stall); in a run without
// stalls the outputs of one row must leave one per cycle.
module tb_matrix_web;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, K = 3, D = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, cfg_zpad, in_valid, in_ready, w_wr_en, b_wr_en, busy;
  logic [11:0] cfg_width, cfg_depth, w_wr_ch;
  logic [3:0] cfg_stride;
  af_sel_e sel_af;
  logic [1:0] conf_p;
  logic [N-1:0] cb_enable, cb_flush, cb_valid;
  logic [7:0] w_wr_cbu, b_wr_cbu;
  logic [15:0] w_wr_idx, out_space;
  qword_t wb_wr_data, in_data;
  logic [N-1:0][31:0] cb_data;
  int got[N][$];
  int stall_cycles = 0;
  int last_out = -10, backtoback = 0, cyc = 0;

  matrix_web #(.N_CB(N), .K(K), .D_IN(D), .P_MAX(3), .MAX_W(16)) dut (
    .clk, .rst_n, .start, .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad, .sel_af, .conf_p,
    .cb_enable, .cb_flush, .w_wr_en, .w_wr_cbu, .w_wr_ch, .w_wr_idx, .b_wr_en, .b_wr_cbu,
    .wb_wr_data, .in_valid, .in_data, .in_ready, .out_space, .cb_valid, .cb_data, .busy);

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) if (cb_valid[n]) got[n].push_back(int'(cb_data[n]));
    if (cb_valid[0]) begin
      if (last_out == cyc - 1) backtoback++;
      last_out = cyc;
    end
    checks++;
    if (cb_valid[3]) begin failures++; $display("FAIL disabled cell body produced output"); end
    if (cb_valid[0] !== cb_valid[1] || cb_valid[0] !== cb_valid[2]) begin failures++; $display("FAIL lockstep"); end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int W, int dep, int S, bit zp, int sel, int P, bit stalls);
    int img[], wt[], bias[], out[], OH, OW, PH, PWD, idx;
    img = new[W * W * dep];
    foreach (img[i]) img[i] = rnd_q(4 * ONE);
    wt = new[3 * dep * K * K];
    foreach (wt[i]) wt[i] = rnd_q(ONE);
    bias = new[3];
    foreach (bias[i]) bias[i] = rnd_q(ONE);
    // load caches
    for (int n = 0; n < 3; n++) begin
      for (int d = 0; d < dep; d++)
        for (int i = 0; i < K * K; i++) begin
          w_wr_en = 1; w_wr_cbu = 8'(n); w_wr_ch = 12'(d); w_wr_idx = 16'(i);
          wb_wr_data = wt[(n * dep + d) * K * K + i];
          @(negedge clk);
        end
      w_wr_en = 0;
      b_wr_en = 1; b_wr_cbu = 8'(n); wb_wr_data = bias[n];
      @(negedge clk);
      b_wr_en = 0;
    end
    conv_layer(img, wt, bias, 3, W, dep, K, S, zp, sel, P, out, OH, OW, PH, PWD);
    for (int n = 0; n < N; n++) got[n].delete();
    cfg_width = 12'(W); cfg_depth = 12'(dep); cfg_stride = 4'(S); cfg_zpad = zp;
    sel_af = af_sel_e'(sel); conf_p = 2'(P);
    start = 1; @(negedge clk); start = 0;
    idx = 0;
    while (busy || idx < W * W * dep) begin
      in_valid = idx < W * W * dep;
      in_data = in_valid ? img[idx] : 0;
      out_space = (stalls && $urandom_range(3) == 0) ? 16'd3 : 16'd32;
      if (out_space < 16) stall_cycles++;
      @(posedge clk);
      if (in_valid && in_ready) idx++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (2) @(negedge clk);
    for (int n = 0; n < 3; n++) begin
      checks++;
      if (got[n].size() != PH * PWD) begin
        failures++; $display("FAIL cb %0d count %0d exp %0d", n, got[n].size(), PH * PWD);
      end else
        for (int i = 0; i < PH * PWD; i++) begin
          checks++;
          if (got[n][i] != out[n * PH * PWD + i]) begin
            failures++;
            if (failures < 10) $display("FAIL cb %0d out %0d got %0d exp %0d", n, i, got[n][i], out[n * PH * PWD + i]);
          end
        end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; in_data = 0; w_wr_en = 0; b_wr_en = 0;
    w_wr_cbu = 0; w_wr_ch = 0; w_wr_idx = 0; b_wr_cbu = 0; wb_wr_data = 0;
    cfg_width = 0; cfg_depth = 0; cfg_stride = 1; cfg_zpad = 0; sel_af = AF_NONE; conf_p = 1;
    cb_enable = 4'b0111; cb_flush = 0; out_space = 32;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 2, 1, 1, 0, 1, 0);
    checks++;
    if (backtoback < 20) begin failures++; $display("FAIL rate: only %0d back-to-back outputs", backtoback); end
    run(9, 2, 2, 0, 1, 1, 1);
    run(10, 1, 1, 1, 2, 2, 1);
    run(12, 2, 1, 0, 3, 3, 0);
    run(7, 2, 3, 1, 1, 1, 1);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
