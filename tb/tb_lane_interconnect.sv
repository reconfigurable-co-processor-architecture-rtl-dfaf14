// tb_lane_interconnect: sends random tagged words through the interconnect
// and checks that weight and bias words become write strobes with the right
// cell body, channel, index and data one cycle later, that data words reach
// the data cache only through its handshake (pre-fetch pop only when
// accepted), and that cell-body outputs are gathered with the enable mask.
module tb_lane_interconnect;
  import cnn_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, pf_valid, pf_ready, dc_valid, dc_ready, w_wr_en, b_wr_en, ob_valid;
  lane_word_t pf_word, prev_word;
  logic prev_w, prev_b;
  qword_t dc_data, wb_wr_data;
  logic [7:0] w_wr_cbu, b_wr_cbu;
  logic [11:0] w_wr_ch;
  logic [15:0] w_wr_idx;
  logic [N-1:0] cb_enable, cb_valid, ob_mask, prev_en, prev_v;
  logic [N-1:0][31:0] cb_data, ob_data, prev_d;
  int n_w = 0, n_b = 0, n_d = 0, n_blocked = 0;

  lane_interconnect #(.N_CB(N)) dut (.clk, .rst_n, .pf_valid, .pf_word, .pf_ready,
    .dc_valid, .dc_data, .dc_ready, .w_wr_en, .w_wr_cbu, .w_wr_ch, .w_wr_idx, .b_wr_en,
    .b_wr_cbu, .wb_wr_data, .cb_enable, .cb_valid, .cb_data, .ob_valid, .ob_mask, .ob_data);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pf_valid = 0; pf_word = '0; dc_ready = 0; cb_enable = 0; cb_valid = 0; cb_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      pf_valid = $urandom_range(1);
      pf_word.dest.kind = dest_e'($urandom_range(2));
      pf_word.dest.cbu  = 8'($urandom_range(N - 1));
      pf_word.dest.ch   = 12'($urandom_range(3));
      pf_word.idx       = 16'($urandom_range(8));
      pf_word.data      = $urandom;
      dc_ready = $urandom_range(1);
      cb_enable = N'($urandom);
      cb_valid  = $urandom_range(1) ? cb_enable : '0;
      for (int n = 0; n < N; n++) cb_data[n] = $urandom;
      #1;
      checks++;
      if (pf_word.dest.kind == DST_DATA) begin
        if (dc_valid !== pf_valid || pf_ready !== dc_ready || dc_data !== pf_word.data) begin
          failures++; $display("FAIL data route t=%0d", t);
        end
        if (pf_valid && dc_ready) n_d++;
        if (pf_valid && !dc_ready) n_blocked++;
      end else if (dc_valid !== 1'b0 || pf_ready !== 1'b1) begin
        failures++; $display("FAIL cache route t=%0d", t);
      end
      prev_word = pf_word;
      prev_w = pf_valid && pf_word.dest.kind == DST_WEIGHT;
      prev_b = pf_valid && pf_word.dest.kind == DST_BIAS;
      prev_en = cb_enable; prev_v = cb_valid; prev_d = cb_data;
      @(negedge clk);
      checks++;
      if (w_wr_en !== prev_w || b_wr_en !== prev_b) begin failures++; $display("FAIL strobes t=%0d", t); end
      if (prev_w) begin
        n_w++;
        checks++;
        if (w_wr_cbu !== prev_word.dest.cbu || w_wr_ch !== prev_word.dest.ch ||
            w_wr_idx !== prev_word.idx || wb_wr_data !== prev_word.data) begin
          failures++; $display("FAIL weight fields t=%0d", t);
        end
      end
      if (prev_b) begin
        n_b++;
        checks++;
        if (b_wr_cbu !== prev_word.dest.cbu || wb_wr_data !== prev_word.data) begin
          failures++; $display("FAIL bias fields t=%0d", t);
        end
      end
      checks++;
      if (ob_valid !== (|(prev_v & prev_en)) || (ob_valid && (ob_mask !== prev_en || ob_data !== prev_d))) begin
        failures++; $display("FAIL gather t=%0d", t);
      end
    end
    checks++;
    if (n_w == 0 || n_b == 0 || n_d == 0 || n_blocked == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
