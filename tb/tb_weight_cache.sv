// tb_weight_cache: fills the 9-entry weight cache, reads all entries back in
// parallel, checks that out-of-range writes are ignored, that flush clears
// every entry and that flush wins over a simultaneous write.
module tb_weight_cache;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, flush, wr_en;
  logic [3:0] wr_idx;
  logic [31:0] wr_data;
  logic [8:0][31:0] weights;
  int ref_w[9];

  weight_cache #(.N_W(9)) dut (.clk, .rst_n, .flush, .wr_en, .wr_idx, .wr_data, .weights);

  task automatic compare(string what);
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (weights[i] !== ref_w[i]) begin
        failures++;
        $display("FAIL %s entry %0d got %0h exp %0h", what, i, weights[i], ref_w[i]);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; flush = 0; wr_en = 0; wr_idx = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ref_w[i]) ref_w[i] = 0;
    compare("reset");
    for (int round = 0; round < 4; round++) begin
      for (int k = 0; k < 20; k++) begin
        wr_en = 1;
        wr_idx = 4'($urandom_range(15));
        wr_data = $urandom;
        if (wr_idx < 9) ref_w[wr_idx] = wr_data;
        @(negedge clk);
      end
      wr_en = 0;
      compare("fill");
      // flush together with a write: flush wins
      flush = 1; wr_en = 1; wr_idx = 2; wr_data = 32'hdead;
      @(negedge clk);
      flush = 0; wr_en = 0;
      foreach (ref_w[i]) ref_w[i] = 0;
      compare("flush");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
