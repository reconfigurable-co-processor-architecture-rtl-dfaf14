// tb_instr_cache: writes random words at random addresses of a 2048-word
// instruction cache and reads them back, one read per cycle with the data
// one cycle after the address.
module tb_instr_cache;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, rd_en;
  logic [10:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  logic [63:0] ref_m [int];

  instr_cache dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, prev;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      wr_en = 1; wr_addr = 11'($urandom); wr_data = {$urandom, $urandom};
      ref_m[int'(wr_addr)] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    prev = -1;
    for (int i = 0; i < 1000; i++) begin
      a = int'($urandom_range(2047));
      while (!ref_m.exists(a)) a = int'($urandom_range(2047));
      rd_en = 1; rd_addr = 11'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== ref_m[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    // rd_en low holds the output
    rd_en = 0; rd_addr = 0;
    @(negedge clk);
    checks++;
    if (rd_data !== ref_m[a]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
