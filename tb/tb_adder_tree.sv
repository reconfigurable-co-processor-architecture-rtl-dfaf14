// tb_adder_tree: checks the pipelined adder tree for 9 inputs (latency 4)
// and 5 inputs (latency 3): random operands every cycle, sums compared after
// exactly the tree depth.
module tb_adder_tree;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [8:0][31:0] in9;
  logic signed [4:0][31:0] in5;
  logic signed [31:0] s9, s5;
  int e9[$], e5[$];

  adder_tree #(.N_IN(9)) dut9 (.clk, .in_vec(in9), .sum(s9));
  adder_tree #(.N_IN(5)) dut5 (.clk, .in_vec(in5), .sum(s5));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    in9 = '0; in5 = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      a = 0;
      for (int i = 0; i < 9; i++) begin in9[i] = $urandom; a += int'(in9[i]); end
      e9.push_back(a);
      a = 0;
      for (int i = 0; i < 5; i++) begin in5[i] = $urandom; a += int'(in5[i]); end
      e5.push_back(a);
      // latency 4 / 3: compare the sum of the operands applied 4 / 3 cycles ago
      if (e9.size() > 5) begin
        void'(e9.pop_front());
      end
      if (e5.size() > 4) begin
        void'(e5.pop_front());
      end
      #1;
      if (t >= 4) begin
        checks++;
        if (s9 !== e9[0]) begin failures++; $display("FAIL n=9 t=%0d got %0d exp %0d", t, s9, e9[0]); end
      end
      if (t >= 3) begin
        checks++;
        if (s5 !== e5[0]) begin failures++; $display("FAIL n=5 t=%0d got %0d exp %0d", t, s5, e5[0]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
