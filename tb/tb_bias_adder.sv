// tb_bias_adder: checks the bias adder for depth 1 (latency 1) and depth 4
// (latency 3: two tree levels and the bias add) with random MAC results and
// biases (the depth-4 bias is held, as a bias cache value is static
// while a layer runs).
module tb_bias_adder;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [0:0][31:0] m1;
  logic [3:0][31:0] m4;
  logic signed [31:0] b1, b4, r1, r4;
  int e1[$], e4[$];

  bias_adder #(.D_IN(1)) dut1 (.clk, .mac_results(m1), .bias(b1), .result(r1));
  bias_adder #(.D_IN(4)) dut4 (.clk, .mac_results(m4), .bias(b4), .result(r4));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    b4 = $urandom;
    for (int t = 0; t < 200; t++) begin
      m1[0] = $urandom; b1 = $urandom;
      e1.push_back(int'(m1[0]) + int'(b1));
      a = 0;
      for (int i = 0; i < 4; i++) begin m4[i] = $urandom; a += int'(m4[i]); end
      e4.push_back(a + int'(b4));
      @(negedge clk);
      if (e1.size() > 1) void'(e1.pop_front());
      if (e4.size() > 3) void'(e4.pop_front());
      checks++;
      if (r1 !== e1[0]) begin failures++; $display("FAIL d1 t=%0d", t); end
      if (t >= 2) begin
        checks++;
        if (r4 !== e4[0]) begin failures++; $display("FAIL d4 t=%0d got %0d exp %0d", t, r4, e4[0]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
