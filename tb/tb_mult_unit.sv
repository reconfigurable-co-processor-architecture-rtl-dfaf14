// tb_mult_unit: checks the Q(16,15) multiplier against a 64-bit reference
// product, one operand pair per cycle, with the result one cycle later.
module tb_mult_unit;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [31:0] w, d, p;
  int exp_q[$];

  mult_unit dut (.clk, .weight(w), .data(d), .product(p));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b;
    w = 0; d = 0;
    @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      case (t % 4)
        0: begin a = rnd_q(4 * ONE); b = rnd_q(4 * ONE); end      // small values
        1: begin a = int'($urandom); b = rnd_q(ONE); end          // wide by small
        2: begin a = -ONE; b = rnd_q(1000 * ONE); end             // -1 x
        default: begin a = int'($urandom); b = int'($urandom); end // wraps
      endcase
      w = a; d = b;
      exp_q.push_back(qmul(a, b));
      @(negedge clk);
      // result of this cycle's operands is visible after one edge
      checks++;
      if (p !== exp_q[0]) begin
        failures++;
        $display("FAIL %0d * %0d: got %0d exp %0d", a, b, p, exp_q[0]);
      end
      void'(exp_q.pop_front());
    end
    // exact values
    w = 3 * ONE / 2; d = -2 * ONE; @(negedge clk);
    checks++; if (p !== -3 * ONE) begin failures++; $display("FAIL 1.5*-2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
