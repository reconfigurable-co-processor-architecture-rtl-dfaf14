// tb_activation_fn: checks every activation setting against a real-valued
// evaluation of the same piecewise-linear curves, and the sigmoid and tanh
// approximations against the exact functions (PLAN error < 0.02). Output
// latency is one cycle.
module tb_activation_fn;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  af_sel_e sel;
  logic signed [31:0] x, y;

  activation_fn dut (.clk, .sel, .x, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, xv;
    real xr, yr, ex;
    sel = AF_NONE; x = 0;
    @(negedge clk);
    for (int s = 0; s < 4; s++) begin
      for (int t = 0; t < 600; t++) begin
        sel = af_sel_e'(s);
        if (t < 500) xv = rnd_q(8 * ONE);
        else if (t < 595) xv = int'($urandom);
        else xv = (t == 595) ? 32'sh7fffffff : (t == 596) ? 32'sh80000000 : (t == 597) ? 0 : (t == 598) ? 5 * ONE : -5 * ONE;
        x = xv;
        @(negedge clk);
        e = af_ref(s, xv);
        checks++;
        if (y !== e) begin
          failures++;
          $display("FAIL sel=%0d x=%0d got %0d exp %0d", s, xv, y, e);
        end
        xr = real'(xv) / ONE;
        yr = real'(y) / ONE;
        if (s == 2 && t < 500) begin
          ex = 1.0 / (1.0 + $exp(-xr));
          checks++;
          if (yr - ex > 0.02 || ex - yr > 0.02) begin failures++; $display("FAIL sigmoid accuracy x=%f y=%f", xr, yr); end
        end
        if (s == 3 && t < 500) begin
          ex = (1.0 - $exp(-2.0 * xr)) / (1.0 + $exp(-2.0 * xr));
          checks++;
          if (yr - ex > 0.04 || ex - yr > 0.04) begin failures++; $display("FAIL tanh accuracy x=%f y=%f", xr, yr); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
