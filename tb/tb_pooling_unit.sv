// tb_pooling_unit: streams random output maps (with idle gaps) through the
// pooling unit for pooling widths 1, 2 and 3, including map sizes that
// leave partial windows at the edges, and compares the pooled values, their
// order and their count with a reference max pooling. Each pooled value
// must appear one cycle after the last input of its window.
module tb_pooling_unit;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, in_valid, in_sof, in_eol, out_valid;
  logic [1:0] conf_p;
  logic signed [31:0] in_data, out_data;
  int expq[$];
  int exp_cycle[$];
  int cyc = 0;

  pooling_unit #(.P_MAX(3), .MAX_OW(16)) dut (.clk, .rst_n, .conf_p, .in_valid, .in_sof,
                                              .in_eol, .in_data, .out_valid, .out_data);

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      if (out_data !== expq[0]) begin failures++; $display("FAIL got %0d exp %0d", out_data, expq[0]); end
      if (cyc != exp_cycle[0]) begin failures++; $display("FAIL timing cyc %0d exp %0d", cyc, exp_cycle[0]); end
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

  task automatic run_map(int W, int H, int P);
    int m[];
    int last_cycle[];
    m = new[W * H];
    last_cycle = new[W * H];
    foreach (m[i]) m[i] = rnd_q(100 * ONE);
    conf_p = 2'(P);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_sof = (r == 0 && c == 0); in_eol = (c == W - 1);
        in_data = m[r * W + c];
        last_cycle[r * W + c] = cyc;
        if ((P <= 1) || ((r % P == P - 1) && (c % P == P - 1) && c < (W / P) * P && r < (H / P) * P)) begin
          int mx, pp;
          pp = (P < 1) ? 1 : P;
          mx = m[(r - pp + 1) * W + c - pp + 1];
          for (int i = 0; i < pp; i++) for (int j = 0; j < pp; j++)
            if (m[(r - i) * W + c - j] > mx) mx = m[(r - i) * W + c - j];
          expq.push_back(mx);
          exp_cycle.push_back(cyc + 1);
        end
        @(negedge clk);
      end
    in_valid = 0; in_sof = 0; in_eol = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_sof = 0; in_eol = 0; in_data = 0; conf_p = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_map(6, 6, 2);
    run_map(7, 5, 2);
    run_map(9, 9, 3);
    run_map(8, 7, 3);
    run_map(5, 4, 1);
    run_map(16, 6, 2);
    run_map(4, 4, 0);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
