// tb_mac_unit: loads random weights into a 3x3 MAC unit, then applies a new
// random window every cycle and checks each dot product (Q(16,15)) exactly
// 5 cycles later (1 multiply + 4 adder levels); also a 5x5 instance
// (latency 6) to cover zero padding of the adder tree.
module tb_mac_unit;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, flush, we3, we5;
  logic [4:0] widx;
  logic [31:0] wdata;
  logic [8:0][31:0]  win3;
  logic [24:0][31:0] win5;
  logic signed [31:0] r3, r5;
  int w3[9], w5[25];
  int e3[$], e5[$];

  mac_unit #(.K(3)) dut3 (.clk, .rst_n, .flush, .w_wr_en(we3), .w_wr_idx(widx[3:0]),
                          .w_wr_data(wdata), .window(win3), .result(r3));
  mac_unit #(.K(5)) dut5 (.clk, .rst_n, .flush, .w_wr_en(we5), .w_wr_idx(widx),
                          .w_wr_data(wdata), .window(win5), .result(r5));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    rst_n = 0; flush = 0; we3 = 0; we5 = 0; widx = 0; wdata = 0; win3 = '0; win5 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 25; i++) begin
      wdata = rnd_q(2 * ONE); widx = 5'(i);
      we3 = (i < 9); we5 = 1;
      if (i < 9) w3[i] = wdata;
      w5[i] = wdata;
      @(negedge clk);
    end
    we3 = 0; we5 = 0;
    for (int t = 0; t < 200; t++) begin
      a = 0;
      for (int i = 0; i < 9; i++) begin win3[i] = rnd_q(8 * ONE); a += qmul(w3[i], win3[i]); end
      e3.push_back(a);
      a = 0;
      for (int i = 0; i < 25; i++) begin win5[i] = rnd_q(8 * ONE); a += qmul(w5[i], win5[i]); end
      e5.push_back(a);
      @(negedge clk);
      if (e3.size() > 5) void'(e3.pop_front());
      if (e5.size() > 6) void'(e5.pop_front());
      // after t+1 edges: the 3x3 result of window t-4 and the 5x5 result of window t-5
      if (t >= 4) begin
        checks++;
        if (r3 !== e3[0]) begin failures++; $display("FAIL k3 t=%0d got %0d exp %0d", t, r3, e3[0]); end
      end
      if (t >= 5) begin
        checks++;
        if (r5 !== e5[0]) begin failures++; $display("FAIL k5 t=%0d got %0d exp %0d", t, r5, e5[0]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
