// tb_sync_fifo: random pushes and pops on a 16-deep FIFO checked against a
// queue: data order, full/empty refusal, count and space.
module tb_sync_fifo;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, push_valid, push_ready, pop_valid, pop_ready;
  logic [31:0] push_data, pop_data;
  logic [4:0] count, space;
  int q[$];
  int fulls = 0, empties = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut (.clk, .rst_n, .push_valid, .push_data, .push_ready,
                                           .pop_valid, .pop_data, .pop_ready, .count, .space);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push_valid = 0; pop_ready = 0; push_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // phases biased towards filling and towards draining
      push_valid = ((t / 300) % 2 == 0) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      pop_ready  = ((t / 300) % 2 == 0) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      push_data  = $urandom;
      #1;
      checks++;
      if (count !== 5'(q.size()) || space !== 5'(16 - q.size()) || push_ready !== (q.size() < 16)
          || pop_valid !== (q.size() > 0)) begin
        failures++; $display("FAIL status t=%0d count %0d exp %0d", t, count, q.size());
      end
      if (q.size() == 16) fulls++;
      if (q.size() == 0) empties++;
      if (pop_valid && pop_ready) begin
        checks++;
        if (pop_data !== q[0]) begin failures++; $display("FAIL data t=%0d", t); end
      end
      @(posedge clk);
      if (pop_valid && pop_ready) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back(push_data);
      @(negedge clk);
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("FAIL full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
