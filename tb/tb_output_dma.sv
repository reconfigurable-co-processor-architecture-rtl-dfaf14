// tb_output_dma: pushes entries of 4 cell-body values with random masks into
// an output FIFO, lets the output DMA write them to the behavioural memory
// (with random write back-pressure) and checks that each cell body's values
// land contiguously from its own base address, one write per cycle while
// the memory is ready.
module tb_output_dma;
  import cnn_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, load_addr, ob_valid, ob_pop, wr_valid, wr_ready, idle, push_valid, push_ready;
  logic [N-1:0][31:0] base_addr;
  logic [N-1:0] ob_mask, push_mask;
  logic [N-1:0][31:0] ob_data, push_data;
  logic [31:0] wr_addr, wr_data;
  logic [5:0] cnt, spc;
  logic rdv, rdr, rrv;
  logic [31:0] rrd;
  int expect_n[N];
  int writes = 0, busy_cycles = 0;

  output_dma #(.N_CB(N)) dut (.clk, .rst_n, .load_addr, .base_addr, .ob_valid, .ob_mask, .ob_data,
    .ob_pop, .wr_valid, .wr_addr, .wr_data, .wr_ready, .idle);
  sync_fifo #(.WIDTH(N + N * 32), .DEPTH(32)) u_fifo (.clk, .rst_n, .push_valid,
    .push_data({push_mask, push_data}), .push_ready, .pop_valid(ob_valid), .pop_data({ob_mask, ob_data}),
    .pop_ready(ob_pop), .count(cnt), .space(spc));
  tb_main_memory #(.SIZE(4096), .STALL(1)) mem (.clk, .rd_req_valid(1'b0), .rd_req_addr(32'd0),
    .rd_req_ready(rdr), .rd_rsp_valid(rrv), .rd_rsp_data(rrd), .wr_valid, .wr_addr, .wr_data, .wr_ready);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (wr_valid) begin
    busy_cycles++;
    if (wr_ready) writes++;
  end

  initial begin
    rst_n = 0; load_addr = 0; push_valid = 0; push_mask = 0; push_data = '0;
    for (int n = 0; n < N; n++) base_addr[n] = 32'(1000 * (n + 1));
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_addr = 1; @(negedge clk); load_addr = 0;
    for (int e = 0; e < 300; e++) begin
      push_mask = (e % 50 == 7) ? '0 : N'($urandom_range(1, 15));
      for (int n = 0; n < N; n++) begin
        push_data[n] = 32'(n * 100000 + expect_n[n]);
        if (push_mask[n]) expect_n[n]++;
      end
      push_valid = 1;
      @(negedge clk);
      while (!push_ready) @(negedge clk);
    end
    push_valid = 0;
    while (!(idle && !ob_valid)) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int n = 0; n < N; n++)
      for (int i = 0; i < expect_n[n]; i++) begin
        checks++;
        if (mem.mem[1000 * (n + 1) + i] !== 32'(n * 100000 + i)) begin
          failures++; $display("FAIL cb %0d word %0d", n, i);
        end
      end
    checks++;
    if (mem.mem[1000 * 1 + expect_n[0]] !== 0) begin failures++; $display("FAIL wrote past end"); end
    checks++;
    if (writes != expect_n[0] + expect_n[1] + expect_n[2] + expect_n[3]) begin failures++; $display("FAIL write count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
