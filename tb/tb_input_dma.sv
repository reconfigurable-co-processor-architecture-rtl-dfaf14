// tb_input_dma: runs DMA jobs of random address, length and destination
// against the behavioural main memory (random read latency) with a
// pre-fetch FIFO drained at random, and checks that every word arrives in
// order with its tag and index, that the buffer never overflows (the
// credit rule) and that a job of n words with a free buffer and one-cycle
// memory takes about n cycles (one read per cycle).
module tb_input_dma;
  import cnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, job_valid, job_ready, rd_req_valid, rd_req_ready, rd_rsp_valid, push_valid;
  dma_job_t job;
  logic [31:0] rd_req_addr, rd_rsp_data;
  lane_word_t push_word, pop_word;
  logic pf_ready, pop_valid, pop_ready;
  logic [4:0] count, space;
  logic dummy_wr_ready;
  bit drain_fast;

  input_dma #(.SPACE_W(5)) dut (.clk, .rst_n, .job_valid, .job, .job_ready, .rd_req_valid,
    .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data, .buf_space(space),
    .push_valid, .push_word);
  sync_fifo #(.WIDTH($bits(lane_word_t)), .DEPTH(16)) u_fifo (.clk, .rst_n, .push_valid,
    .push_data(push_word), .push_ready(pf_ready), .pop_valid, .pop_data(pop_word), .pop_ready, .count, .space);
  tb_main_memory #(.SIZE(4096), .MAX_LAT(4), .STALL(0)) mem (.clk, .rd_req_valid, .rd_req_addr,
    .rd_req_ready, .rd_rsp_valid, .rd_rsp_data, .wr_valid(1'b0), .wr_addr(32'd0), .wr_data(32'd0),
    .wr_ready(dummy_wr_ready));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && push_valid && !pf_ready) begin
    failures++; $display("FAIL buffer overflow");
  end

  always @(negedge clk) pop_ready <= drain_fast ? 1'b1 : ($urandom_range(2) == 0);

  initial begin
    int base, len, got, cycles;
    dest_t dst;
    for (int i = 0; i < 4096; i++) mem.mem[i] = 32'(i * 7 + 3);
    rst_n = 0; job_valid = 0; job = '0; drain_fast = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 30; j++) begin
      base = $urandom_range(3000);
      len  = (j == 0) ? 1 : $urandom_range(1, 200);
      dst.kind = dest_e'($urandom_range(2));
      dst.cbu  = 8'($urandom_range(15));
      dst.ch   = 12'($urandom_range(3));
      drain_fast = (j % 3 == 0);
      job.addr = base; job.len = 24'(len); job.dest = dst;
      job_valid = 1;
      @(negedge clk);
      job_valid = 0;
      got = 0; cycles = 0;
      while (got < len) begin
        #1;
        if (pop_valid && pop_ready) begin
          checks++;
          if (pop_word.dest !== dst || pop_word.idx !== 16'(got) || pop_word.data !== 32'((base + got) * 7 + 3)) begin
            failures++; $display("FAIL job %0d word %0d", j, got);
          end
          got++;
        end
        @(negedge clk);
        cycles++;
        if (cycles > 5000) break;
      end
      checks++;
      if (got != len) begin failures++; $display("FAIL job %0d short", j); end
      repeat (3) @(negedge clk);
      checks++;
      if (!job_ready) begin failures++; $display("FAIL job %0d not finished", j); end
      if (drain_fast && len > 50) begin
        // one word per cycle plus memory latency (up to 4 cycles each way)
        checks++;
        if (cycles > len + 12) begin failures++; $display("FAIL rate: %0d words in %0d cycles", len, cycles); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
