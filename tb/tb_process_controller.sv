// tb_process_controller: runs a two-layer program through the process
// controller with an instruction cache and a mock DMA (random job length)
// and data path (random drain time). Checks: each layer's group of
// C = gamma + (D + 2) * gamma + 1 instructions is fetched in C back-to-back
// read cycles; the DMA jobs come in the order weights (per channel), bias
// per enabled cell body, then one input job of width*width*depth words; the
// Matrix Web configuration, enable mask and output addresses; FLUSH pulses;
// done after STOP.
module tb_process_controller;
  import cnn_pkg::*;
  localparam int N = 8, DI = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, done, ic_rd_en, ic_wr_en, job_valid, job_ready, mw_start, cfg_zpad, odma_load, dp_idle;
  logic [10:0] ic_rd_addr, ic_wr_addr;
  logic [63:0] ic_rd_data, ic_wr_data;
  dma_job_t job;
  logic [11:0] cfg_width, cfg_depth;
  logic [3:0] cfg_stride;
  logic [N-1:0] cb_enable, cb_flush;
  logic [N-1:0][31:0] out_addr;
  dma_job_t exp_jobs[$];
  int rd_runs[$];
  int run_len = 0, dma_busy = 0, idle_wait = 0, flushes = 0, starts = 0;
  logic [63:0] prog[$];

  instr_cache u_ic (.clk, .wr_en(ic_wr_en), .wr_addr(ic_wr_addr), .wr_data(ic_wr_data),
                    .rd_en(ic_rd_en), .rd_addr(ic_rd_addr), .rd_data(ic_rd_data));
  process_controller #(.N_CB(N), .K(3), .D_IN(DI)) dut (.clk, .rst_n, .start, .done, .ic_rd_en,
    .ic_rd_addr, .ic_rd_data, .dma_job_valid(job_valid), .dma_job(job), .dma_job_ready(job_ready),
    .mw_start, .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad, .cb_enable, .cb_flush, .odma_load,
    .out_addr, .datapath_idle(dp_idle));

  // mock DMA and data path
  assign job_ready = (dma_busy == 0);
  assign dp_idle = (idle_wait == 0);
  always @(posedge clk) begin
    if (dma_busy > 0) dma_busy <= dma_busy - 1;
    else if (job_valid) begin
      dma_busy <= int'(job.len) % 7 + 1;
      idle_wait <= $urandom_range(20);
      checks++;
      if (exp_jobs.size() == 0 || job !== exp_jobs[0]) begin
        failures++; $display("FAIL unexpected job addr=%0d len=%0d", job.addr, job.len);
      end
      if (exp_jobs.size() > 0) void'(exp_jobs.pop_front());
    end
    if (idle_wait > 0 && dma_busy == 0) idle_wait <= idle_wait - 1;
    if (ic_rd_en) run_len <= run_len + 1;
    else if (run_len != 0) begin rd_runs.push_back(run_len); run_len <= 0; end
    if (rst_n && |cb_flush) flushes++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dma_job_t mk(int addr, int len, dest_e k, int cbu, int ch);
    dma_job_t j;
    j = '0;
    j.addr = addr; j.len = 24'(len); j.dest.kind = k; j.dest.cbu = 8'(cbu); j.dest.ch = 12'(ch);
    return j;
  endfunction

  task automatic layer(int cbs[$], int W, int dep, int S, bit zp, int in_a);
    foreach (cbs[i]) prog.push_back(enc_mw(CFG_CONV, cbs[i], W, dep, S, zp));
    foreach (cbs[i]) begin
      for (int d = 0; d < dep; d++) prog.push_back(enc_filter(FK_WEIGHTS, cbs[i], d, 32'(1000 + cbs[i] * 100 + d * 10)));
      prog.push_back(enc_filter(FK_BIAS, cbs[i], 0, 32'(5000 + cbs[i])));
      prog.push_back(enc_filter(FK_OUTPUT, cbs[i], 0, 32'(9000 + cbs[i] * 1000)));
    end
    prog.push_back(enc_input(32'(in_a)));
    for (int n = 0; n < N; n++)
      foreach (cbs[i]) if (cbs[i] == n) begin
        for (int d = 0; d < dep; d++) exp_jobs.push_back(mk(1000 + n * 100 + d * 10, 9, DST_WEIGHT, n, d));
        exp_jobs.push_back(mk(5000 + n, 1, DST_BIAS, n, 0));
      end
    exp_jobs.push_back(mk(in_a, W * W * dep, DST_DATA, 0, 0));
  endtask

  // configuration seen when the Matrix Web is started
  int exp_w[$], exp_d[$], exp_s[$];
  logic [N-1:0] exp_en[$];
  always @(posedge clk) if (mw_start) begin
    starts++;
    checks++;
    if (exp_w.size() == 0 || cfg_width != 12'(exp_w[0]) || cfg_depth != 12'(exp_d[0]) ||
        cfg_stride != 4'(exp_s[0]) || cb_enable !== exp_en[0]) begin
      failures++; $display("FAIL layer configuration");
    end
    for (int n = 0; n < N; n++) if (cb_enable[n]) begin
      checks++;
      if (out_addr[n] != 32'(9000 + n * 1000)) begin failures++; $display("FAIL out addr %0d", n); end
    end
    if (exp_w.size() > 0) begin
      void'(exp_w.pop_front()); void'(exp_d.pop_front()); void'(exp_s.pop_front()); void'(exp_en.pop_front());
    end
  end

  initial begin
    rst_n = 0; start = 0; ic_wr_en = 0; ic_wr_addr = 0; ic_wr_data = 0;
    layer('{0, 2, 5}, 16, 1, 1, 1, 20000);
    exp_w.push_back(16); exp_d.push_back(1); exp_s.push_back(1); exp_en.push_back(8'b0010_0101);
    layer('{1, 7}, 12, 2, 2, 0, 30000);
    exp_w.push_back(12); exp_d.push_back(2); exp_s.push_back(2); exp_en.push_back(8'b1000_0010);
    prog.push_back(enc_mw(CFG_FLUSH, 2, 0, 0, 0, 0));
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      ic_wr_en = 1; ic_wr_addr = 11'(i); ic_wr_data = prog[i];
      @(negedge clk);
    end
    ic_wr_en = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (exp_jobs.size() != 0) begin failures++; $display("FAIL %0d jobs not issued", exp_jobs.size()); end
    // C = gamma + (D + 2) * gamma + 1 fetch cycles per layer, back to back
    checks++;
    if (rd_runs.size() != 3 || rd_runs[0] != 3 + 3 * 3 + 1 || rd_runs[1] != 2 + 4 * 2 + 1 || rd_runs[2] != 2) begin
      failures++;
      $display("FAIL fetch runs: %p", rd_runs);
    end
    checks++;
    if (flushes != 1 || starts != 2) begin failures++; $display("FAIL flushes %0d starts %0d", flushes, starts); end
    $display("fetch cycles per group: %p", rd_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
