// tb_cnn_full: one complete layer on the co-processor at its default size
// (16 cell bodies, 3x3 kernels, input depth 1, Q(16,15)). The program is the
// 65-instruction group C = 16 + (1 + 2) * 16 + 1 for 16 cell bodies; the
// layer is a 32x32 map with zero padding, ReLU and no pooling, so every cell
// body writes a 32x32 output map. All 16 maps are compared with a reference
// layer. With a memory that is always ready the single write port is the
// bottleneck: 16 words per window, so the layer must finish within about
// 16 * 1024 cycles plus the load phase; the cycle count is checked.
module tb_cnn_full;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 16, K = 3, W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, ic_wr_en, start, done;
  logic [10:0] ic_wr_addr;
  logic [63:0] ic_wr_data;
  af_sel_e sel_af;
  logic [1:0] conf_p;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, rd_rsp_data, wr_addr, wr_data;
  int fetch_cycles = 0;

  cnn_coprocessor dut (
    .clk, .rst_n, .ic_wr_en, .ic_wr_addr, .ic_wr_data, .start, .done, .sel_af, .conf_p,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  tb_main_memory #(.SIZE(65536), .MAX_LAT(2), .STALL(0)) mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  always @(posedge clk) if (rst_n && dut.ic_rd_en) fetch_cycles++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[], wt[], bias[], out[], OH, OW, PH, PWD, cycles, n_ins, wa;
    logic [63:0] prog[$];
    rst_n = 0; ic_wr_en = 0; ic_wr_addr = 0; ic_wr_data = 0; start = 0;
    sel_af = AF_RELU; conf_p = 1;
    img = new[W * W];
    foreach (img[i]) begin img[i] = rnd_q(2 * ONE); mem.mem[1000 + i] = img[i]; end
    wt = new[N * K * K];
    bias = new[N];
    foreach (wt[i]) begin wt[i] = rnd_q(ONE / 2); mem.mem[100 + i] = wt[i]; end
    foreach (bias[i]) begin bias[i] = rnd_q(ONE / 4); mem.mem[400 + i] = bias[i]; end
    for (int n = 0; n < N; n++) prog.push_back(enc_mw(CFG_CONV, n, W, 1, 1, 1));
    for (int n = 0; n < N; n++) begin
      prog.push_back(enc_filter(FK_WEIGHTS, n, 0, 32'(100 + n * K * K)));
      prog.push_back(enc_filter(FK_BIAS, n, 0, 32'(400 + n)));
      prog.push_back(enc_filter(FK_OUTPUT, n, 0, 32'(4096 + n * 2048)));
    end
    prog.push_back(enc_input(32'd1000));
    n_ins = prog.size();
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      ic_wr_en = 1; ic_wr_addr = 11'(i); ic_wr_data = prog[i];
      @(negedge clk);
    end
    ic_wr_en = 0;
    start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("layer finished in %0d cycles, %0d instruction fetch cycles", cycles, fetch_cycles);
    checks++;
    if (n_ins != N + 3 * N + 1 || fetch_cycles != n_ins + 1) begin
      failures++; $display("FAIL fetch: %0d instructions, %0d fetch cycles", n_ins, fetch_cycles);
    end
    checks++;
    if (cycles > N * W * W + 1000) begin failures++; $display("FAIL rate: %0d cycles", cycles); end
    conv_layer(img, wt, bias, N, W, 1, K, 1, 1, 1, 1, out, OH, OW, PH, PWD);
    for (int n = 0; n < N; n++)
      for (int k = 0; k < PH * PWD; k++) begin
        checks++;
        if (int'(mem.mem[4096 + n * 2048 + k]) != out[n * PH * PWD + k]) begin
          failures++;
          if (failures < 10) $display("FAIL cb %0d out %0d", n, k);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
