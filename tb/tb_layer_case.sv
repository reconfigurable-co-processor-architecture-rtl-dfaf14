// tb_layer_case: testbench helper that runs one full-size convolution layer
// of a published network on a co-processor built for it, and checks it.
// It builds cnn_coprocessor with N_CB = 16 and the given K and D_IN (other
// parameters at their defaults) and its own behavioural main memory. It writes
// a random image (W x W x D, channels interleaved per pixel, values in [0, 1)),
// random weights and biases, and the program for one pass of 16 filters:
// C = 16 + (D + 2) * 16 + 1 instructions, then STOP. It then runs the layer
// (zero padding (K-1)/2 when ZPAD, ReLU, no pooling) and compares every
// output with the reference layer.
// Timing checks: instruction fetch takes C + 1 cycles, and the layer ends
// within 25% of the larger of its two streaming bounds plus 2000 cycles.
// Those bounds are one output word per cycle on the write port and one input
// word per cycle on the read side. At stride 2 or more the data cache's ring
// of rows cannot take the next row of windows' newest input row until the
// current row of windows is done, so part of the input load does not overlap
// the output writes; the 25% allows for that.
// Results come out through checks/failures, and finished rises at the end.
module tb_layer_case
  import cnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int    K    = 3,
  parameter int    D    = 3,
  parameter int    W    = 256,
  parameter int    S    = 2,
  parameter bit    ZPAD = 1,
  parameter string NAME = "layer"
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);
  localparam int N      = 16;
  localparam int PAD    = ZPAD ? (K - 1) / 2 : 0;
  localparam int OWD    = (W + 2 * PAD - K) / S + 1;
  localparam int IMG_A  = 16384;
  localparam int W_A    = 100;
  localparam int B_A    = 8000;
  localparam int OUT_ST = OWD * OWD;
  localparam int OUT_A  = IMG_A + W * W * D;

  logic rst_n, ic_wr_en, start, done;
  logic [10:0] ic_wr_addr;
  logic [63:0] ic_wr_data;
  af_sel_e sel_af;
  logic [1:0] conf_p;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, rd_rsp_data, wr_addr, wr_data;
  int fetch_cycles;

  cnn_coprocessor #(.K(K), .D_IN(D)) dut (
    .clk, .rst_n, .ic_wr_en, .ic_wr_addr, .ic_wr_data, .start, .done, .sel_af, .conf_p,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  tb_main_memory #(.SIZE(OUT_A + N * OUT_ST), .MAX_LAT(2), .STALL(0)) mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  always @(posedge clk) if (rst_n && dut.ic_rd_en) fetch_cycles++;

  initial begin
    int img[], wt[], bias[], out[], OH, OW, PH, PWD, cycles, n_ins, n_out, bound;
    logic [63:0] prog[$];
    checks = 0; failures = 0; finished = 0; fetch_cycles = 0;
    rst_n = 0; ic_wr_en = 0; ic_wr_addr = 0; ic_wr_data = 0; start = 0;
    sel_af = AF_RELU; conf_p = 1;
    img = new[W * W * D];
    foreach (img[i]) begin img[i] = int'($urandom_range(Q_ONE - 1)); mem.mem[IMG_A + i] = img[i]; end
    wt = new[N * D * K * K];
    bias = new[N];
    foreach (wt[i]) begin wt[i] = rnd_q(ONE / 8); mem.mem[W_A + i] = wt[i]; end
    foreach (bias[i]) begin bias[i] = rnd_q(ONE / 4); mem.mem[B_A + i] = bias[i]; end
    for (int n = 0; n < N; n++) prog.push_back(enc_mw(CFG_CONV, n, W, D, S, ZPAD));
    for (int n = 0; n < N; n++) begin
      for (int d = 0; d < D; d++)
        prog.push_back(enc_filter(FK_WEIGHTS, n, d, 32'(W_A + (n * D + d) * K * K)));
      prog.push_back(enc_filter(FK_BIAS, n, 0, 32'(B_A + n)));
      prog.push_back(enc_filter(FK_OUTPUT, n, 0, 32'(OUT_A + n * OUT_ST)));
    end
    prog.push_back(enc_input(32'(IMG_A)));
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
    conv_layer(img, wt, bias, N, W, D, K, S, ZPAD, int'(AF_RELU), 1, out, OH, OW, PH, PWD);
    n_out = N * PH * PWD;
    bound = (n_out > W * W * D) ? n_out : W * W * D;
    $display("%s: %0dx%0dx%0d input, %0dx%0d kernel, stride %0d -> 16 maps of %0dx%0d: %0d cycles (streaming bound %0d), %0d fetch cycles",
             NAME, W, W, D, K, K, S, PH, PWD, cycles, bound, fetch_cycles);
    checks++;
    if (PH != OWD || PWD != OWD) begin failures++; $display("FAIL %s: reference size %0dx%0d", NAME, PH, PWD); end
    checks++;
    if (n_ins != N + (D + 2) * N + 1 || fetch_cycles != n_ins + 1) begin
      failures++; $display("FAIL %s fetch: %0d instructions, %0d fetch cycles", NAME, n_ins, fetch_cycles);
    end
    checks++;
    if (cycles > bound + bound / 4 + 2000) begin failures++; $display("FAIL %s rate: %0d cycles", NAME, cycles); end
    for (int n = 0; n < N; n++)
      for (int k = 0; k < PH * PWD; k++) begin
        checks++;
        if (int'(mem.mem[OUT_A + n * OUT_ST + k]) != out[n * PH * PWD + k]) begin
          failures++;
          if (failures < 10) $display("FAIL %s cb %0d out %0d", NAME, n, k);
        end
      end
    finished = 1;
  end
endmodule
