// tb_cnn_coprocessor: end-to-end test of the co-processor at reduced size
// (4 cell bodies, 3x3 kernels, input depth 2, maps up to 32 wide).
// A host model writes programs into the instruction cache, places weights,
// biases and input maps in a behavioural main memory and starts the
// co-processor; every output map written back is compared with a reference
// layer computed in the testbench. Four programs are run back to back:
//   A: two layers (the second reads the first one's output map from memory),
//      ReLU, no pooling, zero padding, stride 2, a FLUSH and a STOP;
//   B: tanh with 2x2 pooling on a depth-2 map;
//   C: sigmoid with 3x3 pooling, one cell body;
//   D: no activation, stride 3.
// Counted and required at least once each: Matrix Web stall on a full
// output buffer, input back-pressure from the data cache, memory write
// back-pressure, a full pre-fetch buffer, zero padding, stride > 1, each
// activation, pooling on and off, a flush, a disabled cell body, and a
// layer reading a previous layer's output.
module tb_cnn_coprocessor;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, K = 3, DI = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, ic_wr_en, start, done;
  logic [7:0] ic_wr_addr;
  logic [63:0] ic_wr_data;
  af_sel_e sel_af;
  logic [1:0] conf_p;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, rd_rsp_data, wr_addr, wr_data;

  cnn_coprocessor #(.N_CB(N), .K(K), .D_IN(DI), .P_MAX(3), .MAX_W(32), .IC_DEPTH(256),
                    .PF_DEPTH(16), .OB_DEPTH(16)) dut (
    .clk, .rst_n, .ic_wr_en, .ic_wr_addr, .ic_wr_data, .start, .done, .sel_af, .conf_p,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  tb_main_memory #(.SIZE(65536), .MAX_LAT(4), .STALL(1)) mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);

  // mechanism counters
  int n_mw_stall = 0, n_in_bp = 0, n_wr_bp = 0, n_pf_full = 0, n_flush = 0, n_disabled = 0;
  int n_zpad = 0, n_stride = 0, n_pool = 0, n_nopool = 0, n_chain = 0;
  int n_af[4] = '{0, 0, 0, 0};

  always @(posedge clk) if (rst_n) begin
    if (dut.u_mw.u_dcache.active && !dut.u_mw.u_dcache.scan_done && dut.u_mw.u_dcache.rows_ready
        && !dut.u_mw.issue_ok) n_mw_stall++;
    if (dut.dc_valid && !dut.dc_ready) n_in_bp++;
    if (wr_valid && !wr_ready) n_wr_bp++;
    if (dut.pf_space == 0) n_pf_full++;
    if (|dut.cb_flush) n_flush++;
    if (dut.mw_start) begin
      if (dut.cb_enable != '1) n_disabled++;
      if (dut.cfg_zpad) n_zpad++;
      if (dut.cfg_stride > 1) n_stride++;
      if (conf_p > 1) n_pool++; else n_nopool++;
      n_af[sel_af]++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host model -------------------------------------------------------
  logic [63:0] prog[$];
  typedef struct {
    int cbs[$];
    int W, dep, S;
    bit zp;
    int in_addr;
    int wt[];
    int bias[];
  } layer_t;
  layer_t layers[$];
  int next_w = 100;

  function automatic int out_base(int cb); return 20000 + cb * 4000; endfunction

  // builds one layer: random filters, program group, returns it
  function automatic void add_layer(int cbs[$], int W, int dep, int S, bit zp, int in_addr);
    layer_t L;
    L.cbs = cbs; L.W = W; L.dep = dep; L.S = S; L.zp = zp; L.in_addr = in_addr;
    L.wt = new[cbs.size() * dep * K * K];
    L.bias = new[cbs.size()];
    foreach (L.wt[i]) L.wt[i] = rnd_q(ONE / 2);
    foreach (L.bias[i]) L.bias[i] = rnd_q(ONE / 4);
    foreach (cbs[i]) prog.push_back(enc_mw(CFG_CONV, cbs[i], W, dep, S, zp));
    foreach (cbs[i]) begin
      for (int d = 0; d < dep; d++) begin
        for (int e = 0; e < K * K; e++) mem.mem[next_w + e] = L.wt[(i * dep + d) * K * K + e];
        prog.push_back(enc_filter(FK_WEIGHTS, cbs[i], d, 32'(next_w)));
        next_w += K * K;
      end
      mem.mem[next_w] = L.bias[i];
      prog.push_back(enc_filter(FK_BIAS, cbs[i], 0, 32'(next_w)));
      next_w++;
      prog.push_back(enc_filter(FK_OUTPUT, cbs[i], 0, 32'(out_base(cbs[i]))));
    end
    prog.push_back(enc_input(32'(in_addr)));
    layers.push_back(L);
  endfunction

  task automatic run_program(int sel, int P);
    int cycles;
    sel_af = af_sel_e'(sel); conf_p = 2'(P);
    foreach (prog[i]) begin
      ic_wr_en = 1; ic_wr_addr = 8'(i); ic_wr_data = prog[i];
      @(negedge clk);
    end
    ic_wr_en = 0;
    start = 1; @(negedge clk); start = 0;
    cycles = 0;
    @(negedge clk);
    while (!done && cycles < 200000) begin @(negedge clk); cycles++; end
    checks++;
    if (!done) begin failures++; $display("FAIL program did not finish"); end
    $display("program sel=%0d P=%0d finished in %0d cycles", sel, P, cycles);
  endtask

  // checks the output maps of the last program's layers, layer by layer
  // (each layer's outputs are checked right after it, by re-running the
  // reference on the input as it was in memory when that layer ran)
  task automatic check_layer(layer_t L, int img[], int sel, int P, output int outmap0[]);
    int out[], OH, OW, PH, PWD;
    conv_layer(img, L.wt, L.bias, L.cbs.size(), L.W, L.dep, K, L.S, L.zp, sel, P, out, OH, OW, PH, PWD);
    foreach (L.cbs[i])
      for (int k = 0; k < PH * PWD; k++) begin
        checks++;
        if (int'(mem.mem[out_base(L.cbs[i]) + k]) != out[i * PH * PWD + k]) begin
          failures++;
          if (failures < 10) $display("FAIL cb %0d out %0d got %0d exp %0d", L.cbs[i], k,
                                      int'(mem.mem[out_base(L.cbs[i]) + k]), out[i * PH * PWD + k]);
        end
      end
    outmap0 = new[PH * PWD];
    foreach (outmap0[k]) outmap0[k] = out[k];
  endtask

  function automatic void put_image(int addr, int n, output int img[]);
    img = new[n];
    foreach (img[i]) begin img[i] = rnd_q(2 * ONE); mem.mem[addr + i] = img[i]; end
  endfunction

  initial begin
    int img0[], img1[], o0[], o1[];
    rst_n = 0; ic_wr_en = 0; ic_wr_addr = 0; ic_wr_data = 0; start = 0; sel_af = AF_NONE; conf_p = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Program A: layer 1 (3 cell bodies, depth 2, padded), layer 2 reads
    // cell body 0's output map (depth 1, stride 2, all 4 cell bodies)
    put_image(1000, 12 * 12 * 2, img0);
    prog.delete(); layers.delete();
    add_layer('{0, 1, 2}, 12, 2, 1, 1, 1000);
    add_layer('{0, 1, 2, 3}, 12, 1, 2, 0, out_base(0));
    prog.push_back(enc_mw(CFG_FLUSH, 3, 0, 0, 0, 0));
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    // layer 2 overwrites cell body 0's map, so layer 1 is checked from a
    // reference and layer 2 from the reference of layer 1
    run_program(1, 1);
    begin
      int ref1[], OH, OW, PH, PWD;
      conv_layer(img0, layers[0].wt, layers[0].bias, 3, 12, 2, K, 1, 1, 1, 1, ref1, OH, OW, PH, PWD);
      // cell bodies 1 and 2 of layer 1 were overwritten by layer 2 as well:
      // layer 2 input = cell body 0's map of layer 1
      img1 = new[144];
      foreach (img1[k]) img1[k] = ref1[k];
      n_chain++;
      check_layer(layers[1], img1, 1, 1, o1);
    end

    // Program B: tanh, 2x2 pooling
    put_image(3000, 11 * 11 * 2, img0);
    prog.delete(); layers.delete();
    add_layer('{1, 3}, 11, 2, 1, 1, 3000);
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    run_program(3, 2);
    check_layer(layers[0], img0, 3, 2, o0);

    // Program C: sigmoid, 3x3 pooling, one cell body
    put_image(5000, 9 * 9, img0);
    prog.delete(); layers.delete();
    add_layer('{2}, 9, 1, 1, 1, 5000);
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    run_program(2, 3);
    check_layer(layers[0], img0, 2, 3, o0);

    // Program D: no activation, stride 3, depth 2, all cell bodies
    put_image(7000, 20 * 20 * 2, img0);
    prog.delete(); layers.delete();
    add_layer('{0, 1, 2, 3}, 20, 2, 3, 0, 7000);
    prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
    run_program(0, 1);
    check_layer(layers[0], img0, 0, 1, o0);

    $display("mechanisms: mw_stall=%0d in_backpressure=%0d wr_backpressure=%0d pf_full=%0d flush=%0d",
             n_mw_stall, n_in_bp, n_wr_bp, n_pf_full, n_flush);
    $display("            disabled_cb=%0d zpad=%0d stride=%0d pool=%0d nopool=%0d chain=%0d af=%p",
             n_disabled, n_zpad, n_stride, n_pool, n_nopool, n_chain, n_af);
    if (n_mw_stall == 0) begin failures++; $display("FAIL never: Matrix Web stall"); end
    if (n_in_bp == 0)    begin failures++; $display("FAIL never: input back-pressure"); end
    if (n_wr_bp == 0)    begin failures++; $display("FAIL never: write back-pressure"); end
    if (n_pf_full == 0)  begin failures++; $display("FAIL never: pre-fetch buffer full"); end
    if (n_flush == 0)    begin failures++; $display("FAIL never: flush"); end
    if (n_disabled == 0) begin failures++; $display("FAIL never: disabled cell body"); end
    if (n_zpad == 0)     begin failures++; $display("FAIL never: zero padding"); end
    if (n_stride == 0)   begin failures++; $display("FAIL never: stride > 1"); end
    if (n_pool == 0 || n_nopool == 0) begin failures++; $display("FAIL never: pooling on/off"); end
    for (int s = 0; s < 4; s++) if (n_af[s] == 0) begin failures++; $display("FAIL never: activation %0d", s); end
    checks += 14;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
