// cnn_coprocessor: top level of the reconfigurable CNN co-processor.
//
// A host loads a program into the instruction cache, places weights, biases
// and input feature maps in main memory and pulses start. The process
// controller then runs the program layer by layer: the input DMA brings
// weights and biases into the caches of the cell bodies, then streams the
// input map through the pre-fetch buffer and the interconnect into the data
// cache of the Matrix Web. N_CB cell bodies convolve the same k x k x D_IN
// window every cycle, each with its own filter, add their bias, apply the
// activation and max-pool; the interconnect gathers their values into the
// output data buffer and the output DMA writes each cell body's map to its
// own output address. done rises after a STOP instruction.
//
// Ports: the instruction-cache write port for the host; layer-static
// sel_af (activation) and conf_p (pooling width, 1 = no pooling); a main
// memory read port (request valid/ready, in-order response valid) and a
// write port (valid/ready). These memory ports stand where the PCIe DMA link
// to the host's memory would attach. Defaults are the evaluated
// configuration: 16 cell bodies, 3x3 kernels, input depth 1, 32-bit
// Q(16,15) numbers. Buffer depths, MAX_W, P_MAX and IC_DEPTH are this
// design's choices.
module cnn_coprocessor
  import cnn_pkg::*;
#(
  parameter int unsigned N_CB     = 16,
  parameter int unsigned K        = 3,
  parameter int unsigned D_IN     = 1,
  parameter int unsigned P_MAX    = 3,
  parameter int unsigned MAX_W    = 256,
  parameter int unsigned IC_DEPTH = 2048,
  parameter int unsigned PF_DEPTH = 16,
  parameter int unsigned OB_DEPTH = 32,
  localparam int unsigned IAW     = (IC_DEPTH > 1) ? $clog2(IC_DEPTH) : 1,
  localparam int unsigned PW      = $clog2(P_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host control
  input  logic               ic_wr_en,
  input  logic [IAW-1:0]     ic_wr_addr,
  input  logic [INSTR_W-1:0] ic_wr_data,
  input  logic               start,
  output logic               done,
  input  af_sel_e            sel_af,
  input  logic [PW-1:0]      conf_p,
  // main memory read port
  output logic               rd_req_valid,
  output logic [ADDR_W-1:0]  rd_req_addr,
  input  logic               rd_req_ready,
  input  logic               rd_rsp_valid,
  input  qword_t             rd_rsp_data,
  // main memory write port
  output logic               wr_valid,
  output logic [ADDR_W-1:0]  wr_addr,
  output qword_t             wr_data,
  input  logic               wr_ready
);
  localparam int unsigned PF_W  = $bits(lane_word_t);
  localparam int unsigned OB_W  = N_CB + N_CB * DATA_W;
  localparam int unsigned PFA   = $clog2(PF_DEPTH);
  localparam int unsigned OBA   = $clog2(OB_DEPTH);

  // instruction path
  logic               ic_rd_en;
  logic [IAW-1:0]     ic_rd_addr;
  logic [INSTR_W-1:0] ic_rd_data;
  // controller outputs
  logic               job_valid, job_ready;
  dma_job_t           job;
  logic               mw_start, cfg_zpad, odma_load;
  logic [DIM_W-1:0]   cfg_width, cfg_depth;
  logic [STR_W-1:0]   cfg_stride;
  logic [N_CB-1:0]    cb_enable, cb_flush;
  logic [N_CB-1:0][ADDR_W-1:0] out_addr;
  // pre-fetch buffer
  logic               pf_push_valid, pf_push_ready, pf_pop_valid, pf_pop_ready;
  lane_word_t         pf_push_word, pf_pop_word;
  logic [PFA:0]       pf_count, pf_space;
  // interconnect <-> matrix web
  logic               dc_valid, dc_ready;
  qword_t             dc_data;
  logic               w_wr_en, b_wr_en;
  logic [CBID_W-1:0]  w_wr_cbu, b_wr_cbu;
  logic [DIM_W-1:0]   w_wr_ch;
  logic [15:0]        w_wr_idx;
  qword_t             wb_wr_data;
  logic [N_CB-1:0]    cb_valid;
  logic [N_CB-1:0][DATA_W-1:0] cb_data;
  logic               mw_busy;
  // output buffer
  logic               ob_push_valid, ob_push_ready, ob_pop_valid, ob_pop;
  logic [N_CB-1:0]    ob_push_mask, ob_pop_mask;
  logic [N_CB-1:0][DATA_W-1:0] ob_push_data, ob_pop_data;
  logic [OBA:0]       ob_count, ob_space;
  logic               odma_idle, datapath_idle;

  instr_cache #(.DEPTH(IC_DEPTH)) u_icache (
    .clk, .wr_en(ic_wr_en), .wr_addr(ic_wr_addr), .wr_data(ic_wr_data),
    .rd_en(ic_rd_en), .rd_addr(ic_rd_addr), .rd_data(ic_rd_data)
  );

  assign datapath_idle = !pf_pop_valid && !mw_busy && !ob_pop_valid && !ob_push_valid
                         && odma_idle && !w_wr_en && !b_wr_en;

  process_controller #(.N_CB(N_CB), .K(K), .D_IN(D_IN), .IC_DEPTH(IC_DEPTH)) u_pc (
    .clk, .rst_n, .start, .done,
    .ic_rd_en, .ic_rd_addr, .ic_rd_data,
    .dma_job_valid(job_valid), .dma_job(job), .dma_job_ready(job_ready),
    .mw_start, .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad,
    .cb_enable, .cb_flush, .odma_load, .out_addr, .datapath_idle
  );

  input_dma #(.SPACE_W(PFA + 1)) u_idma (
    .clk, .rst_n,
    .job_valid, .job, .job_ready,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data,
    .buf_space(pf_space), .push_valid(pf_push_valid), .push_word(pf_push_word)
  );

  sync_fifo #(.WIDTH(PF_W), .DEPTH(PF_DEPTH)) u_prefetch (
    .clk, .rst_n,
    .push_valid(pf_push_valid), .push_data(pf_push_word), .push_ready(pf_push_ready),
    .pop_valid(pf_pop_valid), .pop_data(pf_pop_word), .pop_ready(pf_pop_ready),
    .count(pf_count), .space(pf_space)
  );

  lane_interconnect #(.N_CB(N_CB)) u_ic (
    .clk, .rst_n,
    .pf_valid(pf_pop_valid), .pf_word(pf_pop_word), .pf_ready(pf_pop_ready),
    .dc_valid, .dc_data, .dc_ready,
    .w_wr_en, .w_wr_cbu, .w_wr_ch, .w_wr_idx, .b_wr_en, .b_wr_cbu, .wb_wr_data,
    .cb_enable, .cb_valid, .cb_data,
    .ob_valid(ob_push_valid), .ob_mask(ob_push_mask), .ob_data(ob_push_data)
  );

  matrix_web #(.N_CB(N_CB), .K(K), .D_IN(D_IN), .P_MAX(P_MAX), .MAX_W(MAX_W)) u_mw (
    .clk, .rst_n,
    .start(mw_start), .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad,
    .sel_af, .conf_p, .cb_enable, .cb_flush,
    .w_wr_en, .w_wr_cbu, .w_wr_ch, .w_wr_idx, .b_wr_en, .b_wr_cbu, .wb_wr_data,
    .in_valid(dc_valid), .in_data(dc_data), .in_ready(dc_ready),
    .out_space(16'(ob_space)), .cb_valid, .cb_data, .busy(mw_busy)
  );

  sync_fifo #(.WIDTH(OB_W), .DEPTH(OB_DEPTH)) u_outbuf (
    .clk, .rst_n,
    .push_valid(ob_push_valid), .push_data({ob_push_mask, ob_push_data}),
    .push_ready(ob_push_ready),
    .pop_valid(ob_pop_valid), .pop_data({ob_pop_mask, ob_pop_data}), .pop_ready(ob_pop),
    .count(ob_count), .space(ob_space)
  );

  output_dma #(.N_CB(N_CB)) u_odma (
    .clk, .rst_n, .load_addr(odma_load), .base_addr(out_addr),
    .ob_valid(ob_pop_valid), .ob_mask(ob_pop_mask), .ob_data(ob_pop_data), .ob_pop,
    .wr_valid, .wr_addr, .wr_data, .wr_ready, .idle(odma_idle)
  );

  a_no_pf_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      pf_push_valid |-> pf_push_ready)
    else $error("cnn_coprocessor: pre-fetch buffer overflow");
  a_no_ob_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      ob_push_valid |-> ob_push_ready)
    else $error("cnn_coprocessor: output buffer overflow");
endmodule
