// process_controller: the Process Controller (PC) of the co-processor.
//
// Fetches the program from the instruction cache and executes it, one
// convolution layer at a time. Instruction execution is mostly memory
// addressing: the controller itself moves no data, it only tells the DMAs
// where to read and write.
//
// A layer's program is a group of instructions, read one per cycle:
//   - one MatrixWeb Control instruction per cell body used (CONFIG = CONV),
//     carrying feature width, depth, stride and zero-pad enable;
//   - per cell body, D Filter Memory Control instructions giving the
//     address of each depth channel's weights, one for its bias and one for
//     its output map;
//   - one Input Memory Control instruction with the input map's address,
//     which closes the group.
// A layer with gamma cell bodies and depth D thus has
// C = gamma + (D + 2) * gamma + 1 instructions, fetched in C cycles (plus one
// cycle of read latency). A MatrixWeb instruction with CONFIG = FLUSH clears
// a cell body's weight and bias caches; one with CONFIG = STOP ends the
// program (done rises).
//
// Execution of a group: for each enabled cell body, one input-DMA job per
// depth channel fills its weight caches and one fills its bias cache; after
// the loads have drained, the Matrix Web is started, the output DMA is given
// the output addresses and one DMA job streams the whole input map. When
// the DMAs, buffers and Matrix Web are all idle the next group is fetched.
// The grouping, the order of the loads and the CONFIG codes are this
// design's reading of the instruction set (see cnn_pkg for the bit layout).
module process_controller
  import cnn_pkg::*;
#(
  parameter int unsigned N_CB     = 16,
  parameter int unsigned K        = 3,
  parameter int unsigned D_IN     = 1,
  parameter int unsigned IC_DEPTH = 2048,
  localparam int unsigned IAW     = (IC_DEPTH > 1) ? $clog2(IC_DEPTH) : 1,
  localparam int unsigned CBW     = (N_CB > 1) ? $clog2(N_CB) : 1,
  localparam int unsigned DW      = (D_IN > 1) ? $clog2(D_IN) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         done,
  // instruction cache read port
  output logic                         ic_rd_en,
  output logic [IAW-1:0]               ic_rd_addr,
  input  logic [INSTR_W-1:0]           ic_rd_data,
  // input DMA command
  output logic                         dma_job_valid,
  output dma_job_t                     dma_job,
  input  logic                         dma_job_ready,
  // Matrix Web configuration
  output logic                         mw_start,
  output logic [DIM_W-1:0]             cfg_width,
  output logic [DIM_W-1:0]             cfg_depth,
  output logic [STR_W-1:0]             cfg_stride,
  output logic                         cfg_zpad,
  output logic [N_CB-1:0]              cb_enable,
  output logic [N_CB-1:0]              cb_flush,
  // output DMA addresses
  output logic                         odma_load,
  output logic [N_CB-1:0][ADDR_W-1:0]  out_addr,
  // idle indications of the data path
  input  logic                         datapath_idle
);
  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_LOAD, S_WAIT_LOAD, S_STREAM, S_WAIT_DONE, S_HALT
  } state_e;

  state_e state;
  logic [IAW-1:0] pc;
  logic           dec_valid;          // ic_rd_data holds a fetched word
  logic [ADDR_W-1:0] w_addr [N_CB][D_IN];
  logic [ADDR_W-1:0] b_addr [N_CB];
  logic [ADDR_W-1:0] in_addr;
  // load sequencer
  logic [CBW-1:0] ld_cb;
  logic [DIM_W-1:0] ld_ch;            // == depth means: bias
  logic [2:0]     settle;

  logic [INSTR_W-1:0] ins;
  logic group_end, prog_end;
  logic [CBW-1:0] d_cb;               // decoded cell body id, cut to range
  logic [DW-1:0]  d_ch;               // decoded depth channel, cut to range

  always_comb begin
    ins       = ic_rd_data;
    group_end = dec_valid && (i_type(ins) == T_INPUT_MEM);
    prog_end  = dec_valid && (i_type(ins) == T_MW_CTRL) && (mw_cfg_e'(i_cfg(ins)) == CFG_STOP);
    ic_rd_en  = (state == S_FETCH) && !group_end && !prog_end;
    ic_rd_addr = pc;
    d_cb      = i_cbu(ins)[CBW-1:0];
    d_ch      = i_fch(ins)[DW-1:0];
  end

  // load sequencer outputs
  always_comb begin
    dma_job       = '0;
    dma_job_valid = 1'b0;
    if (state == S_LOAD && cb_enable[ld_cb]) begin
      dma_job_valid = 1'b1;
      if (ld_ch < cfg_depth) begin
        dma_job.addr      = w_addr[ld_cb][ld_ch[DW-1:0]];
        dma_job.len       = 24'(K * K);
        dma_job.dest.kind = DST_WEIGHT;
        dma_job.dest.ch   = ld_ch;
      end else begin
        dma_job.addr      = b_addr[ld_cb];
        dma_job.len       = 24'd1;
        dma_job.dest.kind = DST_BIAS;
      end
      dma_job.dest.cbu = CBID_W'(ld_cb);
    end else if (state == S_STREAM) begin
      dma_job_valid     = 1'b1;
      dma_job.addr      = in_addr;
      dma_job.len       = 24'(cfg_width) * 24'(cfg_width) * 24'(cfg_depth);
      dma_job.dest.kind = DST_DATA;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc <= '0; dec_valid <= 1'b0;
      cfg_width <= '0; cfg_depth <= '0; cfg_stride <= '0; cfg_zpad <= 1'b0;
      cb_enable <= '0; cb_flush <= '0;
      out_addr <= '0; in_addr <= '0;
      ld_cb <= '0; ld_ch <= '0; settle <= '0;
      mw_start <= 1'b0; odma_load <= 1'b0; done <= 1'b0;
      for (int n = 0; n < N_CB; n++) begin
        b_addr[n] <= '0;
        for (int d = 0; d < D_IN; d++) w_addr[n][d] <= '0;
      end
    end else begin
      mw_start  <= 1'b0;
      odma_load <= 1'b0;
      cb_flush  <= '0;
      dec_valid <= ic_rd_en;
      if (ic_rd_en) pc <= pc + IAW'(1);

      // decode
      if (dec_valid && state == S_FETCH) begin
        unique case (i_type(ins))
          T_MW_CTRL: begin
            if (32'(i_cbu(ins)) < N_CB) begin
              unique case (mw_cfg_e'(i_cfg(ins)))
                CFG_CONV: begin
                  cb_enable[d_cb] <= 1'b1;
                  cfg_width  <= i_width(ins);
                  cfg_depth  <= i_depth(ins);
                  cfg_stride <= i_stride(ins);
                  cfg_zpad   <= i_zpad(ins);
                end
                CFG_FLUSH: begin
                  cb_enable[d_cb] <= 1'b0;
                  cb_flush[d_cb]  <= 1'b1;
                end
                default: ;
              endcase
            end
          end
          T_FILTER_MEM: begin
            if (32'(i_cbu(ins)) < N_CB) begin
              unique case (i_fkind(ins))
                FK_WEIGHTS: if (32'(i_fch(ins)) < D_IN)
                              w_addr[d_cb][d_ch] <= i_addr(ins);
                FK_BIAS:    b_addr[d_cb] <= i_addr(ins);
                FK_OUTPUT:  out_addr[d_cb] <= i_addr(ins);
                default: ;
              endcase
            end
          end
          T_INPUT_MEM: in_addr <= i_addr(ins);
          default: ;
        endcase
      end

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FETCH;
          pc <= '0;
          done <= 1'b0;
          cb_enable <= '0;
        end
        S_FETCH: begin
          if (prog_end) begin
            state <= S_HALT;
          end else if (group_end) begin
            state <= S_LOAD;
            ld_cb <= '0;
            ld_ch <= '0;
          end
        end
        S_LOAD: begin
          // walk cell bodies; per cell body: channels 0..depth-1, then bias
          if (!cb_enable[ld_cb] || dma_job_ready) begin
            if (cb_enable[ld_cb] && ld_ch < cfg_depth)
              ld_ch <= ld_ch + DIM_W'(1);
            else begin
              ld_ch <= '0;
              if (32'(ld_cb) == N_CB - 1) begin
                state  <= S_WAIT_LOAD;
                settle <= 3'd4;
              end else
                ld_cb <= ld_cb + CBW'(1);
            end
          end
        end
        S_WAIT_LOAD: begin
          // the last job must be accepted and its words written into the caches
          if (!dma_job_ready || !datapath_idle) settle <= 3'd4;
          else if (settle != '0) settle <= settle - 3'd1;
          else begin
            state     <= S_STREAM;
            mw_start  <= 1'b1;
            odma_load <= 1'b1;
          end
        end
        S_STREAM: if (dma_job_ready) state <= S_WAIT_DONE;
        S_WAIT_DONE: begin
          if (!dma_job_ready || !datapath_idle) settle <= 3'd4;
          else if (settle != '0) settle <= settle - 3'd1;
          else begin
            state     <= S_FETCH;
            cb_enable <= '0;
          end
        end
        S_HALT: begin
          done <= 1'b1;
          if (start) begin
            state <= S_FETCH;
            pc <= '0;
            done <= 1'b0;
            cb_enable <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
