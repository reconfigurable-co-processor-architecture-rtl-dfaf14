// input_dma: the input DMA engine.
//
// Moves a block of words from main memory into the pre-fetch data buffer in
// one transfer, so that a whole weight set, a bias or a whole input feature
// map costs the process controller a single command. A job (dma_job_t:
// start address, length in words, destination tag) is taken when job_valid
// and job_ready are both high; job_ready is high while the engine is idle.
// The engine then issues one read request per cycle (rd_req_valid/
// rd_req_ready) with consecutive addresses. Read data returns in order on
// rd_rsp_valid/rd_rsp_data, any number of cycles later, and is pushed into
// the buffer tagged with the destination and its index within the job. A
// request is issued only while the number of outstanding reads is below
// the buffer's free space (buf_space), so every response finds room and the
// response bus needs no back-pressure. The memory bus shape is this design's
// choice; the architecture says only that DMAs move the data in bulk.
module input_dma
  import cnn_pkg::*;
#(
  parameter int unsigned SPACE_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               job_valid,
  input  dma_job_t           job,
  output logic               job_ready,
  // memory read port
  output logic               rd_req_valid,
  output logic [ADDR_W-1:0]  rd_req_addr,
  input  logic               rd_req_ready,
  input  logic               rd_rsp_valid,
  input  qword_t             rd_rsp_data,
  // to the pre-fetch buffer
  input  logic [SPACE_W-1:0] buf_space,
  output logic               push_valid,
  output lane_word_t         push_word
);
  logic        busy;
  dma_job_t    cur;
  logic [23:0] n_req, n_rsp;
  logic [SPACE_W:0] outstanding;
  logic        req_fire;

  always_comb begin
    job_ready    = !busy;
    rd_req_valid = busy && (n_req < cur.len) && (outstanding < (SPACE_W+1)'(buf_space));
    rd_req_addr  = cur.addr + ADDR_W'(n_req);
    req_fire     = rd_req_valid && rd_req_ready;
    push_valid   = busy && rd_rsp_valid;
    push_word.dest = cur.dest;
    push_word.idx  = n_rsp[15:0];
    push_word.data = rd_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      cur         <= '0;
      n_req       <= '0;
      n_rsp       <= '0;
      outstanding <= '0;
    end else if (!busy) begin
      if (job_valid && job.len != '0) begin
        busy  <= 1'b1;
        cur   <= job;
        n_req <= '0;
        n_rsp <= '0;
        outstanding <= '0;
      end
    end else begin
      if (req_fire) n_req <= n_req + 24'd1;
      if (rd_rsp_valid) n_rsp <= n_rsp + 24'd1;
      outstanding <= outstanding + (SPACE_W+1)'(req_fire) - (SPACE_W+1)'(rd_rsp_valid);
      if (rd_rsp_valid && (n_rsp + 24'd1 == cur.len)) busy <= 1'b0;
    end
  end
endmodule
