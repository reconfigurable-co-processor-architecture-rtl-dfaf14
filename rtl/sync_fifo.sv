// sync_fifo: synchronous first-in first-out buffer with valid/ready ports.
//
// Used twice: as the pre-fetch data buffer between the input DMA and the
// interconnect, and as the output data buffer between the interconnect and
// the output DMA. A word is written when push_valid && push_ready and read
// when pop_valid && pop_ready; pop_data shows the oldest word whenever
// pop_valid is high (first-word fall-through). A push into a full FIFO and
// a pop from an empty one are refused by the handshake. count and space
// give the occupancy and the free entries, which the DMAs and the Matrix
// Web use as credits. DEPTH must be a power of two. The depths are this
// design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  input  logic [WIDTH-1:0] push_data,
  output logic             push_ready,
  output logic             pop_valid,
  output logic [WIDTH-1:0] pop_data,
  input  logic             pop_ready,
  output logic [AW:0]      count,
  output logic [AW:0]      space
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  always_comb begin
    count      = wr_ptr - rd_ptr;
    space      = (AW+1)'(DEPTH) - count;
    push_ready = count != (AW+1)'(DEPTH);
    pop_valid  = count != '0;
    pop_data   = mem[rd_ptr[AW-1:0]];
    do_push    = push_valid && push_ready;
    do_pop     = pop_valid && pop_ready;
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr[AW-1:0]] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  a_pow2: assert property (@(posedge clk) (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
