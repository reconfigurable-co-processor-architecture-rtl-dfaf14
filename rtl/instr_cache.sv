// instr_cache: the instruction cache of the co-processor.
//
// A single memory of DEPTH instruction words, kept apart from the data path
// (Harvard organisation). The host writes the program through the write
// port (wr_en, wr_addr, wr_data) before starting the co-processor; the
// process controller reads it through a synchronous read port: rd_data
// holds the word at rd_addr one cycle after rd_en, so one instruction can be
// fetched per cycle. The size and the port timing are this design's choice.
module instr_cache
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [INSTR_W-1:0] wr_data,
  input  logic               rd_en,
  input  logic [AW-1:0]      rd_addr,
  output logic [INSTR_W-1:0] rd_data
);
  logic [INSTR_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
