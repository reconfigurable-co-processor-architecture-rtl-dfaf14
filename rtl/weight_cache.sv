// weight_cache: the dedicated weight cache of one MAC unit.
//
// Holds the N_W = k*k weights of one depth channel of one filter. It is
// filled one word per cycle before input data is streamed (wr_en, wr_idx,
// wr_data) and read in parallel by the k*k multiplication units. flush
// clears every entry, as the CONFIG field of a MatrixWeb control
// instruction can flush the cached weights; reset also clears it. Writes
// with an index of N_W or more are ignored. Writes and flushes take effect
// at the next clock edge; flush wins over a write in the same cycle.
module weight_cache #(
  parameter int unsigned N_W    = 9,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned IDX_W = (N_W > 1) ? $clog2(N_W) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     wr_en,
  input  logic [IDX_W-1:0]         wr_idx,
  input  logic [DATA_W-1:0]        wr_data,
  output logic [N_W-1:0][DATA_W-1:0] weights
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      weights <= '0;
    else if (flush)
      weights <= '0;
    else if (wr_en && (32'(wr_idx) < N_W))
      weights[wr_idx] <= wr_data;
  end
endmodule
