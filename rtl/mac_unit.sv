// mac_unit: one MAC unit of a cell body.
//
// Holds the k*k weights of one depth channel in its own weight cache and
// multiplies them, element by element, with the k*k input window of that
// channel in k*k parallel multiplication units (the multiplication plane).
// The products are summed by a pipelined zero-padded adder tree (the
// addition plane). One window is accepted every cycle; the result appears
// LAT = 1 + clog2(k*k) cycles later (5 for k = 3). The pipeline has no
// enable: the surrounding logic never needs to stall it.
module mac_unit
  import cnn_pkg::*;
#(
  parameter int unsigned K = 3,
  localparam int unsigned NW    = K * K,
  localparam int unsigned IDX_W = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned LAT   = 1 + ((NW > 1) ? $clog2(NW) : 0)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight cache fill / flush
  input  logic                     flush,
  input  logic                     w_wr_en,
  input  logic [IDX_W-1:0]         w_wr_idx,
  input  qword_t                   w_wr_data,
  // window of this depth channel, row-major, element i*K+j
  input  logic [NW-1:0][DATA_W-1:0] window,
  output qword_t                   result
);
  logic [NW-1:0][DATA_W-1:0] weights;
  logic [NW-1:0][DATA_W-1:0] products;

  weight_cache #(.N_W(NW), .DATA_W(DATA_W)) u_wcache (
    .clk, .rst_n, .flush,
    .wr_en(w_wr_en), .wr_idx(w_wr_idx), .wr_data(w_wr_data),
    .weights
  );

  for (genvar i = 0; i < NW; i++) begin : g_mul
    mult_unit #(.DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_mul (
      .clk,
      .weight (weights[i]),
      .data   (window[i]),
      .product(products[i])
    );
  end

  adder_tree #(.N_IN(NW), .DATA_W(DATA_W)) u_plane (
    .clk, .in_vec(products), .sum(result)
  );
endmodule
