// bias_adder: the Bias Adder (BA) of a cell body.
//
// Adds the D_IN MAC-unit results of one window (one per depth channel)
// through a pipelined adder tree, the same structure as the addition plane
// of a MAC unit, and then adds the filter bias from the bias cache in a
// final registered adder. Latency LAT = clog2(D_IN) + 1 cycles, one result
// per cycle; additions wrap at DATA_W bits.
module bias_adder
  import cnn_pkg::*;
#(
  parameter int unsigned D_IN = 1,
  localparam int unsigned LAT = ((D_IN > 1) ? $clog2(D_IN) : 0) + 1
) (
  input  logic                         clk,
  input  logic [D_IN-1:0][DATA_W-1:0]  mac_results,
  input  qword_t                       bias,
  output qword_t                       result
);
  qword_t depth_sum;

  adder_tree #(.N_IN(D_IN), .DATA_W(DATA_W)) u_tree (
    .clk, .in_vec(mac_results), .sum(depth_sum)
  );

  always_ff @(posedge clk) result <= depth_sum + bias;
endmodule
