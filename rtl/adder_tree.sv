// adder_tree: pipelined binary adder tree (the Addition Plane).
//
// Sums N_IN signed words. The inputs are padded with zeros up to the next
// power of two, as the architecture pads unused addition units with zero
// when the kernel size is not a power of two, and each tree level is
// followed by a register. Latency is LEVELS = clog2(N_IN) cycles (0 when
// N_IN is 1: the input is then passed through unchanged), one new sum per
// cycle. Additions wrap at DATA_W bits like the rest of the fixed-point
// datapath. Used for the MAC units and for the bias adder across depth.
module adder_tree #(
  parameter int unsigned N_IN   = 9,
  parameter int unsigned DATA_W = 32
) (
  input  logic                            clk,
  input  logic signed [N_IN-1:0][DATA_W-1:0] in_vec,
  output logic signed [DATA_W-1:0]        sum
);
  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0;
  localparam int unsigned LEAVES = 1 << LEVELS;

  // stage[l] holds LEAVES >> l partial sums
  logic [DATA_W-1:0] stage [LEVELS+1][LEAVES];

  always_comb begin
    for (int i = 0; i < LEAVES; i++)
      stage[0][i] = (i < N_IN) ? in_vec[i] : '0;
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    for (genvar i = 0; i < (LEAVES >> (l + 1)); i++) begin : g_add
      always_ff @(posedge clk)
        stage[l+1][i] <= stage[l][2*i] + stage[l][2*i+1];
    end
    // unused upper slots of this level are never read
    for (genvar i = (LEAVES >> (l + 1)); i < LEAVES; i++) begin : g_zero
      assign stage[l+1][i] = '0;
    end
  end

  assign sum = stage[LEVELS][0];
endmodule
