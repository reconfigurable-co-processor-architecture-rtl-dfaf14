// mult_unit: one Multiplication Unit of a MAC unit's multiplication plane.
//
// Multiplies a cached weight by a raw input word, both Q(16,15), and passes
// the product on to the addition plane. The full 64-bit product is shifted
// right by FRAC_W (arithmetic shift, i.e. truncation towards minus infinity)
// and the low DATA_W bits are kept; there is no saturation, as the number
// format is chosen so that layer values do not overflow. The product is
// registered: latency 1 cycle, one product per cycle. The rounding mode and
// the register are this design's choices.
module mult_unit #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned FRAC_W = 15
) (
  input  logic                     clk,
  input  logic signed [DATA_W-1:0] weight,
  input  logic signed [DATA_W-1:0] data,
  output logic signed [DATA_W-1:0] product
);
  logic signed [2*DATA_W-1:0] full;
  logic signed [2*DATA_W-1:0] shifted;

  always_comb begin
    full    = (2*DATA_W)'(weight) * (2*DATA_W)'(data);
    shifted = full >>> FRAC_W;
  end

  always_ff @(posedge clk) product <= shifted[DATA_W-1:0];
endmodule
