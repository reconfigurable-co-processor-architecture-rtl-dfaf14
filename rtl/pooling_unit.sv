// pooling_unit: pooling cache and max-pooling layer of a cell body.
//
// Takes the activated outputs of one filter in raster order (in_sof marks
// the first value of a feature map, in_eol the last value of each row) and
// forms the maximum over non-overlapping conf_p x conf_p windows. conf_p
// is the pooling width Conf_p; a width of 1 (or 0) passes every value, the
// same as switching pooling off. The pooling cache keeps one running
// maximum per pooled column, so one row of the output map is pooled while
// the next rows arrive. A pooled value is emitted, registered, one cycle
// after the last value of its window. Windows cut off at the right or
// bottom edge are dropped. Max pooling follows the paper; the pooling
// stride (equal to the width), the edge handling and the row-wide cache are
// this design's choices.
module pooling_unit
  import cnn_pkg::*;
#(
  parameter int unsigned P_MAX  = 3,
  parameter int unsigned MAX_OW = 256,
  localparam int unsigned PW    = $clog2(P_MAX + 1),
  localparam int unsigned XW    = $clog2(MAX_OW + 1),
  localparam int unsigned IW    = (MAX_OW > 1) ? $clog2(MAX_OW) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [PW-1:0]  conf_p,
  input  logic           in_valid,
  input  logic           in_sof,
  input  logic           in_eol,
  input  qword_t         in_data,
  output logic           out_valid,
  output qword_t         out_data
);
  qword_t          cache [MAX_OW];   // pooling cache: running maxima
  logic [PW-1:0]   cx, cy;           // position inside the pooling window
  logic [XW-1:0]   px;               // pooled column
  logic [PW-1:0]   p_eff;

  logic [PW-1:0]   cur_cx, cur_cy;
  logic [XW-1:0]   cur_px;
  logic            first, last;
  qword_t          m;

  always_comb begin
    p_eff  = (conf_p == '0) ? PW'(1) : conf_p;
    cur_cx = in_sof ? '0 : cx;
    cur_cy = in_sof ? '0 : cy;
    cur_px = in_sof ? '0 : px;
    first  = (cur_cx == '0) && (cur_cy == '0);
    last   = (cur_cx == p_eff - PW'(1)) && (cur_cy == p_eff - PW'(1));
    if (first || (32'(cur_px) >= MAX_OW))
      m = in_data;
    else
      m = (cache[cur_px[IW-1:0]] > in_data) ? cache[cur_px[IW-1:0]] : in_data;
  end

  always_ff @(posedge clk) begin
    if (in_valid && (32'(cur_px) < MAX_OW))
      cache[cur_px[IW-1:0]] <= m;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx        <= '0;
      cy        <= '0;
      px        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        out_data <= m;
        if (in_eol) begin
          cx <= '0;
          px <= '0;
          cy <= (cur_cy == p_eff - PW'(1)) ? '0 : cur_cy + PW'(1);
        end else if (cur_cx == p_eff - PW'(1)) begin
          cx <= '0;
          px <= cur_px + XW'(1);
          cy <= cur_cy;
        end else begin
          cx <= cur_cx + PW'(1);
          px <= cur_px;
          cy <= cur_cy;
        end
      end
    end
  end
endmodule
