// data_cache: input feature cache and window generator of the Matrix Web.
//
// Input words arrive pixel by pixel in raster order, the depth channels of a
// pixel one after another (in_valid / in_ready handshake). Each channel has a
// ring of NROWS rows of MAX_W words (NROWS = the power of two >= k+1), so
// the k rows of the current output row are held while the next row is
// loaded. Once the rows of a window are present and issue_ok is high, one
// full k x k x D_IN window is read and registered per cycle (win_valid),
// walking the output map in raster order with the programmed stride.
// Zero padding of (k-1)/2 on every side is produced by the read logic
// (out-of-map positions read as zero), so padded inputs never have to be
// stored or transferred; channels at or above the programmed depth read as
// zero too. win_sof marks the first window of the map, win_eol the last of
// each output row. A layer starts with a one-cycle start pulse that also
// latches width (square maps), depth, stride and zpad; scan_done rises after
// the last window. in_ready falls while the ring holds rows still needed, so
// a stalled output (issue_ok low) stalls the input stream.
//
// The architecture gives the cache's role, stride and zero padding; the row
// ring, the square-map and channel-interleaved input order and the credit
// gating (issue_ok) are this design's choices.
module data_cache
  import cnn_pkg::*;
#(
  parameter int unsigned K     = 3,
  parameter int unsigned D_IN  = 1,
  parameter int unsigned MAX_W = 256,
  localparam int unsigned NW    = K * K,
  localparam int unsigned RW    = $clog2(K + 1),
  localparam int unsigned NROWS = 1 << RW,
  localparam int unsigned CW    = (MAX_W > 1) ? $clog2(MAX_W) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [DIM_W-1:0]                  cfg_width,
  input  logic [DIM_W-1:0]                  cfg_depth,
  input  logic [STR_W-1:0]                  cfg_stride,
  input  logic                              cfg_zpad,
  // input stream
  input  logic                              in_valid,
  input  qword_t                            in_data,
  output logic                              in_ready,
  // window stream
  input  logic                              issue_ok,
  output logic                              win_valid,
  output logic                              win_sof,
  output logic                              win_eol,
  output logic [D_IN-1:0][NW-1:0][DATA_W-1:0] window,
  output logic                              scan_done
);
  typedef logic signed [DIM_W+1:0] pos_t;

  qword_t cache [D_IN][NROWS][MAX_W];

  // latched layer configuration
  pos_t            w_q, pad_q, s_q;
  logic [DIM_W-1:0] dep_q;
  logic            active;

  // write side
  pos_t            wr_row, wr_col;
  logic [DIM_W-1:0] wr_ch;
  // read side
  pos_t            rs, cs;       // top-left corner of the window (may be -pad)
  logic            first_win;

  pos_t base_row, last_needed;
  logic rows_ready, fire, eol_now, last_row;

  always_comb begin
    base_row    = (rs < 0) ? pos_t'(0) : rs;
    last_needed = ((rs + pos_t'(K) - 1) > (w_q - 1)) ? (w_q - 1) : (rs + pos_t'(K) - 1);
    rows_ready  = wr_row > last_needed;
    in_ready    = active && (wr_row < w_q) && (scan_done || (wr_row < base_row + pos_t'(NROWS)));
    fire        = active && !scan_done && rows_ready && issue_ok;
    eol_now     = (cs + s_q + pos_t'(K) - 1) > (w_q - 1 + pad_q);
    last_row    = (rs + s_q + pos_t'(K) - 1) > (w_q - 1 + pad_q);
  end

  // cache write
  always_ff @(posedge clk) begin
    if (in_valid && in_ready && (32'(wr_ch) < D_IN))
      cache[wr_ch[$clog2(D_IN+1)-1:0]][wr_row[RW-1:0]][wr_col[CW-1:0]] <= in_data;
  end

  // window read
  always_ff @(posedge clk) begin
    if (fire) begin
      for (int d = 0; d < D_IN; d++)
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            pos_t r, c;
            r = rs + pos_t'(i);
            c = cs + pos_t'(j);
            if (r < 0 || r >= w_q || c < 0 || c >= w_q || d >= 32'(dep_q))
              window[d][i*K+j] <= '0;
            else
              window[d][i*K+j] <= cache[d][r[RW-1:0]][c[CW-1:0]];
          end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      scan_done <= 1'b0;
      w_q <= '0; pad_q <= '0; s_q <= pos_t'(1); dep_q <= '0;
      wr_row <= '0; wr_col <= '0; wr_ch <= '0;
      rs <= '0; cs <= '0; first_win <= 1'b0;
      win_valid <= 1'b0; win_sof <= 1'b0; win_eol <= 1'b0;
    end else if (start) begin
      active    <= 1'b1;
      scan_done <= 1'b0;
      w_q   <= pos_t'(cfg_width);
      pad_q <= cfg_zpad ? pos_t'((K - 1) / 2) : pos_t'(0);
      s_q   <= (cfg_stride == '0) ? pos_t'(1) : pos_t'(cfg_stride);
      dep_q <= (cfg_depth == '0) ? DIM_W'(1) : cfg_depth;
      wr_row <= '0; wr_col <= '0; wr_ch <= '0;
      rs <= cfg_zpad ? -pos_t'((K - 1) / 2) : pos_t'(0);
      cs <= cfg_zpad ? -pos_t'((K - 1) / 2) : pos_t'(0);
      first_win <= 1'b1;
      win_valid <= 1'b0;
    end else begin
      // write pointer: channel, then column, then row
      if (in_valid && in_ready) begin
        if (wr_ch + DIM_W'(1) >= dep_q) begin
          wr_ch <= '0;
          if (wr_col + 1 >= w_q) begin
            wr_col <= '0;
            wr_row <= wr_row + 1;
          end else
            wr_col <= wr_col + 1;
        end else
          wr_ch <= wr_ch + DIM_W'(1);
      end
      // read scan
      win_valid <= fire;
      if (fire) begin
        win_sof   <= first_win;
        win_eol   <= eol_now;
        first_win <= 1'b0;
        if (eol_now) begin
          cs <= -pad_q;
          if (last_row) scan_done <= 1'b1;
          else          rs <= rs + s_q;
        end else
          cs <= cs + s_q;
      end
      if (scan_done && !(in_valid && in_ready) && wr_row >= w_q)
        active <= 1'b0;
    end
  end
endmodule
