// matrix_web: the Matrix Web, the arithmetic fabric of the co-processor.
//
// Holds the data cache and N_CB cell bodies. Every cycle the data cache may
// issue one k x k x D_IN window, which the crossbar hands to all cell bodies
// at once: each enabled cell body applies its own filter to the same window
// in the same cycle, so the window is read once for all N_CB output maps.
// Cell bodies not enabled for the layer (cb_enable) see no window and stay
// idle; this is how the number of parallel cell bodies is chosen per layer.
// Weight and bias writes are decoded here by cell body id; flush clears the
// caches of the cell bodies selected by cb_flush.
//
// Flow control: the pipeline behind the data cache never stalls. A window is
// issued only when the output buffer has more than PIPE_DEPTH free entries
// (out_space), so every window in flight has a place to land. busy is high
// from start until the last window has left the pipeline.
// Timing: a window issued at cycle t gives pooled values at t + 1 + OUT_LAT
// of the cell body (9 for k = 3, D_IN = 1).
module matrix_web
  import cnn_pkg::*;
#(
  parameter int unsigned N_CB   = 16,
  parameter int unsigned K      = 3,
  parameter int unsigned D_IN   = 1,
  parameter int unsigned P_MAX  = 3,
  parameter int unsigned MAX_W  = 256,
  localparam int unsigned NW      = K * K,
  localparam int unsigned IDX_W   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned CH_W    = (D_IN > 1) ? $clog2(D_IN) : 1,
  localparam int unsigned PW      = $clog2(P_MAX + 1),
  localparam int unsigned OUT_LAT = 1 + ((NW > 1) ? $clog2(NW) : 0)
                                  + ((D_IN > 1) ? $clog2(D_IN) : 0) + 1 + 1 + 1,
  localparam int unsigned PIPE_DEPTH = OUT_LAT + 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer configuration
  input  logic                          start,
  input  logic [DIM_W-1:0]              cfg_width,
  input  logic [DIM_W-1:0]              cfg_depth,
  input  logic [STR_W-1:0]              cfg_stride,
  input  logic                          cfg_zpad,
  input  af_sel_e                       sel_af,
  input  logic [PW-1:0]                 conf_p,
  input  logic [N_CB-1:0]               cb_enable,
  input  logic [N_CB-1:0]               cb_flush,
  // cache fill
  input  logic                          w_wr_en,
  input  logic [CBID_W-1:0]             w_wr_cbu,
  input  logic [DIM_W-1:0]              w_wr_ch,
  input  logic [15:0]                   w_wr_idx,
  input  logic                          b_wr_en,
  input  logic [CBID_W-1:0]             b_wr_cbu,
  input  qword_t                        wb_wr_data,
  // input feature stream
  input  logic                          in_valid,
  input  qword_t                        in_data,
  output logic                          in_ready,
  // output side
  input  logic [15:0]                   out_space,
  output logic [N_CB-1:0]               cb_valid,
  output logic [N_CB-1:0][DATA_W-1:0]   cb_data,
  output logic                          busy
);
  logic win_valid, win_sof, win_eol, scan_done, issue_ok;
  logic [D_IN-1:0][NW-1:0][DATA_W-1:0] window;
  logic [PIPE_DEPTH-1:0] inflight;
  logic running;

  assign issue_ok = 32'(out_space) > PIPE_DEPTH;

  data_cache #(.K(K), .D_IN(D_IN), .MAX_W(MAX_W)) u_dcache (
    .clk, .rst_n, .start, .cfg_width, .cfg_depth, .cfg_stride, .cfg_zpad,
    .in_valid, .in_data, .in_ready,
    .issue_ok, .win_valid, .win_sof, .win_eol, .window, .scan_done
  );

  // crossbar: the same window to every enabled cell body
  for (genvar n = 0; n < N_CB; n++) begin : g_cb
    cell_body #(.K(K), .D_IN(D_IN), .P_MAX(P_MAX), .MAX_OW(MAX_W)) u_cb (
      .clk, .rst_n,
      .sel_af, .conf_p,
      .flush     (cb_flush[n]),
      .w_wr_en   (w_wr_en && (32'(w_wr_cbu) == n)),
      .w_wr_ch   (w_wr_ch[CH_W-1:0]),
      .w_wr_idx  (w_wr_idx[IDX_W-1:0]),
      .w_wr_data (wb_wr_data),
      .b_wr_en   (b_wr_en && (32'(b_wr_cbu) == n)),
      .b_wr_data (wb_wr_data),
      .win_valid (win_valid && cb_enable[n]),
      .win_sof, .win_eol, .window,
      .out_valid (cb_valid[n]),
      .out_data  (cb_data[n])
    );
  end

  // windows in flight, for busy
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight <= '0;
      running  <= 1'b0;
    end else begin
      inflight <= {inflight[PIPE_DEPTH-2:0], win_valid};
      if (start)          running <= 1'b1;
      else if (scan_done && inflight == '0 && !win_valid)
                          running <= 1'b0;
    end
  end
  assign busy = running || start;

  a_depth_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (32'(cfg_depth) <= D_IN))
    else $error("matrix_web: layer depth exceeds D_IN");
endmodule
