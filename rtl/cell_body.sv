// cell_body: one Cell Body Unit (CBU), the processing element of one filter.
//
// A CBU computes one output feature map: for every k x k x D_IN input window
// it forms sum(weight * input) over the window, adds the filter bias, applies
// the selected activation and max-pools the result:
//
//   window -> D_IN MAC units (each k*k multipliers + addition plane, with its
//   own weight cache) -> bias adder (depth adder tree + bias cache) ->
//   activation function -> pooling cache + pooling -> out
//
// Interface: a window arrives with win_valid; win_sof / win_eol mark the
// first window of the map and the last window of each output row and travel
// with it. Weights are written through w_wr_* (depth channel, element index),
// the bias through b_wr_*. flush clears the weight and bias caches. sel_af
// and conf_p are layer-static. Timing: one window per cycle, no stall; a
// result leaves the activation LAT cycles after its window, and the pooled
// value one cycle later (LAT = 1 + clog2(k*k) + clog2(D_IN) + 1 + 1, i.e. 7
// for k = 3, D_IN = 1; OUT_LAT = LAT + 1). The structure follows the
// architecture's cell body; the latencies are this design's.
module cell_body
  import cnn_pkg::*;
#(
  parameter int unsigned K      = 3,
  parameter int unsigned D_IN   = 1,
  parameter int unsigned P_MAX  = 3,
  parameter int unsigned MAX_OW = 256,
  localparam int unsigned NW      = K * K,
  localparam int unsigned IDX_W   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned CH_W    = (D_IN > 1) ? $clog2(D_IN) : 1,
  localparam int unsigned PW      = $clog2(P_MAX + 1),
  localparam int unsigned MAC_LAT = 1 + ((NW > 1) ? $clog2(NW) : 0),
  localparam int unsigned BA_LAT  = ((D_IN > 1) ? $clog2(D_IN) : 0) + 1,
  localparam int unsigned LAT     = MAC_LAT + BA_LAT + 1,
  localparam int unsigned OUT_LAT = LAT + 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // configuration
  input  af_sel_e                           sel_af,
  input  logic [PW-1:0]                     conf_p,
  input  logic                              flush,
  // cache fill
  input  logic                              w_wr_en,
  input  logic [CH_W-1:0]                   w_wr_ch,
  input  logic [IDX_W-1:0]                  w_wr_idx,
  input  qword_t                            w_wr_data,
  input  logic                              b_wr_en,
  input  qword_t                            b_wr_data,
  // window stream
  input  logic                              win_valid,
  input  logic                              win_sof,
  input  logic                              win_eol,
  input  logic [D_IN-1:0][NW-1:0][DATA_W-1:0] window,
  // pooled output
  output logic                              out_valid,
  output qword_t                            out_data
);
  logic [D_IN-1:0][DATA_W-1:0] mac_res;
  qword_t bias_q, ba_res, af_res;

  // bias cache
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       bias_q <= '0;
    else if (flush)   bias_q <= '0;
    else if (b_wr_en) bias_q <= b_wr_data;
  end

  for (genvar d = 0; d < D_IN; d++) begin : g_mac
    mac_unit #(.K(K)) u_mac (
      .clk, .rst_n, .flush,
      .w_wr_en  (w_wr_en && (32'(w_wr_ch) == d)),
      .w_wr_idx,
      .w_wr_data,
      .window   (window[d]),
      .result   (mac_res[d])
    );
  end

  bias_adder #(.D_IN(D_IN)) u_ba (
    .clk, .mac_results(mac_res), .bias(bias_q), .result(ba_res)
  );

  activation_fn u_af (.clk, .sel(sel_af), .x(ba_res), .y(af_res));

  // window markers travel alongside the arithmetic pipeline
  logic [LAT-1:0] v_sr, sof_sr, eol_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr   <= '0;
      sof_sr <= '0;
      eol_sr <= '0;
    end else begin
      v_sr   <= {v_sr[LAT-2:0],   win_valid};
      sof_sr <= {sof_sr[LAT-2:0], win_sof};
      eol_sr <= {eol_sr[LAT-2:0], win_eol};
    end
  end

  pooling_unit #(.P_MAX(P_MAX), .MAX_OW(MAX_OW)) u_pool (
    .clk, .rst_n, .conf_p,
    .in_valid (v_sr[LAT-1]),
    .in_sof   (sof_sr[LAT-1]),
    .in_eol   (eol_sr[LAT-1]),
    .in_data  (af_res),
    .out_valid,
    .out_data
  );
endmodule
