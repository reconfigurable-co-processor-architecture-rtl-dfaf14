// lane_interconnect: routing between the pre-fetch buffer, the Matrix Web caches
// and the output data buffer.
//
// Input side: every word leaving the pre-fetch data buffer carries a
// destination tag (lane_word_t) written by the input DMA. Weight words are
// steered to the weight cache of (cell body, depth channel, element index),
// bias words to the bias cache of a cell body, both as one-cycle registered
// write strobes that are always accepted; raw input words are handed to the
// data cache through a valid/ready handshake, so the buffer is popped only
// when the data cache can take the word.
// Output side: the enabled cell bodies produce their pooled values in the
// same cycle; these are gathered into one output-buffer entry holding all
// N_CB values and the mask of enabled cell bodies, registered (latency 1).
// The tag format and the gathering are this design's choices; the
// architecture shows only that words pass through "a simple interconnect".
module lane_interconnect
  import cnn_pkg::*;
#(
  parameter int unsigned N_CB = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // from the pre-fetch buffer
  input  logic                          pf_valid,
  input  lane_word_t                    pf_word,
  output logic                          pf_ready,
  // to the data cache
  output logic                          dc_valid,
  output qword_t                        dc_data,
  input  logic                          dc_ready,
  // to the weight / bias caches
  output logic                          w_wr_en,
  output logic [CBID_W-1:0]             w_wr_cbu,
  output logic [DIM_W-1:0]              w_wr_ch,
  output logic [15:0]                   w_wr_idx,
  output logic                          b_wr_en,
  output logic [CBID_W-1:0]             b_wr_cbu,
  output qword_t                        wb_wr_data,
  // from the cell bodies
  input  logic [N_CB-1:0]               cb_enable,
  input  logic [N_CB-1:0]               cb_valid,
  input  logic [N_CB-1:0][DATA_W-1:0]   cb_data,
  // to the output data buffer
  output logic                          ob_valid,
  output logic [N_CB-1:0]               ob_mask,
  output logic [N_CB-1:0][DATA_W-1:0]   ob_data
);
  logic is_data;

  always_comb begin
    is_data  = (pf_word.dest.kind == DST_DATA);
    dc_valid = pf_valid && is_data;
    dc_data  = pf_word.data;
    pf_ready = is_data ? dc_ready : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_wr_en <= 1'b0;
      b_wr_en <= 1'b0;
      w_wr_cbu <= '0; w_wr_ch <= '0; w_wr_idx <= '0;
      b_wr_cbu <= '0; wb_wr_data <= '0;
      ob_valid <= 1'b0; ob_mask <= '0; ob_data <= '0;
    end else begin
      w_wr_en    <= pf_valid && (pf_word.dest.kind == DST_WEIGHT);
      b_wr_en    <= pf_valid && (pf_word.dest.kind == DST_BIAS);
      w_wr_cbu   <= pf_word.dest.cbu;
      w_wr_ch    <= pf_word.dest.ch;
      w_wr_idx   <= pf_word.idx;
      b_wr_cbu   <= pf_word.dest.cbu;
      wb_wr_data <= pf_word.data;
      ob_valid   <= |(cb_valid & cb_enable);
      ob_mask    <= cb_enable;
      ob_data    <= cb_data;
    end
  end

  // enabled cell bodies work in lock step: all or none produce a value
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      ((cb_valid & cb_enable) == '0) || ((cb_valid & cb_enable) == cb_enable))
    else $error("lane_interconnect: enabled cell bodies out of step");
endmodule
