// output_dma: the output DMA engine.
//
// Drains the output data buffer to main memory. Each buffer entry holds one
// pooled output value from every cell body plus the mask of the cell bodies
// that took part. The engine writes the masked values one per cycle, lowest
// cell body first, each to the next address of that cell body's own output
// space; the entry is popped after its last write. The output start address
// of every cell body is loaded with load_addr at the start of a layer (from
// the Filter Memory Control instructions), so each output feature map lands
// contiguously at its own address. Memory write port: wr_valid/wr_ready,
// with wr_addr and wr_data. idle is high when no entry is in progress. The
// per-cell-body address spaces follow the architecture; the write order and
// the bus are this design's choice.
module output_dma
  import cnn_pkg::*;
#(
  parameter int unsigned N_CB = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load_addr,
  input  logic [N_CB-1:0][ADDR_W-1:0]  base_addr,
  // from the output data buffer
  input  logic                         ob_valid,
  input  logic [N_CB-1:0]              ob_mask,
  input  logic [N_CB-1:0][DATA_W-1:0]  ob_data,
  output logic                         ob_pop,
  // memory write port
  output logic                         wr_valid,
  output logic [ADDR_W-1:0]            wr_addr,
  output qword_t                       wr_data,
  input  logic                         wr_ready,
  output logic                         idle
);
  localparam int unsigned NW = (N_CB > 1) ? $clog2(N_CB) : 1;

  logic [N_CB-1:0][ADDR_W-1:0] ptr;
  logic [N_CB-1:0]             done_mask;   // values of the head entry already written
  logic [N_CB-1:0]             todo;
  logic [NW-1:0]               sel;
  logic                        found, last;

  always_comb begin
    todo  = ob_valid ? (ob_mask & ~done_mask) : '0;
    sel   = '0;
    found = 1'b0;
    for (int n = N_CB - 1; n >= 0; n--)
      if (todo[n]) begin
        sel   = NW'(n);
        found = 1'b1;
      end
    last     = found && ((todo & ~(N_CB'(1) << sel)) == '0);
    wr_valid = found;
    wr_addr  = ptr[sel];
    wr_data  = ob_data[sel];
    // an entry with an empty mask is dropped at once
    ob_pop   = ob_valid && ((found && wr_ready && last) || (ob_mask == '0));
    idle     = !ob_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      done_mask <= '0;
    end else begin
      if (load_addr) ptr <= base_addr;
      else if (found && wr_ready) ptr[sel] <= ptr[sel] + ADDR_W'(1);
      if (ob_pop)                 done_mask <= '0;
      else if (found && wr_ready) done_mask[sel] <= 1'b1;
    end
  end
endmodule
