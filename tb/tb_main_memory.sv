// tb_main_memory: behavioural model of the host's main memory as seen over
// the DMA link (not synthesizable). A word-addressed array of SIZE words
// with a read port (request valid/ready, in-order responses after a random
// latency of 1..MAX_LAT cycles) and a write port whose ready is withheld at
// random when STALL is set, to exercise back-pressure.
module tb_main_memory #(
  parameter int SIZE    = 65536,
  parameter int MAX_LAT = 4,
  parameter bit STALL   = 1
) (
  input  logic        clk,
  input  logic        rd_req_valid,
  input  logic [31:0] rd_req_addr,
  output logic        rd_req_ready,
  output logic        rd_rsp_valid,
  output logic [31:0] rd_rsp_data,
  input  logic        wr_valid,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  output logic        wr_ready
);
  logic [31:0] mem [SIZE];
  typedef struct { int due; logic [31:0] data; } rsp_t;
  rsp_t q[$];
  int cyc = 0;
  int last_due = 0;
  int writes = 0;

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = '0;
    rd_rsp_valid = 0;
    rd_rsp_data  = 0;
  end

  always_comb begin
    rd_req_ready = 1'b1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    wr_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    rsp_t r;
    if (rd_req_valid && rd_req_ready) begin
      r.due  = cyc + 1 + int'($urandom_range(MAX_LAT - 1));
      if (r.due <= last_due) r.due = last_due + 1;
      last_due = r.due;
      r.data = mem[rd_req_addr % SIZE];
      q.push_back(r);
    end
    if (q.size() > 0 && q[0].due <= cyc) begin
      rd_rsp_valid <= 1'b1;
      rd_rsp_data  <= q[0].data;
      void'(q.pop_front());
    end else
      rd_rsp_valid <= 1'b0;
    if (wr_valid && wr_ready) begin
      mem[wr_addr % SIZE] = wr_data;
      writes++;
    end
  end
endmodule
