// scratchpad: on-chip buffer of a compute core (paper Fig. 3, "Scratchpad
// Memory (size, #ports)").
//
// Each word is one packed vector of PE_DIM elements, so that a single access
// feeds a whole row or column of the PE array; this is the partitioning by
// access pattern of paper Sec. IV-C.  One write port and one read port
// (simple dual port).  Read is synchronous with one cycle of latency:
// rd_en/rd_addr at cycle t give rd_data at t+1.  Contents are not reset.
module scratchpad #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
