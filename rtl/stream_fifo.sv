// stream_fifo: synchronous FIFO used for the task-pipeline and reduction
// connections between compute cores (paper Sec. III-A: "Data are streamed from
// one task to another using FIFOs").
//
// Valid/ready handshake on both sides: a word moves when valid and ready are
// both high in the same cycle.  in_ready is low when the FIFO is full, which
// stalls the producer (back-pressure); out_valid is low when it is empty, which
// stalls the consumer.  Output data is read combinationally from the head
// entry.  The depth and the handshake are this design's choices.
module stream_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // Handshake rules: never push into a full FIFO, never pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) in_valid && !in_ready |-> !push);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0);

endmodule
