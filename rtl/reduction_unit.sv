// reduction_unit: accumulates partial outputs of the PE array (paper Fig. 3,
// Sec. III-B: "read the partial outputs from the PEA if needed and perform
// accumulations").
//
// In this design the PE array already accumulates over its own share of the
// reduction dimension; the reduction unit adds, row by row, the partial tile
// of this core to the partial tile that arrives from the neighbouring core of
// the same column (one row of D ACC_W-bit values per transfer).  When
// add_partner is low the own row passes through unchanged.
// Handshake: own_valid/own_ready from the core's write-back, part_valid/
// part_ready from the neighbour's FIFO, out_valid/out_ready to the
// destination.  A row leaves only when every needed input is present, so a
// missing partner row stalls the write-back.  Purely combinational.
module reduction_unit #(
  parameter int unsigned D     = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    add_partner,
  input  logic                    own_valid,
  output logic                    own_ready,
  input  logic [D-1:0][ACC_W-1:0] own_row,
  input  logic                    part_valid,
  output logic                    part_ready,
  input  logic [D-1:0][ACC_W-1:0] part_row,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [D-1:0][ACC_W-1:0] out_row
);

  logic inputs_ok;
  assign inputs_ok  = own_valid && (!add_partner || part_valid);
  assign out_valid  = inputs_ok;
  assign own_ready  = out_ready && (!add_partner || part_valid);
  assign part_ready = add_partner && own_valid && out_ready;

  always_comb begin
    for (int q = 0; q < D; q++)
      out_row[q] = add_partner ? own_row[q] + part_row[q] : own_row[q];
  end

endmodule
