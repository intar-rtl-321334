// pea: reconfigurable PE array of a compute core (paper Sec. III-B and the
// compute-reconfiguration example of Sec. IV-B / Fig. 6).
//
// D1 x D2 multiply-accumulate PEs.  Each cycle with in_valid high, PE (p,q)
// multiplies lane p of operand 1 by lane q of operand 2 and adds the product
// to its accumulator; in_first high restarts the accumulation.  This is the
// outer-product update `buf_res[p][q] += op1 * op2` of Fig. 6, so after K
// valid cycles the array holds a full D1 x D2 output tile over a reduction
// length K.
//
// Operand 1 carries D1 signed A_W-bit values.  Operand 2 is packed with a
// stage-dependent precision: with prec_c low, lane q is bits [q*B_W +: B_W]
// (the b-bit stage, low-precision weights); with prec_c high, lane q is bits
// [q*C_W +: C_W] (the c-bit stage).  As in Fig. 6, the selected slice is
// zero-padded to LARGE_BIT = max(B_W, C_W) bits and the padded value is used
// as a signed LARGE_BIT number, so one multiplier per PE serves both stages;
// b-bit values therefore behave as unsigned whenever B_W < C_W.
// Timing: acc is registered; it reflects an update one cycle after in_valid.
module pea #(
  parameter int unsigned D1    = 16,
  parameter int unsigned D2    = 16,
  parameter int unsigned A_W   = 8,
  parameter int unsigned B_W   = 4,
  parameter int unsigned C_W   = 8,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned LARGE_BIT = (B_W > C_W) ? B_W : C_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic                              prec_c,
  input  logic [D1*A_W-1:0]                 op1_vec,
  input  logic [D2*LARGE_BIT-1:0]           op2_vec,
  output logic [D1-1:0][D2-1:0][ACC_W-1:0]  acc
);

  logic signed [A_W-1:0]       op1 [D1];
  logic signed [LARGE_BIT-1:0] op2 [D2];

  always_comb begin
    for (int p = 0; p < D1; p++) op1[p] = op1_vec[p*A_W +: A_W];
    for (int q = 0; q < D2; q++) begin
      if (!prec_c) op2[q] = LARGE_BIT'(op2_vec[q*B_W +: B_W]);
      else         op2[q] = LARGE_BIT'(op2_vec[q*C_W +: C_W]);
    end
  end

  logic signed [ACC_W-1:0] prod [D1][D2];

  always_comb begin
    for (int p = 0; p < D1; p++)
      for (int q = 0; q < D2; q++)
        prod[p][q] = op1[p] * op2[q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (in_valid) begin
      for (int p = 0; p < D1; p++)
        for (int q = 0; q < D2; q++)
          acc[p][q] <= in_first ? prod[p][q] : acc[p][q] + prod[p][q];
    end
  end

endmodule
