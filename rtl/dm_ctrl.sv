// dm_ctrl: data movement control unit of a compute core (paper Fig. 3 and the
// data-movement reconfiguration of Sec. IV-B / Fig. 5).
//
// A purely combinational router whose selects come from the decoded stage
// control word (ctrl), so that the same core moves data differently in each
// stage, like the if (stg_idx == ...) branches of Fig. 5:
//   * operand 1 of the PE array comes from off-chip memory (X) or from the
//     local scratchpad (cached Q^T);
//   * operand 2 comes from the b-bit weight scratchpad or from the c-bit
//     stream buffer (K rows received from the neighbouring core);
//   * each write-back word of a finished tile goes to the local scratchpad
//     (requantised column, Q^T), off-chip memory (full-precision row, V), the
//     pipeline FIFO to the next core (requantised column, K), or through the
//     reduction unit to the next core of the column or off-chip (A);
//   * during a stream-buffer fill, words of the incoming pipeline FIFO are
//     written into the stream buffer; while receiving redistributed Q tiles
//     (sequential schedule), they are written into the Q^T scratchpad.
// Off-chip writes are assumed always accepted.  wb_ready tells the core
// that the current write-back word has been taken.
module dm_ctrl
  import intar_pkg::*;
#(
  parameter int unsigned D     = 16,
  parameter int unsigned A_W   = 8,
  parameter int unsigned B_W   = 4,
  parameter int unsigned C_W   = 8,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned SHIFT = 8,
  localparam int unsigned LARGE_BIT = (B_W > C_W) ? B_W : C_W
) (
  input  cc_ctrl_t                        ctrl,
  input  logic                            red_sink,     // this core writes reduced tiles off-chip
  // operand selection
  input  logic [D*A_W-1:0]                off_rd_data,
  input  logic [D*A_W-1:0]                sp_rd_data,
  input  logic [D*B_W-1:0]                w_rd_data,
  input  logic [D*C_W-1:0]                k_rd_data,
  output logic [D*A_W-1:0]                op1_vec,
  output logic [D*LARGE_BIT-1:0]          op2_vec,
  output logic                            prec_c,
  // write-back of a finished tile
  input  logic                            wb_valid,
  input  logic [$clog2(D)-1:0]            wb_idx,
  input  logic [D-1:0][D-1:0][ACC_W-1:0]  tile,
  output logic                            wb_ready,
  output logic                            sp_wr_en,
  output logic [D*A_W-1:0]                sp_wr_data,
  output logic                            off_wr_en,
  output logic [D-1:0][ACC_W-1:0]         off_wr_data,
  output logic                            pipe_out_valid,
  input  logic                            pipe_out_ready,
  output logic [D*A_W-1:0]                pipe_out_data,
  // reduction unit connection
  output logic                            ru_own_valid,
  input  logic                            ru_own_ready,
  output logic [D-1:0][ACC_W-1:0]         ru_own_row,
  input  logic                            ru_out_valid,
  output logic                            ru_out_ready,
  input  logic [D-1:0][ACC_W-1:0]         ru_out_row,
  output logic                            red_out_valid,
  input  logic                            red_out_ready,
  output logic [D-1:0][ACC_W-1:0]         red_out_data,
  // stream buffer fill
  input  logic                            kfill_active,
  input  logic                            pipe_in_valid,
  output logic                            pipe_in_ready,
  input  logic [D*C_W-1:0]                pipe_in_data,
  output logic                            k_wr_en,
  output logic [D*C_W-1:0]                k_wr_data,
  // redistributed Q^T words into the local scratchpad
  input  logic                            rx_active,
  output logic                            rx_wr_en,
  output logic [D*A_W-1:0]                rx_wr_data
);

  logic [D*A_W-1:0]        col_q;   // requantised column wb_idx of the tile
  logic [D-1:0][ACC_W-1:0] row_f;   // full-precision row wb_idx of the tile

  always_comb begin
    for (int p = 0; p < D; p++) col_q[p*A_W +: A_W] = A_W'(requant8(tile[p][wb_idx], SHIFT));
    row_f = tile[wb_idx];
  end

  always_comb begin
    op1_vec = (ctrl.op1_src == OP1_SCRATCH) ? sp_rd_data : off_rd_data;
    prec_c  = (ctrl.op2_src == OP2_STREAM_C);
    op2_vec = '0;
    if (ctrl.op2_src == OP2_STREAM_C) op2_vec[D*C_W-1:0] = k_rd_data;
    else                              op2_vec[D*B_W-1:0] = w_rd_data;
  end

  always_comb begin
    wb_ready       = 1'b0;
    sp_wr_en       = 1'b0;
    sp_wr_data     = col_q;
    off_wr_en      = 1'b0;
    off_wr_data    = row_f;
    pipe_out_valid = 1'b0;
    pipe_out_data  = col_q;
    ru_own_valid   = 1'b0;
    ru_own_row     = row_f;
    ru_out_ready   = 1'b0;
    red_out_valid  = 1'b0;
    red_out_data   = ru_out_row;
    unique case (ctrl.out_dst)
      DST_SCRATCH_T: begin sp_wr_en = wb_valid; wb_ready = 1'b1; end
      DST_OFFCHIP:   begin off_wr_en = wb_valid; wb_ready = 1'b1; end
      DST_PIPE:      begin pipe_out_valid = wb_valid; wb_ready = pipe_out_ready; end
      DST_REDUCE: begin
        ru_own_valid = wb_valid;
        wb_ready     = ru_own_ready;
        if (red_sink) begin
          ru_out_ready = 1'b1;
          off_wr_en    = ru_out_valid;
          off_wr_data  = ru_out_row;
        end else begin
          ru_out_ready  = red_out_ready;
          red_out_valid = ru_out_valid;
        end
      end
      default: ;
    endcase
  end

  assign pipe_in_ready = kfill_active || rx_active;
  assign k_wr_en       = kfill_active && pipe_in_valid;
  assign k_wr_data     = pipe_in_data;
  assign rx_wr_en      = rx_active && pipe_in_valid;
  assign rx_wr_data    = (D*A_W)'(pipe_in_data);

endmodule
