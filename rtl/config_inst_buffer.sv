// config_inst_buffer: the static configuration instruction buffer.
//
// The reconfiguration schedule is fixed at circuit design time, so the buffer
// is a small read-only table hardened into the design (paper Sec. III-B).  It
// holds one entry per stage of the attention case study:
//   stage 0 (STG_QV, task-parallel): i = row tiles (seq_len/PE_DIM),
//            j = column tiles of a core's output slice, k = hidden dimension
//   stage 1 (STG_KA, task-pipeline): same bounds; the A-computing cores
//            interpret them as (K row tiles, head-slice tiles, ...).
// With SEQUENTIAL_QV set, the first stage is replaced by the sequential
// alternative of the case study: stage STG_V (all cores compute V), stage
// STG_Q (all cores compute Q), then STG_KA as above; j is then half a slice.
// The i bound is flagged for replacement by the instruction reader with the
// run-time value seq_len/PE_DIM; the value stored here is the maximum.
// Read is synchronous: rd_en at cycle t gives rd_entry at t+1 (the "read"
// cycle of the 4-cycle reconfiguration).  The table contents and their
// encoding are this design's choice; the paper gives only the struct fields.
module config_inst_buffer
  import intar_pkg::*;
#(
  parameter int unsigned SEQ_MAX = 256,   // maximum sequence length (Fig. 2 caption)
  parameter int unsigned HIDDEN  = 1024,  // hidden dimension (Fig. 2 caption)
  parameter int unsigned N_ROWS  = 2,     // CC rows: output columns split across rows
  parameter int unsigned PE_DIM  = 16,    // PEA is PE_DIM x PE_DIM
  parameter bit          SEQUENTIAL_QV = 1'b0  // 0: Q,V task-parallel; 1: V then Q sequential
) (
  input  logic                       clk,
  input  logic                       rd_en,
  input  logic [STG_W-1:0]           rd_addr,
  output config_entry_t              rd_entry
);

  localparam logic [BOUND_W-1:0] I_MAX  = BOUND_W'(SEQ_MAX / PE_DIM);
  localparam logic [BOUND_W-1:0] J_TILE = BOUND_W'(HIDDEN / N_ROWS / PE_DIM);
  localparam logic [BOUND_W-1:0] K_LEN  = BOUND_W'(HIDDEN);

  localparam logic [BOUND_W-1:0] J_HALF = BOUND_W'(HIDDEN / N_ROWS / PE_DIM / 2);

  function automatic config_entry_t rom(input logic [STG_W-1:0] a);
    config_entry_t e;
    e = '0;
    if (!SEQUENTIAL_QV) begin
      case (a)
        2'd0: e = '{inst: '{stg_idx: STG_QV, i_bound: I_MAX, j_bound: J_TILE, k_bound: K_LEN},
                    seq_scaled: 3'b100, last: 1'b0};
        2'd1: e = '{inst: '{stg_idx: STG_KA, i_bound: I_MAX, j_bound: J_TILE, k_bound: K_LEN},
                    seq_scaled: 3'b100, last: 1'b1};
        default: e = '0;
      endcase
    end else begin
      // j counts the column tiles of one core: half a row's slice in the sequential stages
      case (a)
        2'd0: e = '{inst: '{stg_idx: STG_V,  i_bound: I_MAX, j_bound: J_HALF, k_bound: K_LEN},
                    seq_scaled: 3'b100, last: 1'b0};
        2'd1: e = '{inst: '{stg_idx: STG_Q,  i_bound: I_MAX, j_bound: J_HALF, k_bound: K_LEN},
                    seq_scaled: 3'b100, last: 1'b0};
        2'd2: e = '{inst: '{stg_idx: STG_KA, i_bound: I_MAX, j_bound: J_TILE, k_bound: K_LEN},
                    seq_scaled: 3'b100, last: 1'b1};
        default: e = '0;
      endcase
    end
    return e;
  endfunction

  always_ff @(posedge clk) begin
    if (rd_en) rd_entry <= rom(rd_addr);
  end

endmodule
