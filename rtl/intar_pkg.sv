// intar_pkg: types and constants shared by the inter-task auto-reconfigurable
// accelerator (2x2 compute-core grid, attention case study).
//
// A configuration instruction carries a stage index and three loop bounds,
// as in the paper's `struct config_inst {stg_idx; i_bound; j_bound; k_bound}`.
// The static buffer stores, next to each instruction, one flag per bound that
// tells the instruction reader to replace that bound with a value derived
// from the run-time sequence length, plus a "last stage" flag.  The flag
// encoding and the 16-bit bound width are this design's choices.
//
// cc_ctrl_t is the decoded per-stage behaviour of one compute core: which
// source feeds each PEA operand, which precision the second operand has, and
// where the finished output tile goes.  Each core derives it from the stage
// index and its own grid position.
package intar_pkg;

  localparam int unsigned STG_W   = 2;   // stage index width (up to 4 stages)
  localparam int unsigned BOUND_W = 16;  // loop bound width

  typedef struct packed {
    logic [STG_W-1:0]   stg_idx;
    logic [BOUND_W-1:0] i_bound;
    logic [BOUND_W-1:0] j_bound;
    logic [BOUND_W-1:0] k_bound;
  } config_inst_t;

  // One entry of the static configuration buffer.
  typedef struct packed {
    config_inst_t inst;
    logic [2:0]   seq_scaled;  // [2]=i, [1]=j, [0]=k: replace bound by seq_len/PE_DIM
    logic         last;        // final stage of the schedule
  } config_entry_t;

  // Source of PEA operand 1 (a-bit activations).
  typedef enum logic [0:0] {
    OP1_OFFCHIP = 1'b0,  // input matrix X read from off-chip memory
    OP1_SCRATCH = 1'b1   // cached matrix (Q^T) in the local scratchpad
  } op1_src_e;

  // Source and precision of PEA operand 2.
  typedef enum logic [0:0] {
    OP2_WEIGHT_B = 1'b0, // b-bit weights in the weight scratchpad
    OP2_STREAM_C = 1'b1  // c-bit data received from another CC (K rows)
  } op2_src_e;

  // Destination of a finished output tile.
  typedef enum logic [2:0] {
    DST_SCRATCH_T = 3'd0, // requantise, store transposed in local scratchpad (Q^T)
    DST_OFFCHIP   = 3'd1, // write full-precision rows off-chip (V)
    DST_PIPE      = 3'd2, // requantise, stream transposed to the next CC (K)
    DST_REDUCE    = 3'd3  // cross-CC reduction of partial tiles (A = Q K^T)
  } out_dst_e;

  typedef struct packed {
    op1_src_e        op1_src;
    op2_src_e        op2_src;
    out_dst_e        out_dst;
    logic            kfill;     // fill the stream buffer from the pipeline FIFO per outer tile
    logic            split;     // sequential mode: this core computes column-tile half COL of the slice
    logic            rx_q;      // absorb redistributed Q^T words from the pipeline FIFO
    logic [1:0]      wsel;      // weight region, in units of HIDDEN*JT/2 words
  } cc_ctrl_t;

  // Schedule stages of the attention case study.
  localparam logic [STG_W-1:0] STG_QV = 2'd0;  // task-parallel: Q on column 0, V on column 1
  localparam logic [STG_W-1:0] STG_KA = 2'd1;  // task-pipeline: K on column 1 -> A on column 0
  localparam logic [STG_W-1:0] STG_V  = 2'd2;  // sequential: all cores compute V
  localparam logic [STG_W-1:0] STG_Q  = 2'd3;  // sequential: all cores compute Q, column 1 redistributes

  // Stage decoder of a core.  Column 0 computes Q then A, column 1 computes
  // V then K (paper Fig. 2(f) / Fig. 3 right).  In the sequential alternative
  // all cores compute V, then all compute Q (column 1 sends its Q tiles to
  // column 0), then K -> A as above.
  // Weight regions (wsel, units of HIDDEN*JT/2 words):
  //   column 0: Wq at 0 (full slice, or first half in the sequential schedule),
  //             Wv first half at 1 (sequential schedule only)
  //   column 1: Wv at 0 (full slice, or second half), Wq second half at 1
  //             (sequential schedule only), Wk at 2 (full slice)
  function automatic cc_ctrl_t decode_stage(input logic [STG_W-1:0] stg, input int unsigned col);
    cc_ctrl_t c;
    c = '{op1_src: OP1_OFFCHIP, op2_src: OP2_WEIGHT_B, out_dst: DST_OFFCHIP,
          kfill: 1'b0, split: 1'b0, rx_q: 1'b0, wsel: 2'd0};
    unique case (stg)
      STG_QV: c.out_dst = (col == 0) ? DST_SCRATCH_T : DST_OFFCHIP;
      STG_KA: begin
        if (col == 0) begin
          c.op1_src = OP1_SCRATCH;
          c.op2_src = OP2_STREAM_C;
          c.out_dst = DST_REDUCE;
          c.kfill   = 1'b1;
        end else begin
          c.out_dst = DST_PIPE;
          c.wsel    = 2'd2;
        end
      end
      STG_V: begin
        c.split = 1'b1;
        c.wsel  = (col == 0) ? 2'd1 : 2'd0;
      end
      STG_Q: begin
        c.split = 1'b1;
        if (col == 0) begin
          c.out_dst = DST_SCRATCH_T;
          c.rx_q    = 1'b1;
        end else begin
          c.out_dst = DST_PIPE;
          c.wsel    = 2'd1;
        end
      end
    endcase
    return c;
  endfunction

  // Requantise an accumulator to a signed 8-bit activation: arithmetic shift
  // right, then saturate.
  function automatic logic [7:0] requant8(input logic signed [31:0] acc, input int unsigned shift);
    logic signed [31:0] s;
    s = acc >>> shift;
    if (s > 32'sd127)       return 8'h7f;
    else if (s < -32'sd128) return 8'h80;
    else                    return s[7:0];
  endfunction

endpackage
