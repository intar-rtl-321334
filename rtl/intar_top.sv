// intar_top: inter-task auto-reconfigurable accelerator for the attention
// case study (Q, K, V projections and A = Q K^T), a 2-column x N_ROWS grid of
// compute cores driven by a static schedule (two stages, or three with SEQUENTIAL_QV).
//
// Stage 0 (task-parallel): column 0 computes Q = X Wq and keeps it on chip
// (transposed, 8-bit); column 1 computes V = X Wv and writes it off-chip.
// Stage 1 (task-pipeline): column 1 computes K = X Wk and streams it through
// one FIFO per row into column 0, which computes A = Q K^T against the cached
// Q; the rows of column 0 add their partial A tiles along the column through
// reduction FIFOs and row 0 writes A off-chip.  Switching between the stages
// is a 4-cycle reconfiguration: the instruction reader reads the static
// buffer, rewrites the sequence-dependent loop bound, sends the instruction,
// and every core decodes it.  This follows the paper's Fig. 2(f) and Fig. 3
// (right); the work split inside a column, the data layouts and all widths are
// this design's choices.
// With SEQUENTIAL_QV = 1, stage 0 is replaced by the sequential alternative of
// the same case study (Fig. 2(f) left, Fig. 3(b)): all cores compute V, then
// all cores compute Q, and column 1 sends its half of the Q tiles through the
// pipeline FIFOs to column 0, which caches them; then stage K -> A as above.
//
// Interface: load weights through the per-core preload ports, put X^T in the
// memory behind the off-chip read ports, pulse start with seq_len (a multiple
// of PE_DIM, at most SEQ_MAX) and wait for done.  Core index c = col*N_ROWS +
// row.  Off-chip reads have one cycle of latency; writes are always accepted.
// Off-chip layouts (words of PE_DIM elements):
//   X^T read word  k*(seq_len/PE_DIM) + t      = X[t*PE_DIM + p][k], lane p (8-bit)
//   V write word   V_BASE + i*(HIDDEN/PE_DIM) + c = V[i][c*PE_DIM + q], lane q (32-bit)
//   A write word   A_BASE + i*(seq_len/PE_DIM) + c = A[i][c*PE_DIM + q], lane q (32-bit)
//   weight words of core (col,row), JT = SLICE/PE_DIM, SLICE = HIDDEN/N_ROWS:
//     full-slice region at base B: B + k*JT + t = W[k][row*SLICE + t*PE_DIM + q]
//     half-slice region at base B: B + k*(JT/2) + t = W[k][row*SLICE + (col*JT/2 + t)*PE_DIM + q]
//     lane q (4-bit).  Task-parallel schedule: column 0 Wq full at 0; column 1
//     Wv full at 0, Wk full at HIDDEN*JT.  Sequential schedule: column 0 Wq half
//     at 0, Wv half at HIDDEN*JT/2; column 1 Wv half at 0, Wq half at
//     HIDDEN*JT/2, Wk full at HIDDEN*JT.
module intar_top
  import intar_pkg::*;
#(
  parameter int unsigned SEQ_MAX   = 256,
  parameter int unsigned HIDDEN    = 1024,
  parameter int unsigned N_ROWS    = 2,
  parameter int unsigned PE_DIM    = 16,
  parameter int unsigned SHIFT     = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned AW        = 20,
  parameter int unsigned V_BASE    = 0,
  parameter int unsigned A_BASE    = 'h40000,
  parameter bit          SEQUENTIAL_QV = 1'b0,   // 0: Q,V task-parallel; 1: V then Q sequential
  localparam int unsigned N_COLS   = 2,
  localparam int unsigned NCC      = N_COLS * N_ROWS,
  localparam int unsigned D        = PE_DIM,
  localparam int unsigned ACC_W    = 32,
  localparam int unsigned JT       = HIDDEN / N_ROWS / PE_DIM,
  localparam int unsigned WAW      = $clog2(2 * HIDDEN * JT)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic [BOUND_W-1:0]                  seq_len,
  output logic                                busy,
  output logic                                done,
  // weight preload, per core
  input  logic [NCC-1:0]                      pl_wr_en,
  input  logic [NCC-1:0][WAW-1:0]             pl_wr_addr,
  input  logic [NCC-1:0][D*4-1:0]             pl_wr_data,
  // off-chip memory, per core
  output logic [NCC-1:0]                      off_rd_en,
  output logic [NCC-1:0][AW-1:0]              off_rd_addr,
  input  logic [NCC-1:0][D*8-1:0]             off_rd_data,
  output logic [NCC-1:0]                      off_wr_en,
  output logic [NCC-1:0][AW-1:0]              off_wr_addr,
  output logic [NCC-1:0][D-1:0][ACC_W-1:0]    off_wr_data,
  // monitoring
  output logic [STG_W-1:0]                    stage,
  output logic                                reconfiguring,
  output logic [NCC-1:0]                      cc_decoding,
  output logic [NCC-1:0]                      cc_stall_pipe,
  output logic [NCC-1:0]                      cc_stall_fill,
  output logic [NCC-1:0]                      cc_stall_red,
  output logic [NCC-1:0]                      cc_stream_word
);

  logic               inst_valid, buf_rd_en, all_done;
  logic [STG_W-1:0]   buf_rd_addr;
  config_entry_t      buf_entry;
  config_inst_t       inst;
  logic [NCC-1:0]     stage_done;

  config_inst_buffer #(.SEQ_MAX(SEQ_MAX), .HIDDEN(HIDDEN), .N_ROWS(N_ROWS), .PE_DIM(PE_DIM),
                      .SEQUENTIAL_QV(SEQUENTIAL_QV)) u_cfg (
    .clk, .rd_en(buf_rd_en), .rd_addr(buf_rd_addr), .rd_entry(buf_entry)
  );

  instr_reader #(.PE_DIM(PE_DIM)) u_reader (
    .clk, .rst_n, .start, .seq_len, .all_done,
    .buf_rd_en, .buf_rd_addr, .buf_entry,
    .inst_valid, .inst, .busy, .done, .reconfiguring
  );

  assign all_done = &stage_done;
  assign stage    = inst.stg_idx;

  // stream signals per core
  logic [NCC-1:0]                   po_valid, po_ready, pi_valid, pi_ready;
  logic [NCC-1:0][D*8-1:0]          po_data, pi_data;
  logic [NCC-1:0]                   ro_valid, ro_ready, ri_valid, ri_ready;
  logic [NCC-1:0][D-1:0][ACC_W-1:0] ro_data, ri_data;

  for (genvar col = 0; col < N_COLS; col++) begin : g_col
    for (genvar row = 0; row < N_ROWS; row++) begin : g_row
      localparam int unsigned C = col * N_ROWS + row;
      compute_core #(
        .COL(col), .ROW(row), .N_ROWS(N_ROWS), .SEQ_MAX(SEQ_MAX), .HIDDEN(HIDDEN), .D(D),
        .A_W(8), .B_W(4), .C_W(8), .ACC_W(ACC_W), .SHIFT(SHIFT), .AW(AW),
        .V_BASE(V_BASE), .A_BASE(A_BASE)
      ) u_cc (
        .clk, .rst_n, .inst_valid, .inst, .stage_done(stage_done[C]), .decoding(cc_decoding[C]),
        .pl_wr_en(pl_wr_en[C]), .pl_wr_addr(pl_wr_addr[C]), .pl_wr_data(pl_wr_data[C]),
        .off_rd_en(off_rd_en[C]), .off_rd_addr(off_rd_addr[C]), .off_rd_data(off_rd_data[C]),
        .off_wr_en(off_wr_en[C]), .off_wr_addr(off_wr_addr[C]), .off_wr_data(off_wr_data[C]),
        .pipe_out_valid(po_valid[C]), .pipe_out_ready(po_ready[C]), .pipe_out_data(po_data[C]),
        .pipe_in_valid(pi_valid[C]), .pipe_in_ready(pi_ready[C]), .pipe_in_data(pi_data[C]),
        .red_in_valid(ri_valid[C]), .red_in_ready(ri_ready[C]), .red_in_data(ri_data[C]),
        .red_out_valid(ro_valid[C]), .red_out_ready(ro_ready[C]), .red_out_data(ro_data[C]),
        .stall_pipe(cc_stall_pipe[C]), .stall_fill(cc_stall_fill[C]), .stall_red(cc_stall_red[C]),
        .stream_word(cc_stream_word[C])
      );
    end
  end

  // Task-pipeline FIFOs: core (1,r) -> core (0,r).
  for (genvar row = 0; row < N_ROWS; row++) begin : g_pipe
    localparam int unsigned SRC = N_ROWS + row;
    localparam int unsigned DST = row;
    stream_fifo #(.WIDTH(D*8), .DEPTH(FIFO_DEPTH)) u_pipe_fifo (
      .clk, .rst_n,
      .in_valid(po_valid[SRC]), .in_ready(po_ready[SRC]), .in_data(po_data[SRC]),
      .out_valid(pi_valid[DST]), .out_ready(pi_ready[DST]), .out_data(pi_data[DST]),
      .count()
    );
    // Column 0 never streams out and column 1 never streams in.
    assign po_ready[DST] = 1'b0;
    assign pi_valid[SRC] = 1'b0;
    assign pi_data[SRC]  = '0;
  end

  // Reduction FIFOs along column 0: core (0,r+1) -> core (0,r).
  for (genvar row = 0; row < N_ROWS; row++) begin : g_red
    if (row + 1 < N_ROWS) begin : g_link
      stream_fifo #(.WIDTH(D*ACC_W), .DEPTH(FIFO_DEPTH)) u_red_fifo (
        .clk, .rst_n,
        .in_valid(ro_valid[row+1]), .in_ready(ro_ready[row+1]), .in_data(ro_data[row+1]),
        .out_valid(ri_valid[row]), .out_ready(ri_ready[row]), .out_data(ri_data[row]),
        .count()
      );
    end else begin : g_end
      assign ri_valid[row] = 1'b0;
      assign ri_data[row]  = '0;
    end
    // Column 1 has no reduction links; row 0 of column 0 writes off-chip instead.
    assign ri_valid[N_ROWS+row] = 1'b0;
    assign ri_data[N_ROWS+row]  = '0;
    assign ro_ready[N_ROWS+row] = 1'b0;
  end
  assign ro_ready[0] = 1'b0;

  initial begin
    assert (HIDDEN % (N_ROWS * PE_DIM) == 0) else $error("HIDDEN must be a multiple of N_ROWS*PE_DIM");
    assert (SEQ_MAX % PE_DIM == 0) else $error("SEQ_MAX must be a multiple of PE_DIM");
  end

endmodule
