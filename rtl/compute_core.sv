// compute_core: one compute core (CC) of the accelerator grid (paper Fig. 3:
// scratchpad memory, reconfigurable PE array, reduction unit and data
// movement control unit).
//
// The core receives the broadcast configuration instruction, decodes it in
// one cycle into its stage-specific control word (the fourth step of a
// reconfiguration) and then runs a three-level loop nest whose bounds come
// from the instruction (paper Fig. 7, loop-bound control):
//   for o < O: [fill stream buffer]  for t < T: { for k < K: MAC ;  write back tile }
// Which operands, bounds and destination it uses depends on its column COL
// and the stage index (the static schedule of the attention case study):
//   column 0, stage 0  Q^T tile = X^T x Wq      O=i, T=j, K=k ; requantised, kept in scratchpad
//   column 1, stage 0  V tile   = X^T x Wv      O=i, T=j, K=k ; full precision, written off-chip
//   column 1, stage 1  K tile   = X^T x Wk      O=i, T=j, K=k ; requantised, streamed to column 0
//   column 0, stage 1  A tile   = Q x K^T       O=i (K row tiles), T=i (Q row tiles), K=j*D ;
//                       partial over this core's slice of the hidden dimension, reduced
//                       along the column, written off-chip by the row-0 core
// Sequential alternative of stage 0 (selected by the instruction table):
//   both columns, stage V   V tiles of column-tile half COL of the slice, O=i, T=j/2, K=k
//   both columns, stage Q   Q tiles likewise; column 0 keeps its half, column 1
//                       streams its half through the pipeline FIFO and column 0
//                       writes it into its Q^T scratchpad (redistribution)
// Each core of a column owns HIDDEN/N_ROWS output columns (Q, K, V) and the
// matching slice of the hidden dimension (A), so the rows of a column share
// work as in the paper's Fig. 3(a)/(c) and combine A through the reduction
// links.  The split is this design's choice.
//
// Memories: weight scratchpad of packed b-bit words (HIDDEN*JT words in
// column 0, 2*HIDDEN*JT in column 1, regions as listed at decode_stage), and in column 0 a Q^T scratchpad and the K stream buffer, all
// with one-cycle synchronous reads.  Off-chip memory is reached through a
// read port with a fixed latency of one cycle and a write port that always
// accepts.  Weights are loaded through the preload port while the core is
// idle (weights are on chip before the run, paper Sec. II-E).
// Timing per tile: K issue cycles + 1 drain cycle + D write-back cycles,
// plus any stall on the pipeline or reduction handshakes.
module compute_core
  import intar_pkg::*;
#(
  parameter int unsigned COL     = 0,
  parameter int unsigned ROW     = 0,
  parameter int unsigned N_ROWS  = 2,
  parameter int unsigned SEQ_MAX = 256,
  parameter int unsigned HIDDEN  = 1024,
  parameter int unsigned D       = 16,
  parameter int unsigned A_W     = 8,
  parameter int unsigned B_W     = 4,
  parameter int unsigned C_W     = 8,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned SHIFT   = 8,
  parameter int unsigned AW      = 20,
  parameter int unsigned V_BASE  = 0,
  parameter int unsigned A_BASE  = 'h40000,
  localparam int unsigned SLICE   = HIDDEN / N_ROWS,
  localparam int unsigned JT      = SLICE / D,
  localparam int unsigned W_MATS  = (COL == 0) ? 1 : 2,
  localparam int unsigned W_DEPTH = W_MATS * HIDDEN * JT,
  localparam int unsigned WAW     = $clog2(2 * HIDDEN * JT),
  localparam int unsigned QT_DEPTH = SLICE * (SEQ_MAX / D),
  localparam int unsigned K_DEPTH  = SLICE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // instruction broadcast
  input  logic                     inst_valid,
  input  config_inst_t             inst,
  output logic                     stage_done,
  output logic                     decoding,
  // weight preload
  input  logic                     pl_wr_en,
  input  logic [WAW-1:0]           pl_wr_addr,
  input  logic [D*B_W-1:0]         pl_wr_data,
  // off-chip memory
  output logic                     off_rd_en,
  output logic [AW-1:0]            off_rd_addr,
  input  logic [D*A_W-1:0]         off_rd_data,
  output logic                     off_wr_en,
  output logic [AW-1:0]            off_wr_addr,
  output logic [D-1:0][ACC_W-1:0]  off_wr_data,
  // task-pipeline stream (K rows), out of column 1, into column 0
  output logic                     pipe_out_valid,
  input  logic                     pipe_out_ready,
  output logic [D*A_W-1:0]         pipe_out_data,
  input  logic                     pipe_in_valid,
  output logic                     pipe_in_ready,
  input  logic [D*C_W-1:0]         pipe_in_data,
  // reduction links along the column: in from row ROW+1, out to row ROW-1
  input  logic                     red_in_valid,
  output logic                     red_in_ready,
  input  logic [D-1:0][ACC_W-1:0]  red_in_data,
  output logic                     red_out_valid,
  input  logic                     red_out_ready,
  output logic [D-1:0][ACC_W-1:0]  red_out_data,
  // activity, for monitoring
  output logic                     stall_pipe,   // write-back blocked by a full pipeline FIFO
  output logic                     stall_fill,   // stream buffer waiting for data
  output logic                     stall_red,    // write-back waiting for the partner's partial tile
  output logic                     stream_word   // a streamed word entered the stream buffer
);

  localparam int unsigned LARGE_BIT = (B_W > C_W) ? B_W : C_W;
  localparam int unsigned DW = $clog2(D);
  localparam int unsigned QAW = $clog2(QT_DEPTH);
  localparam int unsigned KAW = $clog2(K_DEPTH);
  localparam logic RED_SINK    = (ROW == 0);
  localparam logic HAS_PARTNER = (ROW + 1 < N_ROWS);

  typedef enum logic [2:0] {S_IDLE, S_DECODE, S_KFILL, S_MAC, S_DRAIN, S_WB, S_RXWAIT, S_DONE} state_e;
  state_e state;

  cc_ctrl_t ctrl;
  config_inst_t inst_q;
  logic [BOUND_W-1:0] o_max, t_max, k_max;     // loop bounds minus one
  logic [BOUND_W-1:0] o_cnt, t_cnt, k_cnt, fill_cnt;
  logic [BOUND_W-1:0] t_lo;                    // first column tile of this core
  logic [BOUND_W-1:0] rx_o, rx_rem;            // redistribution receive position
  logic               rx_fin;
  logic [DW-1:0]      wb_cnt;
  logic               mac_v, mac_first;

  // ---------------- datapath wiring ----------------
  logic [D*A_W-1:0] sp_rd_data, op1_vec;
  logic [D*B_W-1:0] w_rd_data;
  logic [D*C_W-1:0] k_rd_data, k_wr_data;
  logic [D*LARGE_BIT-1:0] op2_vec;
  logic prec_c;
  logic [D-1:0][D-1:0][ACC_W-1:0] tile;
  logic wb_valid, wb_ready, sp_wr_en, k_wr_en, kfill_active;
  logic [D*A_W-1:0] sp_wr_data;
  logic ru_own_valid, ru_own_ready, ru_out_valid, ru_out_ready;
  logic [D-1:0][ACC_W-1:0] ru_own_row, ru_out_row;
  logic mac_issue;
  logic rx_active, rx_wr_en;
  logic [D*A_W-1:0] rx_wr_data;

  assign mac_issue    = (state == S_MAC);
  assign wb_valid     = (state == S_WB);
  assign kfill_active = (state == S_KFILL);
  assign decoding     = (state == S_DECODE);
  // receive redistributed Q^T words whenever the scratchpad write port is free
  assign rx_active    = ctrl.rx_q && !rx_fin && !wb_valid;
  assign stage_done   = (state == S_DONE);

  // read addresses for the current issue cycle
  logic [AW-1:0]  x_addr;
  logic [WAW-1:0] w_addr;
  logic [QAW-1:0] q_rd_addr, q_wr_addr;
  logic [KAW-1:0] k_rd_addr;
  logic [QAW-1:0] rx_addr;
  logic [BOUND_W-1:0] t_g;
  always_comb begin
    t_g       = t_lo + t_cnt;
    // X^T word (k, o): D rows of X at hidden index k
    x_addr    = AW'(k_cnt) * AW'(inst_q.i_bound) + AW'(o_cnt);
    w_addr    = WAW'(ctrl.wsel) * WAW'(HIDDEN * JT / 2) + WAW'(k_cnt) * WAW'(inst_q.j_bound) + WAW'(t_cnt);
    // Q^T word (h = k, Q row tile = t)
    q_rd_addr = QAW'(k_cnt) * QAW'(inst_q.i_bound) + QAW'(t_cnt);
    k_rd_addr = KAW'(k_cnt);
    // Q^T write: hidden index h = t*D + wb, row tile o
    q_wr_addr = (QAW'(t_g) * QAW'(D) + QAW'(wb_cnt)) * QAW'(inst_q.i_bound) + QAW'(o_cnt);
    // redistributed word: hidden index h = j*D + rx_rem (column 1's half), row tile rx_o
    rx_addr   = (QAW'(inst_q.j_bound) * QAW'(D) + QAW'(rx_rem)) * QAW'(inst_q.i_bound) + QAW'(rx_o);
  end

  assign off_rd_en   = mac_issue && (ctrl.op1_src == OP1_OFFCHIP);
  assign off_rd_addr = x_addr;

  always_comb begin
    if (ctrl.out_dst == DST_OFFCHIP)
      // V row i = o*D + wb, word column ROW*JT + t_g of N_ROWS*JT words
      off_wr_addr = AW'(V_BASE) + (AW'(o_cnt) * AW'(D) + AW'(wb_cnt)) * AW'(N_ROWS * JT)
                    + AW'(ROW * JT) + AW'(t_g);
    else
      // A row i = t*D + wb, word column o of i words
      off_wr_addr = AW'(A_BASE) + (AW'(t_cnt) * AW'(D) + AW'(wb_cnt)) * AW'(inst_q.i_bound) + AW'(o_cnt);
  end

  // ---------------- memories ----------------
  scratchpad #(.WIDTH(D*B_W), .DEPTH(W_DEPTH)) u_wbuf (
    .clk, .wr_en(pl_wr_en), .wr_addr($clog2(W_DEPTH)'(pl_wr_addr)), .wr_data(pl_wr_data),
    .rd_en(mac_issue && ctrl.op2_src == OP2_WEIGHT_B), .rd_addr($clog2(W_DEPTH)'(w_addr)),
    .rd_data(w_rd_data)
  );

  if (COL == 0) begin : g_data_bufs
    scratchpad #(.WIDTH(D*A_W), .DEPTH(QT_DEPTH)) u_qbuf (
      .clk, .wr_en(sp_wr_en || rx_wr_en), .wr_addr(rx_wr_en ? rx_addr : q_wr_addr),
      .wr_data(rx_wr_en ? rx_wr_data : sp_wr_data),
      .rd_en(mac_issue && ctrl.op1_src == OP1_SCRATCH), .rd_addr(q_rd_addr), .rd_data(sp_rd_data)
    );
    scratchpad #(.WIDTH(D*C_W), .DEPTH(K_DEPTH)) u_kbuf (
      .clk, .wr_en(k_wr_en), .wr_addr(KAW'(fill_cnt)), .wr_data(k_wr_data),
      .rd_en(mac_issue && ctrl.op2_src == OP2_STREAM_C), .rd_addr(k_rd_addr), .rd_data(k_rd_data)
    );
  end else begin : g_no_data_bufs
    // Column 1 never reads cached data: the schedule gives it no such buffer.
    assign sp_rd_data = '0;
    assign k_rd_data  = '0;
  end

  // ---------------- compute ----------------
  pea #(.D1(D), .D2(D), .A_W(A_W), .B_W(B_W), .C_W(C_W), .ACC_W(ACC_W)) u_pea (
    .clk, .rst_n, .in_valid(mac_v), .in_first(mac_first), .prec_c,
    .op1_vec, .op2_vec, .acc(tile)
  );

  dm_ctrl #(.D(D), .A_W(A_W), .B_W(B_W), .C_W(C_W), .ACC_W(ACC_W), .SHIFT(SHIFT)) u_dmc (
    .ctrl, .red_sink(RED_SINK),
    .off_rd_data, .sp_rd_data, .w_rd_data, .k_rd_data, .op1_vec, .op2_vec, .prec_c,
    .wb_valid, .wb_idx(wb_cnt), .tile, .wb_ready,
    .sp_wr_en, .sp_wr_data, .off_wr_en, .off_wr_data,
    .pipe_out_valid, .pipe_out_ready, .pipe_out_data,
    .ru_own_valid, .ru_own_ready, .ru_own_row, .ru_out_valid, .ru_out_ready, .ru_out_row,
    .red_out_valid, .red_out_ready, .red_out_data,
    .kfill_active, .pipe_in_valid, .pipe_in_ready, .pipe_in_data, .k_wr_en, .k_wr_data,
    .rx_active, .rx_wr_en, .rx_wr_data
  );

  reduction_unit #(.D(D), .ACC_W(ACC_W)) u_ru (
    .add_partner(HAS_PARTNER),
    .own_valid(ru_own_valid), .own_ready(ru_own_ready), .own_row(ru_own_row),
    .part_valid(red_in_valid), .part_ready(red_in_ready), .part_row(red_in_data),
    .out_valid(ru_out_valid), .out_ready(ru_out_ready), .out_row(ru_out_row)
  );

  assign stall_pipe = wb_valid && (ctrl.out_dst == DST_PIPE) && !pipe_out_ready;
  assign stall_fill = kfill_active && !pipe_in_valid;
  assign stream_word = k_wr_en || rx_wr_en;
  assign stall_red  = wb_valid && (ctrl.out_dst == DST_REDUCE) && HAS_PARTNER && !red_in_valid;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ctrl      <= '0;
      inst_q    <= '0;
      o_max     <= '0;
      t_max     <= '0;
      k_max     <= '0;
      o_cnt     <= '0;
      t_cnt     <= '0;
      k_cnt     <= '0;
      fill_cnt  <= '0;
      wb_cnt    <= '0;
      t_lo      <= '0;
      rx_o      <= '0;
      rx_rem    <= '0;
      rx_fin    <= 1'b0;
      mac_v     <= 1'b0;
      mac_first <= 1'b0;
    end else begin
      mac_v     <= mac_issue;
      mac_first <= mac_issue && (k_cnt == '0);
      if (rx_wr_en) begin
        rx_rem <= rx_rem + 1'b1;
        if (rx_rem == BOUND_W'(inst_q.j_bound * D) - 1'b1) begin
          rx_rem <= '0;
          rx_o   <= rx_o + 1'b1;
          if (rx_o == o_max) rx_fin <= 1'b1;
        end
      end
      unique case (state)
        S_IDLE, S_DONE: begin
          if (inst_valid) begin
            inst_q <= inst;
            state  <= S_DECODE;
          end
        end
        S_DECODE: begin
          // Reconfiguration step 4: stage index -> multiplexer selects and loop bounds.
          cc_ctrl_t c;
          c = decode_stage(inst_q.stg_idx, COL);
          ctrl  <= c;
          o_max <= inst_q.i_bound - 1'b1;
          if (c.kfill) begin
            t_max <= inst_q.i_bound - 1'b1;
            k_max <= BOUND_W'(inst_q.j_bound * D) - 1'b1;
          end else begin
            t_max <= inst_q.j_bound - 1'b1;
            k_max <= inst_q.k_bound - 1'b1;
          end
          o_cnt    <= '0;
          t_cnt    <= '0;
          k_cnt    <= '0;
          fill_cnt <= '0;
          wb_cnt   <= '0;
          t_lo     <= c.split ? BOUND_W'(COL * inst_q.j_bound) : '0;
          rx_o     <= '0;
          rx_rem   <= '0;
          rx_fin   <= !c.rx_q;
          state    <= c.kfill ? S_KFILL : S_MAC;
        end
        S_KFILL: begin
          if (k_wr_en) begin
            fill_cnt <= fill_cnt + 1'b1;
            if (fill_cnt == k_max) begin
              fill_cnt <= '0;
              state    <= S_MAC;
            end
          end
        end
        S_MAC: begin
          k_cnt <= k_cnt + 1'b1;
          if (k_cnt == k_max) begin
            k_cnt <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: state <= S_WB;
        S_RXWAIT: if (rx_fin) state <= S_DONE;
        S_WB: begin
          if (wb_ready) begin
            wb_cnt <= wb_cnt + 1'b1;
            if (wb_cnt == DW'(D - 1)) begin
              wb_cnt <= '0;
              if (t_cnt == t_max) begin
                t_cnt <= '0;
                if (o_cnt == o_max) begin
                  state <= rx_fin ? S_DONE : S_RXWAIT;
                end else begin
                  o_cnt <= o_cnt + 1'b1;
                  state <= ctrl.kfill ? S_KFILL : S_MAC;
                end
              end else begin
                t_cnt <= t_cnt + 1'b1;
                state <= S_MAC;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An instruction is only sent between stages.
  a_inst_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                     inst_valid |-> (state == S_IDLE || state == S_DONE));

endmodule
