// tb_compute_core: runs the two kinds of compute core of the schedule on
// their own, with this testbench standing in for the neighbouring cores.
// Core u_kv (column 1) computes V in stage 0 (checked at its off-chip port)
// and K in stage 1 (checked word by word at its pipeline output, under random
// back-pressure).  Core u_qa (column 0, row 0 of two) computes and caches Q in
// stage 0, and in stage 1 consumes reference K words fed with random gaps,
// adds random partner partial tiles arriving on its reduction input, and
// writes A off-chip.  Also checks the length of stage 0 (no stalls):
// (S/D)*J*(HIDDEN+1+D) cycles after decode.
module tb_compute_core;
  import intar_pkg::*;
  localparam int unsigned S = 16, H = 32, NR = 2, D = 4, SHIFT = 6, AW = 20, A_BASE = 'h40000;
  localparam int unsigned SLICE = H / NR, JT = SLICE / D, WAW = $clog2(2 * H * JT);
  localparam int unsigned T = S / D;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;
  initial begin #2000000; failures++; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  byte x [S][H];
  logic [3:0] wq [H][SLICE], wk [H][SLICE], wv [H][SLICE];
  byte qr [S][SLICE], kr [S][SLICE];
  int  vr [S][SLICE], part [S][S], ar [S][S];

  function automatic byte rq(input int a);
    int s;
    s = a >>> SHIFT;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : byte'(s);
  endfunction

  // common instruction
  logic inst_valid = 0;
  config_inst_t inst;
  // core signals: index 0 = u_qa, 1 = u_kv
  logic [1:0] stage_done, decoding, pl_wr_en, off_rd_en, off_wr_en, stall_pipe, stall_fill, stall_red, stream_word;
  logic [1:0][WAW-1:0] pl_wr_addr;
  logic [1:0][D*4-1:0] pl_wr_data;
  logic [1:0][AW-1:0] off_rd_addr, off_wr_addr;
  logic [1:0][D*8-1:0] off_rd_data;
  logic [1:0][D-1:0][31:0] off_wr_data;
  logic kv_po_valid, kv_po_ready, kv_pi_ready, kv_ri_ready, kv_ro_valid;
  logic [D*8-1:0] kv_po_data;
  logic [D-1:0][31:0] kv_ro_data;
  logic qa_po_valid, qa_pi_valid, qa_pi_ready, qa_ri_valid, qa_ri_ready, qa_ro_valid;
  logic [D*8-1:0] qa_po_data, qa_pi_data;
  logic [D-1:0][31:0] qa_ri_data, qa_ro_data;

  compute_core #(.COL(0), .ROW(0), .N_ROWS(NR), .SEQ_MAX(S), .HIDDEN(H), .D(D), .SHIFT(SHIFT), .AW(AW), .A_BASE(A_BASE)) u_qa (
    .clk, .rst_n, .inst_valid, .inst, .stage_done(stage_done[0]), .decoding(decoding[0]),
    .pl_wr_en(pl_wr_en[0]), .pl_wr_addr(pl_wr_addr[0]), .pl_wr_data(pl_wr_data[0]),
    .off_rd_en(off_rd_en[0]), .off_rd_addr(off_rd_addr[0]), .off_rd_data(off_rd_data[0]),
    .off_wr_en(off_wr_en[0]), .off_wr_addr(off_wr_addr[0]), .off_wr_data(off_wr_data[0]),
    .pipe_out_valid(qa_po_valid), .pipe_out_ready(1'b0), .pipe_out_data(qa_po_data),
    .pipe_in_valid(qa_pi_valid), .pipe_in_ready(qa_pi_ready), .pipe_in_data(qa_pi_data),
    .red_in_valid(qa_ri_valid), .red_in_ready(qa_ri_ready), .red_in_data(qa_ri_data),
    .red_out_valid(qa_ro_valid), .red_out_ready(1'b0), .red_out_data(qa_ro_data),
    .stall_pipe(stall_pipe[0]), .stall_fill(stall_fill[0]), .stall_red(stall_red[0]), .stream_word(stream_word[0]));

  compute_core #(.COL(1), .ROW(0), .N_ROWS(NR), .SEQ_MAX(S), .HIDDEN(H), .D(D), .SHIFT(SHIFT), .AW(AW), .A_BASE(A_BASE)) u_kv (
    .clk, .rst_n, .inst_valid, .inst, .stage_done(stage_done[1]), .decoding(decoding[1]),
    .pl_wr_en(pl_wr_en[1]), .pl_wr_addr(pl_wr_addr[1]), .pl_wr_data(pl_wr_data[1]),
    .off_rd_en(off_rd_en[1]), .off_rd_addr(off_rd_addr[1]), .off_rd_data(off_rd_data[1]),
    .off_wr_en(off_wr_en[1]), .off_wr_addr(off_wr_addr[1]), .off_wr_data(off_wr_data[1]),
    .pipe_out_valid(kv_po_valid), .pipe_out_ready(kv_po_ready), .pipe_out_data(kv_po_data),
    .pipe_in_valid(1'b0), .pipe_in_ready(kv_pi_ready), .pipe_in_data('0),
    .red_in_valid(1'b0), .red_in_ready(kv_ri_ready), .red_in_data('0),
    .red_out_valid(kv_ro_valid), .red_out_ready(1'b0), .red_out_data(kv_ro_data),
    .stall_pipe(stall_pipe[1]), .stall_fill(stall_fill[1]), .stall_red(stall_red[1]), .stream_word(stream_word[1]));

  // off-chip X^T reads, one cycle latency
  always_ff @(posedge clk)
    for (int c = 0; c < 2; c++)
      if (off_rd_en[c])
        for (int p = 0; p < D; p++) off_rd_data[c][p*8 +: 8] <= x[(off_rd_addr[c] % T)*D + p][off_rd_addr[c] / T];

  // expected streams
  int v_cnt = 0, a_cnt = 0, k_cnt = 0, kin_cnt = 0, red_cnt = 0, n_bp = 0;
  bit phase1 = 0;
  always @(posedge clk) if (rst_n) begin
    // V writes of u_kv
    if (off_wr_en[1]) begin
      int i, t;
      i = off_wr_addr[1] / (H / D); t = off_wr_addr[1] % (H / D);
      chk(t < JT && i < S, "V address in this core's slice");
      for (int q = 0; q < D; q++) chk($signed(off_wr_data[1][q]) == vr[i][t*D+q], "V value");
      v_cnt++;
    end
    // K words of u_kv: order l-tile o, h-tile t, column q
    if (kv_po_valid && kv_po_ready) begin
      int o, t, q;
      o = k_cnt / (JT * D); t = (k_cnt / D) % JT; q = k_cnt % D;
      for (int p = 0; p < D; p++) chk(byte'(kv_po_data[p*8 +: 8]) == kr[o*D+p][t*D+q], "K word");
      k_cnt++;
    end
    if (kv_po_valid && !kv_po_ready) n_bp++;
    // A writes of u_qa
    if (off_wr_en[0]) begin
      int a, i, o;
      a = off_wr_addr[0] - A_BASE; i = a / T; o = a % T;
      for (int q = 0; q < D; q++) chk($signed(off_wr_data[0][q]) == ar[i][o*D+q], "A value (own + partner)");
      a_cnt++;
    end
    if (qa_pi_valid && qa_pi_ready) kin_cnt++;
    if (qa_ri_valid && qa_ri_ready) red_cnt++;
  end

  // stimulus for u_qa in stage 1: K words (o, h) and partner rows (o, t, p)
  always_comb begin
    int o, h, r, t, p;
    o = kin_cnt / SLICE; h = kin_cnt % SLICE;
    for (int pp = 0; pp < D; pp++) qa_pi_data[pp*8 +: 8] = (o < T) ? kr[o*D+pp][h] : 8'd0;
    r = red_cnt; o = r / (T * D); t = (r / D) % T; p = r % D;
    for (int q = 0; q < D; q++) qa_ri_data[q] = (o < T) ? part[t*D+p][o*D+q] : 32'd0;
  end
  always_ff @(posedge clk) begin
    qa_pi_valid <= phase1 && (kin_cnt < T * SLICE) && ($urandom_range(0, 3) != 0);
    qa_ri_valid <= phase1 && ($urandom_range(0, 2) != 0);
    kv_po_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    longint unsigned t0;
    int sum;
    for (int i = 0; i < S; i++) for (int k = 0; k < H; k++) x[i][k] = byte'($urandom);
    for (int k = 0; k < H; k++) for (int j = 0; j < SLICE; j++) begin
      wq[k][j] = 4'($urandom); wk[k][j] = 4'($urandom); wv[k][j] = 4'($urandom);
    end
    for (int i = 0; i < S; i++) for (int j = 0; j < SLICE; j++) begin
      int aq, ak, av;
      aq = 0; ak = 0; av = 0;
      for (int k = 0; k < H; k++) begin
        aq += int'(x[i][k]) * int'(wq[k][j]); ak += int'(x[i][k]) * int'(wk[k][j]); av += int'(x[i][k]) * int'(wv[k][j]);
      end
      qr[i][j] = rq(aq); kr[i][j] = rq(ak); vr[i][j] = av;
    end
    for (int i = 0; i < S; i++) for (int l = 0; l < S; l++) begin
      part[i][l] = int'($urandom_range(0, 100000)) - 50000;
      sum = part[i][l];
      for (int h = 0; h < SLICE; h++) sum += int'(qr[i][h]) * int'(kr[l][h]);
      ar[i][l] = sum;
    end
    inst = '0; pl_wr_en = '0; pl_wr_addr = '0; pl_wr_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // preload: u_qa holds Wq, u_kv holds Wv (matrix 0) and Wk (matrix 1)
    for (int w = 0; w < 2 * H * JT; w++) begin
      int m, k, t;
      m = w / (H * JT); k = (w % (H * JT)) / JT; t = w % JT;
      pl_wr_en = {1'b1, m == 0};
      pl_wr_addr = {WAW'(w), WAW'(w)};
      for (int q = 0; q < D; q++) begin
        pl_wr_data[0][q*4 +: 4] = wq[k][t*D+q];
        pl_wr_data[1][q*4 +: 4] = (m == 0) ? wv[k][t*D+q] : wk[k][t*D+q];
      end
      @(posedge clk); #1;
    end
    pl_wr_en = '0;
    // stage 0
    inst = '{stg_idx: STG_QV, i_bound: 16'(T), j_bound: 16'(JT), k_bound: 16'(H)};
    inst_valid = 1; @(posedge clk); #1; inst_valid = 0;
    chk(decoding == 2'b11, "both cores decode in the cycle after the instruction");
    @(posedge clk); #1;
    t0 = cycle;
    wait (stage_done == 2'b11);
    chk(cycle - t0 == longint'(T * JT * (H + 1 + D)), $sformatf("stage 0 took %0d cycles", cycle - t0));
    chk(v_cnt == S * JT, "all V words of the slice");
    // stage 1
    @(posedge clk); #1;
    inst = '{stg_idx: STG_KA, i_bound: 16'(T), j_bound: 16'(JT), k_bound: 16'(H)};
    inst_valid = 1; phase1 = 1; @(posedge clk); #1; inst_valid = 0;
    wait (stage_done == 2'b11);
    @(posedge clk); #1;
    chk(k_cnt == T * SLICE, "all K words streamed");
    chk(a_cnt == S * T, "all A words written");
    chk(red_cnt == S * T, "all partner rows consumed");
    chk(n_bp > 0, "pipeline back-pressure seen");
    $display("stage 1 done: K words %0d, A words %0d, back-pressure cycles %0d", k_cnt, a_cnt, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
