// intar_env: self-checking environment for intar_top, shared by the end-to-end
// testbenches.  It connects to the accelerator's ports only.
//
// It generates random int8 inputs X and unsigned 4-bit weights Wq, Wk, Wv,
// computes the expected results with plain loops (Q and K requantised to int8
// exactly as the accelerator does: arithmetic shift by SHIFT, saturate;
// V = X Wv and A = Q K^T in 32 bits), preloads the weights, plays the off-chip
// memory (X^T reads with one cycle of latency; every V and A write is checked
// against the reference as it happens and must hit each word exactly once),
// runs the accelerator for one or two sequence lengths and counts how often
// each mechanism occurred: stage switches, reconfiguration cycles, cores
// computing different tasks in the same cycle (task-parallel), words streamed
// between columns (task-pipeline), back-pressure stalls, stream-buffer wait
// stalls and reduction waits.  A mechanism that never occurs is a failure.
// Checked timing: each reconfiguration costs exactly 4 cycles, and the first
// stage, which has no stalls, takes (S/D)*J*(HIDDEN+1+D) cycles of work.
// With SEQUENTIAL_QV the schedule is V, Q (sequential, J halved), then K -> A;
// then all cores computing the same task and the redistributed Q words are
// counted instead of task-parallel cycles.
module intar_env
  import intar_pkg::*;
#(
  parameter int unsigned SEQ_MAX  = 256,
  parameter int unsigned HIDDEN   = 1024,
  parameter int unsigned N_ROWS   = 2,
  parameter int unsigned PE_DIM   = 16,
  parameter int unsigned SHIFT    = 8,
  parameter int unsigned AW       = 20,
  parameter int unsigned V_BASE   = 0,
  parameter int unsigned A_BASE   = 'h40000,
  parameter int unsigned RUN_SEQ0 = 256,
  parameter int unsigned RUN_SEQ1 = 0,        // second run, 0 = none
  parameter longint unsigned WATCHDOG = 64'd50_000_000,
  parameter bit          SEQUENTIAL_QV = 1'b0,
  localparam int unsigned NCC   = 2 * N_ROWS,
  localparam int unsigned D     = PE_DIM,
  localparam int unsigned SLICE = HIDDEN / N_ROWS,
  localparam int unsigned JT    = SLICE / D,
  localparam int unsigned WAW   = $clog2(2 * HIDDEN * JT),
  localparam int unsigned N_STG = SEQUENTIAL_QV ? 3 : 2,
  localparam int unsigned J0    = SEQUENTIAL_QV ? JT / 2 : JT,
  localparam logic [STG_W-1:0] FIRST_STG = SEQUENTIAL_QV ? STG_V : STG_QV
) (
  output logic                             clk,
  output logic                             rst_n,
  output logic                             start,
  output logic [BOUND_W-1:0]               seq_len,
  input  logic                             busy,
  input  logic                             done,
  output logic [NCC-1:0]                   pl_wr_en,
  output logic [NCC-1:0][WAW-1:0]          pl_wr_addr,
  output logic [NCC-1:0][D*4-1:0]          pl_wr_data,
  input  logic [NCC-1:0]                   off_rd_en,
  input  logic [NCC-1:0][AW-1:0]           off_rd_addr,
  output logic [NCC-1:0][D*8-1:0]          off_rd_data,
  input  logic [NCC-1:0]                   off_wr_en,
  input  logic [NCC-1:0][AW-1:0]           off_wr_addr,
  input  logic [NCC-1:0][D-1:0][31:0]      off_wr_data,
  input  logic [STG_W-1:0]                 stage,
  input  logic                             reconfiguring,
  input  logic [NCC-1:0]                   cc_decoding,
  input  logic [NCC-1:0]                   cc_stall_pipe,
  input  logic [NCC-1:0]                   cc_stall_fill,
  input  logic [NCC-1:0]                   cc_stall_red,
  input  logic [NCC-1:0]                   cc_stream_word
);

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;

  // data and reference
  byte         x   [SEQ_MAX][HIDDEN];
  logic [3:0]  wq  [HIDDEN][HIDDEN];
  logic [3:0]  wk  [HIDDEN][HIDDEN];
  logic [3:0]  wv  [HIDDEN][HIDDEN];
  byte         qr  [SEQ_MAX][HIDDEN];
  byte         kr  [SEQ_MAX][HIDDEN];
  int          vr  [SEQ_MAX][HIDDEN];
  int          ar  [SEQ_MAX][SEQ_MAX];
  bit          v_seen [SEQ_MAX * HIDDEN / D];
  bit          a_seen [SEQ_MAX * SEQ_MAX / D];
  int unsigned cur_seq;
  int unsigned v_words, a_words, bad_addr;

  // mechanism counters
  int unsigned n_switch, n_reconf_cyc, n_parallel, n_seq, n_redist, n_stream, n_stall_pipe, n_stall_fill, n_stall_red;
  longint unsigned n_stage0_cyc;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  function automatic byte rq(input int acc);
    int s;
    s = acc >>> SHIFT;
    if (s > 127) return 8'sd127;
    if (s < -128) return -8'sd128;
    return byte'(s);
  endfunction

  task automatic make_data();
    for (int i = 0; i < SEQ_MAX; i++)
      for (int k = 0; k < HIDDEN; k++) x[i][k] = byte'($urandom_range(0, 255));
    for (int k = 0; k < HIDDEN; k++)
      for (int j = 0; j < HIDDEN; j++) begin
        wq[k][j] = 4'($urandom_range(0, 15));
        wk[k][j] = 4'($urandom_range(0, 15));
        wv[k][j] = 4'($urandom_range(0, 15));
      end
  endtask

  task automatic make_ref(input int unsigned s);
    int aq, ak, av;
    for (int i = 0; i < int'(s); i++)
      for (int j = 0; j < HIDDEN; j++) begin
        aq = 0; ak = 0; av = 0;
        for (int k = 0; k < HIDDEN; k++) begin
          aq += int'(x[i][k]) * int'({28'd0, wq[k][j]});
          ak += int'(x[i][k]) * int'({28'd0, wk[k][j]});
          av += int'(x[i][k]) * int'({28'd0, wv[k][j]});
        end
        qr[i][j] = rq(aq);
        kr[i][j] = rq(ak);
        vr[i][j] = av;
      end
    for (int i = 0; i < int'(s); i++)
      for (int l = 0; l < int'(s); l++) begin
        aq = 0;
        for (int h = 0; h < HIDDEN; h++) aq += int'(qr[i][h]) * int'(kr[l][h]);
        ar[i][l] = aq;
      end
  endtask

  // weight word w of core (col,row) as laid out in the weight scratchpad
  function automatic logic [3:0] wgt(input int col, input int row, input int w, input int q);
    int h, k, t, reg_i, j, base, sel;
    h = HIDDEN * JT / 2;              // region unit
    sel = w / h;
    if (!SEQUENTIAL_QV || sel == 2 || (col == 1 && sel == 3)) begin
      // full-slice region at 0 or at 2h
      base = (sel >= 2) ? 2 * h : 0;
      k = (w - base) / JT; t = (w - base) % JT;
      reg_i = (sel >= 2) ? 2 : 0;
    end else begin
      base = sel * h;
      k = (w - base) / (JT / 2); t = col * (JT / 2) + (w - base) % (JT / 2);
      reg_i = sel;
    end
    j = row * SLICE + t * D + q;
    if (col == 0) return (SEQUENTIAL_QV && reg_i == 1) ? wv[k][j] : wq[k][j];
    if (reg_i == 2) return wk[k][j];
    return (SEQUENTIAL_QV && reg_i == 1) ? wq[k][j] : wv[k][j];
  endfunction

  task automatic preload();
    for (int w = 0; w < 2 * HIDDEN * JT; w++) begin
      for (int c = 0; c < NCC; c++) begin
        int col, row;
        col = c / N_ROWS; row = c % N_ROWS;
        pl_wr_en[c]   = (col == 1) || (w < HIDDEN * JT);
        pl_wr_addr[c] = WAW'(w);
        for (int q = 0; q < D; q++) pl_wr_data[c][q*4 +: 4] = wgt(col, row, w, q);
      end
      @(posedge clk); #1;
    end
    pl_wr_en = '0;
  endtask

  // off-chip read model: one cycle of latency
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCC; c++)
      if (off_rd_en[c]) begin
        int tiles, k, t;
        tiles = int'(cur_seq) / D;
        k = int'(off_rd_addr[c]) / tiles;
        t = int'(off_rd_addr[c]) % tiles;
        for (int p = 0; p < D; p++) off_rd_data[c][p*8 +: 8] <= x[t*D + p][k];
      end
  end

  // off-chip write checker
  always @(posedge clk) begin
    for (int c = 0; c < NCC; c++)
      if (rst_n && off_wr_en[c]) begin
        int a, i, wc, ok;
        ok = 1;
        if (int'(off_wr_addr[c]) >= int'(A_BASE)) begin
          a  = int'(off_wr_addr[c]) - int'(A_BASE);
          i  = a / (int'(cur_seq) / D);
          wc = a % (int'(cur_seq) / D);
          if (i >= int'(cur_seq) || a_seen[a]) begin ok = 0; bad_addr++; end
          else begin
            a_seen[a] = 1'b1; a_words++;
            for (int q = 0; q < D; q++) if ($signed(off_wr_data[c][q]) != ar[i][wc*D+q]) ok = 0;
          end
        end else begin
          a  = int'(off_wr_addr[c]) - int'(V_BASE);
          i  = a / (HIDDEN / D);
          wc = a % (HIDDEN / D);
          if (i >= int'(cur_seq) || v_seen[a]) begin ok = 0; bad_addr++; end
          else begin
            v_seen[a] = 1'b1; v_words++;
            for (int q = 0; q < D; q++) if ($signed(off_wr_data[c][q]) != vr[i][wc*D+q]) ok = 0;
          end
        end
        checks++;
        if (ok == 0) begin
          failures++;
          if (failures < 10) $display("MISMATCH core %0d addr %h at cycle %0d", c, off_wr_addr[c], cycle);
        end
      end
  end

  // mechanism monitors
  logic [STG_W-1:0] stage_d;
  always @(posedge clk) begin
    cycle++;
    if (cycle > WATCHDOG) begin
      failures++;
      $display("WATCHDOG expired at cycle %0d", cycle);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    if (rst_n && busy) begin
      if (reconfiguring || (|cc_decoding)) n_reconf_cyc++;
      if (stage == FIRST_STG && !reconfiguring && !(|cc_decoding)) n_stage0_cyc++;
      if (stage != stage_d) n_switch++;
      if (stage == STG_QV && off_rd_en[0] && off_rd_en[N_ROWS]) n_parallel++;
      if ((stage == STG_V || stage == STG_Q) && (&off_rd_en)) n_seq++;
      if (stage == STG_Q)
        for (int r = 0; r < N_ROWS; r++) if (cc_stream_word[r]) n_redist++;
      for (int c = 0; c < NCC; c++) begin
        if (cc_stall_pipe[c]) n_stall_pipe++;
        if (cc_stall_fill[c]) n_stall_fill++;
        if (cc_stall_red[c])  n_stall_red++;
        if (cc_stream_word[c]) n_stream++;
      end
    end
    stage_d <= stage;
  end
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int unsigned s);
    longint unsigned t0, exp0;
    int unsigned work0;
    int unsigned reconf0;
    cur_seq = s;
    for (int a = 0; a < SEQ_MAX * HIDDEN / D; a++) v_seen[a] = 1'b0;
    for (int a = 0; a < SEQ_MAX * SEQ_MAX / D; a++) a_seen[a] = 1'b0;
    v_words = 0; a_words = 0; bad_addr = 0;
    n_stage0_cyc = 0;
    reconf0 = n_reconf_cyc;
    make_ref(s);
    seq_len = BOUND_W'(s);
    @(posedge clk); #1;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    t0 = cycle;
    wait (done);
    @(posedge clk); #1;
    $display("seq_len %0d: %0d cycles, V words %0d, A words %0d", s, cycle - t0, v_words, a_words);
    check(v_words == s * HIDDEN / D, "every V word written");
    check(a_words == s * s / D, "every A word written");
    check(bad_addr == 0, "no stray or repeated write");
    check(n_reconf_cyc - reconf0 == 4 * N_STG,
          $sformatf("%0d 4-cycle reconfigurations (got %0d cycles)", N_STG, n_reconf_cyc - reconf0));
    work0 = s / D * J0 * (HIDDEN + 1 + D);
    exp0 = {32'd0, work0} + 64'd1;
    check(n_stage0_cyc == exp0, $sformatf("stage 0 length %0d, expected %0d", n_stage0_cyc, exp0));
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; seq_len = '0;
    pl_wr_en = '0; pl_wr_addr = '0; pl_wr_data = '0;
    n_switch = 0; n_reconf_cyc = 0; n_parallel = 0; n_seq = 0; n_redist = 0; n_stream = 0;
    n_stall_pipe = 0; n_stall_fill = 0; n_stall_red = 0;
    cur_seq = RUN_SEQ0;
    make_data();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    preload();
    run(RUN_SEQ0);
    if (RUN_SEQ1 != 0) run(RUN_SEQ1);
    $display("mechanisms: stage switches %0d, reconfiguration cycles %0d, task-parallel cycles %0d, sequential cycles %0d,",
             n_switch, n_reconf_cyc, n_parallel, n_seq);
    $display("            streamed words %0d (of which redistributed Q words %0d),", n_stream, n_redist);
    $display("            pipe back-pressure stalls %0d, stream-buffer waits %0d, reduction waits %0d",
             n_stall_pipe, n_stall_fill, n_stall_red);
    check(n_switch >= N_STG - 1, "every stage switch occurred");
    if (SEQUENTIAL_QV) begin
      check(n_seq > 0, "sequential execution on all cores occurred");
      check(n_redist == (RUN_SEQ0 + RUN_SEQ1) * HIDDEN / 2 / D, "every redistributed Q word received");
    end else
      check(n_parallel > 0, "task-parallel execution occurred");
    check(n_stream > 0, "task-pipeline streaming occurred");
    check(n_stall_pipe > 0, "task-pipeline back-pressure stall occurred");
    check(n_stall_fill > 0, "stream-buffer wait occurred");
    check(n_stall_red > 0 || N_ROWS == 1, "reduction wait occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
