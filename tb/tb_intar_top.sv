// tb_intar_top: end-to-end test of the accelerator at reduced size
// (sequence up to 32, hidden 128, 4x4 PE arrays, 2 rows of cores), run for
// two sequence lengths so that the run-time loop-bound rewrite is exercised.
// All checking is done by intar_env.
module tb_intar_top;
  import intar_pkg::*;
  localparam int unsigned SEQ_MAX = 32, HIDDEN = 128, N_ROWS = 2, PE_DIM = 4;
  localparam int unsigned NCC = 2 * N_ROWS, D = PE_DIM;
  localparam int unsigned WAW = $clog2(2 * HIDDEN * (HIDDEN / N_ROWS / PE_DIM));
  localparam int unsigned AW = 20;

  logic clk, rst_n, start, busy, done, reconfiguring;
  logic [BOUND_W-1:0] seq_len;
  logic [NCC-1:0] pl_wr_en, off_rd_en, off_wr_en, cc_decoding, cc_stall_pipe, cc_stall_fill, cc_stall_red, cc_stream_word;
  logic [NCC-1:0][WAW-1:0] pl_wr_addr;
  logic [NCC-1:0][D*4-1:0] pl_wr_data;
  logic [NCC-1:0][AW-1:0] off_rd_addr, off_wr_addr;
  logic [NCC-1:0][D*8-1:0] off_rd_data;
  logic [NCC-1:0][D-1:0][31:0] off_wr_data;
  logic [STG_W-1:0] stage;

  intar_top #(.SEQ_MAX(SEQ_MAX), .HIDDEN(HIDDEN), .N_ROWS(N_ROWS), .PE_DIM(PE_DIM), .FIFO_DEPTH(4)) dut (.*);

  intar_env #(.SEQ_MAX(SEQ_MAX), .HIDDEN(HIDDEN), .N_ROWS(N_ROWS), .PE_DIM(PE_DIM),
              .RUN_SEQ0(32), .RUN_SEQ1(16), .WATCHDOG(2_000_000)) env (.*);
endmodule
