// tb_instr_reader: drives the instruction reader with the static buffer and a
// model of the cores' done flags.  Checks the READ-MODIFY-SEND sequence (3
// cycles from start or stage end to inst_valid), the seq_len rewrite of the i
// bound, that each stage waits for all_done, and done after the last entry.
module tb_instr_reader;
  import intar_pkg::*;
  localparam int unsigned PE_DIM = 8;
  logic clk = 0, rst_n = 0, start = 0, all_done = 0;
  logic [BOUND_W-1:0] seq_len = '0;
  logic buf_rd_en, inst_valid, busy, done, reconfiguring;
  logic [STG_W-1:0] buf_rd_addr;
  config_entry_t buf_entry;
  config_inst_t inst;
  int checks = 0, failures = 0;

  config_inst_buffer #(.SEQ_MAX(64), .HIDDEN(256), .N_ROWS(2), .PE_DIM(PE_DIM)) u_buf (
    .clk, .rd_en(buf_rd_en), .rd_addr(buf_rd_addr), .rd_entry(buf_entry));
  instr_reader #(.PE_DIM(PE_DIM)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // wait for inst_valid, return the number of cycles it took
  task automatic wait_inst(output int n);
    n = 0;
    while (!inst_valid) begin @(posedge clk); #1; n++; end
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      seq_len = (run == 0) ? 16'd64 : 16'd24;
      start = 1; @(posedge clk); #1; start = 0;
      wait_inst(n);
      chk(n == 2, $sformatf("start to SEND %0d cycles (READ, MODIFY before SEND)", n));
      chk(inst.stg_idx == STG_QV, "stage 0 sent first");
      chk(inst.i_bound == seq_len / PE_DIM, "i bound rewritten from seq_len");
      chk(inst.j_bound == 16 && inst.k_bound == 256, "fixed bounds kept");
      @(posedge clk); #1;
      chk(!inst_valid, "inst_valid lasts one cycle");
      repeat (10) begin @(posedge clk); #1; chk(!inst_valid && busy, "waits for all_done"); end
      all_done = 1; @(posedge clk); #1; all_done = 0;   // reader now in READ
      wait_inst(n);
      chk(n == 2, "stage switch: READ, MODIFY, then SEND");
      chk(inst.stg_idx == STG_KA && inst.i_bound == seq_len / PE_DIM, "stage 1 instruction");
      @(posedge clk); #1;
      repeat (5) begin @(posedge clk); #1; end
      chk(!done, "not done before the last stage ends");
      all_done = 1; @(posedge clk); #1; all_done = 0;
      chk(done && !busy, "done after the last stage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
