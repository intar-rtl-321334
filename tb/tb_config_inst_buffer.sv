// tb_config_inst_buffer: reads the entries of both static schedules
// (task-parallel first stage, and the sequential alternative) and checks
// stage indices, bounds, flags and the one-cycle read latency.
module tb_config_inst_buffer;
  import intar_pkg::*;
  logic clk = 0, rd_en = 0;
  logic [STG_W-1:0] rd_addr = '0;
  config_entry_t rd_entry, rd_entry_s;
  int checks = 0, failures = 0;

  config_inst_buffer #(.SEQ_MAX(64), .HIDDEN(256), .N_ROWS(2), .PE_DIM(8)) dut (.*);
  config_inst_buffer #(.SEQ_MAX(64), .HIDDEN(256), .N_ROWS(2), .PE_DIM(8), .SEQUENTIAL_QV(1'b1)) dut_s (
    .clk, .rd_en, .rd_addr, .rd_entry(rd_entry_s));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    @(posedge clk); #1;
    rd_en = 1; rd_addr = 0;
    @(posedge clk); #1;
    chk(rd_entry.inst.stg_idx == STG_QV, "entry 0 stage");
    chk(rd_entry.inst.i_bound == 8 && rd_entry.inst.j_bound == 16 && rd_entry.inst.k_bound == 256, "entry 0 bounds");
    chk(rd_entry.seq_scaled == 3'b100 && rd_entry.last == 1'b0, "entry 0 flags");
    chk(rd_entry_s.inst.stg_idx == STG_V && rd_entry_s.inst.j_bound == 8 && rd_entry_s.inst.i_bound == 8
        && rd_entry_s.inst.k_bound == 256 && !rd_entry_s.last, "sequential entry 0");
    rd_addr = 1;
    @(posedge clk); #1;
    chk(rd_entry.inst.stg_idx == STG_KA, "entry 1 stage");
    chk(rd_entry.inst.i_bound == 8 && rd_entry.inst.j_bound == 16 && rd_entry.inst.k_bound == 256, "entry 1 bounds");
    chk(rd_entry.seq_scaled == 3'b100 && rd_entry.last == 1'b1, "entry 1 flags");
    chk(rd_entry_s.inst.stg_idx == STG_Q && rd_entry_s.inst.j_bound == 8 && rd_entry_s.seq_scaled == 3'b100
        && !rd_entry_s.last, "sequential entry 1");
    rd_addr = 2;
    @(posedge clk); #1;
    chk(rd_entry_s.inst.stg_idx == STG_KA && rd_entry_s.inst.j_bound == 16 && rd_entry_s.inst.k_bound == 256
        && rd_entry_s.last, "sequential entry 2");
    rd_en = 0; rd_addr = 0;
    @(posedge clk); #1;
    chk(rd_entry_s.inst.stg_idx == STG_KA && rd_entry_s.last, "holds without rd_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
