// tb_dm_ctrl: checks every routing choice of the data movement control unit:
// operand sources and precision select, each write-back destination with its
// data format (requantised column or full row), the handshakes, and the
// stream-buffer fill path.  Expected values are computed here from the tile.
module tb_dm_ctrl;
  import intar_pkg::*;
  localparam int unsigned D = 4, A_W = 8, B_W = 4, C_W = 8, ACC_W = 32, SHIFT = 4;
  cc_ctrl_t ctrl;
  logic red_sink;
  logic [D*A_W-1:0] off_rd_data, sp_rd_data, op1_vec, sp_wr_data, pipe_out_data;
  logic [D*B_W-1:0] w_rd_data;
  logic [D*C_W-1:0] k_rd_data, pipe_in_data, k_wr_data;
  logic [D*8-1:0] op2_vec;
  logic prec_c, wb_valid, wb_ready, sp_wr_en, off_wr_en, pipe_out_valid, pipe_out_ready;
  logic [$clog2(D)-1:0] wb_idx;
  logic [D-1:0][D-1:0][ACC_W-1:0] tile;
  logic [D-1:0][ACC_W-1:0] off_wr_data, ru_own_row, ru_out_row, red_out_data;
  logic ru_own_valid, ru_own_ready, ru_out_valid, ru_out_ready, red_out_valid, red_out_ready;
  logic kfill_active, pipe_in_valid, pipe_in_ready, k_wr_en, rx_active, rx_wr_en;
  logic [D*A_W-1:0] rx_wr_data;
  int checks = 0, failures = 0;

  dm_ctrl #(.D(D), .A_W(A_W), .B_W(B_W), .C_W(C_W), .ACC_W(ACC_W), .SHIFT(SHIFT)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic logic [7:0] rq(input int a);
    int s;
    s = a >>> SHIFT;
    return (s > 127) ? 8'h7f : (s < -128) ? 8'h80 : 8'(s);
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [D*A_W-1:0] col;
      ctrl.op1_src = op1_src_e'($urandom_range(0, 1));
      ctrl.op2_src = op2_src_e'($urandom_range(0, 1));
      ctrl.out_dst = out_dst_e'($urandom_range(0, 3));
      ctrl.kfill = 1'($urandom); ctrl.wsel = 2'($urandom);
      ctrl.split = 1'($urandom); ctrl.rx_q = 1'($urandom);
      red_sink = 1'($urandom);
      off_rd_data = {$urandom}; sp_rd_data = {$urandom}; w_rd_data = 16'($urandom);
      k_rd_data = {$urandom}; pipe_in_data = {$urandom};
      for (int p = 0; p < D; p++) for (int q = 0; q < D; q++) tile[p][q] = 32'($signed(16'($urandom)));
      wb_idx = 2'($urandom); wb_valid = 1'($urandom);
      pipe_out_ready = 1'($urandom); ru_own_ready = 1'($urandom); ru_out_valid = 1'($urandom);
      red_out_ready = 1'($urandom); kfill_active = 1'($urandom); pipe_in_valid = 1'($urandom);
      rx_active = !kfill_active && 1'($urandom);
      for (int q = 0; q < D; q++) ru_out_row[q] = $urandom;
      #1;
      for (int p = 0; p < D; p++) col[p*8 +: 8] = rq($signed(tile[p][wb_idx]));
      chk(op1_vec == (ctrl.op1_src == OP1_SCRATCH ? sp_rd_data : off_rd_data), "op1 source");
      chk(prec_c == (ctrl.op2_src == OP2_STREAM_C), "precision select");
      chk(op2_vec == (ctrl.op2_src == OP2_STREAM_C ? k_rd_data : {16'd0, w_rd_data}), "op2 source");
      chk(k_wr_en == (kfill_active && pipe_in_valid) && pipe_in_ready == (kfill_active || rx_active)
          && k_wr_data == pipe_in_data, "fill path");
      chk(rx_wr_en == (rx_active && pipe_in_valid) && rx_wr_data == pipe_in_data, "redistribution receive path");
      case (ctrl.out_dst)
        DST_SCRATCH_T: begin
          chk(sp_wr_en == wb_valid && !off_wr_en && !pipe_out_valid && !ru_own_valid && wb_ready, "scratch routing");
          chk(sp_wr_data == col, "requantised column to scratchpad");
        end
        DST_OFFCHIP: begin
          chk(off_wr_en == wb_valid && !sp_wr_en && !pipe_out_valid && wb_ready, "offchip routing");
          chk(off_wr_data == tile[wb_idx], "full row off-chip");
        end
        DST_PIPE: begin
          chk(pipe_out_valid == wb_valid && wb_ready == pipe_out_ready && !off_wr_en && !sp_wr_en, "pipe routing");
          chk(pipe_out_data == col, "requantised column to pipe");
        end
        default: begin
          chk(ru_own_valid == wb_valid && wb_ready == ru_own_ready && ru_own_row == tile[wb_idx], "reduction input");
          if (red_sink) chk(off_wr_en == ru_out_valid && ru_out_ready && off_wr_data == ru_out_row && !red_out_valid, "reduced row off-chip");
          else chk(red_out_valid == ru_out_valid && ru_out_ready == red_out_ready && red_out_data == ru_out_row && !off_wr_en, "reduced row forwarded");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
