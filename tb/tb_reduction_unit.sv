// tb_reduction_unit: checks the sum and the handshake of the reduction unit
// for all combinations of own/partner valid and downstream ready, with and
// without a partner.
module tb_reduction_unit;
  localparam int unsigned D = 4, ACC_W = 32;
  logic add_partner, own_valid, own_ready, part_valid, part_ready, out_valid, out_ready;
  logic [D-1:0][ACC_W-1:0] own_row, part_row, out_row;
  int checks = 0, failures = 0;

  reduction_unit #(.D(D), .ACC_W(ACC_W)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      {add_partner, own_valid, part_valid, out_ready} = 4'(n % 16);
      for (int q = 0; q < D; q++) begin own_row[q] = $urandom; part_row[q] = $urandom; end
      #1;
      chk(out_valid == (own_valid && (!add_partner || part_valid)), "out_valid");
      chk(own_ready == (out_ready && (!add_partner || part_valid)), "own_ready");
      chk(part_ready == (add_partner && own_valid && out_ready), "part_ready");
      for (int q = 0; q < D; q++)
        chk(out_row[q] == (add_partner ? 32'(own_row[q] + part_row[q]) : own_row[q]), "sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
