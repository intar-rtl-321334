// tb_pea: checks the PE array against a reference outer-product accumulation,
// in both precisions: b-bit operand-2 lanes (zero-padded, so unsigned) and
// c-bit lanes (signed), including restarts with in_first and idle cycles.
module tb_pea;
  localparam int unsigned D1 = 4, D2 = 3, A_W = 8, B_W = 4, C_W = 8, ACC_W = 32, LB = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, prec_c = 0;
  logic [D1*A_W-1:0] op1_vec = '0;
  logic [D2*LB-1:0]  op2_vec = '0;
  logic [D1-1:0][D2-1:0][ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  int ref_acc [D1][D2];

  pea #(.D1(D1), .D2(D2), .A_W(A_W), .B_W(B_W), .C_W(C_W), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic step(input bit first, input bit pc);
    int a, b;
    for (int p = 0; p < D1; p++) op1_vec[p*A_W +: A_W] = 8'($urandom);
    op2_vec = D2*LB'({$urandom, $urandom});
    in_valid = 1; in_first = first; prec_c = pc;
    for (int p = 0; p < D1; p++)
      for (int q = 0; q < D2; q++) begin
        a = int'($signed(op1_vec[p*A_W +: A_W]));
        b = pc ? int'($signed(op2_vec[q*C_W +: C_W])) : int'(op2_vec[q*B_W +: B_W]);
        ref_acc[p][q] = (first ? 0 : ref_acc[p][q]) + a * b;
      end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic compare();
    for (int p = 0; p < D1; p++)
      for (int q = 0; q < D2; q++) begin
        checks++;
        if ($signed(acc[p][q]) != ref_acc[p][q]) begin
          failures++;
          $display("acc[%0d][%0d]=%0d expected %0d", p, q, $signed(acc[p][q]), ref_acc[p][q]);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      bit pc;
      int len;
      pc = run[0];
      len = 1 + $urandom_range(0, 40);
      for (int k = 0; k < len; k++) begin
        step(k == 0, pc);
        if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end  // idle cycle keeps acc
      end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
