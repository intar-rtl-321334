// tb_scratchpad: random writes and reads against an array model; checks the
// one-cycle read latency and that read data holds when rd_en is low.
module tb_scratchpad;
  localparam int unsigned WIDTH = 24, DEPTH = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic [WIDTH-1:0] wr_data = '0, rd_data, model [DEPTH], expect_q;
  int checks = 0, failures = 0;
  bit pend = 0;

  scratchpad #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 6'(a); wr_data = WIDTH'($urandom); model[a] = wr_data;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      wr_en = $urandom_range(0, 1); wr_addr = 6'($urandom); wr_data = WIDTH'($urandom);
      rd_en = $urandom_range(0, 1); rd_addr = 6'($urandom);
      @(posedge clk);
      if (rd_en) begin expect_q = model[rd_addr]; pend = 1; end
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      if (pend) begin
        checks++;
        if (rd_data !== expect_q) begin failures++; $display("read mismatch"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
