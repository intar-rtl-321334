// tb_stream_fifo: random push/pop traffic against a queue model; checks data
// order, the full (back-pressure) and empty conditions and the count.
module tb_stream_fifo;
  localparam int unsigned WIDTH = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("WATCHDOG"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      in_valid  = ($urandom_range(0, 99) < (n < 1500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (n < 1500 ? 30 : 70));
      in_data   = WIDTH'($urandom);
      #1;
      chk(count == q.size(), "count");
      chk(in_ready == (q.size() < DEPTH), "in_ready");
      chk(out_valid == (q.size() != 0), "out_valid");
      if (out_valid) chk(out_data == q[0], "order");
      if (!in_ready) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      #1;
    end
    chk(n_full > 0, "FIFO became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
