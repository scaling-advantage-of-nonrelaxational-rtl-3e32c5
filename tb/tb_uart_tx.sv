// tb_uart_tx: transmits 200 random bytes at CLKS_PER_BIT = 16, starting each as soon as
// busy falls (and sometimes later); decodes the line by sampling the middle of each bit
// from the start edge, checks the byte, the start and stop bits, that the line is high
// when idle, and that busy lasts 10 bit times (10*CPB .. 10*CPB + 1 cycles).
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, start = 0, tx, busy;
  logic [7:0] din = '0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .start_i(start), .data_i(din), .tx_o(tx), .busy_o(busy));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (tx !== 1'b1) begin failures++; $display("FAIL idle line"); end
    for (int k = 0; k < 200; k++) begin
      logic [7:0] b, got;
      int bc;
      b = 8'($urandom);
      din = b; start = 1;
      @(negedge clk); start = 0; din = 8'($urandom);
      // the start bit began at the edge just passed; sample mid-bits
      repeat (CPB/2 - 1) @(negedge clk);
      checks++;
      if (tx !== 1'b0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        got[i] = tx;
      end
      repeat (CPB) @(negedge clk);
      checks += 2;
      if (tx !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      if (got != b) begin failures++; $display("FAIL byte %0h exp %0h", got, b); end
      bc = CPB/2 - 1 + 9*CPB + 1;   // cycles waited so far since start
      while (busy) begin @(negedge clk); bc++; end
      checks++;
      if (bc < 10*CPB || bc > 10*CPB + 1) begin failures++; $display("FAIL busy length %0d", bc); end
      if (k % 3 == 0) repeat ($urandom_range(1, 20)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
