// tb_uart_rx: sends 300 random 8N1 frames at CLKS_PER_BIT = 16 with random idle gaps
// (and, every 25th frame, a low stop bit that must be dropped); checks every received
// byte, that no byte is lost or invented, and the latency from the start edge to the
// valid pulse (9.5 bit times plus the synchroniser, within 9.5*CPB .. 9.5*CPB + 4).
module tb_uart_rx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rx = 1'b1, valid;
  logic [7:0] data;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int sent_q[$];
  int t_start, n_bad = 0, n_rx = 0, cyc = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx_i(rx), .valid_o(valid), .data_o(data));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc++;
  always @(negedge clk) if (valid) begin
    int lat;
    n_rx++;
    lat = cyc - t_start;
    checks += 2;
    if (sent_q.size() == 0 || int'(data) != sent_q[0]) begin
      failures++; $display("FAIL data %0h", data);
    end
    if (sent_q.size() != 0) void'(sent_q.pop_front());
    if (lat < CPB*19/2 || lat > CPB*19/2 + 4) begin failures++; $display("FAIL latency %0d", lat); end
  end

  task automatic send(input logic [7:0] b, input bit bad_stop);
    t_start = cyc;
    rx = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = !bad_stop; repeat (CPB) @(posedge clk);
    rx = 1'b1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int k = 0; k < 300; k++) begin
      logic [7:0] b;
      bit bad;
      b = 8'($urandom);
      bad = (k % 25 == 24);
      if (!bad) sent_q.push_back(int'(b)); else n_bad++;
      send(b, bad);
      repeat ($urandom_range(bad ? CPB*2 : 1, bad ? CPB*3 : CPB)) @(posedge clk);
    end
    repeat (CPB*12) @(posedge clk);
    checks++;
    if (n_rx != 300 - n_bad || sent_q.size() != 0) begin failures++; $display("FAIL count %0d", n_rx); end
    $display("received=%0d dropped_bad_stop=%0d", n_rx, n_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
