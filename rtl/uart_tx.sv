// uart_tx: 8N1 serial transmitter (LSB first) returning results to the host. start_i
// with data_i loads a byte when busy_o is low; the line then carries a start bit, eight
// data bits and a stop bit, CLKS_PER_BIT clock cycles each (default 434, 115200 baud at
// 50 MHz, this design's choice). busy_o is high from the cycle after start_i until the
// stop bit has been sent. The line idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start_i,
  input  logic [7:0] data_i,
  output logic       tx_o,
  output logic       busy_o
);
  logic [15:0] cnt;
  logic [3:0]  bitn;
  logic [9:0]  frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; bitn <= '0; frame <= '1; busy_o <= 1'b0; tx_o <= 1'b1;
    end else if (!busy_o) begin
      tx_o <= 1'b1;
      if (start_i) begin
        frame  <= {1'b1, data_i, 1'b0};
        busy_o <= 1'b1;
        bitn   <= '0;
        cnt    <= 16'(CLKS_PER_BIT - 1);
        tx_o   <= 1'b0;
      end
    end else begin
      if (cnt == 0) begin
        if (bitn == 4'd9) begin
          busy_o <= 1'b0;
          tx_o   <= 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
          tx_o <= frame[bitn + 1'b1];
          cnt  <= 16'(CLKS_PER_BIT - 1);
        end
      end else cnt <= cnt - 1'b1;
    end
  end
endmodule
