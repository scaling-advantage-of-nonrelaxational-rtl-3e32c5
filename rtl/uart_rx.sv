// uart_rx: 8N1 serial receiver (LSB first, one start bit, one stop bit), through which
// the host sends parameters, initial values and couplings. The line is synchronised by
// two flip-flops; a falling edge starts a frame, each bit is sampled in its middle
// (CLKS_PER_BIT clock cycles per bit, 434 = 50 MHz / 115200 baud by default, this
// design's choice: the source design names the UART but not its rate). A byte with a
// valid stop bit is presented on data_o with a one-cycle valid_o pulse; a frame with a
// bad stop bit is dropped.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_i,
  output logic       valid_o,
  output logic [7:0] data_o
);
  typedef enum logic [1:0] { R_IDLE, R_START, R_DATA, R_STOP } rstate_e;
  rstate_e st;
  logic [1:0]  sync;
  logic [15:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= 2'b11; st <= R_IDLE; cnt <= '0; bitn <= '0; sh <= '0;
      valid_o <= 1'b0; data_o <= '0;
    end else begin
      sync    <= {sync[0], rx_i};
      valid_o <= 1'b0;
      case (st)
        R_IDLE: if (!sync[1]) begin
          cnt <= 16'(CLKS_PER_BIT / 2); st <= R_START;
        end
        R_START: if (cnt == 0) begin
          if (!sync[1]) begin cnt <= 16'(CLKS_PER_BIT - 1); bitn <= '0; st <= R_DATA; end
          else st <= R_IDLE;
        end else cnt <= cnt - 1'b1;
        R_DATA: if (cnt == 0) begin
          sh  <= {sync[1], sh[7:1]};
          cnt <= 16'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) st <= R_STOP;
          bitn <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        R_STOP: if (cnt == 0) begin
          if (sync[1]) begin valid_o <= 1'b1; data_o <= sh; end
          st <= R_IDLE;
        end else cnt <= cnt - 1'b1;
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
