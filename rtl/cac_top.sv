// cac_top: chaotic amplitude control (CAC) Ising solver, top level. A host loads an
// Ising problem (N spins, ternary couplings w_ij in {-1, 0, +1}), the initial x_i and
// e_i and the run parameters over a UART, starts a run and receives the lowest energy
// found, when it was found and the spin configuration. Inside: uart_rx -> host_if ->
// cac_circuit, and host_if -> uart_tx for the reply (see host_if for the protocol).
// The source design derives three clocks (50, 100 and 300 MHz) from a 250 MHz board
// clock with a PLL and gates them with clock buffers; both are FPGA primitives and are
// not part of this RTL: here the whole design runs on the single clock clk_i, which
// stands for the PLL output. rst_n_i is an active-low asynchronous reset. busy_o is high
// during a run; event_o pulses for one cycle on an improvement of the best energy (bit 0),
// a reset of the error rate xi (bit 1) and an e update that hit the clamp (bit 2), for
// activity indicators.
// Defaults: U = 100 spins per block (u = 100 of the source), N_MAX = 2000 spins,
// UART at CLKS_PER_BIT = 434 (115200 baud at 50 MHz).
module cac_top
  import cac_pkg::*;
#(
  parameter int unsigned U            = 100,
  parameter int unsigned N_MAX        = 2000,
  parameter int unsigned DSP_LAT      = 5,
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic clk_i,
  input  logic rst_n_i,
  input  logic uart_rx_i,
  output logic uart_tx_o,
  output logic busy_o,
  output logic [2:0] event_o
);
  localparam int unsigned NB_MAX = (N_MAX + U - 1) / U;
  localparam int unsigned BW     = $clog2(NB_MAX + 1);
  localparam int unsigned JAW    = $clog2(NB_MAX * NB_MAX + 1);
  localparam int unsigned LNW    = (U > 1) ? $clog2(U) : 1;
  localparam int unsigned LDW    = (2*U > DW) ? 2*U : DW;

  logic          rx_valid, tx_start, tx_busy;
  logic [7:0]    rx_data, tx_data;
  cac_params_t   params;
  logic          ld_we, start, done;
  ld_sel_e       ld_sel;
  logic [JAW-1:0] ld_addr;
  logic [LNW-1:0] ld_lane;
  logic [LDW-1:0] ld_data;
  acc_t          h_opt;
  logic [31:0]   nu_opt;
  logic [BW-1:0] best_raddr;
  logic [U-1:0]  best_rdata;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk(clk_i), .rst_n(rst_n_i), .rx_i(uart_rx_i), .valid_o(rx_valid), .data_o(rx_data));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk(clk_i), .rst_n(rst_n_i), .start_i(tx_start), .data_i(tx_data), .tx_o(uart_tx_o),
    .busy_o(tx_busy));

  host_if #(.U(U), .N_MAX(N_MAX)) u_host (
    .clk(clk_i), .rst_n(rst_n_i), .rx_valid_i(rx_valid), .rx_data_i(rx_data),
    .tx_start_o(tx_start), .tx_data_o(tx_data), .tx_busy_i(tx_busy), .params_o(params),
    .ld_we_o(ld_we), .ld_sel_o(ld_sel), .ld_addr_o(ld_addr), .ld_lane_o(ld_lane),
    .ld_data_o(ld_data), .start_o(start), .done_i(done), .h_opt_i(h_opt),
    .nu_opt_i(nu_opt), .best_raddr_o(best_raddr), .best_rdata_i(best_rdata));

  cac_circuit #(.U(U), .N_MAX(N_MAX), .DSP_LAT(DSP_LAT)) u_circuit (
    .clk(clk_i), .rst_n(rst_n_i), .params, .start_i(start), .busy_o, .done_o(done),
    .ld_we, .ld_sel, .ld_addr, .ld_lane, .ld_data, .h_opt_o(h_opt), .nu_opt_o(nu_opt),
    .best_raddr_i(best_raddr), .best_rdata_o(best_rdata),
    .ev_improve_o(event_o[0]), .ev_reset_o(event_o[1]), .ev_e_clamp_o(event_o[2]));
endmodule
