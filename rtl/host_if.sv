// host_if: decodes the byte stream from the UART receiver into parameter writes,
// memory loads and run commands, and sends the result back through the UART
// transmitter. The source design loads parameters, initial x_i, e_i and couplings over
// a UART and returns results the same way; the byte protocol below is this design's.
//   01 id b0 b1 b2 b3      set parameter id (param_id_e) to the little-endian word
//   02 then n x 3 bytes    load x_0..x_{n-1}, 18-bit values, little endian
//   03 then n x 3 bytes    load e_0..e_{n-1}
//   04 then couplings      for each block row br, block column bc (nb = ceil(n/U)),
//                          each row r of the block: U/4 bytes, byte k holding
//                          w[r][4k..4k+3], two bits each, lowest column in bits 1:0
//   05                     run; when the run ends the reply is: best energy (4 bytes),
//                          MVM index at which it was found (4 bytes), then for every
//                          block ceil(U/8) bytes of best signs (bit = 1: sigma = -1),
//                          all little endian.
// Other command bytes are ignored. n is taken from the parameter record, so set it
// (and U must divide by 4) before loading. Loads go out on the ld_* bus one word per
// cycle; the circuit must be idle.
module host_if
  import cac_pkg::*;
#(
  parameter int unsigned U      = 100,
  parameter int unsigned N_MAX  = 2000,
  localparam int unsigned NB_MAX = (N_MAX + U - 1) / U,
  localparam int unsigned BW     = $clog2(NB_MAX + 1),
  localparam int unsigned JAW    = $clog2(NB_MAX * NB_MAX + 1),
  localparam int unsigned LNW    = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned NBY    = (U + 7) / 8,
  localparam int unsigned LDW    = (2*U > DW) ? 2*U : DW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rx_valid_i,
  input  logic [7:0]        rx_data_i,
  output logic              tx_start_o,
  output logic [7:0]        tx_data_o,
  input  logic              tx_busy_i,
  output cac_params_t       params_o,
  output logic              ld_we_o,
  output ld_sel_e           ld_sel_o,
  output logic [JAW-1:0]    ld_addr_o,
  output logic [LNW-1:0]    ld_lane_o,
  output logic [LDW-1:0]    ld_data_o,
  output logic              start_o,
  input  logic              done_i,
  input  acc_t              h_opt_i,
  input  logic [31:0]       nu_opt_i,
  output logic [BW-1:0]     best_raddr_o,
  input  logic [U-1:0]      best_rdata_i
);
  typedef enum logic [3:0] {
    H_CMD, H_PID, H_PVAL, H_VAL, H_JROW, H_RUN, H_TX, H_TX_GUARD, H_TX_WAIT
  } hstate_e;
  hstate_e st;

  logic [3:0]       pid;
  logic [23:0]      val;          // bytes received so far of a value
  logic [1:0]       bcnt;
  logic [15:0]      cnt;
  logic [BW-1:0]    blk;
  logic [LNW-1:0]   lane;
  ld_sel_e          sel;
  logic [2*U-9:0]   rowword;      // bytes received so far of a coupling row
  logic [$clog2(U/4 + 1)-1:0] jb;
  logic [JAW-1:0]   jaddr, jtotal;
  logic [BW-1:0]    nb;
  logic [3:0]       hidx;         // header byte index, 8 = header done
  logic [$clog2(NBY + 1)-1:0] bidx;
  logic [1:0]       guard;
  logic [8*NBY-1:0] best_pad;

  assign nb       = BW'((32'(params_o.n) + U - 1) / U);
  assign best_pad = (8*NBY)'(best_rdata_i);

  always_comb begin
    if (hidx < 4'd4)      tx_data_o = h_opt_i[8*hidx[1:0] +: 8];
    else if (hidx < 4'd8) tx_data_o = nu_opt_i[8*hidx[1:0] +: 8];
    else                  tx_data_o = best_pad[8*bidx +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_CMD; pid <= '0; val <= '0; bcnt <= '0; cnt <= '0; blk <= '0; lane <= '0;
      sel <= LD_X; rowword <= '0; jb <= '0; jaddr <= '0; jtotal <= '0; hidx <= '0;
      bidx <= '0; guard <= '0;
      ld_we_o <= 1'b0; ld_sel_o <= LD_X; ld_addr_o <= '0; ld_lane_o <= '0; ld_data_o <= '0;
      start_o <= 1'b0; tx_start_o <= 1'b0; best_raddr_o <= '0;
      params_o <= '0;
      params_o.n_x <= 8'd6; params_o.n_e <= 8'd3;
      params_o.dtx_sh <= 4'd6; params_o.dte_sh <= 4'd4; params_o.e_max <= FX_MAX;
      params_o.k_mvm <= 32'd1;
    end else begin
      ld_we_o    <= 1'b0;
      start_o    <= 1'b0;
      tx_start_o <= 1'b0;
      case (st)
        H_CMD: if (rx_valid_i) begin
          case (rx_data_i)
            CMD_PARAM: st <= H_PID;
            CMD_LOAD_X, CMD_LOAD_E: if (params_o.n != 0) begin
              sel <= (rx_data_i == CMD_LOAD_X) ? LD_X : LD_E;
              cnt <= '0; blk <= '0; lane <= '0; bcnt <= '0; st <= H_VAL;
            end
            CMD_LOAD_J: if (params_o.n != 0) begin
              jaddr <= '0; lane <= '0; jb <= '0;
              jtotal <= JAW'(32'(nb) * 32'(nb));
              st <= H_JROW;
            end
            CMD_RUN: begin start_o <= 1'b1; st <= H_RUN; end
            default: ;
          endcase
        end
        H_PID: if (rx_valid_i) begin pid <= rx_data_i[3:0]; bcnt <= '0; st <= H_PVAL; end
        H_PVAL: if (rx_valid_i) begin
          if (bcnt != 2'd3) val[8*bcnt +: 8] <= rx_data_i;
          bcnt <= bcnt + 1'b1;
          if (bcnt == 2'd3) begin
            logic [31:0] v;
            v = {rx_data_i, val[23:0]};
            case (param_id_e'(pid))
              P_N:     params_o.n      <= v[15:0];
              P_K:     params_o.k_mvm  <= v;
              P_BETA:  params_o.beta   <= fx_t'(v[DW-1:0]);
              P_P:     params_o.p      <= fx_t'(v[DW-1:0]);
              P_ALPHA: params_o.alpha  <= fx_t'(v[DW-1:0]);
              P_RHO:   params_o.rho    <= fx_t'(v[DW-1:0]);
              P_DELTA: params_o.delta  <= fx_t'(v[DW-1:0]);
              P_GAMMA: params_o.gamma  <= v;
              P_TAU:   params_o.tau    <= v;
              P_NX:    params_o.n_x    <= v[7:0];
              P_NE:    params_o.n_e    <= v[7:0];
              P_DTX:   params_o.dtx_sh <= v[3:0];
              P_DTE:   params_o.dte_sh <= v[3:0];
              P_EMAX:  params_o.e_max  <= fx_t'(v[DW-1:0]);
              default: ;
            endcase
            st <= H_CMD;
          end
        end
        H_VAL: if (rx_valid_i) begin
          val[8*bcnt +: 8] <= rx_data_i;
          if (bcnt == 2'd2) begin
            bcnt      <= '0;
            ld_we_o   <= 1'b1;
            ld_sel_o  <= sel;
            ld_addr_o <= JAW'(blk);
            ld_lane_o <= lane;
            ld_data_o <= LDW'({rx_data_i[DW-17:0], val[15:0]});
            if (32'(lane) == U - 1) begin lane <= '0; blk <= blk + 1'b1; end
            else lane <= lane + 1'b1;
            cnt <= cnt + 1'b1;
            if (cnt == params_o.n - 1'b1) st <= H_CMD;
          end else bcnt <= bcnt + 1'b1;
        end
        H_JROW: if (rx_valid_i) begin
          if (32'(jb) != U/4 - 1) rowword[8*jb +: 8] <= rx_data_i;
          if (32'(jb) == U/4 - 1) begin
            jb        <= '0;
            ld_we_o   <= 1'b1;
            ld_sel_o  <= LD_J;
            ld_addr_o <= jaddr;
            ld_lane_o <= lane;
            ld_data_o <= LDW'({rx_data_i, rowword[2*U-9:0]});
            if (32'(lane) == U - 1) begin
              lane  <= '0;
              jaddr <= jaddr + 1'b1;
              if (jaddr == jtotal - 1'b1) st <= H_CMD;
            end else lane <= lane + 1'b1;
          end else jb <= jb + 1'b1;
        end
        H_RUN: if (done_i) begin
          hidx <= '0; bidx <= '0; best_raddr_o <= '0; st <= H_TX;
        end
        H_TX: if (!tx_busy_i) begin
          tx_start_o <= 1'b1; guard <= 2'd2; st <= H_TX_GUARD;
        end
        H_TX_GUARD: if (guard == 0) st <= H_TX_WAIT; else guard <= guard - 1'b1;
        H_TX_WAIT: if (!tx_busy_i) begin
          if (hidx < 4'd8) begin
            hidx <= hidx + 1'b1; st <= H_TX;
          end else if (32'(bidx) == NBY - 1) begin
            bidx <= '0;
            if (best_raddr_o == nb - 1'b1) st <= H_CMD;
            else begin best_raddr_o <= best_raddr_o + 1'b1; st <= H_TX; end
          end else begin
            bidx <= bidx + 1'b1; st <= H_TX;
          end
        end
        default: st <= H_CMD;
      endcase
    end
  end
endmodule
