// cac_control: the finite-state machine that sequences one run of the solver. A run is
// k_mvm iterations; each iteration is
//   MVM   nb^2 block issues (block row br, block column bc, coupling address jaddr),
//         then DRAIN_MVM cycles for the pipeline to empty; the energy is then known;
//   COPY  if that energy beats the best so far, nb cycles copying the sign bits to the
//         best-configuration RAM;
//   X     n_x sweeps of nb blocks through the x lanes, each followed by X_LAT cycles so
//         the next sweep reads updated values;
//   E     n_e sweeps through the e lanes, each followed by E_LAT cycles;
//   UPD   one cycle in which the modulation (a, xi, best energy) is updated.
// nb = ceil(n / U) blocks. start_i begins a run (with run_clear_o for one cycle);
// done_o pulses once at its end. The source design overlaps the x and e sweeps with the
// product to hide their time; here the phases run one after another in the order of the
// source's pseudocode, which gives the same arithmetic (this design's choice).
module cac_control #(
  parameter int unsigned U         = 100,
  parameter int unsigned NB_MAX    = 20,
  parameter int unsigned DRAIN_MVM = 16,
  parameter int unsigned X_LAT     = 8,
  parameter int unsigned E_LAT     = 9,
  localparam int unsigned BW       = $clog2(NB_MAX + 1),
  localparam int unsigned JAW      = $clog2(NB_MAX * NB_MAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  logic [15:0]     n_i,
  input  logic [31:0]     k_mvm_i,
  input  logic [7:0]      n_x_i,
  input  logic [7:0]      n_e_i,
  input  logic            improved_i,
  output logic            busy_o,
  output logic            done_o,
  output logic            run_clear_o,
  output logic            ising_clear_o,
  output logic            mvm_valid_o,
  output logic            mvm_first_o,
  output logic            mvm_last_o,
  output logic [BW-1:0]   br_o,
  output logic [BW-1:0]   bc_o,
  output logic [JAW-1:0]  jaddr_o,
  output logic            copy_valid_o,
  output logic            x_valid_o,
  output logic            e_valid_o,
  output logic [BW-1:0]   blk_o,
  output logic            update_o
);
  typedef enum logic [3:0] {
    S_IDLE, S_MVM_START, S_MVM, S_MVM_WAIT, S_COPY, S_COPY_WAIT, S_X, S_X_WAIT,
    S_E, S_E_WAIT, S_UPD, S_DONE
  } state_e;
  state_e state;

  logic [BW-1:0] nb;
  logic [7:0]    iter;
  logic [7:0]    wcnt;
  logic [31:0]   nu;

  always_comb begin
    mvm_valid_o  = (state == S_MVM);
    mvm_first_o  = (bc_o == '0);
    mvm_last_o   = (bc_o == nb - 1'b1);
    copy_valid_o = (state == S_COPY);
    x_valid_o    = (state == S_X);
    e_valid_o    = (state == S_E);
    update_o     = (state == S_UPD);
    ising_clear_o = (state == S_MVM_START);
    busy_o       = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; nb <= '0; iter <= '0; wcnt <= '0; nu <= '0;
      br_o <= '0; bc_o <= '0; jaddr_o <= '0; blk_o <= '0;
      done_o <= 1'b0; run_clear_o <= 1'b0;
    end else begin
      done_o      <= 1'b0;
      run_clear_o <= 1'b0;
      case (state)
        S_IDLE: if (start_i) begin
          nb          <= BW'((32'(n_i) + U - 1) / U);
          nu          <= '0;
          run_clear_o <= 1'b1;
          state       <= S_MVM_START;
        end
        S_MVM_START: begin
          br_o <= '0; bc_o <= '0; jaddr_o <= '0;
          state <= S_MVM;
        end
        S_MVM: begin
          jaddr_o <= jaddr_o + 1'b1;
          if (bc_o == nb - 1'b1) begin
            bc_o <= '0;
            if (br_o == nb - 1'b1) begin
              wcnt  <= 8'(DRAIN_MVM - 1);
              state <= S_MVM_WAIT;
            end else br_o <= br_o + 1'b1;
          end else bc_o <= bc_o + 1'b1;
        end
        S_MVM_WAIT: if (wcnt == 0) begin
          blk_o <= '0; iter <= '0;
          if (improved_i)       state <= S_COPY;
          else if (n_x_i != 0)  state <= S_X;
          else if (n_e_i != 0)  state <= S_E;
          else                  state <= S_UPD;
        end else wcnt <= wcnt - 1'b1;
        S_COPY: begin
          if (blk_o == nb - 1'b1) begin
            blk_o <= '0; wcnt <= 8'd1; state <= S_COPY_WAIT;
          end else blk_o <= blk_o + 1'b1;
        end
        S_COPY_WAIT: if (wcnt == 0) begin
          if (n_x_i != 0)      state <= S_X;
          else if (n_e_i != 0) state <= S_E;
          else                 state <= S_UPD;
        end else wcnt <= wcnt - 1'b1;
        S_X: begin
          if (blk_o == nb - 1'b1) begin
            blk_o <= '0; wcnt <= 8'(X_LAT - 1); state <= S_X_WAIT;
          end else blk_o <= blk_o + 1'b1;
        end
        S_X_WAIT: if (wcnt == 0) begin
          if (iter == n_x_i - 1'b1) begin
            iter <= '0;
            state <= (n_e_i != 0) ? S_E : S_UPD;
          end else begin
            iter <= iter + 1'b1; state <= S_X;
          end
        end else wcnt <= wcnt - 1'b1;
        S_E: begin
          if (blk_o == nb - 1'b1) begin
            blk_o <= '0; wcnt <= 8'(E_LAT - 1); state <= S_E_WAIT;
          end else blk_o <= blk_o + 1'b1;
        end
        S_E_WAIT: if (wcnt == 0) begin
          if (iter == n_e_i - 1'b1) begin
            iter <= '0; state <= S_UPD;
          end else begin
            iter <= iter + 1'b1; state <= S_E;
          end
        end else wcnt <= wcnt - 1'b1;
        S_UPD: begin
          nu <= nu + 1;
          state <= (nu + 1 >= k_mvm_i) ? S_DONE : S_MVM_START;
        end
        S_DONE: begin
          done_o <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a block issue only happens with a non-zero block count
  logic live_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) live_q <= 1'b0;
    else        live_q <= 1'b1;
  always_ff @(posedge clk)
    if (live_q) assert (!((mvm_valid_o | x_valid_o | e_valid_o) && nb == 0))
      else $error("block issued with no spins");
endmodule
