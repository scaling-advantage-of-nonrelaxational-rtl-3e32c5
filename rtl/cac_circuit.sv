// cac_circuit: the solver core ("circuit"): lane RAMs, the W_ij.X_i product core, the
// Ising-energy core, U x lanes, U e lanes, the modulation unit and the control FSM.
//
// Memory (all lane_ram, one RAM per lane, nb = ceil(n/U) blocks of U spins):
//   J    U RAMs (one per row of a U x U block), word = the 2U coupling bits of a block
//        row, address jaddr = br*nb + bc;
//   X    x_i, lane l of block b holds spin b*U + l; a second copy (XROW), written
//        together with X, is read by block row for the signs sigma_i of the energy;
//   E    e_i;  MV  coupling sums of the last product;  X2  x_i^2 (written by the x
//        lanes, read by the e lanes);  BEST  sign bits of the best configuration.
// One iteration (see cac_control): MVM reads J and X block by block into coupling_mvm
// and ising_energy, writes MV; optional copy of the signs to BEST; n_x sweeps of the x
// lanes (read X, MV, E; write X, X2); n_e sweeps of the e lanes (read E, X2; write E);
// update of a, xi and the best energy.
// Cycle counts per iteration: MVM nb^2 + DRAIN_MVM (16 for U = 100), x sweep nb + 8,
// e sweep nb + 9.
// ev_*_o pulse once per improvement of the best energy, xi reset, and e sweep block in
// which some lane hit the clamp.
// Host side: while idle, ld_we writes one lane of X, E (ld_data[17:0]) or J (a 2U-bit
// row word) at ld_addr; start_i runs k_mvm iterations, done_o pulses at the end;
// h_opt_o / nu_opt_o / the BEST RAM (best_raddr_i, data one cycle later, bit = 1 for
// sigma = -1) hold the result. The source design clocks the x lanes at 300 MHz, the e
// lanes at 100 MHz and the rest at 50 MHz, with a dual-clock x^2 RAM between them; this
// core runs on one clock (this design's choice), which changes the timing but not
// the arithmetic.
module cac_circuit
  import cac_pkg::*;
#(
  parameter int unsigned U       = 100,
  parameter int unsigned N_MAX   = 2000,
  parameter int unsigned DSP_LAT = 5,
  localparam int unsigned NB_MAX = (N_MAX + U - 1) / U,
  localparam int unsigned BW     = $clog2(NB_MAX + 1),
  localparam int unsigned JAW    = $clog2(NB_MAX * NB_MAX + 1),
  localparam int unsigned LNW    = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned LDW    = (2*U > DW) ? 2*U : DW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cac_params_t       params,
  input  logic              start_i,
  output logic              busy_o,
  output logic              done_o,
  input  logic              ld_we,
  input  ld_sel_e           ld_sel,
  input  logic [JAW-1:0]    ld_addr,
  input  logic [LNW-1:0]    ld_lane,
  input  logic [LDW-1:0]    ld_data,
  output acc_t              h_opt_o,
  output logic [31:0]       nu_opt_o,
  input  logic [BW-1:0]     best_raddr_i,
  output logic [U-1:0]      best_rdata_o,
  output logic              ev_improve_o,
  output logic              ev_reset_o,
  output logic              ev_e_clamp_o
);
  localparam int unsigned MVM_LAT   = dot_latency(U, DSP_LAT) + 2;
  localparam int unsigned DRAIN_MVM = MVM_LAT + 2;
  localparam int unsigned JDEPTH    = NB_MAX * NB_MAX;

  // control
  logic run_clear, ising_clear, mvm_v, mvm_first, mvm_last, copy_v, x_v, e_v, upd;
  logic [BW-1:0]  br, bc, blk;
  logic [JAW-1:0] jaddr;
  logic           improved;

  cac_control #(.U(U), .NB_MAX(NB_MAX), .DRAIN_MVM(DRAIN_MVM), .X_LAT(8), .E_LAT(9)) u_ctl (
    .clk, .rst_n, .start_i, .n_i(params.n), .k_mvm_i(params.k_mvm), .n_x_i(params.n_x),
    .n_e_i(params.n_e), .improved_i(improved), .busy_o, .done_o, .run_clear_o(run_clear),
    .ising_clear_o(ising_clear), .mvm_valid_o(mvm_v), .mvm_first_o(mvm_first),
    .mvm_last_o(mvm_last), .br_o(br), .bc_o(bc), .jaddr_o(jaddr), .copy_valid_o(copy_v),
    .x_valid_o(x_v), .e_valid_o(e_v), .blk_o(blk), .update_o(upd));

  // one-cycle delay matching the RAM read
  logic          mvm_v_d, mvm_first_d, mvm_last_d, copy_v_d, x_v_d, e_v_d;
  logic [BW-1:0] br_d, blk_d;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) {mvm_v_d, copy_v_d, x_v_d, e_v_d} <= '0;
    else        {mvm_v_d, copy_v_d, x_v_d, e_v_d} <= {mvm_v, copy_v, x_v, e_v};
  always_ff @(posedge clk) begin
    mvm_first_d <= mvm_first; mvm_last_d <= mvm_last; br_d <= br; blk_d <= blk;
  end

  // lane-select of a host write
  logic [U-1:0] ld_onehot;
  always_comb begin
    ld_onehot = '0;
    ld_onehot[ld_lane] = 1'b1;
  end

  // J memory
  logic [U-1:0][2*U-1:0] j_rd;
  logic [U-1:0]          j_we;
  assign j_we = (ld_we && ld_sel == LD_J && !busy_o) ? ld_onehot : '0;
  lane_ram #(.LANES(U), .LW(2*U), .DEPTH(JDEPTH)) u_jram (
    .clk, .we(j_we), .waddr($clog2(JDEPTH)'(ld_addr)), .wdata({U{ld_data[2*U-1:0]}}),
    .raddr_a($clog2(JDEPTH)'(jaddr)), .rdata_a(j_rd));

  // X memory
  localparam int unsigned NAW = (NB_MAX > 1) ? $clog2(NB_MAX) : 1;
  logic [U-1:0][DW-1:0] x_rd, x_rd_b, x_wd, xu_x, xu_x2;
  logic [U-1:0]         x_we, xu_v;
  logic                 x_done, e_done;   // all lanes finished (they run in lockstep)
  assign x_done = &xu_v;
  logic [BW-1:0]        xu_tag [U];
  always_comb begin
    if (busy_o) begin
      x_we = x_done ? '1 : '0;
      x_wd = xu_x;
    end else begin
      x_we = (ld_we && ld_sel == LD_X) ? ld_onehot : '0;
      x_wd = {U{ld_data[DW-1:0]}};
    end
  end
  lane_ram #(.LANES(U), .LW(DW), .DEPTH(NB_MAX)) u_xram (
    .clk, .we(x_we), .waddr(busy_o ? NAW'(xu_tag[0]) : NAW'(ld_addr)), .wdata(x_wd),
    .raddr_a(mvm_v ? NAW'(bc) : NAW'(blk)), .rdata_a(x_rd));
  // second copy of the x memory, read by block row for the signs sigma_i of the energy
  lane_ram #(.LANES(U), .LW(DW), .DEPTH(NB_MAX)) u_xrow (
    .clk, .we(x_we), .waddr(busy_o ? NAW'(xu_tag[0]) : NAW'(ld_addr)), .wdata(x_wd),
    .raddr_a(NAW'(br)), .rdata_a(x_rd_b));

  // E memory
  logic [U-1:0][DW-1:0] e_rd, e_wd, eu_e;
  logic [U-1:0]         e_we, eu_v;
  assign e_done = &eu_v;
  logic [BW-1:0]        eu_tag [U];
  always_comb begin
    if (busy_o) begin
      e_we = e_done ? '1 : '0;
      e_wd = eu_e;
    end else begin
      e_we = (ld_we && ld_sel == LD_E) ? ld_onehot : '0;
      e_wd = {U{ld_data[DW-1:0]}};
    end
  end
  lane_ram #(.LANES(U), .LW(DW), .DEPTH(NB_MAX)) u_eram (
    .clk, .we(e_we), .waddr(busy_o ? NAW'(eu_tag[0]) : NAW'(ld_addr)), .wdata(e_wd),
    .raddr_a(NAW'(blk)), .rdata_a(e_rd));

  // product core and MV memory
  logic                   mv_v;
  logic [BW-1:0]          mv_blk;
  logic [U-1:0][ACCW-1:0] mv_sum, mv_rd;
  coupling_mvm #(.U(U), .DSP_LAT(DSP_LAT), .BW(BW)) u_mvm (
    .clk, .rst_n, .beta(params.beta), .valid_i(mvm_v_d), .first_i(mvm_first_d),
    .last_i(mvm_last_d), .blk_i(br_d), .x_i(x_rd), .w_i(j_rd), .valid_o(mv_v),
    .blk_o(mv_blk), .sum_o(mv_sum));
  lane_ram #(.LANES(U), .LW(ACCW), .DEPTH(NB_MAX)) u_mvram (
    .clk, .we(mv_v ? '1 : '0), .waddr(NAW'(mv_blk)), .wdata(mv_sum),
    .raddr_a(NAW'(blk)), .rdata_a(mv_rd));

  // energy core
  acc_t         energy;    // H of the signs of the current product
  logic [U-1:0] sig_col, sig_row;
  for (genvar l = 0; l < U; l++) begin : g_sig
    assign sig_col[l] = x_rd[l][DW-1];
    assign sig_row[l] = x_rd_b[l][DW-1];
  end
  ising_energy #(.U(U)) u_ising (
    .clk, .rst_n, .clear_i(ising_clear), .valid_i(mvm_v_d), .sig_col_i(sig_col),
    .sig_row_i(sig_row), .w_i(j_rd), .energy_o(energy));

  // modulation
  fx_t            a_cur;
  logic [XIW-1:0] xi_cur;
  amp_control u_amp (
    .clk, .rst_n, .clear_i(run_clear), .update_i(upd), .energy_i(energy),
    .alpha(params.alpha), .rho(params.rho), .delta(params.delta), .gamma(params.gamma),
    .tau(params.tau), .a_o(a_cur), .xi_o(xi_cur), .h_opt_o, .nu_opt_o,
    .improved_o(improved), .ev_reset_o, .ev_improve_o);

  // x and e lanes, x^2 memory
  logic [U-1:0][DW-1:0] x2_rd;
  logic [U-1:0]         clamp;
  for (genvar l = 0; l < U; l++) begin : g_lane
    x_unit #(.TAGW(BW)) u_x (
      .clk, .rst_n, .valid_i(x_v_d), .tag_i(blk_d), .x_i(x_rd[l]), .mv_i(mv_rd[l]),
      .e_i(e_rd[l]), .p(params.p), .dtx_sh(params.dtx_sh), .valid_o(xu_v[l]),
      .tag_o(xu_tag[l]), .x_o(xu_x[l]), .x2_o(xu_x2[l]));
    e_unit #(.TAGW(BW)) u_e (
      .clk, .rst_n, .valid_i(e_v_d), .tag_i(blk_d), .e_i(e_rd[l]), .x2_i(x2_rd[l]),
      .a(a_cur), .xi(xi_cur), .dte_sh(params.dte_sh), .e_max(params.e_max),
      .valid_o(eu_v[l]), .tag_o(eu_tag[l]), .e_o(eu_e[l]));
    assign clamp[l] = (eu_e[l] == params.e_max) || (eu_e[l] == -params.e_max);
  end
  assign ev_e_clamp_o = e_done && (|clamp);

  lane_ram #(.LANES(U), .LW(DW), .DEPTH(NB_MAX)) u_x2ram (
    .clk, .we(x_done ? '1 : '0), .waddr(NAW'(xu_tag[0])), .wdata(xu_x2),
    .raddr_a(NAW'(blk)), .rdata_a(x2_rd));

  // best configuration
  logic [0:0][U-1:0] best_wd, best_rd;
  assign best_wd[0] = sig_col;
  lane_ram #(.LANES(1), .LW(U), .DEPTH(NB_MAX)) u_best (
    .clk, .we(copy_v_d), .waddr(NAW'(blk_d)), .wdata(best_wd),
    .raddr_a(NAW'(best_raddr_i)), .rdata_a(best_rd));
  assign best_rdata_o = best_rd[0];

  // the core accepts no host writes while a run is in progress
  logic live_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) live_q <= 1'b0;
    else        live_q <= 1'b1;
  always_ff @(posedge clk)
    if (live_q) assert (!(busy_o && ld_we)) else $error("host write during a run");
endmodule
