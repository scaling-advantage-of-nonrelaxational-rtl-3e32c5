// tb_cac_circuit: end-to-end check of the solver core at reduced size (U = 8 spins per
// block, N_MAX = 24, a 20-spin problem in 3 x 3 blocks). It loads random symmetric
// ternary couplings and random x, e through the load bus, runs K iterations and compares,
// bit for bit, the final x and e memories, the best energy, the MVM at which it was
// found and the best sign configuration with the software model in cac_ref_pkg. It also
// checks the cycle count of one run against the per-phase counts
// (nb^2 + DRAIN_MVM, n_x (nb + 8), n_e (nb + 9), copy nb + 2, update 1, start 1).
module tb_cac_circuit;
  import cac_pkg::*;
  import cac_ref_pkg::*;
  localparam int U = 8, NMAX = 24, N = 20;
  parameter int K = 12;
  localparam int NB = (N + U - 1) / U;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cac_params_t params;
  logic start = 0, busy, done, ld_we = 0;
  ld_sel_e ld_sel = LD_X;
  logic [6:0] ld_addr = '0;
  logic [2:0] ld_lane = '0;
  logic [17:0] ld_data = '0;
  acc_t h_opt;
  logic [31:0] nu_opt;
  logic [2:0] best_raddr = '0;
  logic [U-1:0] best_rdata;
  logic ev_improve, ev_reset, ev_clamp;

  cac_circuit #(.U(U), .N_MAX(NMAX)) dut (
    .clk, .rst_n, .params, .start_i(start), .busy_o(busy), .done_o(done), .ld_we, .ld_sel,
    .ld_addr, .ld_lane, .ld_data, .h_opt_o(h_opt), .nu_opt_o(nu_opt),
    .best_raddr_i(best_raddr), .best_rdata_o(best_rdata),
    .ev_improve_o(ev_improve), .ev_reset_o(ev_reset), .ev_e_clamp_o(ev_clamp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cac_model m;
  int cycles;
  int n_imp = 0, n_rst = 0, n_clamp = 0;
  always @(negedge clk) begin
    if (ev_improve) n_imp++;
    if (ev_reset) n_rst++;
    if (ev_clamp) n_clamp++;
  end

  initial begin
    m = new(N, U);
    params = '0;
    params.n = 16'(N); params.k_mvm = K; params.beta = 18'sd1024; params.p = 18'sd3000;
    params.alpha = 18'sd4096; params.rho = 18'sd2048; params.delta = 18'sd4096;
    params.gamma = 32'd4_000_000; params.tau = 32'd3; params.n_x = 8'd3; params.n_e = 8'd2;
    params.dtx_sh = 4'd4; params.dte_sh = 4'd2; params.e_max = 18'sd8192;
    m.beta = params.beta; m.p = params.p; m.alpha = params.alpha; m.rho = params.rho;
    m.delta = params.delta; m.gamma = params.gamma; m.tau = params.tau; m.n_x = 3; m.n_e = 2;
    m.dtx = 4; m.dte = 2; m.e_max = params.e_max;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        int r, c;
        r = $urandom_range(0, 2);
        c = (r == 0) ? 0 : (r == 1) ? 1 : 3;
        m.w[i][j] = c; m.w[j][i] = c;
      end
    for (int i = 0; i < N; i++) begin
      m.x[i] = longint'($urandom_range(0, 800)) - 400;
      m.e[i] = 4096 + longint'($urandom_range(0, 4096));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load x and e (padding spins are zero)
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < NB*U; i++) begin
        ld_we <= 1; ld_sel <= s ? LD_E : LD_X; ld_addr <= 7'(i / U); ld_lane <= 3'(i % U);
        ld_data <= 18'(s ? m.e[i] : m.x[i]);
        @(posedge clk);
      end
    // load couplings, one block row word per lane
    for (int br = 0; br < NB; br++)
      for (int bc = 0; bc < NB; bc++)
        for (int r = 0; r < U; r++) begin
          logic [2*U-1:0] word;
          for (int c = 0; c < U; c++) word[2*c +: 2] = 2'(m.w[br*U + r][bc*U + c]);
          ld_we <= 1; ld_sel <= LD_J; ld_addr <= 7'(br*NB + bc); ld_lane <= 3'(r);
          ld_data <= 18'(word);
          @(posedge clk);
        end
    ld_we <= 0;
    @(posedge clk);
    // reference run
    m.start();
    for (int k = 0; k < K; k++) m.iterate();
    // hardware run
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0;
    do begin @(negedge clk); cycles++; end while (!done);
    // compare
    for (int i = 0; i < NB*U; i++) begin
      check(fx_t'(dut.u_xram.mem[i % U][i / U]) == fx_t'(m.x[i]),
            $sformatf("x[%0d] %0d exp %0d", i, fx_t'(dut.u_xram.mem[i % U][i / U]), m.x[i]));
      check(fx_t'(dut.u_eram.mem[i % U][i / U]) == fx_t'(m.e[i]),
            $sformatf("e[%0d] %0d exp %0d", i, fx_t'(dut.u_eram.mem[i % U][i / U]), m.e[i]));
    end
    check(longint'(h_opt) == m.h_opt, $sformatf("h_opt %0d exp %0d", h_opt, m.h_opt));
    check(longint'(nu_opt) == m.nu_opt, $sformatf("nu_opt %0d exp %0d", nu_opt, m.nu_opt));
    check(longint'(dut.energy) == m.h, $sformatf("last energy %0d exp %0d", dut.energy, m.h));
    for (int b = 0; b < NB; b++) begin
      best_raddr <= 3'(b);
      @(posedge clk); @(posedge clk);
      for (int l = 0; l < U; l++)
        check(best_rdata[l] == m.best[b*U + l], $sformatf("best sigma %0d", b*U + l));
    end
    check(m.energy_of(m.best) == m.h_opt, "best configuration has the best energy");
    // cycles: per iteration start 1 + mvm NB^2 + drain + (copy) + x + e + update
    begin
      int drain, exp_c;
      drain = dot_latency(U, 5) + 4;
      exp_c = K * (1 + NB*NB + drain + 3*(NB + 8) + 2*(NB + 9) + 1) + m.improvements * (NB + 2) + 2;
      check(cycles == exp_c, $sformatf("run cycles %0d exp %0d", cycles, exp_c));
    end
    check(n_imp == m.improvements && n_imp > 0, $sformatf("improvements %0d exp %0d", n_imp, m.improvements));
    check(n_rst == m.resets && n_rst > 0, $sformatf("xi resets %0d exp %0d", n_rst, m.resets));
    $display("improvements=%0d resets=%0d clamp_events=%0d h_opt=%0d", n_imp, n_rst, n_clamp, h_opt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
