// tb_cac_top: end-to-end test of the whole solver through its UART pins, at reduced
// size (U = 8 spins per block, N_MAX = 24, a 20-spin problem in 3 x 3 blocks, UART at
// CLKS_PER_BIT = 4). The testbench plays the host: it sends every parameter, the initial
// x and e, the couplings (random symmetric ternary) and the run command as serial
// frames, decodes the reply frames, and compares the reply (best energy, the MVM at
// which it was found, best signs) and the final x and e with the bit-exact software
// model in cac_ref_pkg; the best signs must have the reported energy. Then a second run
// continues from the state left by the first (x, e kept; modulation restarted) and is
// checked the same way. Every mechanism is counted and each must have happened:
// received and sent UART bytes, parameter writes, value and coupling loads, block
// products (MVM), x and e sweeps, energy evaluations, best-configuration copies,
// improvements of the best energy, error-rate (xi) resets and e clamps.
module tb_cac_top;
  import cac_pkg::*;
  import cac_ref_pkg::*;
  localparam int U = 8, NMAX = 24, N = 20, CPB = 4, K1 = 12, K2 = 9;
  localparam int NB = (N + U - 1) / U;

  logic clk = 0, rst_n = 0, rx = 1'b1, tx, busy;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cac_top #(.U(U), .N_MAX(NMAX), .CLKS_PER_BIT(CPB)) dut (
    .clk_i(clk), .rst_n_i(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .busy_o(busy));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int c_rxb = 0, c_txb = 0, c_par = 0, c_ldx = 0, c_lde = 0, c_ldj = 0, c_mvm = 0;
  int c_x = 0, c_e = 0, c_upd = 0, c_copy = 0, c_imp = 0, c_rst = 0, c_clamp = 0, c_done = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_rx.valid_o) c_rxb++;
    if (dut.u_host.tx_start_o) c_txb++;
    if (dut.ld_we && dut.ld_sel == LD_X) c_ldx++;
    if (dut.ld_we && dut.ld_sel == LD_E) c_lde++;
    if (dut.ld_we && dut.ld_sel == LD_J) c_ldj++;
    if (dut.u_circuit.u_ctl.mvm_valid_o) c_mvm++;
    if (dut.u_circuit.u_ctl.x_valid_o) c_x++;
    if (dut.u_circuit.u_ctl.e_valid_o) c_e++;
    if (dut.u_circuit.u_ctl.update_o) c_upd++;
    if (dut.u_circuit.u_ctl.copy_valid_o) c_copy++;
    if (dut.u_circuit.ev_improve_o) c_imp++;
    if (dut.u_circuit.ev_reset_o) c_rst++;
    if (dut.u_circuit.ev_e_clamp_o) c_clamp++;
    if (dut.u_circuit.done_o) c_done++;
  end

  // host side serial receiver
  byte unsigned rq[$];
  initial forever begin
    logic [7:0] b;
    @(negedge tx);
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
    repeat (CPB) @(posedge clk);
    if (tx !== 1'b1) begin failures++; $display("FAIL reply stop bit"); end
    rq.push_back(b);
  end

  // host side serial transmitter, called at a falling edge
  task automatic send(input logic [7:0] b);
    rx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(negedge clk); end
    rx = 1'b1; repeat (CPB) @(negedge clk);
  endtask
  task automatic send_param(input param_id_e id, input logic [31:0] v);
    send(CMD_PARAM); send(8'(id));
    for (int k = 0; k < 4; k++) send(v[8*k +: 8]);
    c_par++;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cac_model m;

  task automatic run_and_check(input int k);
    int t;
    m.start();
    for (int i = 0; i < k; i++) m.iterate();
    rq.delete();
    send_param(P_K, 32'(k));
    send(CMD_RUN);
    t = 0;
    while (rq.size() < 8 + NB && t < 200000) begin @(negedge clk); t++; end
    repeat (4 * CPB) @(negedge clk);
    check(rq.size() == 8 + NB, $sformatf("reply length %0d", rq.size()));
    if (rq.size() >= 8 + NB) begin
      logic [31:0] hv, nv;
      bit sb[];
      for (int i = 0; i < 4; i++) begin hv[8*i +: 8] = rq[i]; nv[8*i +: 8] = rq[4+i]; end
      check(longint'(signed'(hv)) == m.h_opt, $sformatf("best energy %0d exp %0d", signed'(hv), m.h_opt));
      check(longint'(nv) == m.nu_opt, $sformatf("best MVM %0d exp %0d", nv, m.nu_opt));
      sb = new[NB*U];
      foreach (sb[i]) sb[i] = (i < N) ? rq[8 + i / U][i % U] : 1'b0;
      for (int i = 0; i < N; i++)
        check(sb[i] == m.best[i], $sformatf("best sign %0d", i));
      check(m.energy_of(sb) == longint'(signed'(hv)), "reported signs have the reported energy");
    end
    for (int i = 0; i < N; i++) begin
      check(fx_t'(dut.u_circuit.u_xram.mem[i % U][i / U]) == fx_t'(m.x[i]), $sformatf("x[%0d]", i));
      check(fx_t'(dut.u_circuit.u_eram.mem[i % U][i / U]) == fx_t'(m.e[i]), $sformatf("e[%0d]", i));
    end
  endtask

  initial begin
    int imp_total;
    m = new(N, U);
    m.beta = 1024; m.p = 3000; m.alpha = 4096; m.rho = 2048; m.delta = 4096;
    m.gamma = 4_000_000; m.tau = 3; m.n_x = 3; m.n_e = 2; m.dtx = 4; m.dte = 2; m.e_max = 8192;
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
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    send_param(P_N, 32'(N));
    send_param(P_BETA, 32'(m.beta));   send_param(P_P, 32'(m.p));
    send_param(P_ALPHA, 32'(m.alpha)); send_param(P_RHO, 32'(m.rho));
    send_param(P_DELTA, 32'(m.delta)); send_param(P_GAMMA, 32'(m.gamma));
    send_param(P_TAU, 32'(m.tau));     send_param(P_NX, 32'(m.n_x));
    send_param(P_NE, 32'(m.n_e));      send_param(P_DTX, 32'(m.dtx));
    send_param(P_DTE, 32'(m.dte));     send_param(P_EMAX, 32'(m.e_max));
    for (int s = 0; s < 2; s++) begin
      send(s ? CMD_LOAD_E : CMD_LOAD_X);
      for (int i = 0; i < N; i++) begin
        logic [23:0] v;
        v = 24'(s ? m.e[i] : m.x[i]);
        send(v[7:0]); send(v[15:8]); send(v[23:16]);
      end
    end
    send(CMD_LOAD_J);
    for (int br = 0; br < NB; br++)
      for (int bc = 0; bc < NB; bc++)
        for (int r = 0; r < U; r++)
          for (int k = 0; k < U / 4; k++) begin
            logic [7:0] b;
            for (int q = 0; q < 4; q++) b[2*q +: 2] = 2'(m.w[br*U + r][bc*U + 4*k + q]);
            send(b);
          end
    repeat (4) @(negedge clk);
    check(c_ldx == N && c_lde == N && c_ldj == NB*NB*U, "load counts");
    run_and_check(K1);
    imp_total = m.improvements;
    check(c_imp == m.improvements && c_rst == m.resets, "first run event counts");
    begin
      int i0, r0;
      i0 = c_imp; r0 = c_rst;
      run_and_check(K2);
      imp_total += m.improvements;
      check(c_imp - i0 == m.improvements && c_rst - r0 == m.resets, "second run event counts");
    end
    // every mechanism must have been exercised
    check(c_rxb > 0 && c_txb == 2 * (8 + NB), $sformatf("uart bytes rx %0d tx %0d", c_rxb, c_txb));
    check(c_par == 15, "parameter writes");
    check(c_mvm == (K1 + K2) * NB * NB, $sformatf("block products %0d", c_mvm));
    check(c_x == (K1 + K2) * 3 * NB, $sformatf("x block updates %0d", c_x));
    check(c_e == (K1 + K2) * 2 * NB, $sformatf("e block updates %0d", c_e));
    check(c_upd == K1 + K2, "energy evaluations / modulation updates");
    check(c_copy == imp_total * NB && c_copy > 0, $sformatf("best copies %0d", c_copy));
    check(c_imp > 0, "improvements happened");
    check(c_rst > 0, "xi resets happened");
    check(c_clamp > 0, "e clamps happened");
    check(c_done == 2, "two runs finished");
    check(!busy, "idle at end");
    $display("rx_bytes=%0d tx_bytes=%0d params=%0d mvm_blocks=%0d x_blocks=%0d e_blocks=%0d updates=%0d copies=%0d improvements=%0d xi_resets=%0d e_clamps=%0d",
             c_rxb, c_txb, c_par, c_mvm, c_x, c_e, c_upd, c_copy, c_imp, c_rst, c_clamp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
