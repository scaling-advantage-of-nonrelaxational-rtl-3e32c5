// tb_cac_top_full: the solver at its default size (U = 100 spins per block, N_MAX = 2000,
// UART at 434 clocks per bit), no parameter overrides. Problem: 250 spins (3 x 3 blocks
// of 100, the last one half padding) with random symmetric couplings in {-1, 0, +1}.
// The run parameters, the run command and the reply go through the UART pins at the
// real bit rate. The couplings and the initial x and e are written straight into the
// coupling and state memories (at 115200 baud the ~20000 load bytes would take about
// 10^8 clock cycles to simulate; the serial load path itself is checked at reduced size
// by tb_host_if and tb_cac_top). After K iterations the reply (best energy, MVM index
// of the best, best signs) and the final x and e are compared bit for bit with the
// software model, the reported signs must have the reported energy, and the cycle count
// of the run is checked: busy lasts K (1 + nb^2 + 16 + 6 (nb + 8) + 3 (nb + 9) + 1)
// + improvements (nb + 2) + 1 cycles with nb = 3.
module tb_cac_top_full;
  import cac_pkg::*;
  import cac_ref_pkg::*;
  localparam int U = 100, N = 250, CPB = 434, K = 48;
  localparam int NB = (N + U - 1) / U;

  logic clk = 0, rst_n = 0, rx = 1'b1, tx, busy;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cac_top dut (.clk_i(clk), .rst_n_i(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .busy_o(busy));

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c_imp = 0, c_rst = 0, c_clamp = 0, c_busy = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_circuit.ev_improve_o) c_imp++;
    if (dut.u_circuit.ev_reset_o) c_rst++;
    if (dut.u_circuit.ev_e_clamp_o) c_clamp++;
    if (busy) c_busy++;
  end

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

  task automatic send(input logic [7:0] b);
    rx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(negedge clk); end
    rx = 1'b1; repeat (CPB) @(negedge clk);
  endtask
  task automatic send_param(input param_id_e id, input logic [31:0] v);
    send(CMD_PARAM); send(8'(id));
    for (int k = 0; k < 4; k++) send(v[8*k +: 8]);
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cac_model m;

  initial begin
    int t;
    m = new(N, U);
    // SK-like settings in this fixed-point format (beta 0.25, alpha 1, rho 0.5)
    m.beta = 1024; m.p = 3500; m.alpha = 4096; m.rho = 2048; m.delta = 2048;
    m.gamma = 8_000_000; m.tau = 1; m.n_x = 6; m.n_e = 3; m.dtx = 4; m.dte = 2; m.e_max = 8192;
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
    // memory contents (padding spins are zero)
    for (int i = 0; i < NB*U; i++) begin
      dut.u_circuit.u_xram.mem[i % U][i / U] = 18'(m.x[i]);
      dut.u_circuit.u_xrow.mem[i % U][i / U] = 18'(m.x[i]);
      dut.u_circuit.u_eram.mem[i % U][i / U] = 18'(m.e[i]);
    end
    for (int br = 0; br < NB; br++)
      for (int bc = 0; bc < NB; bc++)
        for (int r = 0; r < U; r++) begin
          logic [2*U-1:0] word;
          for (int c = 0; c < U; c++) word[2*c +: 2] = 2'(m.w[br*U + r][bc*U + c]);
          dut.u_circuit.u_jram.mem[r][br*NB + bc] = word;
        end
    @(negedge clk);
    send_param(P_N, 32'(N));
    send_param(P_K, 32'(K));
    send_param(P_BETA, 32'(m.beta));   send_param(P_P, 32'(m.p));
    send_param(P_ALPHA, 32'(m.alpha)); send_param(P_RHO, 32'(m.rho));
    send_param(P_DELTA, 32'(m.delta)); send_param(P_GAMMA, 32'(m.gamma));
    send_param(P_TAU, 32'(m.tau));     send_param(P_NX, 32'(m.n_x));
    send_param(P_NE, 32'(m.n_e));      send_param(P_DTX, 32'(m.dtx));
    send_param(P_DTE, 32'(m.dte));     send_param(P_EMAX, 32'(m.e_max));
    m.start();
    for (int k = 0; k < K; k++) m.iterate();
    send(CMD_RUN);
    t = 0;
    while (rq.size() < 8 + NB * 13 && t < 2_000_000) begin @(negedge clk); t++; end
    repeat (4 * CPB) @(negedge clk);
    check(rq.size() == 8 + NB * 13, $sformatf("reply length %0d", rq.size()));
    if (rq.size() >= 8 + NB * 13) begin
      logic [31:0] hv, nv;
      bit sb[];
      for (int i = 0; i < 4; i++) begin hv[8*i +: 8] = rq[i]; nv[8*i +: 8] = rq[4+i]; end
      check(longint'(signed'(hv)) == m.h_opt, $sformatf("best energy %0d exp %0d", signed'(hv), m.h_opt));
      check(longint'(nv) == m.nu_opt, $sformatf("best MVM %0d exp %0d", nv, m.nu_opt));
      sb = new[NB*U];
      foreach (sb[i]) sb[i] = (i < N) ? rq[8 + 13 * (i / U) + (i % U) / 8][(i % U) % 8] : 1'b0;
      for (int i = 0; i < N; i++) check(sb[i] == m.best[i], $sformatf("best sign %0d", i));
      check(m.energy_of(sb) == longint'(signed'(hv)), "reported signs have the reported energy");
    end
    for (int i = 0; i < N; i++) begin
      check(fx_t'(dut.u_circuit.u_xram.mem[i % U][i / U]) == fx_t'(m.x[i]), $sformatf("x[%0d]", i));
      check(fx_t'(dut.u_circuit.u_eram.mem[i % U][i / U]) == fx_t'(m.e[i]), $sformatf("e[%0d]", i));
    end
    begin
      int exp_c;
      exp_c = K * (1 + NB*NB + 16 + 6*(NB + 8) + 3*(NB + 9) + 1) + m.improvements * (NB + 2) + 1;
      check(c_busy == exp_c, $sformatf("run cycles %0d exp %0d", c_busy, exp_c));
    end
    check(c_imp == m.improvements && c_imp > 0, "improvements");
    check(c_rst == m.resets && c_rst > 0, "xi resets");
    check(c_clamp > 0, "e clamps");
    $display("best_energy=%0d improvements=%0d xi_resets=%0d e_clamps=%0d run_cycles=%0d",
             m.h_opt, c_imp, c_rst, c_clamp, c_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
