// tb_amp_control: 300 updates with a random energy sequence (drifting, so that both
// improvements and long stretches without one occur), checked after each update
// against the model's a, xi, best energy, its MVM index and the MVM counter; counts
// the xi resets and improvements and requires both to happen.
module tb_amp_control;
  import cac_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear_i = 0, update_i = 0, improved_o, ev_reset_o, ev_improve_o;
  logic signed [31:0] energy_i = '0, h_opt_o;
  logic signed [17:0] alpha = 18'sd12288, rho = 18'sd12288, delta = 18'sd410, a_o;
  logic [31:0] gamma = 32'd30000, tau = 32'd20, nu_opt_o;
  logic [19:0] xi_o;
  int n_rst = 0, n_imp = 0;

  amp_control dut (.clk, .rst_n, .clear_i, .update_i, .energy_i, .alpha, .rho, .delta,
    .gamma, .tau, .a_o, .xi_o, .h_opt_o, .nu_opt_o, .improved_o, .ev_reset_o,
    .ev_improve_o);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) begin
    if (ev_reset_o) n_rst++;
    if (ev_improve_o) n_imp++;
  end
  initial begin
    cac_model m;
    longint ebase;
    m = new(8, 8);
    m.alpha = alpha; m.rho = rho; m.delta = delta; m.gamma = gamma; m.tau = tau;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear_i = 1;
    @(negedge clk); clear_i = 0;
    m.start();
    checks++;
    if (a_o != 18'(m.a)) begin failures++; $display("FAIL initial a"); end
    ebase = 0;
    for (int t = 0; t < 300; t++) begin
      longint dh, z;
      ebase = (t % 60 < 10) ? ebase - 3 : ebase;
      energy_i = 32'(ebase + longint'($urandom_range(0, 30)));
      m.h = energy_i;
      #1;
      checks++;
      if (improved_o != (m.h < m.h_opt)) begin failures++; $display("FAIL improved"); end
      // model update (the modulation part of one iteration)
      dh = m.h - m.h_opt;
      z = m.delta * dh;
      if (z > 64'sd549755813887) z = 64'sd549755813887;
      if (z < -64'sd549755813888) z = -64'sd549755813888;
      m.a = satv(m.alpha + ((m.rho * tanh_pwl(z)) >>> 12));
      m.xi_acc = m.xi_acc + m.gamma;
      if (m.xi_acc > 64'hFFFF_FFFF) m.xi_acc = 64'hFFFF_FFFF;
      if (((m.nu - m.nu_c) & 64'hFFFF_FFFF) > m.tau) begin m.nu_c = m.nu; m.xi_acc = 0; m.resets++; end
      if (m.h < m.h_opt) begin m.h_opt = m.h; m.nu_opt = m.nu; m.nu_c = m.nu; m.improvements++; end
      m.nu++;
      @(negedge clk); update_i = 1;
      @(negedge clk); update_i = 0;
      checks += 5;
      if (longint'(a_o) != m.a) begin failures++; $display("FAIL a %0d exp %0d", a_o, m.a); end
      if (longint'(xi_o) != longint'(m.xi_acc >> 12)) begin failures++; $display("FAIL xi"); end
      if (longint'(h_opt_o) != m.h_opt) begin failures++; $display("FAIL h_opt"); end
      if (longint'(nu_opt_o) != m.nu_opt) begin failures++; $display("FAIL nu_opt"); end
      if (longint'(dut.nu) != m.nu) begin failures++; $display("FAIL nu"); end
    end
    checks += 2;
    if (n_rst != m.resets || n_rst == 0) begin failures++; $display("FAIL resets %0d exp %0d", n_rst, m.resets); end
    if (n_imp != m.improvements || n_imp == 0) begin failures++; $display("FAIL improvements"); end
    $display("resets=%0d improvements=%0d", n_rst, n_imp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
