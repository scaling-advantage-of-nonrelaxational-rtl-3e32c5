// tb_cac_control: u = 100, n = 250 spins (nb = 3), n_x = 6, n_e = 3, 4 iterations, with
// an improvement reported on the first two products. Counts, per iteration, the block
// issues of each phase and the cycles of each phase, and checks them against
// nb^2 + DRAIN (16), n_x (nb + 8), n_e (nb + 9) and nb for the copy; checks the issue
// order of the product (block column fastest, jaddr = br*nb + bc) and one done pulse.
module tb_cac_control;
  localparam int U = 100, NBM = 20, NB = 3, NX = 6, NE = 3, K = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start_i = 0, improved_i = 0;
  logic busy_o, done_o, run_clear_o, ising_clear_o, mvm_valid_o, mvm_first_o, mvm_last_o;
  logic copy_valid_o, x_valid_o, e_valid_o, update_o;
  logic [4:0] br_o, bc_o, blk_o;
  logic [8:0] jaddr_o;
  int n_mvm = 0, n_x = 0, n_e = 0, n_copy = 0, n_upd = 0, n_done = 0, n_clear = 0;
  int c_mvm_ph = 0, c_x_ph = 0, c_e_ph = 0;
  int exp_j = 0;

  cac_control #(.U(U), .NB_MAX(NBM), .DRAIN_MVM(16)) dut (
    .clk, .rst_n, .start_i, .n_i(16'd250), .k_mvm_i(32'(K)), .n_x_i(8'(NX)), .n_e_i(8'(NE)),
    .improved_i, .busy_o, .done_o, .run_clear_o, .ising_clear_o, .mvm_valid_o,
    .mvm_first_o, .mvm_last_o, .br_o, .bc_o, .jaddr_o, .copy_valid_o, .x_valid_o,
    .e_valid_o, .blk_o, .update_o);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // phase cycle counting by state
  always @(negedge clk) if (rst_n) begin
    if (dut.state inside {dut.S_MVM, dut.S_MVM_WAIT}) c_mvm_ph++;
    if (dut.state inside {dut.S_X, dut.S_X_WAIT}) c_x_ph++;
    if (dut.state inside {dut.S_E, dut.S_E_WAIT}) c_e_ph++;
    if (mvm_valid_o) begin
      checks++;
      if (int'(jaddr_o) != exp_j % (NB*NB) || int'(jaddr_o) != int'(br_o)*NB + int'(bc_o) ||
          mvm_first_o != (bc_o == 0) || mvm_last_o != (bc_o == NB-1)) begin
        failures++; $display("FAIL issue order j=%0d br=%0d bc=%0d", jaddr_o, br_o, bc_o);
      end
      exp_j++;
      n_mvm++;
    end
    if (x_valid_o) n_x++;
    if (e_valid_o) n_e++;
    if (copy_valid_o) n_copy++;
    if (update_o) n_upd++;
    if (done_o) n_done++;
    if (ising_clear_o) n_clear++;
    improved_i <= (n_upd < 2);
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start_i = 1;
    @(negedge clk); start_i = 0;
    wait (done_o);
    repeat (3) @(negedge clk);
    checks += 9;
    if (n_mvm != K*NB*NB) begin failures++; $display("FAIL mvm issues %0d", n_mvm); end
    if (n_x != K*NX*NB) begin failures++; $display("FAIL x issues %0d", n_x); end
    if (n_e != K*NE*NB) begin failures++; $display("FAIL e issues %0d", n_e); end
    if (n_copy != 2*NB) begin failures++; $display("FAIL copies %0d", n_copy); end
    if (n_upd != K || n_done != 1 || n_clear != K) begin failures++; $display("FAIL upd/done/clear"); end
    if (c_mvm_ph != K*(NB*NB + 16)) begin failures++; $display("FAIL mvm cycles %0d", c_mvm_ph); end
    if (c_x_ph != K*NX*(NB + 8)) begin failures++; $display("FAIL x cycles %0d", c_x_ph); end
    if (c_e_ph != K*NE*(NB + 9)) begin failures++; $display("FAIL e cycles %0d", c_e_ph); end
    if (busy_o) begin failures++; $display("FAIL busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
