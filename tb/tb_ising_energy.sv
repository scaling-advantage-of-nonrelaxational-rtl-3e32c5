// tb_ising_energy: u = 8, 3 x 3 blocks of random symmetric ternary couplings with zero
// diagonal and random signs. Feeds the 9 blocks (clear with the first) and checks the
// energy -1/2 sum_ij sigma_i w_ij sigma_j, three cycles after the last block, for 20
// random problems.
module tb_ising_energy;
  import cac_ref_pkg::*;
  localparam int U = 8, NB = 3, M = NB*U;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear_i = 0, valid_i = 0;
  logic [U-1:0] sig_col_i, sig_row_i;
  logic [U-1:0][U-1:0][1:0] w_i;
  logic signed [31:0] energy_o;
  int w [M][M];
  bit s [M];

  ising_energy #(.U(U)) dut (.clk, .rst_n, .clear_i, .valid_i, .sig_col_i, .sig_row_i,
    .w_i, .energy_o);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      longint tsum, expv;
      for (int i = 0; i < M; i++) begin
        s[i] = 1'($urandom);
        w[i][i] = 0;
        for (int j = i + 1; j < M; j++) begin
          int r;
          r = $urandom_range(0, 2);
          w[i][j] = (r == 2) ? 3 : r;
          w[j][i] = w[i][j];
        end
      end
      tsum = 0;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) tsum += (s[i] ? -1 : 1) * tern(w[i][j]) * (s[j] ? -1 : 1);
      expv = -(tsum / 2);
      for (int br = 0; br < NB; br++)
        for (int bc = 0; bc < NB; bc++) begin
          @(negedge clk);
          clear_i = (br == 0 && bc == 0); valid_i = 1;
          for (int l = 0; l < U; l++) begin
            sig_col_i[l] = s[bc*U + l]; sig_row_i[l] = s[br*U + l];
          end
          for (int r = 0; r < U; r++)
            for (int c = 0; c < U; c++) w_i[r][c] = 2'(w[br*U + r][bc*U + c]);
        end
      @(negedge clk); valid_i = 0; clear_i = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (longint'(energy_o) != expv) begin failures++; $display("FAIL energy %0d exp %0d", energy_o, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
