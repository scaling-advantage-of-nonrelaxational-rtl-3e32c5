// tb_coupling_mvm: u = 8, 3 x 3 blocks. Streams two full products back to back (one
// block per cycle, the block columns of each block row in order) and checks the 8 sums
// of each block row against the model sum_j w_ij * (beta x_j), the block-row index,
// and the latency: the result of a block row appears 1 + 7 + 1 cycles after its
// last block entered (beta stage, u = 8 dot row of 7 cycles, accumulate).
module tb_coupling_mvm;
  import cac_ref_pkg::*;
  localparam int U = 8, NB = 3, LAT = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid_i = 0, first_i = 0, last_i = 0, valid_o;
  logic [2:0] blk_i = '0, blk_o;
  logic [U-1:0][17:0] x_i;
  logic [U-1:0][U-1:0][1:0] w_i;
  logic [U-1:0][31:0] sum_o;
  logic signed [17:0] beta = 18'sd3000;
  longint xv [2][NB*U];
  int wv [2][NB*U][NB*U];
  longint expv [2][NB*U];
  int last_cyc [2*NB];
  int cyc = 0, nout = 0;

  coupling_mvm #(.U(U), .BW(3)) dut (.clk, .rst_n, .beta, .valid_i, .first_i, .last_i,
    .blk_i, .x_i, .w_i, .valid_o, .blk_o, .sum_o);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc++;
  always @(negedge clk) if (valid_o) begin
    int prod;
    prod = nout / NB;
    checks += 2;
    if (int'(blk_o) != nout % NB) begin failures++; $display("FAIL blk %0d", blk_o); end
    if (cyc - last_cyc[nout] != LAT) begin failures++; $display("FAIL latency %0d", cyc - last_cyc[nout]); end
    for (int r = 0; r < U; r++) begin
      checks++;
      if (longint'($signed(sum_o[r])) != expv[prod][int'(blk_o)*U + r]) begin
        failures++; $display("FAIL row %0d sum %0d exp %0d", r, $signed(sum_o[r]), expv[prod][int'(blk_o)*U + r]);
      end
    end
    nout++;
  end
  initial begin
    for (int p = 0; p < 2; p++) begin
      foreach (xv[p][j]) xv[p][j] = longint'($urandom_range(0, 60000)) - 30000;
      foreach (wv[p][i, j]) wv[p][i][j] = $urandom_range(0, 3);
      foreach (expv[p][i]) begin
        expv[p][i] = 0;
        for (int j = 0; j < NB*U; j++) expv[p][i] += wprod(fm(xv[p][j], beta), wv[p][i][j], j % U);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 2; p++)
      for (int br = 0; br < NB; br++)
        for (int bc = 0; bc < NB; bc++) begin
          @(negedge clk);
          valid_i = 1; first_i = (bc == 0); last_i = (bc == NB-1); blk_i = 3'(br);
          for (int c = 0; c < U; c++) x_i[c] = 18'(xv[p][bc*U + c]);
          for (int r = 0; r < U; r++)
            for (int c = 0; c < U; c++) w_i[r][c] = 2'(wv[p][br*U + r][bc*U + c]);
          if (bc == NB-1) last_cyc[p*NB + br] = cyc;
        end
    @(negedge clk); valid_i = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != 2*NB) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
