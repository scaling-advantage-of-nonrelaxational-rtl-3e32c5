// tb_coupling_dot: streams 300 random rows (u = 100 lanes, ternary couplings, 18-bit x)
// into one row of the product core, one per cycle, and checks each sum against the
// model, its tag, and that it leaves exactly 12 cycles (2 + 5 * 2) after it entered.
module tb_coupling_dot;
  import cac_ref_pkg::*;
  localparam int U = 100, LAT = 12, NV = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid_i = 0, valid_o;
  logic [15:0] tag_i = '0, tag_o;
  logic [U-1:0][17:0] x_i;
  logic [U-1:0][1:0] w_i;
  logic signed [31:0] sum_o;
  longint expv [NV];
  int in_cyc [NV];
  int cyc = 0, nout = 0;

  coupling_dot #(.U(U), .TAGW(16)) dut (.clk, .rst_n, .valid_i, .tag_i, .x_i, .w_i,
    .valid_o, .tag_o, .sum_o);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc++;
  always @(negedge clk) if (valid_o) begin
    checks += 3;
    if (longint'(sum_o) != expv[tag_o]) begin failures++; $display("FAIL sum %0d exp %0d", sum_o, expv[tag_o]); end
    if (tag_o != 16'(nout)) begin failures++; $display("FAIL order"); end
    if (cyc - in_cyc[tag_o] != LAT) begin failures++; $display("FAIL latency %0d", cyc - in_cyc[tag_o]); end
    nout++;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      expv[v] = 0;
      for (int c = 0; c < U; c++) begin
        int r;
        x_i[c] = 18'($urandom);
        if (v % 7 == 0) x_i[c] = 18'h1FFFF;          // largest values: no overflow
        r = $urandom_range(0, 3);
        w_i[c] = 2'(r);
        expv[v] += wprod(longint'($signed(x_i[c])), r, c);
      end
      valid_i = 1; tag_i = 16'(v); in_cyc[v] = cyc;
    end
    @(negedge clk); valid_i = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
