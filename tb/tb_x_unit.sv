// tb_x_unit: 2000 random Euler steps of the x lane (random x, coupling sum, e, p and
// dt shift, including values that saturate), checked against the model's x update and
// x^2, with the 7-cycle latency and tags.
module tb_x_unit;
  import cac_ref_pkg::*;
  localparam int NV = 2000, LAT = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid_i = 0, valid_o;
  logic [11:0] tag_i = '0, tag_o;
  logic signed [17:0] x_i, e_i, p, x_o, x2_o;
  logic signed [31:0] mv_i;
  logic [3:0] dtx_sh;
  longint ex [NV], ex2 [NV];
  int in_cyc [NV];
  int cyc = 0, nout = 0;

  x_unit #(.TAGW(12)) dut (.clk, .rst_n, .valid_i, .tag_i, .x_i, .mv_i, .e_i, .p, .dtx_sh,
    .valid_o, .tag_o, .x_o, .x2_o);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc++;
  always @(negedge clk) if (valid_o) begin
    checks += 3;
    if (longint'(x_o) != ex[tag_o]) begin failures++; $display("FAIL x %0d exp %0d", x_o, ex[tag_o]); end
    if (longint'(x2_o) != ex2[tag_o]) begin failures++; $display("FAIL x2 %0d exp %0d", x2_o, ex2[tag_o]); end
    if (cyc - in_cyc[tag_o] != LAT || int'(tag_o) != nout) begin failures++; $display("FAIL latency/order"); end
    nout++;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      longint inj, g, f, d;
      @(negedge clk);
      x_i = (v % 5 == 0) ? 18'($urandom) : 18'(longint'($urandom_range(0, 16000)) - 8000);
      e_i = 18'(longint'($urandom_range(0, 40000)) - 8000);
      mv_i = 32'(longint'($urandom_range(0, 200000)) - 100000);
      p = 18'($urandom_range(0, 8192));
      dtx_sh = 4'($urandom_range(0, 8));
      ex2[v] = fm(x_i, x_i);
      inj = satv((longint'(e_i) * longint'(mv_i)) >>> 12);
      g = satv(satv(longint'(p) - 4096) - ex2[v]);
      f = fm(g, x_i);
      d = satv(f + inj);
      ex[v] = satv(longint'(x_i) + (d >>> dtx_sh));
      valid_i = 1; tag_i = 12'(v); in_cyc[v] = cyc;
    end
    @(negedge clk); valid_i = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
