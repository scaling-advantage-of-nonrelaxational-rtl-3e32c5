// tb_e_unit: 2000 random Euler steps of the e lane (random e, x^2, a, xi, dt shift and
// saturation level N), checked against the model, including steps that clamp at +/-N,
// with the 8-cycle latency and tags.
module tb_e_unit;
  import cac_ref_pkg::*;
  localparam int NV = 2000, LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, clamps = 0;
  logic valid_i = 0, valid_o;
  logic [11:0] tag_i = '0, tag_o;
  logic signed [17:0] e_i, x2_i, a, e_max, e_o;
  logic [19:0] xi;
  logic [3:0] dte_sh;
  longint ee [NV];
  bit ecl [NV];
  int in_cyc [NV];
  int cyc = 0, nout = 0;

  e_unit #(.TAGW(12)) dut (.clk, .rst_n, .valid_i, .tag_i, .e_i, .x2_i, .a, .xi, .dte_sh,
    .e_max, .valid_o, .tag_o, .e_o);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc++;
  always @(negedge clk) if (valid_o) begin
    checks += 2;
    if (longint'(e_o) != ee[tag_o]) begin failures++; $display("FAIL e %0d exp %0d", e_o, ee[tag_o]); end
    if (cyc - in_cyc[tag_o] != LAT || int'(tag_o) != nout) begin failures++; $display("FAIL latency/order"); end
    if (ecl[tag_o]) clamps++;
    nout++;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      longint d1, nbe, pr, s;
      @(negedge clk);
      e_max = 18'($urandom_range(4096, 131071));
      e_i = 18'(longint'($urandom_range(0, 2*int'(e_max))) - longint'(e_max));
      x2_i = 18'($urandom_range(0, 60000));
      a = 18'($urandom_range(0, 20000));
      xi = 20'($urandom_range(0, 1 << 19));
      dte_sh = 4'($urandom_range(0, 6));
      d1 = satv(longint'(x2_i) - longint'(a));
      nbe = satv(-((longint'(e_i) * longint'(xi)) >>> 16));
      pr = fm(nbe, d1);
      s = longint'(e_i) + (pr >>> dte_sh);
      ecl[v] = 0;
      if (s > longint'(e_max)) begin s = e_max; ecl[v] = 1; end
      else if (s < -longint'(e_max)) begin s = -longint'(e_max); ecl[v] = 1; end
      ee[v] = s;
      valid_i = 1; tag_i = 12'(v); in_cyc[v] = cyc;
    end
    @(negedge clk); valid_i = 0;
    repeat (LAT + 3) @(posedge clk);
    checks += 2;
    if (nout != NV) begin failures++; $display("FAIL count %0d", nout); end
    if (clamps == 0) begin failures++; $display("FAIL no overflow clamp exercised"); end
    $display("clamps=%0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
