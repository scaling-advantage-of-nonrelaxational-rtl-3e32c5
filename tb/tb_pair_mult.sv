// tb_pair_mult: exhaustive over the 16 coupling pairs and random over x0, x1. The
// expected value is w0*x0 + w1*x1 with the documented one-LSB error of the even
// product (for w0 = -1 it is -x0 - 1); the exact product sum must be within 1 LSB.
module tb_pair_mult;
  import cac_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [17:0] x0, x1;
  logic [1:0] w0, w1;
  logic signed [18:0] r;
  pair_mult dut (.x0, .x1, .w0, .w1, .r);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 4000; t++) begin
      longint exp_r, exact;
      x0 = 18'($urandom); x1 = 18'($urandom);
      w0 = 2'(t % 4); w1 = 2'((t / 4) % 4);
      #1;
      exp_r = wprod(x0, w0, 0) + wprod(x1, w1, 1);
      exact = tern(w0) * x0 + tern(w1) * x1;
      checks++;
      if (longint'(r) != exp_r || (exact - longint'(r)) > 1 || (exact - longint'(r)) < 0) begin
        failures++;
        $display("FAIL x0=%0d x1=%0d w0=%b w1=%b r=%0d exp=%0d", x0, x1, w0, w1, r, exp_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
