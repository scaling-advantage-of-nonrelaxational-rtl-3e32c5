// pair_mult: the elementary cell of the coupling circuit. It multiplies two vector
// elements x0, x1 by two ternary couplings w0, w1 and adds the products, all in one
// combinational step.
//  * x0*w0 uses the multiplexer logic equation R = w0[0] & (x0 ^ w0[1]) per bit (one
//    LUT3 per bit on the FPGA). For w0 = -1 it returns the bitwise inverse of x0, i.e.
//    -x0 - 2^-12: the two's-complement "+1" is dropped, as in the source design, which
//    accepts this one-LSB error to fit the product in one LUT3.
//  * x1*w1 uses a 2:1 multiplexer selecting x1 or 0 by the LSB of w1, and the adder
//    (CARRY8 on the FPGA) adds or subtracts it according to the MSB of w1, which is
//    exact.
// Output: r = lut(x0,w0) +/- mux(x1,w1), one bit wider than the inputs.
module pair_mult
  import cac_pkg::*;
#(
  parameter int unsigned W = DW
) (
  input  logic signed [W-1:0] x0,
  input  logic signed [W-1:0] x1,
  input  w_t                  w0,
  input  w_t                  w1,
  output logic signed [W:0]   r
);
  logic signed [W-1:0] lut_out, mux_out;

  always_comb begin
    lut_out = {W{w0[0]}} & (x0 ^ {W{w0[1]}});
    mux_out = w1[0] ? x1 : '0;
    if (w1[1]) r = (W+1)'(lut_out) - (W+1)'(mux_out);
    else       r = (W+1)'(lut_out) + (W+1)'(mux_out);
  end
endmodule
