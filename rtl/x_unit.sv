// x_unit: one lane of the nonlinear-term circuit. Each valid input performs one Euler
// step of the soft-spin amplitude
//     x <- x + dt_x * ( (-1 + p - x^2) * x + I ),   I = e * (sum_j w_ij * beta * x_j)
// with dt_x = 2^-dtx_sh applied by an arithmetic shift, and also returns x^2, which the
// error circuit reads through the shared x^2 RAM. The datapath follows the source
// circuit (square, p - 1, subtract, multiply, shift by dt); adding the injection term I
// and forming I here from e and the coupling sum are this design's choices. All values
// saturate at the limits of the 18-bit word. Pipeline of LAT = 7 registered stages, one
// input per cycle; with the one-cycle RAM read in front a sweep of nb blocks takes
// nb + 8 cycles, the count the source design states for this circuit.
module x_unit
  import cac_pkg::*;
#(
  parameter int unsigned TAGW = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  logic [TAGW-1:0] tag_i,
  input  fx_t             x_i,
  input  acc_t            mv_i,      // coupling sum of this spin
  input  fx_t             e_i,
  input  fx_t             p,
  input  logic [3:0]      dtx_sh,
  output logic            valid_o,
  output logic [TAGW-1:0] tag_o,
  output fx_t             x_o,
  output fx_t             x2_o
);
  localparam int unsigned LAT = 7;

  fx_t x1, x2s1, inj1, pm1;        // stage 1
  fx_t x_2, x2s2, inj2, g2;        // stage 2
  fx_t x_3, x2s3, inj3, f3;        // stage 3
  fx_t x_4, x2s4, d4;              // stage 4
  fx_t x_5, x2s5, st5;             // stage 5
  fx_t xn6, x2s6;                  // stage 6
  fx_t xn7, x2s7;                  // stage 7
  logic [3:0] sh1, sh2, sh3, sh4;  // dt shift travelling with its data

  always_ff @(posedge clk) begin
    // 1: x^2, injection, -1 + p
    x1   <= x_i;
    x2s1 <= fmul(x_i, x_i);
    inj1 <= sat((64'(e_i) * 64'(mv_i)) >>> FB);
    pm1  <= sat(64'(p) - 64'(FX_ONE));
    sh1  <= dtx_sh; sh2 <= sh1; sh3 <= sh2; sh4 <= sh3;
    // 2: (-1 + p) - x^2
    x_2 <= x1; x2s2 <= x2s1; inj2 <= inj1;
    g2  <= sat(64'(pm1) - 64'(x2s1));
    // 3: times x
    x_3 <= x_2; x2s3 <= x2s2; inj3 <= inj2;
    f3  <= fmul(g2, x_2);
    // 4: plus injection
    x_4 <= x_3; x2s4 <= x2s3;
    d4  <= sat(64'(f3) + 64'(inj3));
    // 5: times dt (shift)
    x_5 <= x_4; x2s5 <= x2s4;
    st5 <= d4 >>> sh4;
    // 6: Euler update
    xn6 <= sat(64'(x_5) + 64'(st5)); x2s6 <= x2s5;
    // 7: output register
    xn7 <= xn6; x2s7 <= x2s6;
  end
  assign x_o  = xn7;
  assign x2_o = x2s7;

  logic            vp [LAT];
  logic [TAGW-1:0] tp [LAT];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < LAT; i++) vp[i] <= 1'b0;
    else begin
      vp[0] <= valid_i;
      for (int i = 1; i < LAT; i++) vp[i] <= vp[i-1];
    end
  always_ff @(posedge clk) begin
    tp[0] <= tag_i;
    for (int i = 1; i < LAT; i++) tp[i] <= tp[i-1];
  end
  assign valid_o = vp[LAT-1];
  assign tag_o   = tp[LAT-1];
endmodule
