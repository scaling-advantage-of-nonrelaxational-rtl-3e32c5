// e_unit: one lane of the error-term circuit. Each valid input performs one Euler step
//     e <- clamp( e + dt_e * ( -xi * e * (x^2 - a) ), -N, +N )
// with dt_e = 2^-dte_sh (an arithmetic shift) and N = e_max, the "overflow" limit of the
// source circuit. x^2 comes from the x^2 RAM written by x_unit. xi is the modulated
// rate of change of the error variables (unsigned Q4.16). The order of operations
// (x^2 - a, -xi * e, product, add, saturate) follows the source circuit. Pipeline of
// LAT = 8 registered stages, one input per cycle; with the one-cycle RAM read a sweep of
// nb blocks takes nb + 9 cycles, the count the source design states for this circuit.
module e_unit
  import cac_pkg::*;
#(
  parameter int unsigned TAGW = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic [TAGW-1:0]     tag_i,
  input  fx_t                 e_i,
  input  fx_t                 x2_i,
  input  fx_t                 a,
  input  logic [XIW-1:0]      xi,
  input  logic [3:0]          dte_sh,
  input  fx_t                 e_max,
  output logic                valid_o,
  output logic [TAGW-1:0]     tag_o,
  output fx_t                 e_o
);
  localparam int unsigned LAT = 8;

  fx_t e1, d1, nbe1;
  fx_t e2, pr2;
  fx_t e3, st3;
  logic signed [DW+1:0] s4;
  fx_t en5;
  logic [3:0] sh1, sh2;            // dt shift and limit travel with their data
  fx_t em1, em2, em3, em4;
  fx_t dly [LAT-5];

  always_ff @(posedge clk) begin
    // 1: x^2 - a and -xi * e
    e1   <= e_i;
    sh1  <= dte_sh; sh2 <= sh1;
    em1  <= e_max; em2 <= em1; em3 <= em2; em4 <= em3;
    d1   <= sat(64'(x2_i) - 64'(a));
    nbe1 <= sat(-((64'(e_i) * $signed({44'd0, xi})) >>> XIFB));
    // 2: -xi * e * (x^2 - a)
    e2  <= e1;
    pr2 <= fmul(nbe1, d1);
    // 3: times dt (shift)
    e3  <= e2;
    st3 <= pr2 >>> sh2;
    // 4: add
    s4  <= (DW+2)'(e3) + (DW+2)'(st3);
    // 5: overflow clamp at +/- e_max
    if (s4 > (DW+2)'(em4))         en5 <= em4;
    else if (s4 < -(DW+2)'(em4))   en5 <= -em4;
    else                           en5 <= fx_t'(s4);
    // 6..8: output registers
    dly[0] <= en5;
    for (int i = 1; i < LAT-5; i++) dly[i] <= dly[i-1];
  end
  assign e_o = dly[LAT-6];

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
