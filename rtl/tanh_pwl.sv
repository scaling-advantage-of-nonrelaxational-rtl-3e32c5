// tanh_pwl: hyperbolic tangent of a signed fixed-point argument (12 fraction bits),
// used by the target-amplitude modulation. Piecewise-linear interpolation between the
// points tanh(k/4), k = 0..16, stored as round(4096 * tanh(k/4)); beyond |z| = 4 the
// result is tanh(4). Odd symmetry gives negative arguments. Combinational. The source
// design does not say how it evaluates tanh; this table is this design's choice (worst
// error about 0.01).
module tanh_pwl
  import cac_pkg::*;
(
  input  logic signed [39:0] z_i,   // argument, 12 fraction bits
  output fx_t                t_o    // tanh(z), 12 fraction bits
);
  localparam logic [12:0] TBL [17] = '{
    13'd0,    13'd1003, 13'd1893, 13'd2602, 13'd3119, 13'd3475, 13'd3707, 13'd3856,
    13'd3949, 13'd4006, 13'd4041, 13'd4063, 13'd4076, 13'd4084, 13'd4089, 13'd4091,
    13'd4093 };

  always_comb begin
    logic        neg;
    logic [39:0] mag;
    logic [13:0] zc;         // |z| clamped to 4.0 (16384)
    logic [3:0]  idx;
    logic [9:0]  frac;
    logic [12:0] lo, hi;
    logic [17:0] interp;
    logic [23:0] prod;       // slope times fraction, wide enough for 1003 * 1023
    neg  = z_i[39];
    mag  = neg ? 40'(-z_i) : 40'(z_i);
    zc   = (mag >= 40'd16384) ? 14'd16383 : mag[13:0];
    idx  = zc[13:10];
    frac = zc[9:0];
    hi   = TBL[5'(idx) + 5'd1];
    lo   = TBL[5'(idx)];
    prod   = 24'(hi - lo) * 24'(frac);
    interp = 18'(lo) + 18'(prod >> 10);
    if (mag >= 40'd16384) interp = 18'(TBL[16]);
    t_o = neg ? -fx_t'(interp) : fx_t'(interp);
  end
endmodule
