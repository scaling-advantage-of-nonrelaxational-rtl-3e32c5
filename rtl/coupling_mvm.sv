// coupling_mvm: the W_ij.X_i core. It multiplies a block of U spins' amplitudes by beta
// (one DSP stage, as the source design scales x before the dot product to shrink its
// integer range), feeds the scaled block and a U x U block of ternary couplings to U
// parallel coupling_dot rows, and accumulates the row results over the block columns of
// one block row. With an N-spin problem cut into nb = ceil(N/U) blocks, one block enters
// per cycle, so a full product takes nb^2 cycles plus the pipeline latency LAT.
// Interface: per cycle, valid_i with first_i (first block column), last_i (last block
// column) and blk_i (block row). When the last column of a block row leaves the
// pipeline, valid_o pulses with blk_o and the U accumulated sums sum_o[r] =
// sum_j w_rj * beta * x_j (fraction bits as x). The multiplication of the sum by e_i is
// done where the sum is used (x_unit), which is this design's choice.
// Latency: LAT = 1 (beta) + coupling_dot latency + 1 (accumulate).
module coupling_mvm
  import cac_pkg::*;
#(
  parameter int unsigned U       = 100,
  parameter int unsigned DSP_LAT = 5,
  parameter int unsigned BW      = 5
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  fx_t                        beta,
  input  logic                       valid_i,
  input  logic                       first_i,
  input  logic                       last_i,
  input  logic [BW-1:0]              blk_i,
  input  logic [U-1:0][DW-1:0]       x_i,
  input  logic [U-1:0][U-1:0][1:0]   w_i,     // w_i[r][c]: row r, column c
  output logic                       valid_o,
  output logic [BW-1:0]              blk_o,
  output logic [U-1:0][ACCW-1:0]     sum_o
);
  localparam int unsigned TAGW = BW + 2;

  // beta pre-multiplication
  logic [U-1:0][DW-1:0]     xb;
  logic [U-1:0][U-1:0][1:0] wq;
  logic                     vq;
  logic [TAGW-1:0]          tq;
  always_ff @(posedge clk) begin
    for (int c = 0; c < U; c++) xb[c] <= fmul(fx_t'(x_i[c]), beta);
    wq <= w_i;
    tq <= {first_i, last_i, blk_i};
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vq <= 1'b0;
    else        vq <= valid_i;

  // U parallel rows
  logic [U-1:0]    vrow;
  logic [TAGW-1:0] trow [U];
  acc_t            srow [U];
  for (genvar r = 0; r < U; r++) begin : g_row
    coupling_dot #(.U(U), .W(DW), .DSP_LAT(DSP_LAT), .TAGW(TAGW)) u_dot (
      .clk, .rst_n, .valid_i(vq), .tag_i(tq), .x_i(xb), .w_i(wq[r]),
      .valid_o(vrow[r]), .tag_o(trow[r]), .sum_o(srow[r]));
  end

  // accumulation over block columns
  logic first_d, last_d;
  logic vall;
  assign vall    = &vrow;
  assign first_d = trow[0][TAGW-1];
  assign last_d  = trow[0][TAGW-2];
  acc_t acc [U];
  always_ff @(posedge clk) begin
    if (vall) begin
      for (int r = 0; r < U; r++) begin
        acc[r] <= first_d ? srow[r] : acc[r] + srow[r];
        if (last_d) sum_o[r] <= first_d ? srow[r] : acc[r] + srow[r];
      end
      if (last_d) blk_o <= trow[0][BW-1:0];
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= vall & last_d;
endmodule
