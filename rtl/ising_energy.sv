// ising_energy: evaluates H(sigma) = -1/2 sum_ij w_ij sigma_i sigma_j of the sign
// configuration while the coupling RAM is read for the matrix-vector product, reusing
// the same coupling words. Signs are one bit (1 = negative, the MSB of x). Each product
// w_ij * sigma_j is formed by the two-bit logic equation S1 = (w1 ^ sigma_j) & w0,
// S0 = w0, giving a ternary value in the coupling encoding. Per block: stage 1 sums S
// along each row, stage 2 applies sigma_i of the row and sums the rows, stage 3 adds the
// block's share into an accumulator (the energy of a partitioned matrix is the sum of
// the blocks' energies). clear_i zeroes the accumulator at the start of a product.
// energy_o = -acc/2 is valid LAT = 3 cycles after the last block entered.
module ising_energy
  import cac_pkg::*;
#(
  parameter int unsigned U = 100
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear_i,
  input  logic                     valid_i,
  input  logic [U-1:0]             sig_col_i,   // sigma_j of the block column
  input  logic [U-1:0]             sig_row_i,   // sigma_i of the block row
  input  logic [U-1:0][U-1:0][1:0] w_i,         // w_i[r][c]
  output acc_t                     energy_o
);
  localparam int unsigned HW = $clog2(U + 1) + 1;
  typedef logic signed [HW-1:0] h_t;

  h_t           hrow [U];
  logic [U-1:0] srow;
  logic         v1, v2;
  acc_t         blk_sum, acc;

  // one row-sum block per row (generated, so each procedural block loops only over U)
  for (genvar r = 0; r < U; r++) begin : g_row
    always_ff @(posedge clk) begin
      h_t h;
      h = '0;
      for (int c = 0; c < U; c++) begin
        logic s1, s0;
        s1 = (w_i[r][c][1] ^ sig_col_i[c]) & w_i[r][c][0];
        s0 = w_i[r][c][0];
        if (s0) h = s1 ? h - h_t'(1) : h + h_t'(1);
      end
      hrow[r] <= h;
    end
  end

  always_ff @(posedge clk) srow <= sig_row_i;

  always_ff @(posedge clk) begin
    acc_t t;
    t = '0;
    for (int r = 0; r < U; r++) t += srow[r] ? -acc_t'(hrow[r]) : acc_t'(hrow[r]);
    blk_sum <= t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; acc <= '0;
    end else begin
      v1 <= valid_i;
      v2 <= v1;
      if (clear_i)  acc <= '0;
      else if (v2)  acc <= acc + blk_sum;
    end
  end

  assign energy_o = -(acc >>> 1);
endmodule
