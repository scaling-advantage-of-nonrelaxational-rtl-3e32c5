// amp_control: the chaotic-amplitude-control modulation, run once per matrix-vector
// product (MVM) on update_i, with the energy H of the configuration of that MVM:
//   xi    <- xi + gamma                       (ramp of the error rate)
//   a     <- alpha + rho * tanh(delta * (H - H_opt))   (target amplitude)
//   if nu - nu_c > tau      : nu_c <- nu, xi <- 0      (reset after tau MVMs without gain)
//   if H < H_opt            : H_opt <- H, nu_opt <- nu, nu_c <- nu
//   nu <- nu + 1
// This is the order of the source's pseudocode; a uses the H_opt from before the update.
// clear_i starts a run: H_opt = largest value, nu = nu_c = nu_opt = 0, xi = 0, a = alpha
// (the initial a is this design's choice). xi is kept in an unsigned Q4.28 accumulator so
// that small rates such as gamma = 0.00011 are representable; the datapath uses its top
// 20 bits (Q4.16). improved_o tells, before the update, whether H beats H_opt. ev_*
// pulse for one cycle with the update when the xi reset or an improvement happens.
module amp_control
  import cac_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear_i,
  input  logic            update_i,
  input  acc_t            energy_i,
  input  fx_t             alpha,
  input  fx_t             rho,
  input  fx_t             delta,
  input  logic [31:0]     gamma,
  input  logic [31:0]     tau,
  output fx_t             a_o,
  output logic [XIW-1:0]  xi_o,
  output acc_t            h_opt_o,
  output logic [31:0]     nu_opt_o,
  output logic            improved_o,
  output logic            ev_reset_o,
  output logic            ev_improve_o
);
  logic [31:0] xi_acc, nu, nu_c;   // nu: index of the current MVM
  logic signed [32:0] dh;
  logic signed [39:0] z;
  fx_t th, a_next;
  logic signed [63:0] big;

  assign dh = 33'(energy_i) - 33'(h_opt_o);
  always_comb begin
    big = 64'(delta) * 64'(dh);
    if (big > 64'sd549755813887)       z = 40'sh7F_FFFF_FFFF;
    else if (big < -64'sd549755813888) z = 40'sh80_0000_0000;
    else                               z = 40'(big);
  end
  tanh_pwl u_tanh (.z_i(z), .t_o(th));
  assign a_next     = sat(64'(alpha) + ((64'(rho) * 64'(th)) >>> FB));
  assign improved_o = energy_i < h_opt_o;
  assign xi_o       = xi_acc[31 -: XIW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xi_acc <= '0; nu <= '0; nu_c <= '0; nu_opt_o <= '0;
      h_opt_o <= 32'sh7FFF_FFFF; a_o <= '0; ev_reset_o <= 1'b0; ev_improve_o <= 1'b0;
    end else begin
      ev_reset_o   <= 1'b0;
      ev_improve_o <= 1'b0;
      if (clear_i) begin
        xi_acc <= '0; nu <= '0; nu_c <= '0; nu_opt_o <= '0;
        h_opt_o <= 32'sh7FFF_FFFF; a_o <= alpha;
      end else if (update_i) begin
        xi_acc <= (xi_acc + gamma < xi_acc) ? 32'hFFFF_FFFF : xi_acc + gamma;
        a_o    <= a_next;
        if (nu - nu_c > tau) begin
          nu_c <= nu; xi_acc <= '0; ev_reset_o <= 1'b1;
        end
        if (improved_o) begin
          h_opt_o <= energy_i; nu_opt_o <= nu; nu_c <= nu; ev_improve_o <= 1'b1;
        end
        nu <= nu + 1;
      end
    end
  end
endmodule
