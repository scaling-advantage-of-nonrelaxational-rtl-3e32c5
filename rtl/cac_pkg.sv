// cac_pkg: types, constants and helpers shared by the chaotic amplitude control (CAC)
// Ising solver. State variables x_i, e_i and the control parameters are 18-bit signed
// fixed point with 1 sign, 5 integer and 12 fraction bits, as in the FPGA design this
// follows. Couplings are ternary, two bits each: {msb,lsb} = 01 is +1, 11 is -1, 00 and
// 10 are 0 (the encoding implied by R = w0 & (x ^ w1)). The xi accumulator, the parameter
// record layout, the command codes of the host link and the saturation helpers are
// choices of this design. Every constant here is used by the full design; a lint run on
// a single block reports the constants that block does not need as unused.
package cac_pkg;
  localparam int unsigned DW = 18;          // data word: 1 sign, 5 integer, 12 fraction bits
  localparam int unsigned FB = 12;          // fraction bits
  localparam int unsigned XIW = 20;         // xi as used in the datapath: unsigned Q4.16
  localparam int unsigned XIFB = 16;
  localparam int unsigned ACCW = 32;        // dot-product and energy accumulators

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [1:0]             w_t;

  localparam fx_t FX_MAX = 18'sh1FFFF;
  localparam fx_t FX_MIN = 18'sh20000;
  localparam fx_t FX_ONE = 18'sh01000;
  localparam w_t W_ZERO = 2'b00;   // +1 is 2'b01, -1 is 2'b11, 2'b10 is also 0

  // Run parameters, written by the host before a run.
  typedef struct packed {
    logic [15:0] n;        // number of spins
    logic [31:0] k_mvm;    // matrix-vector products per run
    fx_t         beta;     // coupling strength
    fx_t         p;        // linear gain
    fx_t         alpha;    // target amplitude baseline
    fx_t         rho;      // amplitude variation
    fx_t         delta;    // sensitivity to energy variations
    logic [31:0] gamma;    // xi increment per MVM, unsigned Q4.28
    logic [31:0] tau;      // MVMs without improvement before xi is reset
    logic [7:0]  n_x;      // x updates per MVM
    logic [7:0]  n_e;      // e updates per MVM
    logic [3:0]  dtx_sh;   // dt_x = 2^-dtx_sh
    logic [3:0]  dte_sh;   // dt_e = 2^-dte_sh
    fx_t         e_max;    // saturation level of e ("overflow N")
  } cac_params_t;

  typedef enum logic [3:0] {
    P_N = 4'd0, P_K = 4'd1, P_BETA = 4'd2, P_P = 4'd3, P_ALPHA = 4'd4, P_RHO = 4'd5,
    P_DELTA = 4'd6, P_GAMMA = 4'd7, P_TAU = 4'd8, P_NX = 4'd9, P_NE = 4'd10,
    P_DTX = 4'd11, P_DTE = 4'd12, P_EMAX = 4'd13
  } param_id_e;

  typedef enum logic [7:0] {
    CMD_PARAM = 8'h01, CMD_LOAD_X = 8'h02, CMD_LOAD_E = 8'h03, CMD_LOAD_J = 8'h04,
    CMD_RUN = 8'h05
  } cmd_e;

  // Memory selected by a load-bus write.
  typedef enum logic [1:0] { LD_X = 2'd0, LD_E = 2'd1, LD_J = 2'd2 } ld_sel_e;

  // Saturate a wide signed value to the 18-bit data word.
  function automatic fx_t sat(input logic signed [63:0] v);
    if (v > 64'sd131071)       return FX_MAX;
    else if (v < -64'sd131072) return FX_MIN;
    else                       return fx_t'(v);
  endfunction

  // Fixed-point product of two data words, rounded toward minus infinity, saturated.
  function automatic fx_t fmul(input fx_t a, input fx_t b);
    logic signed [63:0] pr;
    pr = 64'(a) * 64'(b);
    return sat(pr >>> FB);
  endfunction

  // Latency of coupling_dot: two registered adder stages, then ceil(log5(ceil(U/4)))
  // adder levels of dsp_lat cycles each.
  function automatic int unsigned dot_latency(input int unsigned u, input int unsigned dsp_lat);
    int unsigned n, l;
    n = ((u + 1) / 2 + 1) / 2;
    l = 0;
    while (n > 1) begin n = (n + 4) / 5; l++; end
    return 2 + dsp_lat * l;
  endfunction
endpackage
