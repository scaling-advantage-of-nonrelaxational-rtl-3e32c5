// coupling_dot: one row of a u x u block matrix-vector product, sum_j w_j * x_j, built
// like the coupling circuit of the FPGA design:
//  stage 1  U/2 pair_mult cells (LUT3 + MUX + CARRY8), registered: U products become
//           U/2 partial sums;
//  stage 2  a CARRY8 adder stage adds those in pairs, registered: U/2 -> ceil(U/4)
//           (for u = 100: 100 products -> 50 -> 25, as in the source);
//  tree     adder levels of fan-in 5 (the cascaded DSP adders), each taking DSP_LAT
//           cycles, until one sum remains: 25 -> 5 -> 1 for u = 100.
// Latency LAT = 2 + DSP_LAT * ceil(log5(ceil(U/4))) cycles (12 for u = 100 and a 5-cycle
// DSP level), fully pipelined: one new row input per cycle. A TAGW-bit tag travels with
// the data. The fan-in of 5 and the 5-cycle level follow the source's adder-tree height
// formula; the exact split of the tree into DSP cascades is this design's choice.
module coupling_dot
  import cac_pkg::*;
#(
  parameter int unsigned U       = 100,
  parameter int unsigned W       = DW,
  parameter int unsigned DSP_LAT = 5,
  parameter int unsigned TAGW    = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       valid_i,
  input  logic [TAGW-1:0]            tag_i,
  input  logic [U-1:0][W-1:0]        x_i,
  input  logic [U-1:0][1:0]          w_i,
  output logic                       valid_o,
  output logic [TAGW-1:0]            tag_o,
  output acc_t                       sum_o
);
  localparam int unsigned NP = (U + 1) / 2;   // pair cells
  localparam int unsigned N1 = (NP + 1) / 2;  // after the CARRY8 stage

  function automatic int unsigned levels5(input int unsigned n);
    int unsigned l;
    l = 0;
    while (n > 1) begin n = (n + 4) / 5; l++; end
    return l;
  endfunction
  function automatic int unsigned count_at(input int unsigned lvl);
    int unsigned n;
    n = N1;
    for (int unsigned i = 0; i < lvl; i++) n = (n + 4) / 5;
    return n;
  endfunction

  localparam int unsigned L   = levels5(N1);
  localparam int unsigned LAT = 2 + DSP_LAT * L;

  // stage 1: pair cells
  logic signed [W:0] pr [NP];
  acc_t s1 [NP];
  for (genvar k = 0; k < NP; k++) begin : g_pair
    logic signed [W-1:0] xa, xb;
    w_t wa, wb;
    assign xa = x_i[2*k];
    assign wa = w_i[2*k];
    assign xb = (2*k+1 < U) ? x_i[(2*k+1) % U] : '0;
    assign wb = (2*k+1 < U) ? w_i[(2*k+1) % U] : W_ZERO;
    pair_mult #(.W(W)) u_pair (.x0(xa), .x1(xb), .w0(wa), .w1(wb), .r(pr[k]));
    always_ff @(posedge clk) s1[k] <= acc_t'(pr[k]);
  end

  // stage 2 and tree levels: node[0] is the CARRY8 stage output
  acc_t node [L+1][N1];
  for (genvar k = 0; k < N1; k++) begin : g_c8
    always_ff @(posedge clk)
      node[0][k] <= s1[2*k] + ((2*k+1 < NP) ? s1[(2*k+1) % NP] : '0);
  end

  for (genvar lv = 1; lv <= L; lv++) begin : g_lvl
    for (genvar g = 0; g < N1; g++) begin : g_node
      if (g < count_at(lv)) begin : g_add
        acc_t sum5;
        acc_t dly [DSP_LAT];
        always_comb begin
          sum5 = '0;
          for (int t = 0; t < 5; t++)
            if (5*g + t < count_at(lv-1)) sum5 += node[lv-1][5*g + t];
        end
        always_ff @(posedge clk) begin
          dly[0] <= sum5;
          for (int d = 1; d < DSP_LAT; d++) dly[d] <= dly[d-1];
        end
        assign node[lv][g] = dly[DSP_LAT-1];
      end else begin : g_unused
        assign node[lv][g] = '0;
      end
    end
  end

  assign sum_o = node[L][0];

  // valid and tag travel alongside
  logic            vpipe [LAT];
  logic [TAGW-1:0] tpipe [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < LAT; i++) vpipe[i] <= 1'b0;
    else begin
      vpipe[0] <= valid_i;
      for (int i = 1; i < LAT; i++) vpipe[i] <= vpipe[i-1];
    end
  end
  always_ff @(posedge clk) begin
    tpipe[0] <= tag_i;
    for (int i = 1; i < LAT; i++) tpipe[i] <= tpipe[i-1];
  end
  assign valid_o = vpipe[LAT-1];
  assign tag_o   = tpipe[LAT-1];
endmodule
