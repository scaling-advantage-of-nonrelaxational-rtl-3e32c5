// tb_host_if: drives the byte stream of the host protocol directly into the decoder
// (U = 8, N_MAX = 24, n = 20, so nb = 3) and checks: every parameter write lands in the
// parameter record; an x and an e load produce n writes with the right block address,
// lane and 18-bit value; a coupling load produces nb^2 * U row writes with the packed
// 2-bit codes; the run command gives one start pulse; after done the reply has
// 8 + nb * ceil(U/8) bytes with the best energy, its MVM index and the best signs read
// through best_raddr. The transmitter is modelled as busy for 6 cycles per byte.
module tb_host_if;
  import cac_pkg::*;
  localparam int U = 8, NMAX = 24, N = 20, NB = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_valid = 0, tx_start, tx_busy = 0, ld_we, start, done = 0;
  logic [7:0] rx_data = '0, tx_data;
  cac_params_t params;
  ld_sel_e ld_sel;
  logic [3:0] ld_addr;
  logic [2:0] ld_lane;
  logic [17:0] ld_data;
  acc_t h_opt = 32'sh8765_4321;
  logic [31:0] nu_opt = 32'h0BAD_F00D;
  logic [1:0] best_raddr;
  logic [U-1:0] best_rdata;
  logic [U-1:0] best_mem [NB];

  host_if #(.U(U), .N_MAX(NMAX)) dut (
    .clk, .rst_n, .rx_valid_i(rx_valid), .rx_data_i(rx_data), .tx_start_o(tx_start),
    .tx_data_o(tx_data), .tx_busy_i(tx_busy), .params_o(params), .ld_we_o(ld_we),
    .ld_sel_o(ld_sel), .ld_addr_o(ld_addr), .ld_lane_o(ld_lane), .ld_data_o(ld_data),
    .start_o(start), .done_i(done), .h_opt_i(h_opt), .nu_opt_i(nu_opt),
    .best_raddr_o(best_raddr), .best_rdata_i(best_rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) best_rdata <= best_mem[best_raddr];

  // load-bus monitor
  typedef struct { int sel; int addr; int lane; int data; } wr_t;
  wr_t wq[$];
  int n_start = 0;
  byte unsigned txq[$];
  always @(negedge clk) begin
    if (ld_we) wq.push_back('{int'(ld_sel), int'(ld_addr), int'(ld_lane), int'(ld_data)});
    if (start) n_start++;
  end
  // transmitter model
  always @(posedge clk) if (tx_start) begin
    txq.push_back(tx_data);
    tx_busy <= 1;
    repeat (6) @(posedge clk);
    tx_busy <= 0;
  end

  task automatic put(input logic [7:0] b);
    // called at a falling edge; the byte is sampled at the next rising edge
    rx_valid = 1; rx_data = b; @(negedge clk);
    rx_valid = 0; repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int vals[14];
    int xv[N];
    int wv[NB*NB*U][U];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (best_mem[b]) best_mem[b] = U'($urandom);
    // parameters
    for (int id = 0; id < 14; id++) begin
      vals[id] = (id == 0) ? N : int'($urandom);
      put(8'h01); put(8'(id));
      for (int k = 0; k < 4; k++) put(8'(vals[id] >> (8*k)));
    end
    repeat (2) @(negedge clk);
    check(params.n == 16'(vals[0]), "n");
    check(params.k_mvm == 32'(vals[1]), "k_mvm");
    check(params.beta == 18'(vals[2]), "beta");
    check(params.p == 18'(vals[3]), "p");
    check(params.alpha == 18'(vals[4]), "alpha");
    check(params.rho == 18'(vals[5]), "rho");
    check(params.delta == 18'(vals[6]), "delta");
    check(params.gamma == 32'(vals[7]), "gamma");
    check(params.tau == 32'(vals[8]), "tau");
    check(params.n_x == 8'(vals[9]), "n_x");
    check(params.n_e == 8'(vals[10]), "n_e");
    check(params.dtx_sh == 4'(vals[11]), "dtx");
    check(params.dte_sh == 4'(vals[12]), "dte");
    check(params.e_max == 18'(vals[13]), "e_max");
    // x and e loads
    for (int s = 0; s < 2; s++) begin
      put(s ? 8'h03 : 8'h02);
      for (int i = 0; i < N; i++) begin
        xv[i] = int'($urandom_range(0, 262143));
        put(8'(xv[i])); put(8'(xv[i] >> 8)); put(8'(xv[i] >> 16));
      end
      repeat (2) @(negedge clk);
      check(wq.size() == N, $sformatf("load count %0d", wq.size()));
      for (int i = 0; i < N && wq.size() > 0; i++) begin
        wr_t w;
        w = wq.pop_front();
        check(w.sel == (s ? int'(LD_E) : int'(LD_X)) && w.addr == i / U && w.lane == i % U &&
              w.data == xv[i], $sformatf("value write %0d", i));
      end
      wq.delete();
    end
    // couplings
    put(8'h04);
    for (int a = 0; a < NB*NB; a++)
      for (int r = 0; r < U; r++) begin
        for (int c = 0; c < U; c++) wv[a*U + r][c] = int'($urandom_range(0, 3));
        for (int k = 0; k < U/4; k++)
          put({2'(wv[a*U+r][4*k+3]), 2'(wv[a*U+r][4*k+2]), 2'(wv[a*U+r][4*k+1]), 2'(wv[a*U+r][4*k])});
      end
    repeat (2) @(negedge clk);
    check(wq.size() == NB*NB*U, $sformatf("coupling writes %0d", wq.size()));
    for (int a = 0; a < NB*NB; a++)
      for (int r = 0; r < U; r++) if (wq.size() > 0) begin
        wr_t w;
        int expw;
        w = wq.pop_front();
        expw = 0;
        for (int c = 0; c < U; c++) expw |= wv[a*U + r][c] << (2*c);
        check(w.sel == int'(LD_J) && w.addr == a && w.lane == r && w.data == expw,
              $sformatf("coupling row %0d/%0d", a, r));
      end
    // run
    put(8'h05);
    repeat (20) @(negedge clk);
    check(n_start == 1, "one start pulse");
    check(txq.size() == 0, "no reply before done");
    done = 1; @(negedge clk); done = 0;
    repeat (2000) @(negedge clk);
    check(txq.size() == 8 + NB, $sformatf("reply length %0d", txq.size()));
    if (txq.size() == 8 + NB) begin
      logic [31:0] hv, nv;
      for (int k = 0; k < 4; k++) begin hv[8*k +: 8] = txq[k]; nv[8*k +: 8] = txq[4+k]; end
      check(hv == h_opt, "reply energy");
      check(nv == nu_opt, "reply MVM index");
      for (int b = 0; b < NB; b++) check(txq[8+b] == best_mem[b], $sformatf("reply signs %0d", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
