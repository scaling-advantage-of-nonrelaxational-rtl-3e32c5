// tb_lane_ram: 4 lanes x 16 bits x 10 words. Random writes with random per-lane
// enables against a shadow array, the read port checked every cycle, one cycle after
// its address (the address never equals the one being written in that cycle).
module tb_lane_ram;
  localparam int L = 4, D = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [L-1:0] we = '0;
  logic [3:0] waddr = '0, ra = '0;
  logic [L-1:0][15:0] wdata = '0, rda;
  logic [15:0] shadow [L][D];
  lane_ram #(.LANES(L), .LW(16), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata,
    .raddr_a(ra), .rdata_a(rda));
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    // fill
    for (int d = 0; d < D; d++) begin
      @(negedge clk);
      we = '1; waddr = 4'(d);
      for (int l = 0; l < L; l++) begin wdata[l] = 16'($urandom); shadow[l][d] = wdata[l]; end
    end
    for (int t = 0; t < 2000; t++) begin
      logic [3:0] pa;
      @(negedge clk);
      pa = ra;
      // results of the addresses set one cycle ago (write of the previous cycle visible)
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rda[l] != shadow[l][pa]) begin failures++; $display("FAIL a"); end
      end
      we = 4'($urandom); waddr = 4'($urandom_range(0, D-1));
      for (int l = 0; l < L; l++) wdata[l] = 16'($urandom);
      ra = 4'($urandom_range(0, D-1));
      if (ra == waddr) ra = 4'((ra + 1) % D);
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) if (we[l]) shadow[l][waddr] = wdata[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
