// lane_ram: a bank of LANES narrow RAMs sharing one address, the memory organisation
// used for the couplings (one RAM per matrix row of a u x u block) and for the state
// vectors (one RAM per lane of a block of u spins). Each lane has its own write enable,
// so a host can fill one lane at a time while the compute cores write whole blocks.
// One write port and one read port; reads are synchronous (data one cycle after the
// address), as in a block RAM. A memory that needs a second read port (the x memory,
// read by block column for the product and by block row for the energy) is built from
// two copies written together.
module lane_ram #(
  parameter int unsigned LANES = 100,
  parameter int unsigned LW    = 18,
  parameter int unsigned DEPTH = 20,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                     clk,
  input  logic [LANES-1:0]         we,
  input  logic [AW-1:0]            waddr,
  input  logic [LANES-1:0][LW-1:0] wdata,
  input  logic [AW-1:0]            raddr_a,
  output logic [LANES-1:0][LW-1:0] rdata_a
);
  logic [LW-1:0] mem [LANES][DEPTH];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (we[l]) mem[l][waddr] <= wdata[l];
      rdata_a[l] <= mem[l][raddr_a];
    end
  end
endmodule
