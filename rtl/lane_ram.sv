// lane_ram: on-chip RAM of LANES parallel lanes, each DEPTH words of W bits.
//
// One write port writes the same index in any subset of lanes (per-lane
// enables), one read port reads the same index in all lanes. The read is
// synchronous: data appear one cycle after re and hold until the next read,
// as in an FPGA block RAM. The lane organisation lets a processing element
// fetch one word per input channel (or per channel pair) in one cycle.
// Write-before-read ordering for the same address is not defined; the users
// never read an address in the cycle it is written.
module lane_ram #(
  parameter int LANES = 4,
  parameter int DEPTH = 4096,
  parameter int W     = 8
) (
  input  logic                     clk,
  input  logic [LANES-1:0]         we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [LANES-1:0][W-1:0]  wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [LANES-1:0][W-1:0]  rdata
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[l]) mem[waddr] <= wdata[l];
      if (re)    rdata[l]   <= mem[raddr];
    end
  end
endmodule
