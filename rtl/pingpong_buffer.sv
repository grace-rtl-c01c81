// pingpong_buffer: two lane_ram banks (Buf0/Buf1) forming a double buffer.
//
// While one bank is filled by the load engine the other is read by a
// processing element, so transfer and computation overlap. The write port
// selects its bank with wbank. Two read ports (A and B) select their banks
// with abank/bbank; the scheduler guarantees that A and B never read the same
// bank in the same cycle, so each physical bank needs only one read and one
// write port (checked by an assertion). Read data arrive one cycle after the
// read enable.
module pingpong_buffer #(
  parameter int LANES = 8,
  parameter int DEPTH = 1369,
  parameter int W     = 8
) (
  input  logic                     clk,
  input  logic                     wbank,
  input  logic [LANES-1:0]         we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [LANES-1:0][W-1:0]  wdata,
  input  logic                     are,
  input  logic                     abank,
  input  logic [$clog2(DEPTH)-1:0] araddr,
  output logic [LANES-1:0][W-1:0]  ardata,
  input  logic                     bre,
  input  logic                     bbank,
  input  logic [$clog2(DEPTH)-1:0] braddr,
  output logic [LANES-1:0][W-1:0]  brdata
);
  localparam int AW = $clog2(DEPTH);
  logic [1:0]                    re;
  logic [1:0][AW-1:0]            raddr;
  logic [1:0][LANES-1:0][W-1:0]  rdata;
  logic                          abank_q, bbank_q;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    always_comb begin
      re[b]    = (are && abank == b[0]) || (bre && bbank == b[0]);
      raddr[b] = (are && abank == b[0]) ? araddr : braddr;
    end
    lane_ram #(.LANES(LANES), .DEPTH(DEPTH), .W(W)) u_ram (
      .clk, .we(we & {LANES{wbank == b[0]}}), .waddr, .wdata,
      .re(re[b]), .raddr(raddr[b]), .rdata(rdata[b]));
  end

  always_ff @(posedge clk) begin
    if (are) abank_q <= abank;
    if (bre) bbank_q <= bbank;
  end
  assign ardata = rdata[abank_q];
  assign brdata = rdata[bbank_q];

  a_no_bank_conflict: assert property (@(posedge clk) !(are && bre && abank == bbank))
    else $error("pingpong_buffer: both read ports on one bank");
endmodule
