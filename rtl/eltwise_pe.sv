// eltwise_pe: element-wise Hadamard product or matrix addition of two
// LANES-channel tiles, with requantisation back to int8.
//
// For each pixel p = y*PT+x of a rows x cols tile it reads a (plane A) and
// b (plane B) of every lane and writes
//   Hadamard: requant(a*b),  Add: requant(a+b)
// with requant(v) = sat8(round(v*mult/2^shift) + zero) (grace_pkg). The
// decoder uses the product to mask the warped features with the occlusion
// map and the masks with the flow fields, and the addition for residual
// blocks and the sum over the masked flows. One pixel per cycle; start to
// done takes rows*cols + 2 cycles. The paper names both operators; the
// single multiplier/shift per layer is this design's choice.
module eltwise_pe
  import grace_pkg::*;
#(
  parameter int LANES = 4,
  parameter int PT    = 64,
  parameter int AW    = $clog2(PT * PT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          add_mode,   // 0: product, 1: sum
  input  logic [15:0]                   rows,
  input  logic [15:0]                   cols,
  input  logic [15:0]                   qmult,
  input  logic [5:0]                    qshift,
  input  logic signed [7:0]             qzero,
  output logic                          done,
  output logic                          ab_re,
  output logic [AW-1:0]                 ab_raddr,
  input  logic signed [LANES-1:0][7:0]  a_rdata,
  input  logic signed [LANES-1:0][7:0]  b_rdata,
  output logic                          o_we,
  output logic [AW-1:0]                 o_waddr,
  output logic signed [LANES-1:0][7:0]  o_wdata
);
  logic        running, v1, last1;
  logic [15:0] y, x;
  logic [AW-1:0] pix1;

  assign ab_re    = running;
  assign ab_raddr = AW'(32'(y) * PT + x);
  assign o_we     = v1;
  assign o_waddr  = pix1;
  always_comb
    for (int l = 0; l < LANES; l++)
      o_wdata[l] = requant(add_mode ? 32'($signed(a_rdata[l])) + 32'($signed(b_rdata[l]))
                                    : 32'($signed(a_rdata[l]) * $signed(b_rdata[l])),
                           qmult, qshift, qzero);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; y <= '0; x <= '0; v1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= (rows != 0) && (cols != 0);
        done    <= (rows == 0) || (cols == 0);
        y <= '0; x <= '0;
      end else if (running) begin
        if (x == cols - 1) begin
          x <= '0;
          if (y == rows - 1) running <= 1'b0;
          else y <= y + 1'b1;
        end else x <= x + 1'b1;
      end
      v1    <= running;
      pix1  <= AW'(32'(y) * PT + x);
      last1 <= running && (x == cols - 1) && (y == rows - 1);
      if (v1 && last1) done <= 1'b1;
    end
  end
endmodule
