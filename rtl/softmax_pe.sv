// softmax_pe: softmax across channels, per pixel, in two passes.
//
// The decoder applies softmax over the K+1 mask channels of every pixel.
// Channels arrive LANES at a time, so the PE works in two passes over all
// channel groups:
//   sum pass  (norm=0): S[p] = (first ? 0 : S[p]) + sum over valid lanes of
//                       exp(a[l])
//   norm pass (norm=1): out[l] = round(127 * exp(a[l]) / S[p])
// S is an internal PT x PT buffer of 32-bit sums. Inputs are read as Q3.4,
// outputs are Q0.7 (127 stands for 1.0). exp is the base-2 approximation in
// grace_pkg, kept in Q.12 so that even exp(-8) is one LSB; no maximum is
// subtracted because Q3.4 inputs keep exp below 2^12 and the sum of up to
// 256 channels fits the 32-bit sum. One pixel per cycle; start to done takes rows*cols + 2 cycles. The
// paper names the softmax operator only; the two-pass organisation, the
// number formats and the approximation are this design's.
module softmax_pe
  import grace_pkg::*;
#(
  parameter int LANES = 4,
  parameter int PT    = 64,
  parameter int AW    = $clog2(PT * PT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          norm,       // 0: sum pass, 1: normalise
  input  logic                          first,      // first group of the sum pass
  input  logic [LANES-1:0]              lane_valid,
  input  logic [15:0]                   rows,
  input  logic [15:0]                   cols,
  output logic                          done,
  output logic                          a_re,
  output logic [AW-1:0]                 a_raddr,
  input  logic signed [LANES-1:0][7:0]  a_rdata,
  output logic                          o_we,
  output logic [AW-1:0]                 o_waddr,
  output logic signed [LANES-1:0][7:0]  o_wdata
);
  logic        running, v1, last1, norm_q, first_q;
  logic [15:0] y, x;
  logic [AW-1:0] pix1;
  logic [LANES-1:0] lv_q;
  logic [0:0][31:0] s_rdata, s_wdata;
  logic        s_we;
  logic [LANES-1:0][23:0] e;
  logic [31:0] esum;

  assign a_re    = running;
  assign a_raddr = AW'(32'(y) * PT + x);

  lane_ram #(.LANES(1), .DEPTH(PT * PT), .W(32)) u_sum (
    .clk, .we(s_we), .waddr(pix1), .wdata(s_wdata),
    .re(running), .raddr(a_raddr), .rdata(s_rdata));

  always_comb begin
    esum = '0;
    for (int l = 0; l < LANES; l++) begin
      e[l] = exp_q12(a_rdata[l]);
      if (lv_q[l]) esum = esum + 32'(e[l]);
    end
    s_we       = v1 && !norm_q;
    s_wdata[0] = (first_q ? 32'd0 : s_rdata[0]) + esum;
    o_we       = v1 && norm_q;
    o_waddr    = pix1;
    for (int l = 0; l < LANES; l++) begin
      logic [39:0] qv;
      qv = (s_rdata[0] == 0) ? 40'd0
         : (40'(e[l]) * 40'd127 + 40'(s_rdata[0] >> 1)) / 40'(s_rdata[0]);
      o_wdata[l] = (qv > 40'd127) ? 8'sd127 : 8'(qv);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; y <= '0; x <= '0; v1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
      norm_q <= 1'b0; first_q <= 1'b0; lv_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= (rows != 0) && (cols != 0);
        done    <= (rows == 0) || (cols == 0);
        norm_q <= norm; first_q <= first; lv_q <= lane_valid;
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
