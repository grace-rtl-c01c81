// conv_pe: convolution of one input tile with one kernel tile.
//
// For every output pixel (oy,ox) of the TO x TO tile and every kernel tap
// (ky,kx) it reads Tn input pixels from the input buffer at
// ((oy*S+ky)*tie + ox*S+kx) and the Tm x Tn weights of that tap from the
// weight buffer, and feeds them to the conv_engine. The k*k engine results
// of a pixel are summed in a register and added, once per pixel, to the Tm
// partial sums held in the output buffer. On the first input-channel step
// of an output tile (first_ci) the bias takes the place of the old partial
// sums, which is the same as initialising the output buffer with the bias,
// as the paper describes. Kernel size (1..KMAX) and stride (1 or 2) are set
// per run, so the same engine serves 3x3 and 7x7 layers.
// Timing: one tap per cycle; a run takes TO*TO*k*k + 3 cycles from start to
// done. Buffer reads are synchronous (one cycle latency).
module conv_pe #(
  parameter int TN   = 8,
  parameter int TM   = 16,
  parameter int TO   = 16,
  parameter int KMAX = 7,
  parameter int TI   = (TO - 1) * 2 + KMAX,
  parameter int IAW  = $clog2(TI * TI),
  parameter int WAW  = $clog2(KMAX * KMAX),
  parameter int OAW  = $clog2(TO * TO)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         first_ci,
  input  logic [3:0]                   ksize,
  input  logic [1:0]                   stride,
  input  logic [7:0]                   tie,     // input tile width
  input  logic signed [TM-1:0][31:0]   bias,
  output logic                         done,
  // input buffer read
  output logic                         i_re,
  output logic [IAW-1:0]               i_raddr,
  input  logic signed [TN-1:0][7:0]    i_rdata,
  // weight buffer read
  output logic                         w_re,
  output logic [WAW-1:0]               w_raddr,
  input  logic signed [TM*TN-1:0][7:0] w_rdata,
  // output buffer read / write
  output logic                         o_re,
  output logic [OAW-1:0]               o_raddr,
  input  logic signed [TM-1:0][31:0]   o_rdata,
  output logic                         o_we,
  output logic [OAW-1:0]               o_waddr,
  output logic signed [TM-1:0][31:0]   o_wdata
);
  logic        running, first_q;
  logic [7:0]  oy, ox;
  logic [3:0]  ky, kx;
  logic        s0_first, s0_last;
  logic        v1, first1, last1, v2, first2, last2;
  logic [OAW-1:0] pix1, pix2;
  logic signed [TM-1:0][31:0] old_q, acc, acc_next, sums;

  always_comb begin
    s0_first = (ky == 0) && (kx == 0);
    s0_last  = (ky == ksize - 1) && (kx == ksize - 1);
    i_re     = running;
    i_raddr  = IAW'((32'(oy) * stride + ky) * tie + 32'(ox) * stride + kx);
    w_re     = running;
    w_raddr  = WAW'(ky * ksize + kx);
    o_re     = running && s0_first;
    o_raddr  = OAW'(oy * TO + ox);
  end

  conv_engine #(.TN(TN), .TM(TM)) u_engine (
    .clk, .in_valid(v1), .x(i_rdata), .w(w_rdata), .out_valid(v2), .sum(sums));

  always_comb begin
    for (int m = 0; m < TM; m++) acc_next[m] = (first2 ? old_q[m] : acc[m]) + sums[m];
    o_we    = v2 && last2;
    o_waddr = pix2;
    o_wdata = acc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; first_q <= 1'b0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
      first2 <= 1'b0; last2 <= 1'b0; pix2 <= '0;
      old_q <= '0; acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; first_q <= first_ci;
        oy <= '0; ox <= '0; ky <= '0; kx <= '0;
      end else if (running) begin
        if (kx == ksize - 1) begin
          kx <= '0;
          if (ky == ksize - 1) begin
            ky <= '0;
            if (ox == TO - 1) begin
              ox <= '0;
              if (oy == TO - 1) running <= 1'b0;
              else oy <= oy + 1'b1;
            end else ox <= ox + 1'b1;
          end else ky <= ky + 1'b1;
        end else kx <= kx + 1'b1;
      end
      // stage 1: buffer data valid
      v1     <= running;
      first1 <= running && s0_first;
      last1  <= running && s0_last;
      pix1   <= OAW'(oy * TO + ox);
      if (first1) old_q <= first_q ? bias : o_rdata;
      // stage 2: engine result valid
      first2 <= first1;
      last2  <= last1;
      pix2   <= pix1;
      if (v2) acc <= acc_next;
      if (v2 && last2 && !running && !v1) done <= 1'b1;
    end
  end
endmodule
