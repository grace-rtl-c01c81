// avgpool_pe: 2x2 average pooling of LANES channel tiles in parallel.
//
// For each output pixel (y,x) of a rows x cols output tile it reads the four
// input pixels (2y+dy, 2x+dx) of every lane from the input plane buffer (one
// read per cycle, row pitch PT) and writes round-half-up((sum)/4) to the
// output plane buffer at y*PT+x. The input and output keep the same int8
// scale. Timing: 4 cycles per output pixel; start to done takes
// 4*rows*cols + 2 cycles. The paper names the 2x2 average pooling engine
// (used in the generator's down blocks); the access order and rounding are
// this design's.
module avgpool_pe #(
  parameter int LANES = 4,
  parameter int PT    = 64,
  parameter int AW    = $clog2(PT * PT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
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
  logic        running;
  logic [15:0] y, x;
  logic [1:0]  q;
  logic        v1, last1;
  logic [1:0]  q1;
  logic [AW-1:0] pix1;
  logic signed [LANES-1:0][9:0] sum;

  always_comb begin
    a_re    = running;
    a_raddr = AW'((32'(y) * 2 + q[1]) * PT + 32'(x) * 2 + q[0]);
  end

  always_comb begin
    o_we    = v1 && (q1 == 2'd3);
    o_waddr = pix1;
    for (int l = 0; l < LANES; l++)
      o_wdata[l] = 8'(($signed(sum[l]) + 10'($signed(a_rdata[l])) + 10'sd2) >>> 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; y <= '0; x <= '0; q <= '0;
      v1 <= 1'b0; last1 <= 1'b0; q1 <= '0; pix1 <= '0; sum <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= (rows != 0) && (cols != 0);
        done    <= (rows == 0) || (cols == 0);
        y <= '0; x <= '0; q <= '0;
      end else if (running) begin
        q <= q + 1'b1;
        if (q == 2'd3) begin
          if (x == cols - 1) begin
            x <= '0;
            if (y == rows - 1) running <= 1'b0;
            else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
      end
      v1    <= running;
      q1    <= q;
      pix1  <= AW'(32'(y) * PT + x);
      last1 <= running && (q == 2'd3) && (x == cols - 1) && (y == rows - 1);
      if (v1)
        for (int l = 0; l < LANES; l++)
          sum[l] <= (q1 == 2'd3) ? 10'sd0 : $signed(sum[l]) + 10'($signed(a_rdata[l]));
      if (v1 && last1) done <= 1'b1;
    end
  end
endmodule
