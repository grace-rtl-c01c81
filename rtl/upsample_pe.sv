// upsample_pe: 2x nearest-neighbour upsampling of LANES channel tiles.
//
// Output pixel (y,x) of a rows x cols output tile copies input pixel
// (y/2, x/2) of every lane (row pitch PT in both plane buffers). One output
// pixel per cycle; start to done takes rows*cols + 2 cycles. The paper names
// the upsample engine of the generator's up blocks without its
// interpolation; nearest-neighbour is this design's choice.
module upsample_pe #(
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
  logic        running, v1, last1;
  logic [15:0] y, x;
  logic [AW-1:0] pix1;

  assign a_re    = running;
  assign a_raddr = AW'(32'(y >> 1) * PT + 32'(x >> 1));
  assign o_we    = v1;
  assign o_waddr = pix1;
  assign o_wdata = a_rdata;

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
