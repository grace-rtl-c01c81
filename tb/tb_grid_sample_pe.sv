// tb_grid_sample_pe: a random 2-channel grid map and random LANES-channel
// source planes; the PE first maps the grid to 8-bit coordinates (6 integer
// + 2 fraction bits), then samples. Every destination pixel is compared
// with a bilinear reference computed here: u = ((gx+128)*(W-1))>>6,
// v likewise, weights (4-du|du)*(4-dv|dv), zero outside the source, result
// (sum+8)>>4. Grid values -128 and 127 (the ends of the normalised range)
// are always included. Also checks the map latency rows*cols + 2 and the
// sample latency 6*rows*cols + 1.
module tb_grid_sample_pe;
  localparam int LANES = 4, PT = 16, AW = $clog2(PT * PT);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, done, sample, g_re, a_re, o_we;
  logic [15:0] rows, cols;
  logic [AW-1:0] g_raddr, a_raddr, o_waddr;
  logic signed [1:0][7:0] g_rdata;
  logic signed [LANES-1:0][7:0] a_rdata, o_wdata;
  logic signed [7:0] grid [2][PT*PT];
  logic signed [7:0] src [LANES][PT*PT];
  logic signed [7:0] dst [LANES][PT*PT];
  int wcount [PT*PT];

  grid_sample_pe #(.LANES(LANES), .PT(PT)) dut (.*);

  always_ff @(posedge clk)
    if (g_re) for (int l = 0; l < 2; l++) g_rdata[l] <= grid[l][g_raddr];
  always_ff @(posedge clk)
    if (a_re) for (int l = 0; l < LANES; l++) a_rdata[l] <= src[l][a_raddr];
  always_ff @(posedge clk)
    if (o_we) begin
      for (int l = 0; l < LANES; l++) dst[l][o_waddr] <= o_wdata[l];
      wcount[o_waddr] <= wcount[o_waddr] + 1;
    end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic smp, input int expect_cyc);
    int cyc;
    sample = smp;
    // cyc counts clock edges from the one that samples start to the one
    // that raises done
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expect_cyc) begin
      failures++; $display("latency %0d, expected %0d", cyc, expect_cyc);
    end
  endtask

  function automatic int px(int l, int uu, int vv);
    if (uu >= int'(cols) || vv >= int'(rows)) return 0;
    return int'(src[l][vv*PT+uu]);
  endfunction

  initial begin
    int u, v, u0, v0, du, dv, acc, e;
    a_rdata = '0; g_rdata = '0; rows = 0; cols = 0; sample = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      rows = (t == 0) ? 16'(PT) : 16'($urandom_range(1, PT));
      cols = (t == 0) ? 16'(PT) : 16'($urandom_range(1, PT));
      for (int i = 0; i < PT * PT; i++) begin
        for (int c = 0; c < 2; c++) grid[c][i] = 8'($urandom);
        for (int l = 0; l < LANES; l++) begin
          src[l][i] = (t == 1) ? -8'sd128 : 8'($urandom);
          dst[l][i] = 8'sd0;
        end
        wcount[i] = 0;
      end
      // extreme grid values: the corners of the normalised range
      grid[0][0] = -8'sd128; grid[1][0] = -8'sd128;
      grid[0][1] = 8'sd127;  grid[1][1] = 8'sd127;
      run(1'b0, rows * cols + 2);
      for (int i = 0; i < PT * PT; i++) wcount[i] = 0;
      run(1'b1, 6 * rows * cols + 1);
      @(posedge clk);
      for (int y = 0; y < PT; y++)
        for (int x = 0; x < PT; x++) begin
          checks++;
          if (wcount[y*PT+x] != ((y < rows && x < cols) ? 1 : 0)) begin
            failures++; $display("pixel %0d,%0d written %0d times", y, x, wcount[y*PT+x]);
          end
          if (y < rows && x < cols) begin
            u = ((int'(grid[0][y*PT+x]) + 128) * (int'(cols) - 1)) >> 6;
            v = ((int'(grid[1][y*PT+x]) + 128) * (int'(rows) - 1)) >> 6;
            u0 = u >> 2; du = u & 3; v0 = v >> 2; dv = v & 3;
            for (int l = 0; l < LANES; l++) begin
              acc = (4 - du) * (4 - dv) * px(l, u0, v0) + (4 - du) * dv * px(l, u0, v0 + 1)
                  + du * (4 - dv) * px(l, u0 + 1, v0) + du * dv * px(l, u0 + 1, v0 + 1);
              e = (acc + 8) >>> 4;
              checks++;
              if (int'(dst[l][y*PT+x]) != e) begin
                failures++; $display("t=%0d (%0d,%0d) lane %0d got %0d exp %0d", t, y, x, l, dst[l][y*PT+x], e);
              end
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
