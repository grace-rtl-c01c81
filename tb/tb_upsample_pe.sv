// tb_upsample_pe: fills a behavioural input plane (one-cycle read latency,
// like the block RAM it stands for) with random int8 values, runs 2x2
// average pooling for several tile sizes, and compares every written output
// pixel with round-half-up(sum/4) computed here. Checks the documented
// 4*rows*cols + 2 cycle latency and that each output is written once.
module tb_upsample_pe;
  localparam int LANES = 4, PT = 16, AW = $clog2(PT * PT);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, done, a_re, o_we;
  logic [15:0] rows, cols;
  logic [AW-1:0] a_raddr, o_waddr;
  logic signed [LANES-1:0][7:0] a_rdata, o_wdata;
  logic signed [7:0] src [LANES][PT*PT];
  logic signed [7:0] dst [LANES][PT*PT];
  int wcount [PT*PT];

  upsample_pe #(.LANES(LANES), .PT(PT)) dut (.*);

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

  initial begin
    int cyc, s, e;
    a_rdata = '0; rows = 0; cols = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      rows = (t == 0) ? 16'(PT) : 16'($urandom_range(1, PT));
      cols = (t == 1) ? 16'(PT) : 16'($urandom_range(1, PT));
      for (int l = 0; l < LANES; l++)
        for (int i = 0; i < PT * PT; i++) begin
          src[l][i] = (t == 2) ? -8'sd128 : 8'($urandom);
          dst[l][i] = 8'sd0;
        end
      for (int i = 0; i < PT * PT; i++) wcount[i] = 0;
      // cyc counts clock edges from the one that samples start to the one
      // that raises done
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != rows * cols + 2) begin
        failures++; $display("latency %0d, expected %0d", cyc, rows * cols + 2);
      end
      @(posedge clk);
      for (int y = 0; y < PT; y++)
        for (int x = 0; x < PT; x++) begin
          checks++;
          if (wcount[y*PT+x] != ((y < rows && x < cols) ? 1 : 0)) begin
            failures++; $display("pixel %0d,%0d written %0d times", y, x, wcount[y*PT+x]);
          end
          if (y < rows && x < cols)
            for (int l = 0; l < LANES; l++) begin
              e = int'(src[l][(y/2)*PT+x/2]);
              checks++;
              if (int'(dst[l][y*PT+x]) != e) begin
                failures++; $display("t=%0d (%0d,%0d) lane %0d got %0d exp %0d", t, y, x, l, dst[l][y*PT+x], e);
              end
            end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
