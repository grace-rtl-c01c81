// tb_eltwise_pe: random int8 planes A and B (behavioural one-cycle-latency
// buffers) through the element-wise unit in both modes, Hadamard product
// and addition, with random requantisation parameters. Each output pixel is
// compared with sat8(round((a op b)*mult/2^shift) + zero) computed here in
// 64-bit arithmetic; the rows*cols + 2 cycle latency is checked too.
module tb_eltwise_pe;
  localparam int LANES = 4, PT = 16, AW = $clog2(PT * PT);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, done, ab_re, o_we, add_mode;
  logic [15:0] rows, cols, qmult;
  logic [5:0]  qshift;
  logic signed [7:0] qzero;
  logic [AW-1:0] ab_raddr, o_waddr;
  logic signed [LANES-1:0][7:0] a_rdata, b_rdata, o_wdata;
  logic signed [7:0] sa [LANES][PT*PT];
  logic signed [7:0] sb [LANES][PT*PT];
  logic signed [7:0] dst [LANES][PT*PT];
  int wcount [PT*PT];

  eltwise_pe #(.LANES(LANES), .PT(PT)) dut (.*);

  always_ff @(posedge clk)
    if (ab_re)
      for (int l = 0; l < LANES; l++) begin
        a_rdata[l] <= sa[l][ab_raddr];
        b_rdata[l] <= sb[l][ab_raddr];
      end
  always_ff @(posedge clk)
    if (o_we) begin
      for (int l = 0; l < LANES; l++) dst[l][o_waddr] <= o_wdata[l];
      wcount[o_waddr] <= wcount[o_waddr] + 1;
    end

  function automatic int ref_q(longint v, int m, int s, int z);
    longint p;
    p = v * m;
    if (s != 0) p = (p + (64'sd1 <<< (s - 1))) >>> s;
    p = p + z;
    return (p > 127) ? 127 : (p < -128) ? -128 : int'(p);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, e;
    longint v;
    a_rdata = '0; b_rdata = '0; rows = 0; cols = 0;
    add_mode = 0; qmult = 0; qshift = 0; qzero = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      rows = 16'($urandom_range(1, PT));
      cols = 16'($urandom_range(1, PT));
      add_mode = t[0];
      qmult  = 16'($urandom_range(1, 4096));
      qshift = add_mode ? 6'($urandom_range(8, 13)) : 6'($urandom_range(12, 20));
      qzero  = 8'($urandom_range(0, 20)) - 8'sd10;
      for (int l = 0; l < LANES; l++)
        for (int i = 0; i < PT * PT; i++) begin
          sa[l][i] = 8'($urandom); sb[l][i] = 8'($urandom); dst[l][i] = 8'sd0;
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
              v = add_mode ? longint'(sa[l][y*PT+x]) + longint'(sb[l][y*PT+x])
                           : longint'(sa[l][y*PT+x]) * longint'(sb[l][y*PT+x]);
              e = ref_q(v, int'(qmult), int'(qshift), int'(qzero));
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
