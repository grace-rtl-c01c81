// tb_softmax_pe: a softmax over C = 11 channels (the decoder's K+1 masks)
// of random Q3.4 planes, fed LANES channels per group: one sum pass per
// group (the first with first=1, the last with only the valid lanes), then
// one normalise pass per group. Outputs are compared bit-exactly with an
// integer model of exp(x) ~ 2^(x*369/256) in Q.12 (linear between powers of
// two)
// written here, and loosely (within 6 LSB of 127) with the exact softmax.
// Checks the rows*cols + 2 cycle latency of every pass.
module tb_softmax_pe;
  localparam int LANES = 4, PT = 16, AW = $clog2(PT * PT), C = 11;
  localparam int NG = (C + LANES - 1) / LANES;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, done, a_re, o_we, norm, first;
  logic [LANES-1:0] lane_valid;
  logic [15:0] rows, cols;
  logic [AW-1:0] a_raddr, o_waddr;
  logic signed [LANES-1:0][7:0] a_rdata, o_wdata;
  logic signed [7:0] src [NG*LANES][PT*PT];
  logic signed [7:0] dst [NG*LANES][PT*PT];
  int g_cur;

  softmax_pe #(.LANES(LANES), .PT(PT)) dut (.*);

  always_ff @(posedge clk)
    if (a_re) for (int l = 0; l < LANES; l++) a_rdata[l] <= src[g_cur*LANES+l][a_raddr];
  always_ff @(posedge clk)
    if (o_we) for (int l = 0; l < LANES; l++) dst[g_cur*LANES+l][o_waddr] <= o_wdata[l];

  function automatic longint exp_ref(int x);
    longint y, ip, fp;
    y  = longint'(x) * 369;
    ip = y >>> 12;
    fp = y - ip * 4096;
    if (ip >= 0) return ((4096 + fp) << (12 + ip)) >>> 12;
    else         return ((4096 + fp) << 12) >>> (12 - ip);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(input int g, input logic n, input logic f);
    int cyc;
    g_cur = g; norm = n; first = f;
    lane_valid = '0;
    for (int l = 0; l < LANES; l++) lane_valid[l] = (g * LANES + l < C);
    // cyc counts clock edges from the one that samples start to the one
    // that raises done
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != rows * cols + 2) begin
      failures++; $display("latency %0d, expected %0d", cyc, rows * cols + 2);
    end
  endtask

  initial begin
    longint s, e;
    real rs, rv;
    a_rdata = '0; rows = 0; cols = 0; norm = 0; first = 0; lane_valid = '0; g_cur = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      rows = (t == 0) ? 16'(PT) : 16'($urandom_range(1, PT));
      cols = (t == 0) ? 16'(PT) : 16'($urandom_range(1, PT));
      for (int c = 0; c < NG * LANES; c++)
        for (int i = 0; i < PT * PT; i++) begin
          src[c][i] = (t == 1) ? 8'sd127 : (t == 2) ? -8'sd128 : 8'($urandom);
          dst[c][i] = 8'sd0;
        end
      for (int g = 0; g < NG; g++) run_pass(g, 1'b0, g == 0);
      for (int g = 0; g < NG; g++) run_pass(g, 1'b1, 1'b0);
      @(posedge clk);
      for (int y = 0; y < rows; y++)
        for (int x = 0; x < cols; x++) begin
          s = 0; rs = 0.0;
          for (int c = 0; c < C; c++) begin
            s += exp_ref(int'(src[c][y*PT+x]));
            rs += $exp(real'(src[c][y*PT+x]) / 16.0);
          end
          for (int c = 0; c < C; c++) begin
            e = (exp_ref(int'(src[c][y*PT+x])) * 127 + s / 2) / s;
            if (e > 127) e = 127;
            rv = 127.0 * $exp(real'(src[c][y*PT+x]) / 16.0) / rs;
            checks++;
            if (longint'(dst[c][y*PT+x]) != e || real'(dst[c][y*PT+x]) > rv + 6.0
                || real'(dst[c][y*PT+x]) < rv - 6.0) begin
              failures++;
              $display("t=%0d (%0d,%0d) ch %0d got %0d exp %0d (exact %f)", t, y, x, c, dst[c][y*PT+x], e, rv);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
