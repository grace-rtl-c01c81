// tb_conv_pe: one convolution tile step at a time with random data, for
// kernel sizes 1, 3 and 7 and strides 1 and 2. The input, weight and output
// buffers are behavioural (one-cycle reads). Each run is checked against a
// direct convolution computed here: out = (first ? bias : old partial sum)
// + sum over n, ky, kx of x * w. Checks the TO*TO*k*k + 3 cycle run time
// and that each output pixel is written exactly once per run.
module tb_conv_pe;
  localparam int TN = 4, TM = 4, TO = 4, KMAX = 7;
  localparam int TI = (TO - 1) * 2 + KMAX;
  localparam int IAW = $clog2(TI * TI), WAW = $clog2(KMAX * KMAX), OAW = $clog2(TO * TO);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, first_ci, done, i_re, w_re, o_re, o_we;
  logic [3:0] ksize;
  logic [1:0] stride;
  logic [7:0] tie;
  logic signed [TM-1:0][31:0] bias, o_rdata, o_wdata;
  logic [IAW-1:0] i_raddr;
  logic [WAW-1:0] w_raddr;
  logic [OAW-1:0] o_raddr, o_waddr;
  logic signed [TN-1:0][7:0] i_rdata;
  logic signed [TM*TN-1:0][7:0] w_rdata;
  logic signed [7:0]  ib [TN][TI*TI];
  logic signed [7:0]  wb [TM*TN][KMAX*KMAX];
  logic signed [31:0] ob [TM][TO*TO];
  int wcount [TO*TO];

  conv_pe #(.TN(TN), .TM(TM), .TO(TO), .KMAX(KMAX)) dut (.*);

  always_ff @(posedge clk) begin
    if (i_re) for (int n = 0; n < TN; n++) i_rdata[n] <= ib[n][i_raddr];
    if (w_re) for (int j = 0; j < TM * TN; j++) w_rdata[j] <= wb[j][w_raddr];
    if (o_re) for (int m = 0; m < TM; m++) o_rdata[m] <= ob[m][o_raddr];
    if (o_we) begin
      for (int m = 0; m < TM; m++) ob[m][o_waddr] <= o_wdata[m];
      wcount[o_waddr] <= wcount[o_waddr] + 1;
    end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, s, cyc;
    logic signed [31:0] expo [TM][TO*TO];
    i_rdata = '0; w_rdata = '0; o_rdata = '0; bias = '0;
    ksize = 1; stride = 1; tie = 0; first_ci = 0;
    for (int m = 0; m < TM; m++) for (int p = 0; p < TO * TO; p++) ob[m][p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      k = (t % 3 == 0) ? 1 : (t % 3 == 1) ? 3 : 7;
      s = ((t / 3) % 2 == 0) ? 1 : 2;
      ksize = 4'(k); stride = 2'(s); tie = 8'((TO - 1) * s + k);
      first_ci = (t % 4 == 0);
      for (int m = 0; m < TM; m++) bias[m] = $signed($urandom_range(0, 20000)) - 10000;
      for (int n = 0; n < TN; n++)
        for (int i = 0; i < TI * TI; i++) ib[n][i] = (t == 5) ? -8'sd128 : 8'($urandom);
      for (int j = 0; j < TM * TN; j++)
        for (int i = 0; i < KMAX * KMAX; i++) wb[j][i] = (t == 5) ? -8'sd128 : 8'($urandom);
      for (int m = 0; m < TM; m++)
        for (int oy = 0; oy < TO; oy++)
          for (int ox = 0; ox < TO; ox++) begin
            expo[m][oy*TO+ox] = first_ci ? bias[m] : ob[m][oy*TO+ox];
            for (int n = 0; n < TN; n++)
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++)
                  expo[m][oy*TO+ox] += int'(ib[n][(oy*s+ky)*int'(tie) + ox*s+kx])
                                     * int'(wb[m*TN+n][ky*k+kx]);
          end
      for (int p = 0; p < TO * TO; p++) wcount[p] = 0;
      // cyc counts clock edges from the one that samples start to the one
      // that raises done
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != TO * TO * k * k + 3) begin
        failures++; $display("k=%0d: run took %0d, expected %0d", k, cyc, TO * TO * k * k + 3);
      end
      @(posedge clk); #1;
      for (int p = 0; p < TO * TO; p++) begin
        checks++;
        if (wcount[p] != 1) begin
          failures++; $display("pixel %0d written %0d times", p, wcount[p]);
        end
        for (int m = 0; m < TM; m++) begin
          checks++;
          if (ob[m][p] != expo[m][p]) begin
            failures++; $display("t=%0d k=%0d s=%0d pix %0d m %0d got %0d exp %0d", t, k, s, p, m, ob[m][p], expo[m][p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
