// tb_conv_engine: random activations and weights into the TN x TM
// multiplier array; each registered output sum is compared one cycle later
// with the dot product computed here. Also checks the one-cycle valid
// latency and that invalid cycles raise no valid.
module tb_conv_engine;
  localparam int TN = 8, TM = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [TN-1:0][7:0]    x;
  logic signed [TM*TN-1:0][7:0] w;
  logic signed [TM-1:0][31:0]   sum;
  int exp_sum [TM];
  logic exp_v;

  conv_engine #(.TN(TN), .TM(TM)) dut (.clk, .in_valid, .x, .w, .out_valid, .sum);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; w = '0;
    @(posedge clk);
    for (int t = 0; t < 2000; t++) begin
      in_valid <= ($urandom_range(0, 3) != 0);
      for (int n = 0; n < TN; n++) x[n] <= (t < 4) ? -8'sd128 : 8'($urandom);
      for (int i = 0; i < TM * TN; i++) w[i] <= (t < 4) ? -8'sd128 : 8'($urandom);
      @(posedge clk);
      exp_v = in_valid;
      for (int m = 0; m < TM; m++) begin
        exp_sum[m] = 0;
        for (int n = 0; n < TN; n++) exp_sum[m] += int'($signed(x[n])) * int'($signed(w[m*TN+n]));
      end
      #1;
      checks++;
      if (out_valid != exp_v) begin
        failures++; $display("valid mismatch at %0d", t);
      end
      if (exp_v)
        for (int m = 0; m < TM; m++) begin
          checks++;
          if (sum[m] != exp_sum[m]) begin
            failures++; $display("t=%0d m=%0d got %0d exp %0d", t, m, sum[m], exp_sum[m]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
