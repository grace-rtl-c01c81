// tb_lane_ram: random writes with random per-lane enables and random reads
// against a model array kept here. Checks the one-cycle read latency, that
// the read data holds while re is low, and that a disabled lane keeps its
// old contents.
module tb_lane_ram;
  localparam int LANES = 4, DEPTH = 200, W = 8, AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [LANES-1:0] we;
  logic [AW-1:0] waddr, raddr;
  logic [LANES-1:0][W-1:0] wdata, rdata, expd;
  logic re;
  logic [W-1:0] model [LANES][DEPTH];

  lane_ram #(.LANES(LANES), .DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    // fill everything first so that every later read is defined
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = '1; waddr = AW'(a);
      for (int l = 0; l < LANES; l++) begin
        wdata[l] = W'($urandom); model[l][a] = wdata[l];
      end
    end
    @(negedge clk) we = '0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      we = LANES'($urandom); waddr = AW'($urandom_range(0, DEPTH - 1));
      for (int l = 0; l < LANES; l++) wdata[l] = W'($urandom);
      re = (t == 0) || ($urandom_range(0, 2) != 0);
      raddr = AW'($urandom_range(0, DEPTH - 1));
      if (re) for (int l = 0; l < LANES; l++) expd[l] = model[l][raddr];
      for (int l = 0; l < LANES; l++) if (we[l]) model[l][waddr] = wdata[l];
      @(negedge clk);
      // rdata must now show the word read (old data if written the same cycle)
      we = '0; re = 0;
      checks++;
      if (rdata != expd) begin
        failures++; $display("t=%0d addr %0d got %h exp %h", t, raddr, rdata, expd);
      end
      @(negedge clk);
      checks++;
      if (rdata != expd) begin
        failures++; $display("t=%0d read data did not hold", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
