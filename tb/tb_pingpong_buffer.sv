// tb_pingpong_buffer: the loader fills one bank while the two read ports
// read the other bank and the just-filled one, swapping every phase, as the
// convolution does (one port for the compute side, one for the store side).
// Every read is compared with a model of both banks kept here; the test
// also checks that a write to one bank never changes the other and counts
// the cycles where a write and two reads happen together.
module tb_pingpong_buffer;
  localparam int LANES = 4, DEPTH = 64, W = 8, AW = $clog2(DEPTH);
  int checks = 0, failures = 0, overlap = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wbank, are, abank, bre, bbank;
  logic [LANES-1:0] we;
  logic [AW-1:0] waddr, araddr, braddr;
  logic [LANES-1:0][W-1:0] wdata, ardata, brdata, expa, expb;
  logic [W-1:0] model [2][LANES][DEPTH];

  pingpong_buffer #(.LANES(LANES), .DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ra, rb;
    we = '0; wbank = 0; are = 0; bre = 0; abank = 0; bbank = 1;
    waddr = '0; araddr = '0; braddr = '0; wdata = '0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = '1; wbank = b[0]; waddr = AW'(a);
        for (int l = 0; l < LANES; l++) begin
          wdata[l] = W'($urandom); model[b][l][a] = wdata[l];
        end
      end
    @(negedge clk) we = '0;
    expa = '0; expb = '0;
    for (int ph = 0; ph < 40; ph++) begin
      // phase ph: write bank ph%2, port A reads bank (ph+1)%2, port B
      // reads bank ph%2 (data written in this phase may be read next cycle)
      for (int t = 0; t < 3 * DEPTH; t++) begin
        @(negedge clk);
        we = LANES'($urandom); wbank = ph[0]; waddr = AW'($urandom_range(0, DEPTH - 1));
        for (int l = 0; l < LANES; l++) wdata[l] = W'($urandom);
        ra = (t == 0) || ($urandom_range(0, 3) != 0);
        rb = (t == 0) || ($urandom_range(0, 1) != 0);
        are = ra; abank = ~ph[0]; araddr = AW'($urandom_range(0, DEPTH - 1));
        bre = rb && ph[0]; bbank = ph[0]; braddr = AW'($urandom_range(0, DEPTH - 1));
        if (are) for (int l = 0; l < LANES; l++) expa[l] = model[abank][l][araddr];
        if (bre) for (int l = 0; l < LANES; l++) expb[l] = model[bbank][l][braddr];
        if (we != 0 && are && bre) overlap++;
        for (int l = 0; l < LANES; l++) if (we[l]) model[wbank][l][waddr] = wdata[l];
        @(posedge clk); #1;
        checks++;
        if (ardata != expa) begin
          failures++; $display("ph %0d t %0d port A got %h exp %h", ph, t, ardata, expa);
        end
        if (ph[0]) begin
          checks++;
          if (brdata != expb) begin
            failures++; $display("ph %0d t %0d port B got %h exp %h", ph, t, brdata, expb);
          end
        end
      end
    end
    checks++;
    if (overlap == 0) begin
      failures++; $display("write and two reads never overlapped");
    end
    $display("overlapping write+read+read cycles: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
