// tb_axil_ctrl_regs: drives the AXI4-Lite register file as the host driver
// would: random register writes (address and data in random order and with
// random gaps, random byte strobes, random response back-pressure), read
// back and compared with a model; the decoded configuration outputs are
// compared with the model too. Then START: one start pulse only while not
// busy, STATUS busy/done bits, the sticky done flag cleared by the next
// start, the sticky error flag and the CYCLES counter.
module tb_axil_ctrl_regs;
  import grace_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 0;
  logic [1:0] s_bresp, s_rresp;
  cfg_t cfg;
  logic start, busy = 0, done_pulse = 0, error_pulse = 0;
  int starts = 0;
  logic [31:0] model [NUM_REGS];

  axil_ctrl_regs #(.AW(8)) dut (.*);

  always @(posedge clk) if (start) starts++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s);
    int da, dw;
    logic aw_done = 0, w_done = 0;
    da = $urandom_range(0, 3); dw = $urandom_range(0, 3);
    for (int c = 0; !(aw_done && w_done); c++) begin
      @(negedge clk);
      s_awvalid = !aw_done && (c >= da); s_awaddr = a;
      s_wvalid  = !w_done && (c >= dw);  s_wdata = d; s_wstrb = s;
      @(posedge clk);
      if (s_awvalid && s_awready) aw_done = 1;
      if (s_wvalid && s_wready) w_done = 1;
    end
    @(negedge clk) s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("write response not OKAY"); end
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk) s_arvalid = 1; s_araddr = a;
    do @(posedge clk); while (!s_arready);
    @(negedge clk) s_arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk) s_rready = 0;
  endtask

  task automatic check_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got != exp) begin
      failures++; $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] d, v;
    logic [3:0] s;
    int r, s0, c0;
    for (int i = 0; i < NUM_REGS; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      r = $urandom_range(2, NUM_REGS - 1);
      if (8'(r * 4) == REG_CYCLES) continue;
      v = $urandom; s = 4'($urandom_range(1, 15));
      axi_write(8'(r * 4), v, s);
      for (int b = 0; b < 4; b++) if (s[b]) model[r][8*b +: 8] = v[8*b +: 8];
      axi_read(8'(r * 4), d);
      check_eq($sformatf("reg %0d", r), d, model[r]);
    end
    // unmapped offsets read as zero
    axi_write(8'hF0, 32'hFFFFFFFF, 4'hF);
    axi_read(8'hF0, d);
    check_eq("unmapped", d, 0);
    // decoded configuration
    check_eq("cfg.op", 32'(cfg.op), 32'(model[REG_OP >> 2][3:0]));
    check_eq("cfg.in_h", 32'(cfg.in_h), 32'(model[REG_IN_H >> 2][15:0]));
    check_eq("cfg.c_out", 32'(cfg.c_out), 32'(model[REG_C_OUT >> 2][15:0]));
    check_eq("cfg.ksize", 32'(cfg.ksize), 32'(model[REG_KSIZE >> 2][3:0]));
    check_eq("cfg.pad_value", {24'd0, cfg.pad_value}, 32'(model[REG_PAD_VALUE >> 2][7:0]));
    check_eq("cfg.addr_w", cfg.addr_w, model[REG_ADDR_W >> 2]);
    check_eq("cfg.addr_out", cfg.addr_out, model[REG_ADDR_OUT >> 2]);
    check_eq("cfg.qmult", 32'(cfg.qmult), 32'(model[REG_QMULT >> 2][15:0]));
    check_eq("cfg.qshift", 32'(cfg.qshift), 32'(model[REG_QSHIFT >> 2][5:0]));
    // start while idle: one pulse
    s0 = starts;
    axi_write(REG_CTRL, 32'd1, 4'h1);
    repeat (2) @(posedge clk);
    check_eq("start pulses", 32'(starts - s0), 1);
    // busy for 37 cycles, then done
    @(negedge clk) busy = 1;
    repeat (37) @(negedge clk);
    busy = 0; done_pulse = 1;
    @(negedge clk) done_pulse = 0;
    axi_read(REG_STATUS, d);
    check_eq("status done", d, 32'h2);
    axi_read(REG_CYCLES, d);
    check_eq("cycles", d, 37);
    // a refused operation sets the error flag
    @(negedge clk) done_pulse = 1; error_pulse = 1;
    @(negedge clk) done_pulse = 0; error_pulse = 0;
    axi_read(REG_STATUS, d);
    check_eq("status error", d, 32'h6);
    // start while busy is ignored
    @(negedge clk) busy = 1;
    s0 = starts;
    axi_write(REG_CTRL, 32'd1, 4'h1);
    axi_read(REG_STATUS, d);
    check_eq("status busy", d, 32'h7);
    check_eq("no start while busy", 32'(starts - s0), 0);
    @(negedge clk) busy = 0;
    // the next start clears done and the counter
    axi_write(REG_CTRL, 32'd1, 4'h1);
    axi_read(REG_STATUS, d);
    check_eq("done cleared", d, 32'h0);
    axi_read(REG_CYCLES, d);
    check_eq("cycles cleared", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
