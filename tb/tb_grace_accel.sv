// tb_grace_accel: end-to-end test of the accelerator at its default
// parameters, driven the way the host driver drives it: every layer is
// configured by AXI4-Lite register writes, started through CTRL and waited
// for by polling STATUS; data lives in a randomly stalling DDR model.
//
// The layers form a miniature decoder: a 7x7 convolution with ReLU on a
// 3-channel image (generator input layer), 2x2 pooling, a strided 3x3
// convolution with partial channel groups, upsampling, an 11-channel
// softmax (motion masks), a grid sample of 4 feature channels, a Hadamard
// product with an occlusion-like map, a residual add, and a final 7x7
// convolution with sigmoid. Each layer's output is compared with a
// reference computed here from the layer's actual input in memory.
//
// Mechanisms counted (a failure if one never happens): load/compute
// overlap and store/compute overlap in the convolution engine, padding
// fills, partial channel groups, memory read and write stalls, read
// response back-pressure, each operator, a switch between the convolution
// and plane engines, a start ignored while busy, and a refused
// configuration reported in STATUS.
module tb_grace_accel;
  import grace_pkg::*;
  localparam int BYTES = 1 << 20;
  localparam logic [31:0] A_X = 32'h00000, A_Y = 32'h20000, A_Z = 32'h40000,
                          A_G = 32'h60000, A_W = 32'h70000, A_P = 32'h80000;
  int checks = 0, failures = 0, errs = 0;
  int ov_load = 0, ov_store = 0, pad_fill = 0, zero_fill = 0, switches = 0, ignored = 0, refused = 0;
  int op_runs [7];
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic s_axil_bvalid, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0] s_axil_wstrb = 0;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic m_rd_req_valid, m_rd_req_ready, m_rd_resp_valid, m_rd_resp_ready;
  logic [31:0] m_rd_req_addr, m_rd_resp_data;
  logic m_wr_valid, m_wr_ready;
  logic [31:0] m_wr_addr, m_wr_data;
  logic [3:0] m_wr_strb;

  grace_accel dut (.*);
  ddr_model #(.BYTES(BYTES), .READY_PCT(80), .MAX_LAT(4)) u_mem (
    .clk, .rst_n, .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready),
    .rd_req_addr(m_rd_req_addr), .rd_resp_valid(m_rd_resp_valid),
    .rd_resp_ready(m_rd_resp_ready), .rd_resp_data(m_rd_resp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr),
    .wr_data(m_wr_data), .wr_strb(m_wr_strb));

  // internal activity, observed for the mechanism counters
  always @(posedge clk) begin
    if (dut.u_conv.loading && dut.u_conv.computing) ov_load++;
    if (dut.u_conv.storing && dut.u_conv.computing) ov_store++;
    if (dut.u_load.push && dut.u_load.tag_new.fill) begin
      if (dut.u_load.ch_ok) pad_fill++;      // outside the image: padding
      else zero_fill++;                      // missing channel of a partial group
    end
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ AXI4-Lite host
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    logic aw_done = 0, w_done = 0;
    @(negedge clk);
    s_axil_awvalid = 1; s_axil_awaddr = a; s_axil_wvalid = 1; s_axil_wdata = d; s_axil_wstrb = 4'hF;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (s_axil_awvalid && s_axil_awready) aw_done = 1;
      if (s_axil_wvalid && s_axil_wready) w_done = 1;
      @(negedge clk);
      s_axil_awvalid = !aw_done; s_axil_wvalid = !w_done;
    end
    s_axil_bready = 1;
    do @(posedge clk); while (!s_axil_bvalid);
    @(negedge clk) s_axil_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk) s_axil_arvalid = 1; s_axil_araddr = a;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk) s_axil_arvalid = 0; s_axil_rready = 1;
    do @(posedge clk); while (!s_axil_rvalid);
    d = s_axil_rdata;
    @(negedge clk) s_axil_rready = 0;
  endtask

  op_e last_op = OP_POOL;
  task automatic run(input op_e op, input int c_in, input int c_out, input int h, input int w,
                     input int k, input int s, input int p, input act_e act,
                     input logic [31:0] a_in, input logic [31:0] a_in2, input logic [31:0] a_out,
                     output int status);
    logic [31:0] st, cyc, st2;
    axi_write(REG_OP, 32'(op));     axi_write(REG_C_IN, 32'(c_in));
    axi_write(REG_C_OUT, 32'(c_out)); axi_write(REG_IN_H, 32'(h));
    axi_write(REG_IN_W, 32'(w));    axi_write(REG_KSIZE, 32'(k));
    axi_write(REG_STRIDE, 32'(s));  axi_write(REG_PAD, 32'(p));
    axi_write(REG_ACT, 32'(act));   axi_write(REG_BIAS_EN, 32'd1);
    axi_write(REG_ADDR_IN, a_in);   axi_write(REG_ADDR_IN2, a_in2);
    axi_write(REG_ADDR_W, A_W);     axi_write(REG_ADDR_PRM, A_P);
    axi_write(REG_ADDR_OUT, a_out);
    axi_write(REG_CTRL, 32'd1);
    // a second start while busy must be ignored
    axi_read(REG_STATUS, st2);
    if (st2[0]) begin
      axi_write(REG_CTRL, 32'd1);
      ignored++;
    end
    do axi_read(REG_STATUS, st); while (!st[1]);
    axi_read(REG_CYCLES, cyc);
    status = int'(st);
    if (st[2]) refused++;
    op_runs[int'(op)]++;
    if ((op == OP_CONV) != (last_op == OP_CONV)) switches++;
    last_op = op;
    errs = 0;
    $display("op %0d: %0d x %0d x %0d -> %0d channels, %0d cycles, status %h",
             op, c_in, h, w, c_out, cyc, st);
    // the layer ran exactly once: STATUS done with nothing left busy
    checks++;
    if (st[0]) begin failures++; $display("still busy after done"); end
  endtask

  task automatic cmp(string what, int got, int e);
    checks++;
    if (got != e) begin
      failures++;
      if (errs++ < 8) $display("%s: got %0d exp %0d", what, got, e);
    end
  endtask

  function automatic int m8(logic [31:0] a); return int'($signed(u_mem.mem[a])); endfunction
  function automatic logic [31:0] rd32(logic [31:0] a);
    return {u_mem.mem[a + 3], u_mem.mem[a + 2], u_mem.mem[a + 1], u_mem.mem[a]};
  endfunction
  task automatic wr32(logic [31:0] a, logic [31:0] d);
    for (int b = 0; b < 4; b++) u_mem.mem[a + b] = d[8*b +: 8];
  endtask
  function automatic int sat(longint v); return (v > 127) ? 127 : (v < -128) ? -128 : int'(v); endfunction
  function automatic int rq(longint v, int m, int s, int z);
    v = v * m;
    if (s != 0) v = (v + (64'sd1 <<< (s - 1))) >>> s;
    return sat(v + z);
  endfunction
  function automatic int sigm(int q);
    int ax, f;
    ax = (q < 0) ? -q : q;
    if (ax >= 80) f = 256;
    else if (ax >= 38) f = 216 + ax / 2;
    else if (ax >= 16) f = 160 + 2 * ax;
    else f = 128 + 4 * ax;
    if (q < 0) f = 256 - f;
    f = (f + 1) / 2;
    return (f > 127) ? 127 : f;
  endfunction
  function automatic longint exp_ref(int x);
    longint y, ip, fp;
    y  = longint'(x) * 369;
    ip = y >>> 12;
    fp = y - ip * 4096;
    if (ip >= 0) return ((4096 + fp) << (12 + ip)) >>> 12;
    else         return ((4096 + fp) << 12) >>> (12 - ip);
  endfunction

  // random weights and per-channel words for a convolution layer
  task automatic conv_params(int cin, int cout, int k, int wmax);
    for (int i = 0; i < cout * cin * k * k; i++) u_mem.mem[A_W + i] = 8'($urandom_range(0, 2 * wmax)) - 8'(wmax);
    for (int co = 0; co < cout; co++) begin
      wr32(A_P + co * 12, 32'($urandom_range(0, 4000)) - 2000);
      wr32(A_P + co * 12 + 4, 32'($urandom_range(16, 96)));
      wr32(A_P + co * 12 + 8, {16'd0, 8'($urandom_range(0, 6)) - 8'd3, 8'd12});
    end
  endtask

  task automatic conv_check(int cin, int cout, int h, int w, int k, int s, int p, act_e act,
                            logic [31:0] a_in, logic [31:0] a_out);
    int oh, ow, iy, ix, q, z;
    longint acc;
    oh = (h + 2 * p - k) / s + 1; ow = (w + 2 * p - k) / s + 1;
    for (int co = 0; co < cout; co++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          acc = longint'($signed(rd32(A_P + co * 12)));
          for (int ci = 0; ci < cin; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                iy = y * s + ky - p; ix = x * s + kx - p;
                if (iy >= 0 && ix >= 0 && iy < h && ix < w)
                  acc += longint'(m8(a_in + (ci * h + iy) * w + ix))
                       * m8(A_W + ((co * cin + ci) * k + ky) * k + kx);
              end
          z = m8(A_P + co * 12 + 9);
          q = rq(acc, int'(rd32(A_P + co * 12 + 4)), int'(u_mem.mem[A_P + co * 12 + 8][5:0]), z);
          if (act == ACT_RELU) q = (q < z) ? z : q;
          else if (act == ACT_SIGMOID) q = sigm(q);
          cmp("conv", m8(a_out + (co * oh + y) * ow + x), q);
        end
  endtask

  initial begin
    int st, c, h, w, s4, u, v, u0, v0, du, dv, acc;
    longint sum, pv;
    logic [31:0] d;
    for (int i = 0; i < BYTES; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(REG_PAD_VALUE, 32'd0);
    // 1. 7x7 convolution + ReLU: 3 x 20 x 20 -> 8 x 20 x 20 (2 x 2 tiles)
    conv_params(3, 8, 7, 20);
    run(OP_CONV, 3, 8, 20, 20, 7, 1, 3, ACT_RELU, A_X, 0, A_Y, st);
    conv_check(3, 8, 20, 20, 7, 1, 3, ACT_RELU, A_X, A_Y);
    // 2. 2x2 average pooling: 8 x 20 x 20 -> 8 x 10 x 10
    run(OP_POOL, 8, 8, 20, 20, 0, 0, 0, ACT_NONE, A_Y, 0, A_Z, st);
    for (int ch = 0; ch < 8; ch++)
      for (int y = 0; y < 10; y++)
        for (int x = 0; x < 10; x++) begin
          s4 = m8(A_Y + (ch*20 + 2*y)*20 + 2*x) + m8(A_Y + (ch*20 + 2*y)*20 + 2*x+1)
             + m8(A_Y + (ch*20 + 2*y+1)*20 + 2*x) + m8(A_Y + (ch*20 + 2*y+1)*20 + 2*x+1);
          cmp("pool", m8(A_Z + (ch*10 + y)*10 + x), (s4 + 2) >>> 2);
        end
    // 3. strided 3x3 convolution, partial groups: 11 x 19 x 19 -> 20 x 10 x 10
    conv_params(11, 20, 3, 40);
    run(OP_CONV, 11, 20, 19, 19, 3, 2, 1, ACT_NONE, A_X, 0, A_Y, st);
    conv_check(11, 20, 19, 19, 3, 2, 1, ACT_NONE, A_X, A_Y);
    // 4. 2x upsampling: 5 x 10 x 10 -> 5 x 20 x 20
    run(OP_UPSAMPLE, 5, 5, 10, 10, 0, 0, 0, ACT_NONE, A_Y, 0, A_Z, st);
    for (int ch = 0; ch < 5; ch++)
      for (int y = 0; y < 20; y++)
        for (int x = 0; x < 20; x++)
          cmp("upsample", m8(A_Z + (ch*20 + y)*20 + x), m8(A_Y + (ch*10 + y/2)*10 + x/2));
    // 5. softmax over 11 mask channels of 16 x 16
    c = 11; h = 16; w = 16;
    run(OP_SOFTMAX, c, c, h, w, 0, 0, 0, ACT_NONE, A_X, 0, A_Y, st);
    for (int p = 0; p < h * w; p++) begin
      sum = 0;
      for (int ch = 0; ch < c; ch++) sum += exp_ref(m8(A_X + ch*h*w + p));
      for (int ch = 0; ch < c; ch++) begin
        pv = (exp_ref(m8(A_X + ch*h*w + p)) * 127 + sum / 2) / sum;
        cmp("softmax", m8(A_Y + ch*h*w + p), (pv > 127) ? 127 : int'(pv));
      end
    end
    // 6. grid sample of 4 channels of 16 x 16 by the grid at A_G
    c = 4;
    run(OP_GRID_SAMPLE, c, c, h, w, 0, 0, 0, ACT_NONE, A_X, A_G, A_Z, st);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        u = ((m8(A_G + y*w + x) + 128) * (w - 1)) >> 6;
        v = ((m8(A_G + h*w + y*w + x) + 128) * (h - 1)) >> 6;
        u0 = u >> 2; du = u & 3; v0 = v >> 2; dv = v & 3;
        for (int ch = 0; ch < c; ch++) begin
          acc = (4-du)*(4-dv)*m8(A_X + (ch*h + v0)*w + u0);
          if (v0 + 1 < h) acc += (4-du)*dv*m8(A_X + (ch*h + v0+1)*w + u0);
          if (u0 + 1 < w) acc += du*(4-dv)*m8(A_X + (ch*h + v0)*w + u0+1);
          if (v0 + 1 < h && u0 + 1 < w) acc += du*dv*m8(A_X + (ch*h + v0+1)*w + u0+1);
          cmp("grid", m8(A_Z + (ch*h + y)*w + x), (acc + 8) >>> 4);
        end
      end
    // 7. Hadamard product of the warped features with a map, then a residual add
    axi_write(REG_QMULT, 32'd128); axi_write(REG_QSHIFT, 32'd7); axi_write(REG_QZERO, 32'd0);
    run(OP_HADAMARD, 4, 4, h, w, 0, 0, 0, ACT_NONE, A_Z, A_G, A_Y, st);
    for (int i = 0; i < 4 * h * w; i++)
      cmp("hadamard", m8(A_Y + i), rq(longint'(m8(A_Z + i)) * m8(A_G + i), 128, 7, 0));
    axi_write(REG_QMULT, 32'd1); axi_write(REG_QSHIFT, 32'd0);
    run(OP_ADD, 4, 4, h, w, 0, 0, 0, ACT_NONE, A_Y, A_Z, A_X, st);
    for (int i = 0; i < 4 * h * w; i++)
      cmp("add", m8(A_X + i), sat(longint'(m8(A_Y + i)) + m8(A_Z + i)));
    // 8. final 7x7 convolution + sigmoid: 4 x 16 x 16 -> 3 x 16 x 16
    conv_params(4, 3, 7, 10);
    run(OP_CONV, 4, 3, h, w, 7, 1, 3, ACT_SIGMOID, A_X, 0, A_Y, st);
    conv_check(4, 3, h, w, 7, 1, 3, ACT_SIGMOID, A_X, A_Y);
    // 9. a softmax plane larger than the plane tile is refused
    run(OP_SOFTMAX, 2, 2, 65, 8, 0, 0, 0, ACT_NONE, A_X, 0, A_Y, st);
    cmp("refused status", st & 4, 4);
    // 10. the next layer after a refusal runs normally and clears the flag
    run(OP_POOL, 1, 1, 4, 4, 0, 0, 0, ACT_NONE, A_X, 0, A_Z, st);
    cmp("status after refusal", st & 4, 0);
    $display("load/compute overlap %0d, store/compute overlap %0d, pad fills %0d, zero fills %0d",
             ov_load, ov_store, pad_fill, zero_fill);
    $display("read stalls %0d, write stalls %0d, response waits %0d, engine switches %0d, ignored starts %0d, refused %0d",
             u_mem.rd_stalls, u_mem.wr_stalls, u_mem.resp_waits, switches, ignored, refused);
    cmp("load/compute overlap seen", int'(ov_load > 0), 1);
    cmp("store/compute overlap seen", int'(ov_store > 0), 1);
    cmp("padding fills seen", int'(pad_fill > 0), 1);
    cmp("partial-group fills seen", int'(zero_fill > 0), 1);
    cmp("read stalls seen", int'(u_mem.rd_stalls > 0), 1);
    cmp("write stalls seen", int'(u_mem.wr_stalls > 0), 1);
    cmp("response back-pressure seen", int'(u_mem.resp_waits > 0), 1);
    cmp("engine switches seen", int'(switches > 0), 1);
    cmp("ignored start seen", int'(ignored > 0), 1);
    cmp("refusal seen", int'(refused > 0), 1);
    for (int o = 0; o < 7; o++) cmp($sformatf("op %0d ran", o), int'(op_runs[o] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
