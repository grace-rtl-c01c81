// tb_agc_workloads: the decoder's own 64 x 64 operators at their real
// sizes, run through the accelerator at its default parameters and checked
// element by element against reference models written here.
//
// The dense-motion and warping stage of the decoder works at 64 x 64. This
// test runs, through the register interface and the stalling memory model:
//   * the softmax over the 11 motion masks (11 x 64 x 64), the size the
//     plane engine's 64 x 64 tile is made for;
//   * the 7 x 7 convolution of the mask head, 108 x 64 x 64 -> 11 x 64 x 64;
//   * the grid-sample warp of the 256 feature channels of 64 x 64, all
//     sharing one coordinate map;
//   * the Hadamard product of the warped features with an occlusion map
//     already repeated per channel (256 x 64 x 64);
//   * a 3 x 3 residual-block convolution at 64 x 64, cut to 16 -> 16
//     channels (the full 256 -> 256 layer would take about 19 M cycles).
// It prints the cycle count of each layer.
module tb_agc_workloads;
  import grace_pkg::*;
  localparam int BYTES = 1 << 23;
  localparam logic [31:0] A_X = 32'h000000, A_Y = 32'h100000, A_Z = 32'h200000,
                          A_G = 32'h300000, A_W = 32'h400000, A_P = 32'h410000;
  int checks = 0, failures = 0, errs = 0;
  int ov_load = 0, ov_store = 0, switches = 0, ignored = 0, refused = 0;
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

  always @(posedge clk) begin
    if (dut.u_conv.loading && dut.u_conv.computing) ov_load++;
    if (dut.u_conv.storing && dut.u_conv.computing) ov_store++;
  end

  initial begin
    repeat (40000000) @(posedge clk);
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
    int st, c, h, w, u, v, u0, v0, du, dv, acc;
    longint sum, pv;
    for (int i = 0; i < BYTES; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(REG_PAD_VALUE, 32'd0);
    h = 64; w = 64;
    // 1. mask logits: 7x7 convolution 108 x 64 x 64 -> 11 x 64 x 64
    conv_params(108, 11, 7, 4);
    run(OP_CONV, 108, 11, h, w, 7, 1, 3, ACT_NONE, A_X, 0, A_Y, st);
    conv_check(108, 11, h, w, 7, 1, 3, ACT_NONE, A_X, A_Y);
    // 2. softmax over the 11 masks of 64 x 64
    c = 11;
    run(OP_SOFTMAX, c, c, h, w, 0, 0, 0, ACT_NONE, A_Y, 0, A_Z, st);
    for (int p = 0; p < h * w; p++) begin
      sum = 0;
      for (int ch = 0; ch < c; ch++) sum += exp_ref(m8(A_Y + ch*h*w + p));
      for (int ch = 0; ch < c; ch++) begin
        pv = (exp_ref(m8(A_Y + ch*h*w + p)) * 127 + sum / 2) / sum;
        cmp("softmax", m8(A_Z + ch*h*w + p), (pv > 127) ? 127 : int'(pv));
      end
    end
    // 3. warp 256 channels of 64 x 64 by the 2 x 64 x 64 grid at A_G
    c = 256;
    run(OP_GRID_SAMPLE, c, c, h, w, 0, 0, 0, ACT_NONE, A_X, A_G, A_Y, st);
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
          cmp("grid", m8(A_Y + (ch*h + y)*w + x), (acc + 8) >>> 4);
        end
      end
    // 4. occlusion: Hadamard product with a [0, 1] map in Q0.7, repeated per channel
    for (int p = 0; p < h * w; p++) begin
      u_mem.mem[A_G + p] = 8'($urandom_range(0, 127));
      for (int ch = 1; ch < c; ch++) u_mem.mem[A_G + ch*h*w + p] = u_mem.mem[A_G + p];
    end
    axi_write(REG_QMULT, 32'd1); axi_write(REG_QSHIFT, 32'd7); axi_write(REG_QZERO, 32'd0);
    run(OP_HADAMARD, c, c, h, w, 0, 0, 0, ACT_NONE, A_Y, A_G, A_Z, st);
    for (int i = 0; i < c * h * w; i++)
      cmp("hadamard", m8(A_Z + i), rq(longint'(m8(A_Y + i)) * m8(A_G + i), 1, 7, 0));
    // 5. residual-block 3x3 convolution 16 -> 16 with ReLU at 64 x 64
    conv_params(16, 16, 3, 30);
    run(OP_CONV, 16, 16, h, w, 3, 1, 1, ACT_RELU, A_Z, 0, A_X, st);
    conv_check(16, 16, h, w, 3, 1, 1, ACT_RELU, A_Z, A_X);
    $display("load/compute overlap %0d, store/compute overlap %0d, read stalls %0d, write stalls %0d",
             ov_load, ov_store, u_mem.rd_stalls, u_mem.wr_stalls);
    cmp("load/compute overlap seen", int'(ov_load > 0), 1);
    cmp("store/compute overlap seen", int'(ov_store > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
