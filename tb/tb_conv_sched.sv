// tb_conv_sched: complete convolution layers through the tiled convolution
// engine with its load and store engines and a randomly stalling memory
// model. Each layer's DDR input, weights and per-channel bias/requantisation
// words are random; the output in memory is compared with a direct
// convolution computed here (zero padding value, bias, per-channel
// requantisation, ReLU / sigmoid / none). Layers cover kernel 1, 3 and 7,
// stride 1 and 2, padding, sizes that leave partial tiles and partial
// input/output channel groups. Counts cycles where loading overlaps
// computing and where storing overlaps computing, and fails if either never
// happens.
module tb_conv_sched;
  import grace_pkg::*;
  localparam int TN = 4, TM = 8, TO = 8, KMAX = 7;
  localparam int BYTES = 1 << 18;
  localparam logic [31:0] A_IN = 32'h1000, A_W = 32'h8000, A_PRM = 32'h20000, A_OUT = 32'h30000;
  int checks = 0, failures = 0, ov_load = 0, ov_store = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  logic ld_start, ld_busy, ld_done, st_start, st_busy, st_done;
  ld_desc_t ld_desc;
  st_desc_t st_desc;
  logic ld_wr_en;
  dst_e ld_wr_dst;
  logic [15:0] ld_wr_lane, ld_wr_idx, st_lane, st_idx;
  logic [31:0] ld_wr_data;
  logic st_re;
  logic [7:0] st_data;
  logic computing, loading, storing;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, rd_resp_data, wr_addr, wr_data;
  logic [3:0] wr_strb;

  conv_sched #(.TN(TN), .TM(TM), .TO(TO), .KMAX(KMAX)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .ld_start, .ld_desc, .ld_done,
    .ld_wr_en, .ld_wr_dst, .ld_wr_lane, .ld_wr_idx, .ld_wr_data,
    .st_start, .st_desc, .st_done, .st_re, .st_lane, .st_idx, .st_data,
    .computing, .loading, .storing);
  tile_loader u_ld (
    .clk, .rst_n, .start(ld_start), .desc(ld_desc), .busy(ld_busy), .done(ld_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_ready,
    .rd_resp_data, .wr_en(ld_wr_en), .wr_dst(ld_wr_dst), .wr_lane(ld_wr_lane),
    .wr_idx(ld_wr_idx), .wr_data(ld_wr_data));
  tile_storer u_st (
    .clk, .rst_n, .start(st_start), .desc(st_desc), .busy(st_busy), .done(st_done),
    .src_re(st_re), .src_lane(st_lane), .src_idx(st_idx), .src_data(st_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);
  ddr_model #(.BYTES(BYTES), .READY_PCT(80), .MAX_LAT(4)) u_mem (.*);

  always @(posedge clk) begin
    if (loading && computing) ov_load++;
    if (storing && computing) ov_store++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rd32(logic [31:0] a);
    return {u_mem.mem[a + 3], u_mem.mem[a + 2], u_mem.mem[a + 1], u_mem.mem[a]};
  endfunction
  task automatic wr32(logic [31:0] a, logic [31:0] d);
    for (int b = 0; b < 4; b++) u_mem.mem[a + b] = d[8*b +: 8];
  endtask

  // requantisation, ReLU and the piecewise-linear sigmoid, restated
  function automatic int ref_out(longint acc, int m, int s, int z, act_e act);
    longint p;
    int q, ax, f;
    p = acc * m;
    if (s != 0) p = (p + (64'sd1 <<< (s - 1))) >>> s;
    p = p + z;
    q = (p > 127) ? 127 : (p < -128) ? -128 : int'(p);
    if (act == ACT_RELU) return (q < z) ? z : q;
    if (act != ACT_SIGMOID) return q;
    ax = (q < 0) ? -q : q;
    if (ax >= 80) f = 256;
    else if (ax >= 38) f = 216 + ax / 2;
    else if (ax >= 16) f = 160 + 2 * ax;
    else f = 128 + 4 * ax;
    if (q < 0) f = 256 - f;
    f = (f + 1) / 2;
    return (f > 127) ? 127 : f;
  endfunction

  task automatic run_layer(input int h, input int w, input int cin, input int cout,
                           input int k, input int s, input int p, input act_e act,
                           input logic bias_en, input int pad_value);
    int oh, ow, cyc, e, iy, ix, xv, errs;
    longint acc;
    oh = (h + 2 * p - k) / s + 1;
    ow = (w + 2 * p - k) / s + 1;
    for (int i = 0; i < cin * h * w; i++) u_mem.mem[A_IN + i] = 8'($urandom);
    for (int i = 0; i < cout * cin * k * k; i++) u_mem.mem[A_W + i] = 8'($urandom);
    for (int co = 0; co < cout; co++) begin
      wr32(A_PRM + co * 12, 32'($urandom_range(0, 200000)) - 100000);
      wr32(A_PRM + co * 12 + 4, 32'($urandom_range(1, 64)));
      wr32(A_PRM + co * 12 + 8, {16'd0, 8'($urandom_range(0, 16)) - 8'd8, 8'($urandom_range(14, 17))});
    end
    for (int i = 0; i < cout * oh * ow + 16; i++) u_mem.mem[A_OUT + i] = 8'hA5;
    cfg = '0;
    cfg.op = OP_CONV; cfg.in_h = 16'(h); cfg.in_w = 16'(w); cfg.c_in = 16'(cin);
    cfg.c_out = 16'(cout); cfg.ksize = 4'(k); cfg.stride = 2'(s); cfg.pad = 4'(p);
    cfg.pad_value = 8'(pad_value); cfg.act = act; cfg.bias_en = bias_en;
    cfg.addr_in = A_IN; cfg.addr_w = A_W; cfg.addr_prm = A_PRM; cfg.addr_out = A_OUT;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    errs = 0;
    for (int co = 0; co < cout; co++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          acc = bias_en ? longint'($signed(rd32(A_PRM + co * 12))) : 0;
          for (int ci = 0; ci < cin; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                iy = y * s + ky - p; ix = x * s + kx - p;
                xv = (iy < 0 || ix < 0 || iy >= h || ix >= w) ? pad_value
                   : int'($signed(u_mem.mem[A_IN + (ci * h + iy) * w + ix]));
                acc += longint'(xv) * longint'($signed(u_mem.mem[A_W + ((co * cin + ci) * k + ky) * k + kx]));
              end
          e = ref_out(acc, int'(rd32(A_PRM + co * 12 + 4)), int'(u_mem.mem[A_PRM + co * 12 + 8][5:0]),
                      int'($signed(u_mem.mem[A_PRM + co * 12 + 9])), act);
          checks++;
          if (int'($signed(u_mem.mem[A_OUT + (co * oh + y) * ow + x])) != e) begin
            failures++;
            if (errs++ < 8)
              $display("layer %0dx%0dx%0d->%0d k%0d s%0d: (%0d,%0d,%0d) got %0d exp %0d",
                       cin, h, w, cout, k, s, co, y, x, $signed(u_mem.mem[A_OUT + (co * oh + y) * ow + x]), e);
          end
        end
    // the byte after the output must be untouched
    checks++;
    if (u_mem.mem[A_OUT + cout * oh * ow] != 8'hA5) begin
      failures++; $display("write past the end of the output");
    end
    $display("layer %0dx%0dx%0d -> %0dx%0dx%0d (k=%0d s=%0d p=%0d): %0d cycles",
             cin, h, w, cout, oh, ow, k, s, p, cyc);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(9, 7, 6, 11, 3, 1, 1, ACT_RELU, 1'b1, 0);
    run_layer(8, 8, 3, 8, 7, 1, 3, ACT_SIGMOID, 1'b1, 0);
    run_layer(10, 9, 5, 9, 3, 2, 1, ACT_NONE, 1'b0, -3);
    run_layer(6, 6, 9, 4, 1, 1, 0, ACT_RELU, 1'b1, 0);
    run_layer(13, 11, 4, 8, 7, 2, 3, ACT_NONE, 1'b1, 0);
    $display("load/compute overlap cycles %0d, store/compute overlap cycles %0d, read stalls %0d",
             ov_load, ov_store, u_mem.rd_stalls);
    checks++;
    if (ov_load == 0 || ov_store == 0 || u_mem.rd_stalls == 0) begin
      failures++; $display("an overlap mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
