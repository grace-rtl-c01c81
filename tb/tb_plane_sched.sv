// tb_plane_sched: every plane operator as a complete layer through the
// plane scheduler, its PEs, the load and store engines and a randomly
// stalling memory model: 2x2 average pooling and 2x upsampling of planes
// larger than one tile, Hadamard product and matrix add with
// requantisation, an 11-channel softmax and a 5-channel grid sample.
// Each output in memory is compared with a reference computed here from
// the operator's definition. A softmax on a plane larger than a tile must
// end with cfg_error. Counts each operator run and each mode switch
// between operators.
module tb_plane_sched;
  import grace_pkg::*;
  localparam int LANES = 4, PT = 8;
  localparam int BYTES = 1 << 16;
  localparam logic [31:0] A_IN = 32'h1000, A_IN2 = 32'h4000, A_OUT = 32'h8000;
  int checks = 0, failures = 0, n_err = 0, switches = 0;
  int op_runs [7];
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done, cfg_error;
  cfg_t cfg;
  op_e  last_op;
  logic ld_start, ld_busy, ld_done, st_start, st_busy, st_done;
  ld_desc_t ld_desc;
  st_desc_t st_desc;
  logic ld_wr_en;
  dst_e ld_wr_dst;
  logic [15:0] ld_wr_lane, ld_wr_idx, st_lane, st_idx;
  logic [31:0] ld_wr_data;
  logic st_re;
  logic [7:0] st_data;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, rd_resp_data, wr_addr, wr_data;
  logic [3:0] wr_strb;

  plane_sched #(.LANES(LANES), .PT(PT)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cfg_error, .ld_start, .ld_desc, .ld_done,
    .ld_wr_en, .ld_wr_dst, .ld_wr_lane, .ld_wr_idx, .ld_wr_data,
    .st_start, .st_desc, .st_done, .st_re, .st_lane, .st_idx, .st_data);
  tile_loader u_ld (
    .clk, .rst_n, .start(ld_start), .desc(ld_desc), .busy(ld_busy), .done(ld_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_ready,
    .rd_resp_data, .wr_en(ld_wr_en), .wr_dst(ld_wr_dst), .wr_lane(ld_wr_lane),
    .wr_idx(ld_wr_idx), .wr_data(ld_wr_data));
  tile_storer u_st (
    .clk, .rst_n, .start(st_start), .desc(st_desc), .busy(st_busy), .done(st_done),
    .src_re(st_re), .src_lane(st_lane), .src_idx(st_idx), .src_data(st_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);
  ddr_model #(.BYTES(BYTES), .READY_PCT(75), .MAX_LAT(4)) u_mem (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int in1(int a); return int'($signed(u_mem.mem[A_IN + a])); endfunction
  function automatic int in2(int a); return int'($signed(u_mem.mem[A_IN2 + a])); endfunction
  function automatic int outb(int a); return int'($signed(u_mem.mem[A_OUT + a])); endfunction
  function automatic int sat(longint v); return (v > 127) ? 127 : (v < -128) ? -128 : int'(v); endfunction
  function automatic longint exp_ref(int x);
    longint y, ip, fp;
    y  = longint'(x) * 369;
    ip = y >>> 12;
    fp = y - ip * 4096;
    if (ip >= 0) return ((4096 + fp) << (12 + ip)) >>> 12;
    else         return ((4096 + fp) << 12) >>> (12 - ip);
  endfunction

  int errs;
  task automatic cmp(string what, int got, int e);
    checks++;
    if (got != e) begin
      failures++;
      if (errs++ < 8) $display("%s: got %0d exp %0d", what, got, e);
    end
  endtask

  task automatic run(input op_e op, input int c, input int h, input int w);
    int cyc;
    for (int i = 0; i < 8192; i++) u_mem.mem[A_OUT + i] = 8'h5A;
    cfg.op = op; cfg.c_in = 16'(c); cfg.in_h = 16'(h); cfg.in_w = 16'(w);
    cfg.addr_in = A_IN; cfg.addr_in2 = A_IN2; cfg.addr_out = A_OUT;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk); cyc++;
      if (cfg_error) n_err++;
    end
    if (cfg_error) n_err++;
    repeat (3) @(negedge clk);
    op_runs[int'(op)]++;
    if (op != last_op) switches++;
    last_op = op;
    errs = 0;
    $display("op %0d, %0d x %0d x %0d: %0d cycles", op, c, h, w, cyc);
  endtask

  initial begin
    int c, h, w, e, s, u, v, u0, v0, du, dv, acc, ne;
    longint sum, pv;
    cfg = '0; last_op = OP_CONV;
    for (int i = 0; i < BYTES; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- pooling: 6 channels of 19 x 21 (3 x 3 input tiles)
    c = 6; h = 19; w = 21;
    run(OP_POOL, c, h, w);
    for (int ch = 0; ch < c; ch++)
      for (int y = 0; y < h / 2; y++)
        for (int x = 0; x < w / 2; x++) begin
          s = in1((ch*h + 2*y)*w + 2*x) + in1((ch*h + 2*y)*w + 2*x+1)
            + in1((ch*h + 2*y+1)*w + 2*x) + in1((ch*h + 2*y+1)*w + 2*x+1);
          cmp("pool", outb((ch*(h/2) + y)*(w/2) + x), (s + 2) >>> 2);
        end
    cmp("pool end", outb(c*(h/2)*(w/2)), 8'sh5A);
    // ---- upsampling: 5 channels of 7 x 9
    c = 5; h = 7; w = 9;
    run(OP_UPSAMPLE, c, h, w);
    for (int ch = 0; ch < c; ch++)
      for (int y = 0; y < 2 * h; y++)
        for (int x = 0; x < 2 * w; x++)
          cmp("upsample", outb((ch*2*h + y)*2*w + x), in1((ch*h + y/2)*w + x/2));
    cmp("upsample end", outb(c*4*h*w), 8'sh5A);
    // ---- Hadamard product and add: 7 channels of 10 x 12
    c = 7; h = 10; w = 12;
    for (int mode = 0; mode < 2; mode++) begin
      cfg.qmult = (mode == 0) ? 16'd300 : 16'd200; cfg.qshift = (mode == 0) ? 6'd14 : 6'd8;
      cfg.qzero = (mode == 0) ? 8'sd3 : -8'sd2;
      run((mode == 0) ? OP_HADAMARD : OP_ADD, c, h, w);
      for (int i = 0; i < c * h * w; i++) begin
        pv = (mode == 0) ? longint'(in1(i)) * in2(i) : longint'(in1(i)) + in2(i);
        pv = pv * cfg.qmult;
        pv = (pv + (64'sd1 <<< (cfg.qshift - 1))) >>> cfg.qshift;
        cmp((mode == 0) ? "hadamard" : "add", outb(i), sat(pv + cfg.qzero));
      end
    end
    // ---- softmax over 11 channels of 6 x 7
    c = 11; h = 6; w = 7;
    run(OP_SOFTMAX, c, h, w);
    for (int p = 0; p < h * w; p++) begin
      sum = 0;
      for (int ch = 0; ch < c; ch++) sum += exp_ref(in1(ch*h*w + p));
      for (int ch = 0; ch < c; ch++) begin
        pv = (exp_ref(in1(ch*h*w + p)) * 127 + sum / 2) / sum;
        cmp("softmax", outb(ch*h*w + p), (pv > 127) ? 127 : int'(pv));
      end
    end
    // ---- grid sample: 5 channels of 8 x 7, grid at ADDR_IN2
    c = 5; h = 8; w = 7;
    run(OP_GRID_SAMPLE, c, h, w);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        u = ((in2(y*w + x) + 128) * (w - 1)) >> 6;
        v = ((in2(h*w + y*w + x) + 128) * (h - 1)) >> 6;
        u0 = u >> 2; du = u & 3; v0 = v >> 2; dv = v & 3;
        for (int ch = 0; ch < c; ch++) begin
          acc = (4-du)*(4-dv)*in1((ch*h + v0)*w + u0);
          if (v0 + 1 < h) acc += (4-du)*dv*in1((ch*h + v0+1)*w + u0);
          if (u0 + 1 < w) acc += du*(4-dv)*in1((ch*h + v0)*w + u0+1);
          if (v0 + 1 < h && u0 + 1 < w) acc += du*dv*in1((ch*h + v0+1)*w + u0+1);
          cmp("grid", outb((ch*h + y)*w + x), (acc + 8) >>> 4);
        end
      end
    // ---- a softmax plane larger than one tile is refused
    ne = n_err;
    run(OP_SOFTMAX, 3, PT + 1, 4);
    cmp("cfg_error raised", n_err - ne, 1);
    cmp("nothing stored", outb(0), 8'sh5A);
    // ---- back to pooling after the other modes
    c = 2; h = 4; w = 4;
    run(OP_POOL, c, h, w);
    for (int ch = 0; ch < c; ch++)
      for (int y = 0; y < 2; y++)
        for (int x = 0; x < 2; x++) begin
          s = in1((ch*h + 2*y)*w + 2*x) + in1((ch*h + 2*y)*w + 2*x+1)
            + in1((ch*h + 2*y+1)*w + 2*x) + in1((ch*h + 2*y+1)*w + 2*x+1);
          cmp("pool again", outb((ch*2 + y)*2 + x), (s + 2) >>> 2);
        end
    $display("runs per op (pool..grid): %0d %0d %0d %0d %0d %0d, op switches %0d, read stalls %0d",
             op_runs[1], op_runs[2], op_runs[3], op_runs[4], op_runs[5], op_runs[6], switches,
             u_mem.rd_stalls);
    for (int o = 1; o < 7; o++) cmp($sformatf("op %0d ran", o), int'(op_runs[o] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
