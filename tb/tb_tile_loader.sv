// tb_tile_loader: random load descriptors (byte tiles with negative and
// overhanging origins, so that padding is needed; partial channel groups;
// 32-bit word loads) against a randomly stalling memory model with random
// read latency. Every element write is compared with the value worked out
// here from the descriptor formula; each element must be written exactly
// once and the total write count must match. Counts padding fills,
// missing-channel fills, memory stalls and response back-pressure, and
// fails if any of them never happened.
module tb_tile_loader;
  import grace_pkg::*;
  localparam int BYTES = 1 << 16;
  int checks = 0, failures = 0;
  int n_pad = 0, n_zero = 0, n_mem = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done;
  ld_desc_t desc;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready;
  logic [31:0] rd_req_addr, rd_resp_data;
  logic wr_en;
  dst_e wr_dst;
  logic [15:0] wr_lane, wr_idx;
  logic [31:0] wr_data;
  logic wr_valid = 0;
  logic [31:0] wr_addr = 0, wdat = 0;
  logic [3:0] wr_strb = 0;
  logic wrdy;

  tile_loader #(.FIFO_DEPTH(8)) dut (.*);
  ddr_model #(.BYTES(BYTES), .READY_PCT(60), .MAX_LAT(5)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_resp_valid, .rd_resp_ready, .rd_resp_data,
    .wr_valid, .wr_ready(wrdy), .wr_addr, .wr_data(wdat), .wr_strb);

  // writes observed in the current run
  logic [31:0] got [int];
  int          seen [int];
  int          nwr;
  always @(posedge clk)
    if (wr_en) begin
      int key;
      key = int'(wr_lane) * 65536 + int'(wr_idx);
      got[key] = wr_data;
      seen[key] = seen.exists(key) ? seen[key] + 1 : 1;
      nwr++;
      if (wr_dst != desc.dst) begin
        failures++; $display("write to wrong destination %0d", wr_dst);
      end
    end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_at(int o, int i, int y, int x, output int kind);
    int r, c;
    logic [31:0] a, w;
    r = int'(desc.row0) + y; c = int'(desc.col0) + x;
    if (o >= int'(desc.o_lim) || i >= int'(desc.i_lim)) begin kind = 1; return 0; end
    if (r < 0 || c < 0 || r >= int'(desc.h_lim) || c >= int'(desc.w_lim)) begin
      kind = 2; return 32'(desc.pad);
    end
    kind = 0;
    a = desc.base + 32'(o) * desc.o_stride + 32'(i) * desc.i_stride
      + 32'(r) * desc.row_stride + 32'(c) * (desc.word ? 32'd4 : 32'd1);
    if (desc.word)
      w = {u_mem.mem[a + 3], u_mem.mem[a + 2], u_mem.mem[a + 1], u_mem.mem[a]};
    else
      w = 32'($signed(u_mem.mem[a]));
    return w;
  endfunction

  initial begin
    int kind, key, total, cyc;
    logic [31:0] e;
    desc = '0;
    for (int i = 0; i < BYTES; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      desc = '0;
      desc.word = (t % 5 == 4);
      desc.dst  = desc.word ? DST_PBUF : dst_e'($urandom_range(0, 5));
      desc.base = 32'($urandom_range(0, 255)) * 4;
      desc.n_o  = 16'($urandom_range(1, 3));
      desc.n_i  = 16'($urandom_range(1, 4));
      desc.o_lim = 16'($urandom_range(1, 3));
      desc.i_lim = 16'($urandom_range(1, 4));
      desc.rows = 16'($urandom_range(1, 9));
      desc.cols = desc.word ? 16'(3) : 16'($urandom_range(1, 11));
      desc.h_lim = desc.word ? 16'(1) : 16'($urandom_range(1, 9));
      desc.w_lim = desc.word ? 16'(3) : 16'($urandom_range(1, 9));
      if (desc.word) desc.rows = 1;
      desc.row0 = desc.word ? 16'sd0 : 16'($urandom_range(0, 6)) - 16'sd3;
      desc.col0 = desc.word ? 16'sd0 : 16'($urandom_range(0, 6)) - 16'sd3;
      desc.row_stride = 32'(desc.w_lim) * (desc.word ? 4 : 1);
      desc.i_stride = desc.row_stride * 32'(desc.h_lim);
      desc.o_stride = desc.i_stride * 32'(desc.i_lim);
      desc.dst_stride = desc.cols + 16'($urandom_range(0, 3));
      desc.pad = 8'($urandom);
      got.delete(); seen.delete(); nwr = 0;
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk); cyc++;
        if (cyc > 20000) break;
      end
      @(negedge clk);
      total = 0;
      for (int o = 0; o < int'(desc.n_o); o++)
        for (int i = 0; i < int'(desc.n_i); i++)
          for (int y = 0; y < int'(desc.rows); y++)
            for (int x = 0; x < int'(desc.cols); x++) begin
              e = expect_at(o, i, y, x, kind);
              if (kind == 0) n_mem++; else if (kind == 1) n_zero++; else n_pad++;
              key = (o * int'(desc.n_i) + i) * 65536 + y * int'(desc.dst_stride) + x;
              total++;
              checks++;
              if (!seen.exists(key) || seen[key] != 1 || got[key] != e) begin
                failures++;
                $display("t=%0d (%0d,%0d,%0d,%0d) kind %0d got %h exp %h", t, o, i, y, x, kind,
                         seen.exists(key) ? got[key] : 32'hdead, e);
              end
            end
      checks++;
      if (nwr != total) begin
        failures++; $display("t=%0d %0d writes, expected %0d", t, nwr, total);
      end
      checks++;
      if (busy) begin
        failures++; $display("busy after done");
      end
    end
    $display("memory elements %0d, pad fills %0d, missing-channel fills %0d, request stalls %0d, response waits %0d",
             n_mem, n_pad, n_zero, u_mem.rd_stalls, u_mem.resp_waits);
    checks++;
    if (n_mem == 0 || n_pad == 0 || n_zero == 0 || u_mem.rd_stalls == 0 || u_mem.resp_waits == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
