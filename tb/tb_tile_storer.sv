// tb_tile_storer: random store descriptors from a behavioural source
// buffer (one-cycle read latency) into a randomly stalling memory model.
// Afterwards every byte of the target region must hold the source element
// the descriptor formula maps to it, and every byte outside it must be
// unchanged. Checks the write count, and that back-to-back writes happen
// (one byte per cycle when memory is ready) and stalls happen.
module tb_tile_storer;
  import grace_pkg::*;
  localparam int BYTES = 1 << 16;
  int checks = 0, failures = 0, b2b = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done;
  st_desc_t desc;
  logic src_re;
  logic [15:0] src_lane, src_idx;
  logic [7:0] src_data;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr, wr_data;
  logic [3:0] wr_strb;
  logic [31:0] rdd;
  logic rrv, rrq;
  logic [7:0] srcbuf [8][1024];
  logic [7:0] shadow [BYTES];
  logic prev_acc = 0;

  tile_storer dut (.*);
  ddr_model #(.BYTES(BYTES), .READY_PCT(75), .MAX_LAT(2)) u_mem (
    .clk, .rst_n, .rd_req_valid(1'b0), .rd_req_ready(rrq), .rd_req_addr(32'd0),
    .rd_resp_valid(rrv), .rd_resp_ready(1'b1), .rd_resp_data(rdd),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  always_ff @(posedge clk) if (src_re) src_data <= srcbuf[src_lane % 8][src_idx % 1024];
  always @(posedge clk) begin
    if (wr_valid && wr_ready && prev_acc) b2b++;
    prev_acc <= wr_valid && wr_ready;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, w0;
    logic [31:0] a;
    desc = '0; src_data = '0;
    for (int i = 0; i < BYTES; i++) begin
      u_mem.mem[i] = 8'($urandom); shadow[i] = u_mem.mem[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      for (int l = 0; l < 8; l++) for (int i = 0; i < 1024; i++) srcbuf[l][i] = 8'($urandom);
      desc.base = 32'($urandom_range(0, 4000));
      desc.nch = 16'($urandom_range(1, 8));
      desc.rows = 16'($urandom_range(1, 12));
      desc.cols = 16'($urandom_range(1, 12));
      desc.src_stride = desc.cols + 16'($urandom_range(0, 4));
      desc.row_stride = 32'(desc.cols) + 32'($urandom_range(0, 5));
      desc.ch_stride = desc.row_stride * 32'(desc.rows) + 32'($urandom_range(0, 5));
      for (int c = 0; c < int'(desc.nch); c++)
        for (int y = 0; y < int'(desc.rows); y++)
          for (int x = 0; x < int'(desc.cols); x++) begin
            a = desc.base + 32'(c) * desc.ch_stride + 32'(y) * desc.row_stride + 32'(x);
            shadow[a] = srcbuf[c][y * int'(desc.src_stride) + x];
          end
      w0 = u_mem.writes;
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk); cyc++;
        if (cyc > 20000) break;
      end
      @(negedge clk);
      checks++;
      if (u_mem.writes - w0 != int'(desc.nch) * int'(desc.rows) * int'(desc.cols)) begin
        failures++; $display("t=%0d: %0d writes", t, u_mem.writes - w0);
      end
      for (int i = 0; i < 8192; i++) begin
        checks++;
        if (u_mem.mem[i] != shadow[i]) begin
          failures++; $display("t=%0d byte %0d got %h exp %h", t, i, u_mem.mem[i], shadow[i]);
        end
      end
    end
    $display("back-to-back writes %0d, write stalls %0d", b2b, u_mem.wr_stalls);
    checks++;
    if (b2b == 0 || u_mem.wr_stalls == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
