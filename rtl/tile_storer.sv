// tile_storer: the store half of the Load/Store module. Writes a block of
// nch x rows x cols bytes from an on-chip buffer to DDR (st_desc_t in
// grace_pkg): element (c,y,x) is read from lane c, index y*src_stride+x, and
// written to base + c*ch_stride + y*row_stride + x.
//
// The buffer read port is synchronous (data one cycle after src_re); the
// data path between buffer and storer may be combinational (e.g. the
// requantisation and activation of convolution results). A read is issued
// for the next element in the same cycle the memory accepts the current
// one, so one byte per cycle is sustained when memory does not stall.
// Memory write port: wr_valid/wr_ready with byte address, the byte copied
// into all four lanes of wr_data and a one-hot wr_strb. A write counts as
// done when accepted. done pulses one cycle after the last acceptance.
module tile_storer
  import grace_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  st_desc_t    desc,
  output logic        busy,
  output logic        done,
  // source buffer read port
  output logic        src_re,
  output logic [15:0] src_lane,
  output logic [15:0] src_idx,
  input  logic [7:0]  src_data,
  // memory write port
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb
);
  st_desc_t    d;
  logic [15:0] c, y, x;        // element being read / written
  logic [15:0] nc, ny, nx;     // next element
  logic        have;           // src_data holds element (c,y,x)
  logic        last;
  logic [31:0] addr;

  always_comb begin
    last = (x == d.cols - 1) && (y == d.rows - 1) && (c == d.nch - 1);
    nx = x + 1'b1; ny = y; nc = c;
    if (x == d.cols - 1) begin
      nx = '0;
      ny = y + 1'b1;
      if (y == d.rows - 1) begin ny = '0; nc = c + 1'b1; end
    end
    addr = d.base + 32'(c) * d.ch_stride + 32'(y) * d.row_stride + 32'(x);
  end

  assign wr_valid = have;
  assign wr_addr  = addr;
  assign wr_data  = {4{src_data}};
  assign wr_strb  = 4'b0001 << addr[1:0];

  // Read the element that will be written next: the first one after start,
  // the following one when the current write is accepted.
  logic issue_first;
  always_comb begin
    issue_first = start && !busy && desc.nch != 0 && desc.rows != 0 && desc.cols != 0;
    src_re   = issue_first || (have && wr_ready && !last);
    src_lane = issue_first ? 16'd0 : nc;
    src_idx  = issue_first ? 16'd0
                           : 16'(32'(ny) * 32'(d.src_stride) + 32'(nx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0; c <= '0; y <= '0; x <= '0;
      have <= 1'b0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        d <= desc; c <= '0; y <= '0; x <= '0;
        busy <= 1'b1;
        have <= issue_first;
        if (!issue_first) done <= 1'b1;
        if (!issue_first) busy <= 1'b0;
      end else if (have && wr_ready) begin
        if (last) begin
          have <= 1'b0; busy <= 1'b0; done <= 1'b1;
        end else begin
          c <= nc; y <= ny; x <= nx;
        end
      end
    end
  end
endmodule
