// tile_loader: the load half of the Load/Store module. Copies one block of
// data described by an ld_desc_t (see grace_pkg) from DDR into an on-chip
// buffer: an input tile (Tn channels x Ti x Ti), a kernel tile
// (Tm x Tn x k x k), per-channel bias/scale words, or a channel-plane tile.
//
// It walks the block element by element (x fastest, then y, i, o). An
// element inside the source issues a read on the memory read port; an
// element outside it is filled without a memory access: with the padding
// value when it lies outside the image rows/columns (convolution padding),
// with 0 when its channel does not exist (a partial last channel group).
// A small in-order tag FIFO remembers where each element goes, so up to
// FIFO_DEPTH reads are in flight and one element per cycle is sustained
// when memory keeps up. Read responses are accepted (rd_resp_ready) only
// when the oldest pending element is a memory element, which keeps fills
// and data in order.
//
// Memory read port: request rd_req_valid/rd_req_ready with a byte address;
// the response returns the aligned 32-bit word holding it, in order, on
// rd_resp_valid/rd_resp_ready. Byte elements are sign-extended.
// Buffer port: wr_en with destination, lane, index and 32-bit data; each
// element is written exactly once. done pulses for one cycle after the last
// write. The descriptor is sampled at start.
module tile_loader
  import grace_pkg::*;
#(
  parameter int FIFO_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  ld_desc_t    desc,
  output logic        busy,
  output logic        done,
  // memory read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output logic [31:0] rd_req_addr,
  input  logic        rd_resp_valid,
  output logic        rd_resp_ready,
  input  logic [31:0] rd_resp_data,
  // buffer write port
  output logic        wr_en,
  output dst_e        wr_dst,
  output logic [15:0] wr_lane,
  output logic [15:0] wr_idx,
  output logic [31:0] wr_data
);
  typedef struct packed {
    logic        fill;     // no memory access: write fval
    logic [31:0] fval;
    logic [15:0] lane;
    logic [15:0] idx;
    logic [1:0]  boff;     // byte offset in the word
  } tag_t;

  localparam int PW = $clog2(FIFO_DEPTH);

  ld_desc_t d;
  logic [15:0] o, i, y, x;
  logic        issuing;                 // elements left to issue
  tag_t        fifo [FIFO_DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  // current element
  logic signed [17:0] row, col;
  logic               ch_ok, sp_ok;
  logic [31:0]        addr;
  tag_t               tag_new;
  logic               push, pop, last_elem;

  always_comb begin
    row   = 18'(d.row0) + 18'(signed'({1'b0, y}));
    col   = 18'(d.col0) + 18'(signed'({1'b0, x}));
    ch_ok = (o < d.o_lim) && (i < d.i_lim);
    sp_ok = (row >= 0) && (row < 18'(d.h_lim)) && (col >= 0) && (col < 18'(d.w_lim));
    addr  = d.base + 32'(o) * d.o_stride + 32'(i) * d.i_stride
          + 32'(row) * d.row_stride + (d.word ? 32'(col) << 2 : 32'(col));
    tag_new.fill = !(ch_ok && sp_ok);
    tag_new.fval = ch_ok ? 32'(d.pad) : 32'd0;
    tag_new.lane = 16'(32'(o) * 32'(d.n_i) + 32'(i));
    tag_new.idx  = 16'(32'(y) * 32'(d.dst_stride) + 32'(x));
    tag_new.boff = addr[1:0];
    last_elem = (x == d.cols - 1) && (y == d.rows - 1) && (i == d.n_i - 1) && (o == d.n_o - 1);
  end

  assign rd_req_valid = issuing && !tag_new.fill && (cnt < FIFO_DEPTH);
  assign rd_req_addr  = {addr[31:2], 2'b00};
  assign push = issuing && (cnt < FIFO_DEPTH) && (tag_new.fill || rd_req_ready);

  tag_t head;
  assign head          = fifo[rp];
  assign rd_resp_ready = (cnt != 0) && !head.fill;
  assign pop           = (cnt != 0) && (head.fill || rd_resp_valid);

  always_comb begin
    wr_en   = pop;
    wr_dst  = d.dst;
    wr_lane = head.lane;
    wr_idx  = head.idx;
    if (head.fill)   wr_data = head.fval;
    else if (d.word) wr_data = rd_resp_data;
    else             wr_data = 32'(signed'(rd_resp_data[8*head.boff +: 8]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0; o <= '0; i <= '0; y <= '0; x <= '0;
      issuing <= 1'b0; busy <= 1'b0; done <= 1'b0;
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        d <= desc; o <= '0; i <= '0; y <= '0; x <= '0;
        issuing <= (desc.rows != 0) && (desc.cols != 0) && (desc.n_i != 0) && (desc.n_o != 0);
        busy    <= 1'b1;
      end else if (busy) begin
        if (push) begin
          fifo[wp] <= tag_new;
          wp <= wp + 1'b1;
          if (last_elem) issuing <= 1'b0;
          if (x == d.cols - 1) begin
            x <= '0;
            if (y == d.rows - 1) begin
              y <= '0;
              if (i == d.n_i - 1) begin i <= '0; o <= o + 1'b1; end
              else i <= i + 1'b1;
            end else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        if (pop) rp <= rp + 1'b1;
        cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
        if (!issuing && cnt == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
