// grid_sample_pe: bilinear warping of LANES source channels by a grid map.
//
// Two modes, following the paper's two loops:
//   map    (sample=0): every position p of the 2-channel grid map G (int8,
//          lane 0 = horizontal, lane 1 = vertical, normalised to [-1,1) as
//          Q0.7) is turned into a source coordinate with 2 fraction bits in
//          8 bits: u = ((g_x+128)*(W-1)) >> 6, v likewise with H. The result
//          is kept in an internal coordinate buffer, shared by all channels.
//   sample (sample=1): for every destination pixel p, u0 = u>>2 (6 integer
//          bits), du = u&3 (2 fraction bits), same for v, and
//            dst = round( ((4-du)(4-dv) src(u0,v0) + (4-du)dv src(u0,v0+1)
//                        + du(4-dv) src(u0+1,v0) + du dv src(u0+1,v0+1)) / 16 )
//          for all LANES channels at once (the unrolled tile dimension).
//          Neighbours outside the W x H source count as 0.
// Source and destination planes use row pitch PT, index row*PT+column.
// Timing: map takes rows*cols + 2 cycles; sample takes 6 cycles per pixel
// (one coordinate read, four source reads, one write), 6*rows*cols + 1 in
// all. The coordinate format, the 64x64 single-channel tile and the
// channel unrolling follow the paper; the grid normalisation formula, the
// zero border and the read schedule are this design's.
module grid_sample_pe #(
  parameter int LANES = 4,
  parameter int PT    = 64,
  parameter int AW    = $clog2(PT * PT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          sample,     // 0: map grid, 1: sample
  input  logic [15:0]                   rows,       // H (source and destination)
  input  logic [15:0]                   cols,       // W
  output logic                          done,
  // grid map buffer (2 lanes)
  output logic                          g_re,
  output logic [AW-1:0]                 g_raddr,
  input  logic signed [1:0][7:0]        g_rdata,
  // source plane buffer
  output logic                          a_re,
  output logic [AW-1:0]                 a_raddr,
  input  logic signed [LANES-1:0][7:0]  a_rdata,
  // destination plane buffer
  output logic                          o_we,
  output logic [AW-1:0]                 o_waddr,
  output logic signed [LANES-1:0][7:0]  o_wdata
);
  typedef enum logic [2:0] {G_IDLE, G_MAP, G_RC, G_R0, G_R1, G_R2, G_R3, G_WR} gstate_e;
  gstate_e     st;
  logic [15:0] y, x;
  logic        v1, last1, sample_q;
  logic [AW-1:0] pix, pix1;

  // coordinate buffer: lane 0 = u, lane 1 = v
  logic [1:0]        c_we_l;
  logic [1:0][7:0]   c_wdata, c_rdata;
  logic              c_re;

  assign pix = AW'(32'(y) * PT + x);

  lane_ram #(.LANES(2), .DEPTH(PT * PT), .W(8)) u_coord (
    .clk, .we(c_we_l), .waddr(pix1), .wdata(c_wdata),
    .re(c_re), .raddr(pix), .rdata(c_rdata));

  // ---- map: grid value -> 8-bit coordinate with 2 fraction bits
  assign g_re    = (st == G_MAP);
  assign g_raddr = pix;
  always_comb begin
    c_we_l     = {2{v1 && !sample_q}};
    c_wdata[0] = 8'((32'(10'($signed(g_rdata[0])) + 10'sd128) * (32'(cols) - 1)) >> 6);
    c_wdata[1] = 8'((32'(10'($signed(g_rdata[1])) + 10'sd128) * (32'(rows) - 1)) >> 6);
  end

  // ---- sample: the coordinate read in G_RC holds in c_rdata for the pixel
  logic [5:0] u0, v0;
  logic [1:0] du, dv;
  logic [3:0] okc;                    // corner inside the source
  always_comb begin
    u0 = c_rdata[0][7:2]; du = c_rdata[0][1:0];
    v0 = c_rdata[1][7:2]; dv = c_rdata[1][1:0];
    okc[0] = 1'b1;
    okc[1] = 16'(v0) + 1 < rows;
    okc[2] = 16'(u0) + 1 < cols;
    okc[3] = okc[1] && okc[2];
  end
  assign c_re = (st == G_RC);

  // corner order: 0 (u0,v0), 1 (u0,v0+1), 2 (u0+1,v0), 3 (u0+1,v0+1)
  logic [1:0] ci, cq;                 // corner read now / arriving now
  always_comb begin
    unique case (st)
      G_R1:    begin ci = 2'd1; cq = 2'd0; end
      G_R2:    begin ci = 2'd2; cq = 2'd1; end
      G_R3:    begin ci = 2'd3; cq = 2'd2; end
      G_WR:    begin ci = 2'd0; cq = 2'd3; end
      default: begin ci = 2'd0; cq = 2'd0; end
    endcase
  end
  logic [6:0] cu, cv;
  always_comb begin
    cu = 7'(u0) + 7'(ci[1]);
    cv = 7'(v0) + 7'(ci[0]);
    a_re    = (st == G_R0) || (st == G_R1) || (st == G_R2) || (st == G_R3);
    a_raddr = AW'(32'((cv > 7'(PT - 1)) ? 7'(PT - 1) : cv) * PT
                + 32'((cu > 7'(PT - 1)) ? 7'(PT - 1) : cu));
  end

  function automatic logic [4:0] wgt(input logic [1:0] c, input logic [1:0] fu,
                                     input logic [1:0] fv);
    logic [4:0] wu, wv;
    wu = c[1] ? 5'(fu) : 5'd4 - 5'(fu);
    wv = c[0] ? 5'(fv) : 5'd4 - 5'(fv);
    return 5'(wu * wv);
  endfunction

  logic signed [LANES-1:0][15:0] acc, acc_next;
  always_comb
    for (int l = 0; l < LANES; l++)
      acc_next[l] = acc[l] + (okc[cq] ? 16'($signed(a_rdata[l])) * $signed({11'd0, wgt(cq, du, dv)})
                                      : 16'sd0);

  assign o_we    = (st == G_WR);
  assign o_waddr = pix;
  always_comb
    for (int l = 0; l < LANES; l++) o_wdata[l] = 8'(($signed(acc_next[l]) + 16'sd8) >>> 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; y <= '0; x <= '0; v1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
      sample_q <= 1'b0; acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          y <= '0; x <= '0; sample_q <= sample;
          if (rows == 0 || cols == 0) done <= 1'b1;
          else st <= sample ? G_RC : G_MAP;
        end
        G_MAP: begin
          v1    <= 1'b1;
          pix1  <= pix;
          last1 <= (x == cols - 1) && (y == rows - 1);
          if (x == cols - 1) begin
            x <= '0;
            if (y == rows - 1) st <= G_IDLE;
            else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        G_RC: st <= G_R0;
        G_R0: begin acc <= '0;       st <= G_R1; end
        G_R1: begin acc <= acc_next; st <= G_R2; end
        G_R2: begin acc <= acc_next; st <= G_R3; end
        G_R3: begin acc <= acc_next; st <= G_WR; end
        G_WR: begin
          if (x == cols - 1) begin
            x <= '0;
            if (y == rows - 1) begin st <= G_IDLE; done <= 1'b1; end
            else begin y <= y + 1'b1; st <= G_RC; end
          end else begin x <= x + 1'b1; st <= G_RC; end
        end
        default: st <= G_IDLE;
      endcase
      if (v1 && last1 && !sample_q) done <= 1'b1;
    end
  end
endmodule
