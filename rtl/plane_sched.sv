// plane_sched: runs the AGC-specific processing elements on channel-plane
// tiles: 2x2 average pooling, 2x upsampling, Hadamard product, matrix add,
// softmax over channels and grid sampling.
//
// LANES channels are processed side by side. For each group of LANES
// channels and each output tile it loads the input tile(s) into the plane
// buffers A (and B), runs the selected PE, which writes plane buffer O, and
// stores O. A plane tile is at most PT x PT pixels (a whole 64 x 64 channel
// at the default PT, the tile the paper chooses for grid sampling); larger
// planes are tiled for pooling, upsampling and the element-wise ops:
//   pooling   input tile PT x PT   -> output tile PT/2 x PT/2
//   upsample  input tile PT/2 x PT/2 -> output tile PT x PT
//   others    PT x PT -> PT x PT
// Softmax and grid sampling need the whole plane in one tile (H, W <= PT).
// Softmax runs a sum pass over all channel groups, then a normalising pass
// that stores. Grid sampling first loads the 2-channel grid map (ADDR_IN2)
// into buffer G and maps it to source coordinates once; every channel
// group then reuses those coordinates. Load, compute and store follow one
// another here (no double buffering); the paper describes these engines as
// simple ones whose speed is set by the tile size.
module plane_sched
  import grace_pkg::*;
#(
  parameter int LANES = 4,
  parameter int PT    = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,
  output logic        busy,
  output logic        done,
  output logic        cfg_error,   // pulses with done when the op cannot run
  // tile_loader control and write port
  output logic        ld_start,
  output ld_desc_t    ld_desc,
  input  logic        ld_done,
  input  logic        ld_wr_en,
  input  dst_e        ld_wr_dst,
  input  logic [15:0] ld_wr_lane,
  input  logic [15:0] ld_wr_idx,
  input  logic [31:0] ld_wr_data,
  // tile_storer control and source port
  output logic        st_start,
  output st_desc_t    st_desc,
  input  logic        st_done,
  input  logic        st_re,
  input  logic [15:0] st_lane,
  input  logic [15:0] st_idx,
  output logic [7:0]  st_data
);
  localparam int AW = $clog2(PT * PT);
  localparam int LL = $clog2(LANES);

  cfg_t c;
  logic        two_in, whole;
  logic [15:0] tin, tout, oh, ow, ntx, nty, ngr;
  logic [31:0] hw, ohw;
  always_comb begin
    two_in = (c.op == OP_HADAMARD) || (c.op == OP_ADD);
    whole  = (c.op == OP_SOFTMAX) || (c.op == OP_GRID_SAMPLE);
    unique case (c.op)
      OP_POOL:     begin tin = 16'(PT);     tout = 16'(PT / 2); oh = c.in_h >> 1; ow = c.in_w >> 1; end
      OP_UPSAMPLE: begin tin = 16'(PT / 2); tout = 16'(PT);     oh = c.in_h << 1; ow = c.in_w << 1; end
      default:     begin tin = 16'(PT);     tout = 16'(PT);     oh = c.in_h;      ow = c.in_w;      end
    endcase
    nty = 16'((32'(oh) + 32'(tout) - 1) / 32'(tout));
    ntx = 16'((32'(ow) + 32'(tout) - 1) / 32'(tout));
    ngr = 16'((32'(c.c_in) + LANES - 1) >> LL);
    hw  = 32'(c.in_h) * c.in_w;
    ohw = 32'(oh) * ow;
  end

  typedef enum logic [3:0] {P_IDLE, P_LDG, P_MAP, P_LDA, P_LDB, P_RUN, P_ST, P_NEXT} pstate_e;
  pstate_e     ps;
  logic [15:0] g, ty, tx;
  logic        pass;          // softmax: 0 sum pass, 1 normalise pass
  logic        go;            // one-cycle start for loader / storer / PE

  // --------------------------------------------------------- buffers
  logic                         a_re, b_re;
  logic [AW-1:0]                a_raddr, b_raddr;
  logic signed [LANES-1:0][7:0] a_rdata, b_rdata;
  logic [LANES-1:0]             o_we;
  logic [AW-1:0]                o_waddr;
  logic signed [LANES-1:0][7:0] o_wdata, o_rdata;
  logic                         gr_re;
  logic [AW-1:0]                gr_raddr;
  logic signed [1:0][7:0]       g_rdata;

  lane_ram #(.LANES(LANES), .DEPTH(PT * PT), .W(8)) u_abuf (
    .clk, .we(LANES'(ld_wr_en && ld_wr_dst == DST_PA) << ld_wr_lane),
    .waddr(AW'(ld_wr_idx)), .wdata({LANES{ld_wr_data[7:0]}}),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata));
  lane_ram #(.LANES(LANES), .DEPTH(PT * PT), .W(8)) u_bbuf (
    .clk, .we(LANES'(ld_wr_en && ld_wr_dst == DST_PB) << ld_wr_lane),
    .waddr(AW'(ld_wr_idx)), .wdata({LANES{ld_wr_data[7:0]}}),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata));
  lane_ram #(.LANES(2), .DEPTH(PT * PT), .W(8)) u_gbuf (
    .clk, .we(2'(ld_wr_en && ld_wr_dst == DST_PG) << ld_wr_lane),
    .waddr(AW'(ld_wr_idx)), .wdata({2{ld_wr_data[7:0]}}),
    .re(gr_re), .raddr(gr_raddr), .rdata(g_rdata));
  lane_ram #(.LANES(LANES), .DEPTH(PT * PT), .W(8)) u_obuf (
    .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .re(st_re), .raddr(AW'(st_idx)), .rdata(o_rdata));

  logic [LL-1:0] st_lane_q;
  always_ff @(posedge clk) if (st_re) st_lane_q <= LL'(st_lane);
  assign st_data = o_rdata[st_lane_q];

  // ------------------------------------------------------------- PEs
  logic [15:0] prow, pcol;      // output tile size of this step
  logic        pe_go;
  assign pe_go = go && (ps == P_RUN || ps == P_MAP);
  always_comb begin
    prow = (oh - 16'(32'(ty) * tout) > tout) ? tout : oh - 16'(32'(ty) * tout);
    pcol = (ow - 16'(32'(tx) * tout) > tout) ? tout : ow - 16'(32'(tx) * tout);
  end
  logic [LANES-1:0] lane_valid;
  always_comb
    for (int l = 0; l < LANES; l++) lane_valid[l] = 32'(g) * LANES + l < 32'(c.c_in);

  logic po_we, uo_we, eo_we, so_we, go_we;
  logic [AW-1:0] po_wa, uo_wa, eo_wa, so_wa, go_wa;
  logic signed [LANES-1:0][7:0] po_wd, uo_wd, eo_wd, so_wd, go_wd;
  logic pa_re, ua_re, ea_re, sa_re, ga_re;
  logic [AW-1:0] pa_ra, ua_ra, ea_ra, sa_ra, ga_ra;
  logic p_done, u_done, e_done, s_done, g_done;

  avgpool_pe #(.LANES(LANES), .PT(PT)) u_pool (
    .clk, .rst_n, .start(pe_go && c.op == OP_POOL), .rows(prow), .cols(pcol),
    .done(p_done), .a_re(pa_re), .a_raddr(pa_ra), .a_rdata,
    .o_we(po_we), .o_waddr(po_wa), .o_wdata(po_wd));
  upsample_pe #(.LANES(LANES), .PT(PT)) u_up (
    .clk, .rst_n, .start(pe_go && c.op == OP_UPSAMPLE), .rows(prow), .cols(pcol),
    .done(u_done), .a_re(ua_re), .a_raddr(ua_ra), .a_rdata,
    .o_we(uo_we), .o_waddr(uo_wa), .o_wdata(uo_wd));
  eltwise_pe #(.LANES(LANES), .PT(PT)) u_elt (
    .clk, .rst_n, .start(pe_go && two_in), .add_mode(c.op == OP_ADD),
    .rows(prow), .cols(pcol), .qmult(c.qmult), .qshift(c.qshift), .qzero(c.qzero),
    .done(e_done), .ab_re(ea_re), .ab_raddr(ea_ra), .a_rdata, .b_rdata,
    .o_we(eo_we), .o_waddr(eo_wa), .o_wdata(eo_wd));
  softmax_pe #(.LANES(LANES), .PT(PT)) u_smax (
    .clk, .rst_n, .start(pe_go && c.op == OP_SOFTMAX), .norm(pass), .first(g == 0),
    .lane_valid, .rows(prow), .cols(pcol), .done(s_done),
    .a_re(sa_re), .a_raddr(sa_ra), .a_rdata,
    .o_we(so_we), .o_waddr(so_wa), .o_wdata(so_wd));
  grid_sample_pe #(.LANES(LANES), .PT(PT)) u_grid (
    .clk, .rst_n, .start(pe_go && c.op == OP_GRID_SAMPLE), .sample(ps == P_RUN),
    .rows(c.in_h), .cols(c.in_w), .done(g_done),
    .g_re(gr_re), .g_raddr(gr_raddr), .g_rdata,
    .a_re(ga_re), .a_raddr(ga_ra), .a_rdata,
    .o_we(go_we), .o_waddr(go_wa), .o_wdata(go_wd));

  logic pe_done;
  always_comb begin
    a_re = 1'b0; a_raddr = '0; o_we = '0; o_waddr = '0; o_wdata = '0; pe_done = 1'b0;
    b_re = ea_re; b_raddr = ea_ra;
    unique case (c.op)
      OP_POOL:     begin a_re = pa_re; a_raddr = pa_ra; o_we = {LANES{po_we}}; o_waddr = po_wa; o_wdata = po_wd; pe_done = p_done; end
      OP_UPSAMPLE: begin a_re = ua_re; a_raddr = ua_ra; o_we = {LANES{uo_we}}; o_waddr = uo_wa; o_wdata = uo_wd; pe_done = u_done; end
      OP_HADAMARD,
      OP_ADD:      begin a_re = ea_re; a_raddr = ea_ra; o_we = {LANES{eo_we}}; o_waddr = eo_wa; o_wdata = eo_wd; pe_done = e_done; end
      OP_SOFTMAX:  begin a_re = sa_re; a_raddr = sa_ra; o_we = {LANES{so_we}}; o_waddr = so_wa; o_wdata = so_wd; pe_done = s_done; end
      OP_GRID_SAMPLE: begin a_re = ga_re; a_raddr = ga_ra; o_we = {LANES{go_we}}; o_waddr = go_wa; o_wdata = go_wd; pe_done = g_done; end
      default: ;
    endcase
  end

  // ----------------------------------------------------- load / store
  always_comb begin
    ld_desc = '0;
    ld_desc.n_o = 16'd1; ld_desc.o_lim = 16'd1;
    ld_desc.dst_stride = 16'(PT);
    if (ps == P_LDG) begin
      ld_desc.base = c.addr_in2;
      ld_desc.n_i = 16'd2; ld_desc.i_stride = hw; ld_desc.i_lim = 16'd2;
      ld_desc.rows = c.in_h; ld_desc.cols = c.in_w;
      ld_desc.h_lim = c.in_h; ld_desc.w_lim = c.in_w;
      ld_desc.row_stride = 32'(c.in_w); ld_desc.dst = DST_PG;
    end else begin
      ld_desc.base = ((ps == P_LDB) ? c.addr_in2 : c.addr_in) + 32'(g) * LANES * hw;
      ld_desc.n_i = 16'(LANES); ld_desc.i_stride = hw;
      ld_desc.i_lim = c.c_in - 16'(32'(g) * LANES);
      // only the part of the tile inside the plane is loaded
      ld_desc.rows = (c.in_h - 16'(32'(ty) * tin) > tin) ? tin : c.in_h - 16'(32'(ty) * tin);
      ld_desc.cols = (c.in_w - 16'(32'(tx) * tin) > tin) ? tin : c.in_w - 16'(32'(tx) * tin);
      ld_desc.row0 = 16'(32'(ty) * tin); ld_desc.col0 = 16'(32'(tx) * tin);
      ld_desc.h_lim = c.in_h; ld_desc.w_lim = c.in_w;
      ld_desc.row_stride = 32'(c.in_w);
      ld_desc.dst = (ps == P_LDB) ? DST_PB : DST_PA;
    end
    st_desc = '0;
    st_desc.base = c.addr_out + 32'(g) * LANES * ohw + 32'(ty) * tout * ow + 32'(tx) * tout;
    st_desc.nch  = (c.c_in - 16'(32'(g) * LANES) > 16'(LANES)) ? 16'(LANES)
                 : c.c_in - 16'(32'(g) * LANES);
    st_desc.ch_stride  = ohw;
    st_desc.rows = prow; st_desc.cols = pcol;
    st_desc.row_stride = 32'(ow);
    st_desc.src_stride = 16'(PT);
  end
  assign ld_start = go && (ps == P_LDG || ps == P_LDA || ps == P_LDB);
  assign st_start = go && (ps == P_ST);
  assign busy     = (ps != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; ps <= P_IDLE; g <= '0; ty <= '0; tx <= '0; pass <= 1'b0;
      go <= 1'b0; done <= 1'b0; cfg_error <= 1'b0;
    end else begin
      go <= 1'b0; done <= 1'b0; cfg_error <= 1'b0;
      unique case (ps)
        P_IDLE: if (start) begin
          c <= cfg; g <= '0; ty <= '0; tx <= '0; pass <= 1'b0;
          if (((cfg.op == OP_SOFTMAX || cfg.op == OP_GRID_SAMPLE)
               && (cfg.in_h > 16'(PT) || cfg.in_w > 16'(PT)))
              || cfg.c_in == 0 || cfg.in_h == 0 || cfg.in_w == 0) begin
            done <= 1'b1; cfg_error <= 1'b1;
          end else begin
            ps <= (cfg.op == OP_GRID_SAMPLE) ? P_LDG : P_LDA;
            go <= 1'b1;
          end
        end
        P_LDG: if (ld_done) begin ps <= P_MAP; go <= 1'b1; end
        P_MAP: if (pe_done) begin ps <= P_LDA; go <= 1'b1; end
        P_LDA: if (ld_done) begin ps <= two_in ? P_LDB : P_RUN; go <= 1'b1; end
        P_LDB: if (ld_done) begin ps <= P_RUN; go <= 1'b1; end
        P_RUN: if (pe_done && !go) begin
          if (c.op == OP_SOFTMAX && !pass) ps <= P_NEXT;
          else begin ps <= P_ST; go <= 1'b1; end
        end
        P_ST: if (st_done) ps <= P_NEXT;
        P_NEXT: begin
          ps <= P_LDA; go <= 1'b1;
          if (whole || tx == ntx - 1) begin
            tx <= '0;
            if (whole || ty == nty - 1) begin
              ty <= '0;
              if (g == ngr - 1) begin
                g <= '0;
                if (c.op == OP_SOFTMAX && !pass) pass <= 1'b1;
                else begin ps <= P_IDLE; go <= 1'b0; done <= 1'b1; end
              end else g <= g + 1'b1;
            end else ty <= ty + 1'b1;
          end else tx <= tx + 1'b1;
        end
        default: ps <= P_IDLE;
      endcase
    end
  end
endmodule
