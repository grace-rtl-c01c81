// grace_accel: the programmable-logic accelerator of the AGC (animation-
// based generative codec) decoder.
//
// The host processor decodes the bitstream and estimates the sparse motion;
// this accelerator runs the dense part of the decoder (dense motion network,
// warping and generator) one layer or operator at a time. The driver writes
// a layer's configuration into the AXI4-Lite register file (axil_ctrl_regs),
// sets START and polls STATUS. The selected engine then moves tiles between
// DDR and on-chip buffers through the Load/Store module (tile_loader,
// tile_storer) and computes them:
//   OP_CONV          conv_sched: tiled, double-buffered k x k convolution
//                    with fused BatchNorm bias, requantisation, ReLU/Sigmoid
//   OP_POOL .. OP_GRID_SAMPLE
//                    plane_sched: 2x2 average pooling, 2x upsampling,
//                    Hadamard product, matrix add, channel softmax and
//                    bilinear grid sampling
// Only one engine runs at a time, so they share the load and store engines.
// Memory ports (this design's simplification of the AXI master): a read
// request channel (valid/ready, byte address), an in-order read response
// channel (valid/ready, 32-bit word), and a write channel carrying address,
// data and byte strobes together (valid/ready). All of it runs on one clock
// with an active-low asynchronous reset.
module grace_accel
  import grace_pkg::*;
#(
  parameter int TN    = 8,    // input channels per convolution step
  parameter int TM    = 16,   // output channels per convolution step
  parameter int TO    = 16,   // output tile width/height of the convolution
  parameter int KMAX  = 7,    // largest kernel
  parameter int LANES = 4,    // channels processed together by the plane PEs
  parameter int PT    = 64    // plane tile width/height
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control slave
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // memory read port
  output logic        m_rd_req_valid,
  input  logic        m_rd_req_ready,
  output logic [31:0] m_rd_req_addr,
  input  logic        m_rd_resp_valid,
  output logic        m_rd_resp_ready,
  input  logic [31:0] m_rd_resp_data,
  // memory write port
  output logic        m_wr_valid,
  input  logic        m_wr_ready,
  output logic [31:0] m_wr_addr,
  output logic [31:0] m_wr_data,
  output logic [3:0]  m_wr_strb
);
  cfg_t     cfg;
  logic     start, busy, done_pulse;
  logic     p_err;                       // plane engine refused the op
  logic     conv_sel;                    // latched at start: conv engine active

  axil_ctrl_regs #(.AW(8)) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .start, .busy, .done_pulse, .error_pulse(p_err));

  // ---------------------------------------------------- load / store
  logic        ld_start, ld_busy, ld_done;
  ld_desc_t    ld_desc;
  logic        ld_wr_en;
  dst_e        ld_wr_dst;
  logic [15:0] ld_wr_lane, ld_wr_idx;
  logic [31:0] ld_wr_data;
  logic        st_start, st_busy, st_done, st_re;
  st_desc_t    st_desc;
  logic [15:0] st_lane, st_idx;
  logic [7:0]  st_data;

  tile_loader u_load (
    .clk, .rst_n, .start(ld_start), .desc(ld_desc), .busy(ld_busy), .done(ld_done),
    .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready), .rd_req_addr(m_rd_req_addr),
    .rd_resp_valid(m_rd_resp_valid), .rd_resp_ready(m_rd_resp_ready),
    .rd_resp_data(m_rd_resp_data),
    .wr_en(ld_wr_en), .wr_dst(ld_wr_dst), .wr_lane(ld_wr_lane), .wr_idx(ld_wr_idx),
    .wr_data(ld_wr_data));

  tile_storer u_store (
    .clk, .rst_n, .start(st_start), .desc(st_desc), .busy(st_busy), .done(st_done),
    .src_re(st_re), .src_lane(st_lane), .src_idx(st_idx), .src_data(st_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr),
    .wr_data(m_wr_data), .wr_strb(m_wr_strb));

  // ------------------------------------------------------- engines
  logic        c_busy, c_done, c_ld_start, c_st_start;
  ld_desc_t    c_ld_desc;
  st_desc_t    c_st_desc;
  logic [7:0]  c_st_data;
  logic        c_computing, c_loading, c_storing;
  logic        p_busy, p_done, p_ld_start, p_st_start;
  ld_desc_t    p_ld_desc;
  st_desc_t    p_st_desc;
  logic [7:0]  p_st_data;

  conv_sched #(.TN(TN), .TM(TM), .TO(TO), .KMAX(KMAX)) u_conv (
    .clk, .rst_n, .start(start && cfg.op == OP_CONV), .cfg, .busy(c_busy), .done(c_done),
    .ld_start(c_ld_start), .ld_desc(c_ld_desc), .ld_done,
    .ld_wr_en, .ld_wr_dst, .ld_wr_lane, .ld_wr_idx, .ld_wr_data,
    .st_start(c_st_start), .st_desc(c_st_desc), .st_done,
    .st_re, .st_lane, .st_idx, .st_data(c_st_data),
    .computing(c_computing), .loading(c_loading), .storing(c_storing));

  plane_sched #(.LANES(LANES), .PT(PT)) u_plane (
    .clk, .rst_n, .start(start && cfg.op != OP_CONV), .cfg, .busy(p_busy), .done(p_done),
    .cfg_error(p_err),
    .ld_start(p_ld_start), .ld_desc(p_ld_desc), .ld_done,
    .ld_wr_en, .ld_wr_dst, .ld_wr_lane, .ld_wr_idx, .ld_wr_data,
    .st_start(p_st_start), .st_desc(p_st_desc), .st_done,
    .st_re, .st_lane, .st_idx, .st_data(p_st_data));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) conv_sel <= 1'b0;
    else if (start) conv_sel <= (cfg.op == OP_CONV);

  assign ld_start   = conv_sel ? c_ld_start : p_ld_start;
  assign ld_desc    = conv_sel ? c_ld_desc  : p_ld_desc;
  assign st_start   = conv_sel ? c_st_start : p_st_start;
  assign st_desc    = conv_sel ? c_st_desc  : p_st_desc;
  assign st_data    = conv_sel ? c_st_data  : p_st_data;
  assign busy       = c_busy || p_busy || ld_busy || st_busy;
  assign done_pulse = c_done || p_done;

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(c_busy && p_busy));
  a_ld_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    ld_start |-> !ld_busy);
  a_st_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    st_start |-> !st_busy);
endmodule
