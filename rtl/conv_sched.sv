// conv_sched: tile-based convolution with double-buffered (ping-pong)
// load / compute / store pipelining.
//
// It holds the on-chip buffers of the convolution path (input tiles
// Tn x Ti x Ti, kernel tiles Tm x Tn x k x k and output tiles Tm x To x To,
// each as two banks), the conv_pe, a small register buffer of per-channel
// bias and requantisation words, and three concurrent sequencers:
//   load    - for every job (output-channel group g, output tile (ty,tx),
//             input-channel group ci) it loads the bias/scale words (first
//             ci step only), the kernel tile and the padded input tile into
//             the free input/weight bank, through the shared tile_loader;
//   compute - runs conv_pe on the filled bank, accumulating into the
//             current output bank; after the last of the C_in/Tn steps the
//             output bank is handed to the store sequencer and the other
//             output bank is used for the next tile;
//   store   - requantises, activates and writes a finished output tile to
//             DDR through the shared tile_storer.
// Loop order: g outer, then tiles, then ci inner, as in the paper's
// dataflow figure. A bank is free/full by a flag per bank, so loading the
// next tile overlaps computing this one, and storing one output tile
// overlaps computing the next. Output size OH = (H + 2P - k)/S + 1.
// Data layout in DDR (this design's choice): activations C x H x W bytes,
// weights Cout x Cin x k x k bytes, and per output channel three 32-bit
// words: bias, requantisation multiplier, {zero point[15:8], shift[5:0]}.
module conv_sched
  import grace_pkg::*;
#(
  parameter int TN   = 8,
  parameter int TM   = 16,
  parameter int TO   = 16,
  parameter int KMAX = 7,
  parameter int TI   = (TO - 1) * 2 + KMAX
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,
  output logic        busy,
  output logic        done,
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
  output logic [7:0]  st_data,
  // activity, for performance observation
  output logic        computing,
  output logic        loading,
  output logic        storing
);
  localparam int IAW = $clog2(TI * TI);
  localparam int WAW = $clog2(KMAX * KMAX);
  localparam int OAW = $clog2(TO * TO);
  localparam int LTO = $clog2(TO);
  localparam int LTM = $clog2(TM);
  localparam int LTN = $clog2(TN);

  // ------------------------------------------------------ layer geometry
  cfg_t        c;
  logic [15:0] oh, ow, ntx, nty, ng, nci;
  logic [7:0]  tie;
  logic [31:0] hw, kk, ohw, ntiles;
  always_comb begin
    oh  = 16'(((32'(c.in_h) + 2 * c.pad - c.ksize) >> (c.stride - 1)) + 1);
    ow  = 16'(((32'(c.in_w) + 2 * c.pad - c.ksize) >> (c.stride - 1)) + 1);
    nty = 16'((32'(oh) + TO - 1) >> LTO);
    ntx = 16'((32'(ow) + TO - 1) >> LTO);
    ng  = 16'((32'(c.c_out) + TM - 1) >> LTM);
    nci = 16'((32'(c.c_in) + TN - 1) >> LTN);
    tie = 8'((TO - 1) * c.stride + c.ksize);
    hw  = 32'(c.in_h) * c.in_w;
    kk  = 32'(c.ksize) * c.ksize;
    ohw = 32'(oh) * ow;
    ntiles = 32'(ng) * nty * ntx;
  end

  // ---------------------------------------------------------- buffers
  logic [1:0] ifull;         // input+weight bank holds a loaded job
  logic [1:0] opend;         // output bank holds a finished tile
  logic       lb, cb, ob, sb;

  // parameter words per bank: [bank][channel][word]
  logic [31:0] pbuf [2][TM][3];
  rq_t         opar [2][TM];            // requantisation per output bank
  logic [15:0] otile_g [2], otile_y [2], otile_x [2];

  logic                         pe_start, pe_done, pe_first;
  logic signed [TM-1:0][31:0]   pe_bias;
  logic                         i_re, w_re, o_re, o_we;
  logic [IAW-1:0]               i_raddr;
  logic [WAW-1:0]               w_raddr;
  logic [OAW-1:0]               o_raddr, o_waddr;
  logic signed [TN-1:0][7:0]    i_rdata;
  logic signed [TM*TN-1:0][7:0] w_rdata;
  logic signed [TM-1:0][31:0]   o_rdata, o_wdata, s_rdata;
  logic signed [TN-1:0][7:0]    unused_ib;
  logic signed [TM*TN-1:0][7:0] unused_wb;

  pingpong_buffer #(.LANES(TN), .DEPTH(TI * TI), .W(8)) u_ibuf (
    .clk, .wbank(lb),
    .we(TN'(ld_wr_en && ld_wr_dst == DST_IBUF) << ld_wr_lane),
    .waddr(IAW'(ld_wr_idx)), .wdata({TN{ld_wr_data[7:0]}}),
    .are(i_re), .abank(cb), .araddr(i_raddr), .ardata(i_rdata),
    .bre(1'b0), .bbank(~cb), .braddr('0), .brdata(unused_ib));

  pingpong_buffer #(.LANES(TM * TN), .DEPTH(KMAX * KMAX), .W(8)) u_wbuf (
    .clk, .wbank(lb),
    .we((TM * TN)'(ld_wr_en && ld_wr_dst == DST_WBUF) << ld_wr_lane),
    .waddr(WAW'(ld_wr_idx)), .wdata({(TM * TN){ld_wr_data[7:0]}}),
    .are(w_re), .abank(cb), .araddr(w_raddr), .ardata(w_rdata),
    .bre(1'b0), .bbank(~cb), .braddr('0), .brdata(unused_wb));

  pingpong_buffer #(.LANES(TM), .DEPTH(TO * TO), .W(32)) u_obuf (
    .clk, .wbank(ob), .we({TM{o_we}}), .waddr(o_waddr), .wdata(o_wdata),
    .are(o_re), .abank(ob), .araddr(o_raddr), .ardata(o_rdata),
    .bre(st_re), .bbank(sb), .braddr(OAW'(st_idx)), .brdata(s_rdata));

  always_comb
    for (int m = 0; m < TM; m++) pe_bias[m] = c.bias_en ? pbuf[cb][m][0] : 32'sd0;

  conv_pe #(.TN(TN), .TM(TM), .TO(TO), .KMAX(KMAX), .TI(TI)) u_pe (
    .clk, .rst_n, .start(pe_start), .first_ci(pe_first), .ksize(c.ksize),
    .stride(c.stride), .tie(tie), .bias(pe_bias), .done(pe_done),
    .i_re, .i_raddr, .i_rdata, .w_re, .w_raddr, .w_rdata,
    .o_re, .o_raddr, .o_rdata, .o_we, .o_waddr, .o_wdata);

  // store data path: lane select, requantise, activate
  logic [LTM-1:0] st_lane_q;
  always_ff @(posedge clk) if (st_re) st_lane_q <= LTM'(st_lane);
  requant_act u_rq (.acc(s_rdata[st_lane_q]), .rq(opar[sb][st_lane_q]), .y(st_data));

  // ------------------------------------------------------ load sequencer
  typedef enum logic [2:0] {L_IDLE, L_WAIT, L_PRM, L_WGT, L_IN, L_NEXT} lstate_e;
  lstate_e     ls;
  logic [15:0] lg, lty, ltx, lci;
  logic        ld_go;

  always_comb begin
    ld_desc = '0;
    unique case (ls)
      L_PRM: begin
        ld_desc.base = c.addr_prm + 32'(lg) * TM * 12;
        ld_desc.n_o = 16'(TM); ld_desc.o_stride = 32'd12;
        ld_desc.o_lim = c.c_out - 16'(32'(lg) * TM);
        ld_desc.n_i = 16'd1; ld_desc.i_lim = 16'd1;
        ld_desc.rows = 16'd1; ld_desc.cols = 16'd3;
        ld_desc.h_lim = 16'd1; ld_desc.w_lim = 16'd3;
        ld_desc.word = 1'b1; ld_desc.dst_stride = 16'd3; ld_desc.dst = DST_PBUF;
      end
      L_WGT: begin
        ld_desc.base = c.addr_w + (32'(lg) * TM * c.c_in + 32'(lci) * TN) * kk;
        ld_desc.n_o = 16'(TM); ld_desc.o_stride = 32'(c.c_in) * kk;
        ld_desc.o_lim = c.c_out - 16'(32'(lg) * TM);
        ld_desc.n_i = 16'(TN); ld_desc.i_stride = kk;
        ld_desc.i_lim = c.c_in - 16'(32'(lci) * TN);
        ld_desc.rows = 16'(c.ksize); ld_desc.cols = 16'(c.ksize);
        ld_desc.h_lim = 16'(c.ksize); ld_desc.w_lim = 16'(c.ksize);
        ld_desc.row_stride = 32'(c.ksize);
        ld_desc.dst_stride = 16'(c.ksize); ld_desc.dst = DST_WBUF;
      end
      default: begin // L_IN
        ld_desc.base = c.addr_in + 32'(lci) * TN * hw;
        ld_desc.n_o = 16'd1; ld_desc.o_lim = 16'd1;
        ld_desc.n_i = 16'(TN); ld_desc.i_stride = hw;
        ld_desc.i_lim = c.c_in - 16'(32'(lci) * TN);
        ld_desc.rows = 16'(tie); ld_desc.cols = 16'(tie);
        ld_desc.row0 = 16'(32'(lty) * TO * c.stride) - 16'(c.pad);
        ld_desc.col0 = 16'(32'(ltx) * TO * c.stride) - 16'(c.pad);
        ld_desc.h_lim = c.in_h; ld_desc.w_lim = c.in_w;
        ld_desc.row_stride = 32'(c.in_w); ld_desc.pad = c.pad_value;
        ld_desc.dst_stride = 16'(tie); ld_desc.dst = DST_IBUF;
      end
    endcase
  end
  assign ld_start = ld_go;
  assign loading  = (ls == L_PRM) || (ls == L_WGT) || (ls == L_IN);

  // --------------------------------------------------- compute sequencer
  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_RUN} cstate_e;
  cstate_e     cs;
  logic [15:0] cg, cty, ctx, cci;
  assign pe_start  = (cs == C_WAIT) && ifull[cb] && (cci != 0 || !opend[ob]);
  assign pe_first  = (cci == 0);
  assign computing = (cs == C_RUN);

  // ----------------------------------------------------- store sequencer
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN} sstate_e;
  sstate_e     ss;
  logic [31:0] stored;
  always_comb begin
    st_desc = '0;
    st_desc.base = c.addr_out + 32'(otile_g[sb]) * TM * ohw
                 + 32'(otile_y[sb]) * TO * ow + 32'(otile_x[sb]) * TO;
    st_desc.nch  = (c.c_out - 16'(32'(otile_g[sb]) * TM) > 16'(TM)) ? 16'(TM)
                 : c.c_out - 16'(32'(otile_g[sb]) * TM);
    st_desc.ch_stride = ohw;
    st_desc.rows = (oh - 16'(32'(otile_y[sb]) * TO) > 16'(TO)) ? 16'(TO)
                 : oh - 16'(32'(otile_y[sb]) * TO);
    st_desc.cols = (ow - 16'(32'(otile_x[sb]) * TO) > 16'(TO)) ? 16'(TO)
                 : ow - 16'(32'(otile_x[sb]) * TO);
    st_desc.row_stride = 32'(ow);
    st_desc.src_stride = 16'(TO);
  end
  assign st_start = (ss == S_WAIT) && opend[sb];
  assign storing  = (ss == S_RUN);

  assign busy = (ls != L_IDLE) || (cs != C_IDLE) || (ss != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; ls <= L_IDLE; cs <= C_IDLE; ss <= S_IDLE;
      lg <= '0; lty <= '0; ltx <= '0; lci <= '0; ld_go <= 1'b0;
      cg <= '0; cty <= '0; ctx <= '0; cci <= '0;
      ifull <= '0; opend <= '0; lb <= 1'b0; cb <= 1'b0; ob <= 1'b0; sb <= 1'b0;
      stored <= '0; done <= 1'b0;
      for (int b = 0; b < 2; b++) begin
        otile_g[b] <= '0; otile_y[b] <= '0; otile_x[b] <= '0;
        for (int m = 0; m < TM; m++) begin
          opar[b][m] <= '0;
          for (int k = 0; k < 3; k++) pbuf[b][m][k] <= '0;
        end
      end
    end else begin
      done  <= 1'b0;
      ld_go <= 1'b0;
      if (start && !busy) begin
        c <= cfg;
        ls <= L_WAIT; cs <= C_WAIT; ss <= S_WAIT;
        lg <= '0; lty <= '0; ltx <= '0; lci <= '0;
        cg <= '0; cty <= '0; ctx <= '0; cci <= '0;
        ifull <= '0; opend <= '0; lb <= 1'b0; cb <= 1'b0; ob <= 1'b0; sb <= 1'b0;
        stored <= '0;
      end

      // parameter words written by the loader
      if (ld_wr_en && ld_wr_dst == DST_PBUF)
        pbuf[lb][LTM'(ld_wr_lane)][ld_wr_idx[1:0]] <= ld_wr_data;

      // ---- load
      unique case (ls)
        L_WAIT: if (!ifull[lb]) begin
          ls <= (lci == 0) ? L_PRM : L_WGT;
          ld_go <= 1'b1;
        end
        L_PRM: if (ld_done) begin ls <= L_WGT; ld_go <= 1'b1; end
        L_WGT: if (ld_done) begin ls <= L_IN;  ld_go <= 1'b1; end
        L_IN:  if (ld_done) ls <= L_NEXT;
        L_NEXT: begin
          ls <= L_WAIT;
          lb <= ~lb;
          if (lci == nci - 1) begin
            lci <= '0;
            if (ltx == ntx - 1) begin
              ltx <= '0;
              if (lty == nty - 1) begin
                lty <= '0;
                if (lg == ng - 1) ls <= L_IDLE;
                else lg <= lg + 1'b1;
              end else lty <= lty + 1'b1;
            end else ltx <= ltx + 1'b1;
          end else lci <= lci + 1'b1;
        end
        default: ;
      endcase

      // ---- compute
      unique case (cs)
        C_WAIT: if (pe_start) begin
          cs <= C_RUN;
          if (cci == 0)
            for (int m = 0; m < TM; m++) begin
              opar[ob][m].mult  <= pbuf[cb][m][1][15:0];
              opar[ob][m].shift <= pbuf[cb][m][2][5:0];
              opar[ob][m].zero  <= pbuf[cb][m][2][15:8];
              opar[ob][m].act   <= c.act;
            end
        end
        C_RUN: if (pe_done) begin
          cs <= C_WAIT;
          cb <= ~cb;
          if (cci == nci - 1) begin
            otile_g[ob] <= cg; otile_y[ob] <= cty; otile_x[ob] <= ctx;
            ob  <= ~ob;
            cci <= '0;
            if (ctx == ntx - 1) begin
              ctx <= '0;
              if (cty == nty - 1) begin
                cty <= '0;
                if (cg == ng - 1) cs <= C_IDLE;
                else cg <= cg + 1'b1;
              end else cty <= cty + 1'b1;
            end else ctx <= ctx + 1'b1;
          end else cci <= cci + 1'b1;
        end
        default: ;
      endcase

      // ---- store
      unique case (ss)
        S_WAIT: if (st_start) ss <= S_RUN;
        S_RUN: if (st_done) begin
          sb <= ~sb;
          stored <= stored + 1;
          if (stored + 1 == ntiles) begin
            ss   <= S_IDLE;
            done <= 1'b1;
          end else ss <= S_WAIT;
        end
        default: ;
      endcase

      // ---- bank flags (set and clear never hit the same bank in a cycle)
      for (int b = 0; b < 2; b++) begin
        if (ls == L_NEXT && lb == b[0])                  ifull[b] <= 1'b1;
        else if (cs == C_RUN && pe_done && cb == b[0])   ifull[b] <= 1'b0;
        if (cs == C_RUN && pe_done && cci == nci - 1 && ob == b[0]) opend[b] <= 1'b1;
        else if (ss == S_RUN && st_done && sb == b[0])   opend[b] <= 1'b0;
      end
    end
  end
endmodule
