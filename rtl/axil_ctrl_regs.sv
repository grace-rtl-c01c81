// axil_ctrl_regs: AXI4-Lite slave holding the accelerator's control and
// status registers.
//
// The driver on the host processor writes the layer configuration (kernel
// size, stride, bias enable, activation, DDR addresses, ...) through this
// port and starts the accelerator by writing 1 to bit 0 of CTRL; that bit
// produces a one-cycle start pulse and clears itself. STATUS reports busy
// (bit 0), a sticky done flag (bit 1) and a sticky error flag (bit 2, the
// operation could not run with this configuration); the next start clears
// both flags.
// CYCLES counts clock cycles while busy. Offsets are in grace_pkg.
// Handshake: address and data of a write may arrive in any order; the
// response (OKAY) is given one cycle after both were taken. A read answers
// one cycle after the address. Unmapped offsets read 0 and ignore writes.
// The register layout and the cycle counter are this design's own; the
// paper only says that configuration passes through s_axilite registers
// and status is reported back through status registers.
module axil_ctrl_regs
  import grace_pkg::*;
#(
  parameter int AW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // to / from the accelerator
  output cfg_t          cfg,
  output logic          start,
  input  logic          busy,
  input  logic          done_pulse,
  input  logic          error_pulse   // with done_pulse: the operation was refused
);
  logic [31:0] regs [NUM_REGS];
  logic [AW-1:0] awaddr_q;
  logic          aw_have, w_have;
  logic [31:0]   wdata_q;
  logic [3:0]    wstrb_q;
  logic          done_q, err_q;
  logic [31:0]   cycles;

  assign s_awready = !aw_have && !s_bvalid;
  assign s_wready  = !w_have  && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    for (int b = 0; b < 4; b++) if (strb[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 1'b0; w_have <= 1'b0; s_bvalid <= 1'b0;
      awaddr_q <= '0; wdata_q <= '0; wstrb_q <= '0;
      s_rvalid <= 1'b0; s_rdata <= '0;
      start <= 1'b0; done_q <= 1'b0; err_q <= 1'b0; cycles <= '0;
      for (int i = 0; i < NUM_REGS; i++) regs[i] <= '0;
    end else begin
      start <= 1'b0;
      if (s_awvalid && s_awready) begin awaddr_q <= s_awaddr; aw_have <= 1'b1; end
      if (s_wvalid && s_wready)   begin wdata_q <= s_wdata; wstrb_q <= s_wstrb; w_have <= 1'b1; end
      if (aw_have && w_have) begin
        aw_have  <= 1'b0;
        w_have   <= 1'b0;
        s_bvalid <= 1'b1;
        if (awaddr_q[AW-1:2] < NUM_REGS) begin
          if (awaddr_q[7:0] == REG_CTRL) begin
            if (wstrb_q[0] && wdata_q[0] && !busy) begin
              start  <= 1'b1;
              done_q <= 1'b0;
              err_q  <= 1'b0;
              cycles <= '0;
            end
          end else if (awaddr_q[7:0] != REG_STATUS && awaddr_q[7:0] != REG_CYCLES) begin
            regs[awaddr_q[AW-1:2]] <= merge(regs[awaddr_q[AW-1:2]], wdata_q, wstrb_q);
          end
        end
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (s_araddr[7:0] == REG_STATUS)      s_rdata <= {29'd0, err_q, done_q, busy};
        else if (s_araddr[7:0] == REG_CYCLES) s_rdata <= cycles;
        else if (s_araddr[7:0] == REG_CTRL)   s_rdata <= '0;
        else if (s_araddr[AW-1:2] < NUM_REGS) s_rdata <= regs[s_araddr[AW-1:2]];
        else                                  s_rdata <= '0;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
      if (busy) cycles <= cycles + 1;
      if (done_pulse) done_q <= 1'b1;
      if (error_pulse) err_q <= 1'b1;
    end
  end

  always_comb begin
    cfg           = '0;
    cfg.op        = op_e'(regs[REG_OP >> 2][3:0]);
    cfg.in_h      = regs[REG_IN_H >> 2][15:0];
    cfg.in_w      = regs[REG_IN_W >> 2][15:0];
    cfg.c_in      = regs[REG_C_IN >> 2][15:0];
    cfg.c_out     = regs[REG_C_OUT >> 2][15:0];
    cfg.ksize     = regs[REG_KSIZE >> 2][3:0];
    cfg.stride    = regs[REG_STRIDE >> 2][1:0];
    cfg.pad       = regs[REG_PAD >> 2][3:0];
    cfg.pad_value = regs[REG_PAD_VALUE >> 2][7:0];
    cfg.act       = act_e'(regs[REG_ACT >> 2][1:0]);
    cfg.bias_en   = regs[REG_BIAS_EN >> 2][0];
    cfg.addr_in   = regs[REG_ADDR_IN >> 2];
    cfg.addr_in2  = regs[REG_ADDR_IN2 >> 2];
    cfg.addr_w    = regs[REG_ADDR_W >> 2];
    cfg.addr_prm  = regs[REG_ADDR_PRM >> 2];
    cfg.addr_out  = regs[REG_ADDR_OUT >> 2];
    cfg.qmult     = regs[REG_QMULT >> 2][15:0];
    cfg.qshift    = regs[REG_QSHIFT >> 2][5:0];
    cfg.qzero     = regs[REG_QZERO >> 2][7:0];
  end

  a_bvalid_holds: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_holds: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
