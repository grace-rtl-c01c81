// grace_pkg: types, register map and arithmetic shared by the accelerator.
//
// The accelerator keeps activations and weights as 8-bit integers and sums
// as 32-bit integers, following the static int8 quantisation of the model.
// Everything else here is this design's own choice: the operation codes,
// the register offsets, the descriptor formats of the load and store
// engines, the requantisation formula (multiply, rounding right shift,
// zero point, saturation), the piecewise-linear sigmoid and the base-2
// exponential used by softmax.
package grace_pkg;

  // ---------------------------------------------------------------- ops
  typedef enum logic [3:0] {
    OP_CONV        = 4'd0,   // k x k convolution (+ fused BatchNorm bias), act
    OP_POOL        = 4'd1,   // 2x2 average pooling
    OP_UPSAMPLE    = 4'd2,   // 2x nearest-neighbour upsampling
    OP_HADAMARD    = 4'd3,   // element-wise product of two tensors
    OP_ADD         = 4'd4,   // element-wise sum of two tensors
    OP_SOFTMAX     = 4'd5,   // softmax over channels
    OP_GRID_SAMPLE = 4'd6    // bilinear warp by a 2-channel grid
  } op_e;

  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_SIGMOID = 2'd2
  } act_e;

  // --------------------------------------------------- register offsets
  localparam logic [7:0] REG_CTRL      = 8'h00; // bit0: start (self clearing)
  localparam logic [7:0] REG_STATUS    = 8'h04; // bit0 busy, bit1 done, bit2 error (sticky)
  localparam logic [7:0] REG_OP        = 8'h08;
  localparam logic [7:0] REG_IN_H      = 8'h0C;
  localparam logic [7:0] REG_IN_W      = 8'h10;
  localparam logic [7:0] REG_C_IN      = 8'h14;
  localparam logic [7:0] REG_C_OUT     = 8'h18;
  localparam logic [7:0] REG_KSIZE     = 8'h1C;
  localparam logic [7:0] REG_STRIDE    = 8'h20;
  localparam logic [7:0] REG_PAD       = 8'h24;
  localparam logic [7:0] REG_PAD_VALUE = 8'h28;
  localparam logic [7:0] REG_ACT       = 8'h2C;
  localparam logic [7:0] REG_BIAS_EN   = 8'h30;
  localparam logic [7:0] REG_ADDR_IN   = 8'h34;
  localparam logic [7:0] REG_ADDR_IN2  = 8'h38;
  localparam logic [7:0] REG_ADDR_W    = 8'h3C;
  localparam logic [7:0] REG_ADDR_PRM  = 8'h40;
  localparam logic [7:0] REG_ADDR_OUT  = 8'h44;
  localparam logic [7:0] REG_QMULT     = 8'h48;
  localparam logic [7:0] REG_QSHIFT    = 8'h4C;
  localparam logic [7:0] REG_QZERO     = 8'h50;
  localparam logic [7:0] REG_CYCLES    = 8'h54; // read only
  localparam int         NUM_REGS      = 22;

  // Layer configuration as seen by the schedulers.
  typedef struct packed {
    op_e                op;
    logic        [15:0] in_h;
    logic        [15:0] in_w;
    logic        [15:0] c_in;
    logic        [15:0] c_out;
    logic        [3:0]  ksize;
    logic        [1:0]  stride;
    logic        [3:0]  pad;
    logic signed [7:0]  pad_value;
    act_e               act;
    logic               bias_en;
    logic        [31:0] addr_in;
    logic        [31:0] addr_in2;
    logic        [31:0] addr_w;
    logic        [31:0] addr_prm;
    logic        [31:0] addr_out;
    logic        [15:0] qmult;
    logic        [5:0]  qshift;
    logic signed [7:0]  qzero;
  } cfg_t;

  // Per-output-channel requantisation parameters (one set per channel).
  typedef struct packed {
    logic        [15:0] mult;
    logic        [5:0]  shift;
    logic signed [7:0]  zero;
    act_e               act;
  } rq_t;

  // ------------------------------------------------ load/store descriptors
  // Buffers a load can fill.
  typedef enum logic [2:0] {
    DST_IBUF = 3'd0, DST_WBUF = 3'd1, DST_PBUF = 3'd2,
    DST_PA   = 3'd3, DST_PB   = 3'd4, DST_PG   = 3'd5
  } dst_e;

  // A load copies an n_o x n_i x rows x cols block. Element (o,i,y,x) is read
  // from  base + o*o_stride + i*i_stride + (row0+y)*row_stride + (col0+x)*esize
  // (esize 4 when word is set, else 1) and written to lane o*n_i+i, index
  // y*dst_stride+x. Elements with o>=o_lim or i>=i_lim become 0, elements
  // outside rows [0,h_lim) or columns [0,w_lim) become pad.
  typedef struct packed {
    logic        [31:0] base;
    logic        [15:0] n_o;
    logic        [31:0] o_stride;
    logic        [15:0] o_lim;
    logic        [15:0] n_i;
    logic        [31:0] i_stride;
    logic        [15:0] i_lim;
    logic        [15:0] rows;
    logic        [15:0] cols;
    logic signed [15:0] row0;
    logic signed [15:0] col0;
    logic        [15:0] h_lim;
    logic        [15:0] w_lim;
    logic        [31:0] row_stride;
    logic               word;
    logic signed [7:0]  pad;
    logic        [15:0] dst_stride;
    dst_e               dst;
  } ld_desc_t;

  // A store writes nch x rows x cols bytes: element (c,y,x) goes to
  // base + c*ch_stride + y*row_stride + x and is read from lane c,
  // index y*src_stride+x of the source buffer.
  typedef struct packed {
    logic [31:0] base;
    logic [15:0] nch;
    logic [31:0] ch_stride;
    logic [15:0] rows;
    logic [15:0] cols;
    logic [31:0] row_stride;
    logic [15:0] src_stride;
  } st_desc_t;

  // --------------------------------------------------------- arithmetic
  function automatic logic signed [7:0] sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // y = sat8( round(acc * mult / 2^shift) + zero )
  function automatic logic signed [7:0] requant(input logic signed [31:0] acc,
                                                input logic [15:0] mult,
                                                input logic [5:0] shift,
                                                input logic signed [7:0] zero);
    logic signed [47:0] p;
    p = 48'(acc) * $signed({1'b0, mult});
    if (shift != 0) p = (p + (48'sd1 <<< (shift - 1))) >>> shift;
    return sat8(p + 48'(zero));
  endfunction

  // Piecewise-linear sigmoid. Input x is a Q3.4 value (x/16), output is
  // sigmoid(x) in Q0.7 (0..127).
  function automatic logic signed [7:0] sigmoid_q(input logic signed [7:0] x);
    logic [7:0]  ax;       // |x| in Q3.4
    logic [11:0] f;        // f(|x|) in Q.8
    ax = x[7] ? 8'(-x) : 8'(x);
    if (ax >= 8'd80)       f = 12'd256;                        // |x| >= 5
    else if (ax >= 8'd38)  f = 12'd216 + 12'(ax >> 1);         // 0.03125|x|+0.84375
    else if (ax >= 8'd16)  f = 12'd160 + 12'(ax << 1);         // 0.125|x|+0.625
    else                   f = 12'd128 + 12'(ax << 2);         // 0.25|x|+0.5
    if (x[7]) f = 12'd256 - f;
    f = (f + 12'd1) >> 1;                                      // Q.8 -> Q.7
    return (f > 12'd127) ? 8'sd127 : 8'(f);
  endfunction

  // exp(x) for a Q3.4 input, as an unsigned Q.12 value (24 bits: exp(7.94)
  // needs 12 integer bits, exp(-8) still gives 1 LSB). Computed as
  // 2^(x*log2 e) with log2 e ~ 369/256 and 2^f ~ 1+f on the fraction.
  function automatic logic [23:0] exp_q12(input logic signed [7:0] x);
    logic signed [19:0] y;     // x * log2e in Q.12
    logic signed [7:0]  ip;    // integer part
    logic        [11:0] fp;    // fraction
    logic        [39:0] m;
    y  = 20'(x) * 20'sd369;
    ip = 8'(y >>> 12);
    fp = y[11:0];
    m  = 40'({1'b1, fp}) << 12;                 // (1+f) in Q.24
    if (ip >= 0) m = m << ip;
    else         m = m >> (-ip);
    return 24'(m >> 12);                        // Q.12
  endfunction

endpackage
