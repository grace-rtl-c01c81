// conv_engine: the unrolled multiply-accumulate array of the convolution PE.
//
// The Tn (input channel) and Tm (output channel) loops are unrolled: TM
// groups of TN multipliers, each group reduced by a binary adder tree. The
// TN input pixels are broadcast to all TM groups; each multiplier has its
// own weight. One result vector per cycle, registered (latency 1 cycle).
// int8 x int8 products, 32-bit sums. The organisation follows the paper's
// loop-unrolling figure; TN and TM are not given there and are chosen so
// that TN*TM = 128 multipliers fit within the 148 DSP slices the paper
// reports for its convolution module.
module conv_engine #(
  parameter int TN = 8,
  parameter int TM = 16
) (
  input  logic                          clk,
  input  logic                          in_valid,
  input  logic signed [TN-1:0][7:0]     x,
  input  logic signed [TM*TN-1:0][7:0]  w,      // lane m*TN+n
  output logic                          out_valid,
  output logic signed [TM-1:0][31:0]    sum
);
  localparam int NP = 1 << $clog2(TN);   // leaves, padded to a power of 2

  logic signed [31:0] tree [TM][2*NP-1];

  always_comb begin
    for (int m = 0; m < TM; m++) begin
      for (int n = 0; n < NP; n++)
        tree[m][NP-1+n] = (n < TN) ? 32'($signed(x[n]) * $signed(w[m*TN+n])) : 32'sd0;
      for (int j = NP-2; j >= 0; j--)
        tree[m][j] = tree[m][2*j+1] + tree[m][2*j+2];
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    for (int m = 0; m < TM; m++) sum[m] <= tree[m][0];
  end
endmodule
