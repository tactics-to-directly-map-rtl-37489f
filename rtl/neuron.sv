// neuron: one output feature map of a convolutional layer,
//   f_n = act( b_n + sum_c conv(phi_c, w_nc) ).
//
// C convolution engines, one per input channel, each with its own constant
// kernel; their sums and the bias are added, and the result goes through
// the tanh activation. This is the paper's neuron structure. The bias is a
// B-bit code like the weights, aligned to the product scale by a left
// shift of B-1 bits (the paper does not give the bias format).
//
// Weights: kernel of channel c is KERNELS[c*K*K*B +: K*K*B] when WSEED is
// 0, otherwise stand-in weights with indices WBASE + c*K*K + i; the bias is
// BIAS, or gen_bias(WSEED, NIDX, B).
//
// Interface: win[c][ky][kx] neighbourhoods of the C input channels, y the
// B-bit output pixel.
// Timing: cnn_pkg::NEURON_LATENCY = 3 clocks (engine, sum, activation),
// one new neighbourhood set per clock.
module neuron
  import cnn_pkg::*;
#(
  parameter int unsigned        B       = 3,
  parameter int unsigned        K       = 5,
  parameter int unsigned        C       = 20,
  parameter logic [C*K*K*B-1:0] KERNELS = '0,
  parameter int                 BIAS    = 0,
  parameter int unsigned        WSEED   = 1,
  parameter int unsigned        WBASE   = 0,
  parameter int unsigned        NIDX    = 0,
  parameter wdist_t             WDIST   = LENET5_DIST
) (
  input  logic                clk,
  input  logic signed [B-1:0] win [C][K][K],
  output logic signed [B-1:0] y
);

  localparam int unsigned SWE = ce_width(B, K);
  localparam int unsigned SWN = neuron_width(B, K, C);
  localparam int unsigned F   = B - 1;
  localparam int          BV  = (WSEED != 0) ? gen_bias(WSEED, NIDX, B) : BIAS;
  localparam logic signed [SWN-1:0] BIAS_ALIGNED = SWN'(BV) <<< F;

  logic signed [SWE-1:0] ce [C];

  for (genvar c = 0; c < C; c++) begin : g_ce
    conv_engine #(
      .B      (B),
      .K      (K),
      .KERNEL (KERNELS[c*K*K*B +: K*K*B]),
      .WSEED  (WSEED),
      .WBASE  (WBASE + c * K * K),
      .WDIST  (WDIST)
    ) u_ce (
      .clk (clk),
      .win (win[c]),
      .acc (ce[c])
    );
  end

  logic signed [SWN-1:0] sum_d, sum_q;
  always_comb begin
    sum_d = BIAS_ALIGNED;
    for (int c = 0; c < C; c++) sum_d = sum_d + SWN'(ce[c]);
  end

  always_ff @(posedge clk) sum_q <= sum_d;

  tanh_act #(.B(B), .SW(SWN)) u_act (
    .clk (clk),
    .sum (sum_q),
    .y   (y)
  );

endmodule
