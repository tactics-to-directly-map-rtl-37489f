// conv_layer: a fully parallel convolutional layer with N output feature
// maps, C input channels and KxK kernels, mapped directly to hardware.
//
// Every input channel has one neighbourhood extractor (line buffers plus
// a KxK window); its window is fanned out to the N neurons, each of which
// holds C convolution engines, so N*C engines and N*C*K*K constant
// multipliers work concurrently on every input pixel. This is the layer
// structure of the paper (all neurons, all convolutions and all
// multipliers instantiated separately). Sharing one extractor per input
// channel among the neurons is this design's choice.
//
// Weights: with WSEED = 0 the kernels come from WEIGHTS, entry
// ((n*C + c)*K*K + ky*K + kx) at bit offset that index times B, and the
// biases from BIASES (entry n at n*B). With WSEED != 0 deterministic
// stand-in weights with the distribution WDIST are generated instead.
//
// Interface: C pixel streams sharing in_dv/in_fv, raster order, W x H;
// N output streams of (W-K+1) x (H-K+1) pixels sharing out_dv/out_fv.
// No padding. No back-pressure: the layer takes one pixel per clock.
// A neuron whose kernels are all zero keeps only its bias; its output is
// then constant, which synthesis reports as constant output bits. With the
// sparse LeNet5 weight shares this happens for a few neurons of conv1.
//
// Timing: an output pixel appears 1 + NEURON_LATENCY = 4 clocks after the
// input pixel that completed its window; out_fv is in_fv delayed 4 clocks.
module conv_layer
  import cnn_pkg::*;
#(
  parameter int unsigned          B       = 3,
  parameter int unsigned          K       = 5,
  parameter int unsigned          C       = 1,
  parameter int unsigned          N       = 20,
  parameter int unsigned          W       = 28,
  parameter int unsigned          H       = 28,
  parameter int unsigned          WSEED   = 1,
  parameter wdist_t               WDIST   = LENET5_DIST,
  parameter logic [N*C*K*K*B-1:0] WEIGHTS = '0,
  parameter logic [N*B-1:0]       BIASES  = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [B-1:0] in_data [C],
  input  logic                in_dv,
  input  logic                in_fv,
  output logic signed [B-1:0] out_data [N],
  output logic                out_dv,
  output logic                out_fv
);

  logic signed [B-1:0] win [C][K][K];
  logic [C-1:0]        ne_dv, ne_fv;

  for (genvar c = 0; c < C; c++) begin : g_ne
    neigh_extractor #(.B(B), .K(K), .W(W), .H(H), .STRIDE(1)) u_ne (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_data (in_data[c]),
      .in_dv   (in_dv),
      .in_fv   (in_fv),
      .win     (win[c]),
      .out_dv  (ne_dv[c]),
      .out_fv  (ne_fv[c])
    );
  end

  for (genvar n = 0; n < N; n++) begin : g_neuron
    neuron #(
      .B       (B),
      .K       (K),
      .C       (C),
      .KERNELS (WEIGHTS[n*C*K*K*B +: C*K*K*B]),
      .BIAS    (int'($signed(BIASES[n*B +: B]))),
      .WSEED   (WSEED),
      .WBASE   (n * C * K * K),
      .NIDX    (n),
      .WDIST   (WDIST)
    ) u_neuron (
      .clk (clk),
      .win (win),
      .y   (out_data[n])
    );
  end

  // All extractors see the same strobes, so channel 0 speaks for all.
  // The strobes follow the neurons' pipeline.
  logic [NEURON_LATENCY-1:0] dv_pipe, fv_pipe;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dv_pipe <= '0;
      fv_pipe <= '0;
    end else begin
      dv_pipe <= {dv_pipe[NEURON_LATENCY-2:0], ne_dv[0]};
      fv_pipe <= {fv_pipe[NEURON_LATENCY-2:0], ne_fv[0]};
    end
  end
  assign out_dv = dv_pipe[NEURON_LATENCY-1];
  assign out_fv = fv_pipe[NEURON_LATENCY-1];

  // The extractors run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               ne_dv == {C{ne_dv[0]}} && ne_fv == {C{ne_fv[0]}})
    else $error("conv_layer: extractors out of step");

endmodule
