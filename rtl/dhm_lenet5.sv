// dhm_lenet5: the LeNet5 feature extractor mapped directly onto hardware,
//   28x28 input -> conv1 (20 maps, 5x5) -> tanh -> 2x2 max pool
//               -> conv2 (50 maps, 5x5, 20 channels) -> tanh -> 2x2 max pool
//               -> 50 maps of 4x4.
//
// Every layer is a fully parallel conv_layer or maxpool_layer and the
// layers are chained as streams, so the whole network runs as one
// pipeline on the pixel stream: one input pixel per clock, no external
// memory, no back-pressure; only line buffers hold data. The layer sizes
// and the 3-bit data/weight width are those the paper reports for LeNet5.
// The activation sits inside each neuron, before the pooling; because tanh
// is monotonic and the pooling takes a maximum, this gives the same result
// as the conv+mpool+tanh order in which the layers are often listed.
// The fully connected classifier of LeNet5 is not part of this block.
//
// Weights: stand-in deterministic weights (seeds WSEED1, WSEED2) with the
// share of zero / one / power-of-two / other weights reported for the
// trained LeNet5. Trained weights go in through conv_layer's WEIGHTS and
// BIASES parameters with WSEED set to 0.
//
// Interface: in_data/in_dv/in_fv, a raster-order B-bit image stream with
// pixel-valid and frame-valid (frame-valid low between frames restarts the
// position counters); out_data[n] one pixel of each of the N2 output maps,
// qualified by out_dv, framed by out_fv.
// Timing: latency from the input pixel that completes the last window of
// the frame to the last output is 4 + 2 + 4 + 2 = 12 clocks.
module dhm_lenet5
  import cnn_pkg::*;
#(
  parameter int unsigned B      = 3,
  parameter int unsigned IN_W   = 28,
  parameter int unsigned IN_H   = 28,
  parameter int unsigned N1     = 20,
  parameter int unsigned K1     = 5,
  parameter int unsigned N2     = 50,
  parameter int unsigned K2     = 5,
  parameter int unsigned P      = 2,
  parameter int unsigned WSEED1 = 1,
  parameter int unsigned WSEED2 = 2,
  parameter wdist_t      WDIST  = LENET5_DIST
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [B-1:0] in_data,
  input  logic                in_dv,
  input  logic                in_fv,
  output logic signed [B-1:0] out_data [N2],
  output logic                out_dv,
  output logic                out_fv
);

  localparam int unsigned C1_W = IN_W - K1 + 1;   // 24
  localparam int unsigned C1_H = IN_H - K1 + 1;
  localparam int unsigned P1_W = C1_W / P;        // 12
  localparam int unsigned P1_H = C1_H / P;
  localparam int unsigned C2_W = P1_W - K2 + 1;   // 8
  localparam int unsigned C2_H = P1_H - K2 + 1;

  logic signed [B-1:0] l0_data [1];
  logic signed [B-1:0] c1_data [N1];
  logic signed [B-1:0] p1_data [N1];
  logic signed [B-1:0] c2_data [N2];
  logic c1_dv, c1_fv, p1_dv, p1_fv, c2_dv, c2_fv;

  assign l0_data[0] = in_data;

  conv_layer #(
    .B(B), .K(K1), .C(1), .N(N1), .W(IN_W), .H(IN_H),
    .WSEED(WSEED1), .WDIST(WDIST)
  ) u_conv1 (
    .clk(clk), .rst_n(rst_n),
    .in_data(l0_data), .in_dv(in_dv), .in_fv(in_fv),
    .out_data(c1_data), .out_dv(c1_dv), .out_fv(c1_fv)
  );

  maxpool_layer #(.B(B), .C(N1), .P(P), .W(C1_W), .H(C1_H)) u_pool1 (
    .clk(clk), .rst_n(rst_n),
    .in_data(c1_data), .in_dv(c1_dv), .in_fv(c1_fv),
    .out_data(p1_data), .out_dv(p1_dv), .out_fv(p1_fv)
  );

  conv_layer #(
    .B(B), .K(K2), .C(N1), .N(N2), .W(P1_W), .H(P1_H),
    .WSEED(WSEED2), .WDIST(WDIST)
  ) u_conv2 (
    .clk(clk), .rst_n(rst_n),
    .in_data(p1_data), .in_dv(p1_dv), .in_fv(p1_fv),
    .out_data(c2_data), .out_dv(c2_dv), .out_fv(c2_fv)
  );

  maxpool_layer #(.B(B), .C(N2), .P(P), .W(C2_W), .H(C2_H)) u_pool2 (
    .clk(clk), .rst_n(rst_n),
    .in_data(c2_data), .in_dv(c2_dv), .in_fv(c2_fv),
    .out_data(out_data), .out_dv(out_dv), .out_fv(out_fv)
  );

endmodule
