// maxpool_layer: non-overlapping P x P max pooling of C feature maps.
//
// Each channel has its own neighbourhood extractor with window P and
// stride P; the maximum of each window is computed by a comparator tree
// and registered. The paper names the pooling layers (mpool) and maps
// them directly like the convolutions, but does not describe their
// insides: window size 2, stride 2 and this structure are this design's
// choices (the usual LeNet5 pooling).
//
// Interface: C streams of W x H pixels in, C streams of (W/P) x (H/P)
// pixels out (rows and columns that do not fill a window are dropped).
// Timing: an output pixel appears 2 clocks after the input pixel that
// completed its window; out_fv is in_fv delayed 2 clocks. One pixel per
// clock, no back-pressure.
module maxpool_layer #(
  parameter int unsigned B = 3,
  parameter int unsigned C = 20,
  parameter int unsigned P = 2,
  parameter int unsigned W = 24,
  parameter int unsigned H = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [B-1:0] in_data [C],
  input  logic                in_dv,
  input  logic                in_fv,
  output logic signed [B-1:0] out_data [C],
  output logic                out_dv,
  output logic                out_fv
);

  logic signed [B-1:0] win [C][P][P];
  logic [C-1:0]        ne_dv, ne_fv;

  for (genvar c = 0; c < C; c++) begin : g_ch
    neigh_extractor #(.B(B), .K(P), .W(W), .H(H), .STRIDE(P)) u_ne (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_data (in_data[c]),
      .in_dv   (in_dv),
      .in_fv   (in_fv),
      .win     (win[c]),
      .out_dv  (ne_dv[c]),
      .out_fv  (ne_fv[c])
    );

    logic signed [B-1:0] mx;
    always_comb begin
      mx = win[c][0][0];
      for (int i = 0; i < P; i++)
        for (int j = 0; j < P; j++)
          if (win[c][i][j] > mx) mx = win[c][i][j];
    end

    always_ff @(posedge clk) out_data[c] <= mx;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_dv <= 1'b0;
      out_fv <= 1'b0;
    end else begin
      out_dv <= ne_dv[0];
      out_fv <= ne_fv[0];
    end
  end

  // The extractors run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               ne_dv == {C{ne_dv[0]}} && ne_fv == {C{ne_fv[0]}})
    else $error("maxpool_layer: extractors out of step");

endmodule
