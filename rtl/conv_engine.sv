// conv_engine: one 2D convolution of a KxK neighbourhood with a constant
// kernel, the innermost level of the direct mapping.
//
// Every kernel entry gets its own const_mult, specialised to that weight
// (so zero weights cost nothing), and the K*K products are summed by an
// adder tree into one registered result. This follows the paper's
// convolution engine (K*K separate multipliers feeding one sum). The
// single pipeline register after the sum is this design's choice.
//
// Weights: kernel entry i = ky*K + kx is taken from KERNEL[i*B +: B] when
// WSEED is 0, otherwise from the stand-in generator
// cnn_pkg::gen_weight(WSEED, WBASE + i, B, WDIST).
//
// Interface: win[ky][kx] B-bit signed codes; acc the signed sum of
// products, ce_width(B,K) bits, with 2(B-1) fractional bits.
// Timing: one clock of latency, a new window every clock.
module conv_engine
  import cnn_pkg::*;
#(
  parameter int unsigned      B      = 3,
  parameter int unsigned      K      = 5,
  parameter logic [K*K*B-1:0] KERNEL = '0,
  parameter int unsigned      WSEED  = 1,
  parameter int unsigned      WBASE  = 0,
  parameter wdist_t           WDIST  = LENET5_DIST,
  localparam int unsigned     SW     = ce_width(B, K)
) (
  input  logic                 clk,
  input  logic signed [B-1:0]  win [K][K],
  output logic signed [SW-1:0] acc
);

  logic signed [2*B-1:0] prod [K*K];

  for (genvar i = 0; i < K * K; i++) begin : g_mul
    localparam int WV = (WSEED != 0) ? gen_weight(WSEED, WBASE + i, B, WDIST)
                                     : int'($signed(KERNEL[i*B +: B]));
    const_mult #(.B(B), .WEIGHT(WV)) u_mul (
      .x (win[i / K][i % K]),
      .p (prod[i])
    );
  end

  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < K * K; i++) sum = sum + SW'(prod[i]);
  end

  always_ff @(posedge clk) acc <= sum;

endmodule
