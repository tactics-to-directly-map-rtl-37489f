// neigh_extractor: turns a raster-order pixel stream of one feature map
// into a stream of KxK neighbourhoods (windows), the input of the
// convolution engines and of max pooling.
//
// How it works: K-1 line buffers, each one image line (W pixels) long,
// hold the previous K-1 rows. At every valid input pixel, the column
// (current pixel plus the K-1 pixels above it, read from the line buffers
// at the same address) is shifted into a KxK register window, and the line
// buffers shift down by one row at that address. A window is emitted only
// when it lies entirely inside the image (no padding), and only every
// STRIDE-th row and column (STRIDE = 1 for convolution, STRIDE = K for
// non-overlapping pooling). Row and column counters restart whenever the
// frame-valid input is low. Reset (rst_n, active low) is synchronous.
// The paper states only that dataflow convolution engines use line
// buffers (after Shoup's pipelined 2D convolution); the "valid" border
// handling, the stride option and the dv/fv strobes are this design's.
//
// Interface: in_data/in_dv/in_fv (pixel, pixel valid, frame valid); the
// input may pause (in_dv low) at any time. win[ky][kx] is the pixel at
// row r-(K-1)+ky, column c-(K-1)+kx when the pixel at (r,c) completed it.
// Timing: win and out_dv are registered, one clock after the completing
// pixel; out_fv is in_fv delayed by one clock. One pixel per clock.
module neigh_extractor #(
  parameter int unsigned B      = 3,
  parameter int unsigned K      = 5,
  parameter int unsigned W      = 28,
  parameter int unsigned H      = 28,
  parameter int unsigned STRIDE = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [B-1:0] in_data,
  input  logic                in_dv,
  input  logic                in_fv,
  output logic signed [B-1:0] win [K][K],
  output logic                out_dv,
  output logic                out_fv
);

  localparam int unsigned CW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned RW = (H > 1) ? $clog2(H + 1) : 1;

  initial begin
    assert (K >= 1 && K <= W && K <= H) else $error("neigh_extractor: K out of range");
  end

  logic [CW-1:0] col;
  logic [RW-1:0] row;

  // column of K pixels ending at the current one: colv[K-1] is the current
  // row, colv[K-1-i] the row i lines above
  logic signed [B-1:0] colv [K];

  assign colv[K-1] = in_data;

  if (K > 1) begin : g_lb
    logic signed [B-1:0] lb [K-1][W];   // lb[i] holds row r-1-i
    for (genvar i = 1; i < K; i++) begin : g_rd
      assign colv[K-1-i] = lb[i-1][col];
    end
    always_ff @(posedge clk) begin
      if (in_dv && in_fv) begin
        lb[0][col] <= in_data;
        for (int i = 1; i < K - 1; i++) lb[i][col] <= lb[i-1][col];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_dv && in_fv) begin
      for (int ky = 0; ky < K; ky++) begin
        for (int kx = 0; kx < K - 1; kx++) win[ky][kx] <= win[ky][kx+1];
        win[ky][K-1] <= colv[ky];
      end
    end
  end

  // a window is complete at (row, col) once K-1 rows and columns precede it
  logic in_rows, in_cols, on_grid;
  assign in_rows = (32'(row) >= K - 1);
  assign in_cols = (32'(col) >= K - 1);
  assign on_grid = ((32'(row) - (K - 1)) % STRIDE == 0) &&
                   ((32'(col) - (K - 1)) % STRIDE == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col    <= '0;
      row    <= '0;
      out_dv <= 1'b0;
      out_fv <= 1'b0;
    end else begin
      out_fv <= in_fv;
      out_dv <= in_fv && in_dv && in_rows && in_cols && on_grid;
      if (!in_fv) begin
        col <= '0;
        row <= '0;
      end else if (in_dv) begin
        if (32'(col) == W - 1) begin
          col <= '0;
          if (32'(row) < H) row <= row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
