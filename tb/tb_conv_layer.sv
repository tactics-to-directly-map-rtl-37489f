// tb_conv_layer: a layer with C = 2 input channels, 3x3 kernels and
// N = 3 neurons using generated weights, and a twin with N = 2 and
// explicit WEIGHTS/BIASES. Two random frames (the second with pixel-valid
// gaps) are streamed; every output pixel of every map is compared with an
// integer reference convolution + bias + rounded tanh, in raster order and
// exactly 4 clocks after the pixel that completed its window.
module tb_conv_layer;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int B = 3, K = 3, C = 2, NG = 3, NE = 2, W = 7, H = 5, F = B - 1;
  localparam int SEED = 9;
  localparam int LAT = 1 + NEURON_LATENCY;

  function automatic logic [NE*C*K*K*B-1:0] wbits();
    logic [NE*C*K*K*B-1:0] v;
    for (int j = 0; j < NE*C*K*K; j++) v[j*B +: B] = B'(((j * 5) % 8) - 4);
    return v;
  endfunction
  localparam logic [NE*C*K*K*B-1:0] WE = wbits();
  localparam logic [NE*B-1:0]       BE = {3'(2), 3'(-1)};   // n=1: 2, n=0: -1

  function automatic int wexp(input int n, input int c, input int y, input int x, input bit gen);
    int j;
    j = ((n*C + c)*K + y)*K + x;
    return gen ? gen_weight(SEED, j, B, CIFAR10_DIST) : (((j * 5) % 8) - 4);
  endfunction
  function automatic int bexp(input int n, input bit gen);
    return gen ? gen_bias(SEED, n, B) : (n == 0 ? -1 : 2);
  endfunction

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic signed [B-1:0] in_data [C];
  logic in_dv, in_fv;
  logic signed [B-1:0] og [NG];
  logic signed [B-1:0] oe [NE];
  logic dv_g, fv_g, dv_e, fv_e;

  conv_layer #(.B(B), .K(K), .C(C), .N(NG), .W(W), .H(H), .WSEED(SEED), .WDIST(CIFAR10_DIST)) u_g (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data(og), .out_dv(dv_g), .out_fv(fv_g));
  conv_layer #(.B(B), .K(K), .C(C), .N(NE), .W(W), .H(H), .WSEED(0), .WEIGHTS(WE), .BIASES(BE)) u_e (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data(oe), .out_dv(dv_e), .out_fv(fv_e));

  int checks = 0, failures = 0;
  int img [C][H][W];
  int cycle = 0;
  typedef struct { int t; int vg [NG]; int ve [NE]; } exp_t;
  exp_t expq [$];
  int got = 0, gaps = 0, fv_hi = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (dv_g != dv_e || fv_g != fv_e) begin failures++; $display("strobes differ"); end
    if (fv_g) fv_hi++;
    if (dv_g) begin
      exp_t e;
      got++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (e.t != cycle) begin failures++; $display("output at %0d expected %0d", cycle, e.t); end
        for (int n = 0; n < NG; n++) begin
          checks++;
          if (int'(og[n]) != e.vg[n]) begin failures++; $display("gen n=%0d got %0d exp %0d", n, og[n], e.vg[n]); end
        end
        for (int n = 0; n < NE; n++) begin
          checks++;
          if (int'(oe[n]) != e.ve[n]) begin failures++; $display("expl n=%0d got %0d exp %0d", n, oe[n], e.ve[n]); end
        end
      end
    end
  end

  function automatic int ref_out(input int n, input int r, input int c0, input bit gen);
    longint s;
    s = longint'(bexp(n, gen)) <<< F;
    for (int c = 0; c < C; c++) for (int y = 0; y < K; y++) for (int x = 0; x < K; x++)
      s += img[c][r+y][c0+x] * wexp(n, c, y, x, gen);
    return tanh_q(s, B);
  endfunction

  task automatic send_frame(input bit with_gaps);
    for (int c = 0; c < C; c++) for (int r = 0; r < H; r++) for (int x = 0; x < W; x++)
      img[c][r][x] = rnd_code(B);
    @(negedge clk);
    in_fv = 1;
    for (int r = 0; r < H; r++) for (int x = 0; x < W; x++) begin
      while (with_gaps && ($urandom % 3 == 0)) begin in_dv = 0; gaps++; @(negedge clk); end
      in_dv = 1;
      for (int c = 0; c < C; c++) in_data[c] = B'(img[c][r][x]);
      if (r >= K - 1 && x >= K - 1) begin
        exp_t e;
        e.t = cycle + LAT;
        for (int n = 0; n < NG; n++) e.vg[n] = ref_out(n, r - K + 1, x - K + 1, 1);
        for (int n = 0; n < NE; n++) e.ve[n] = ref_out(n, r - K + 1, x - K + 1, 0);
        expq.push_back(e);
      end
      @(negedge clk);
    end
    in_dv = 0;
    @(negedge clk);
    in_fv = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; in_dv = 0; in_fv = 0;
    for (int c = 0; c < C; c++) in_data[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    send_frame(0);
    send_frame(1);
    repeat (8) @(negedge clk);
    checks += 2;
    if (got != 2 * (W - K + 1) * (H - K + 1) || expq.size() != 0) begin failures++; $display("count %0d", got); end
    if (gaps == 0 || fv_hi == 0) failures++;
    $display("outputs=%0d gaps=%0d", got, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
