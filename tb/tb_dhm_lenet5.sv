// tb_dhm_lenet5: end-to-end test of the LeNet5 feature extractor at its
// default (full) size, 28x28 input, 20 and 50 feature maps.
//
// Three random frames are streamed: the first with pixel-valid high every
// clock, the second right behind it (frame-valid low for a single clock)
// with random pixel-valid gaps, the third after a long pause. A
// behavioural model (integer convolutions, rounded real tanh, maxima)
// computes every intermediate map; all 50 x 4 x 4 outputs of each frame
// are compared with it, in raster order, each at the exact clock predicted
// from the arrival clocks of the input pixels and the documented layer
// latencies (conv 4, pool 2).
// It also counts, and requires at least once, each mechanism of the
// design: all four multiplier kinds among the mapped weights, positive and
// negative activation saturation, border windows dropped, pooling
// decimation, input gaps, back-to-back frames, one pixel per clock.
module tb_dhm_lenet5;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int B = 3, F = B - 1;
  localparam int IW = 28, K = 5, P = 2;
  localparam int N1 = 20, N2 = 50;
  localparam int C1W = IW - K + 1;       // 24
  localparam int P1W = C1W / P;          // 12
  localparam int C2W = P1W - K + 1;      // 8
  localparam int P2W = C2W / P;          // 4
  localparam int NFRAMES = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic signed [B-1:0] in_data;
  logic in_dv, in_fv;
  logic signed [B-1:0] out_data [N2];
  logic out_dv, out_fv;

  dhm_lenet5 dut (.clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data, .out_dv, .out_fv);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // weights of the two layers, as the design generates them
  int w1 [N1][K][K];
  int b1 [N1];
  int w2 [N2][N1][K][K];
  int b2 [N2];

  // reference maps and the clock at which each pixel is produced
  int img [IW][IW];
  int t_in [IW][IW];
  int c1 [N1][C1W][C1W];
  int p1 [N1][P1W][P1W];
  int c2 [N2][C2W][C2W];
  int t_c1 [C1W][C1W], t_p1 [P1W][P1W], t_c2 [C2W][C2W];

  typedef struct { int t; int v [N2]; } exp_t;
  exp_t expq [$];

  // mechanism counters
  int kind_cnt [4] = '{0, 0, 0, 0};
  int sat_pos = 0, sat_neg = 0, border_drop = 0, pool_drop = 0;
  int gaps = 0, b2b_frames = 0, full_rate_frames = 0, out_frames = 0, outputs = 0;
  int c1_seen = 0, p1_seen = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  logic out_fv_q = 0;
  always @(posedge clk) if (rst_n) begin
    out_fv_q <= out_fv;
    if (out_fv && !out_fv_q) out_frames++;
    if (dut.c1_dv) c1_seen++;
    if (dut.p1_dv) p1_seen++;
    if (out_dv) begin
      exp_t e;
      outputs++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output at %0d", cycle); end
      else begin
        e = expq.pop_front();
        if (e.t != cycle) begin failures++; $display("output at %0d expected %0d", cycle, e.t); end
        for (int n = 0; n < N2; n++) begin
          checks++;
          if (int'(out_data[n]) != e.v[n]) begin
            failures++;
            if (failures < 20) $display("map %0d got %0d exp %0d", n, out_data[n], e.v[n]);
          end
        end
      end
    end
  end

  // behavioural model of the whole network for the current frame
  task automatic model_frame();
    for (int n = 0; n < N1; n++)
      for (int r = 0; r < C1W; r++) for (int c = 0; c < C1W; c++) begin
        longint s;
        s = longint'(b1[n]) <<< F;
        for (int y = 0; y < K; y++) for (int x = 0; x < K; x++)
          s += img[r+y][c+x] * w1[n][y][x];
        c1[n][r][c] = tanh_q(s, B);
        if (c1[n][r][c] == (1 << F) - 1) sat_pos++;
        if (c1[n][r][c] == -(1 << F)) sat_neg++;
      end
    for (int r = 0; r < C1W; r++) for (int c = 0; c < C1W; c++)
      t_c1[r][c] = t_in[r+K-1][c+K-1] + 4;
    for (int n = 0; n < N1; n++)
      for (int r = 0; r < P1W; r++) for (int c = 0; c < P1W; c++) begin
        int m;
        m = c1[n][2*r][2*c];
        for (int y = 0; y < P; y++) for (int x = 0; x < P; x++)
          if (c1[n][2*r+y][2*c+x] > m) m = c1[n][2*r+y][2*c+x];
        p1[n][r][c] = m;
      end
    for (int r = 0; r < P1W; r++) for (int c = 0; c < P1W; c++)
      t_p1[r][c] = t_c1[2*r+1][2*c+1] + 2;
    for (int n = 0; n < N2; n++)
      for (int r = 0; r < C2W; r++) for (int c = 0; c < C2W; c++) begin
        longint s;
        s = longint'(b2[n]) <<< F;
        for (int ch = 0; ch < N1; ch++)
          for (int y = 0; y < K; y++) for (int x = 0; x < K; x++)
            s += p1[ch][r+y][c+x] * w2[n][ch][y][x];
        c2[n][r][c] = tanh_q(s, B);
      end
    for (int r = 0; r < C2W; r++) for (int c = 0; c < C2W; c++)
      t_c2[r][c] = t_p1[r+K-1][c+K-1] + 4;
    for (int r = 0; r < P2W; r++) for (int c = 0; c < P2W; c++) begin
      exp_t e;
      e.t = t_c2[2*r+1][2*c+1] + 2;
      for (int n = 0; n < N2; n++) begin
        int m;
        m = c2[n][2*r][2*c];
        for (int y = 0; y < P; y++) for (int x = 0; x < P; x++)
          if (c2[n][2*r+y][2*c+x] > m) m = c2[n][2*r+y][2*c+x];
        e.v[n] = m;
      end
      expq.push_back(e);
    end
    border_drop += IW * IW - C1W * C1W;
    pool_drop   += C1W * C1W - P1W * P1W;
  endtask

  // The gap pattern is drawn first, so that the arrival clock of every
  // pixel, and from it the clock of every output, is known before the
  // frame is streamed.
  task automatic send_frame(input bit with_gaps, input int idle_after);
    int gap [IW][IW];
    int t;
    t = cycle;
    for (int r = 0; r < IW; r++) for (int c = 0; c < IW; c++) begin
      img[r][c] = rnd_code(B);
      gap[r][c] = 0;
      while (with_gaps && ($urandom % 4 == 0)) gap[r][c]++;
      t += gap[r][c];
      t_in[r][c] = t;
      t++;
    end
    if (t_in[IW-1][IW-1] - t_in[0][0] == IW * IW - 1) full_rate_frames++;
    model_frame();
    in_fv = 1;
    for (int r = 0; r < IW; r++) for (int c = 0; c < IW; c++) begin
      for (int g = 0; g < gap[r][c]; g++) begin in_dv = 0; gaps++; @(negedge clk); end
      in_dv = 1;
      in_data = B'(img[r][c]);
      checks++;
      if (cycle != t_in[r][c]) begin failures++; $display("stimulus out of step"); end
      @(negedge clk);
    end
    in_dv = 0;
    in_fv = 0;
    repeat (idle_after) @(negedge clk);
  endtask

  initial begin
    for (int n = 0; n < N1; n++) begin
      b1[n] = gen_bias(1, n, B);
      for (int y = 0; y < K; y++) for (int x = 0; x < K; x++) begin
        w1[n][y][x] = gen_weight(1, (n*K + y)*K + x, B, LENET5_DIST);
        kind_cnt[int'(mult_kind(w1[n][y][x]))]++;
      end
    end
    for (int n = 0; n < N2; n++) begin
      b2[n] = gen_bias(2, n, B);
      for (int ch = 0; ch < N1; ch++)
        for (int y = 0; y < K; y++) for (int x = 0; x < K; x++) begin
          w2[n][ch][y][x] = gen_weight(2, ((n*N1 + ch)*K + y)*K + x, B, LENET5_DIST);
          kind_cnt[int'(mult_kind(w2[n][ch][y][x]))]++;
        end
    end

    rst_n = 0; in_dv = 0; in_fv = 0; in_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send_frame(0, 1);      // full rate, then frame-valid low for one clock
    b2b_frames++;
    send_frame(1, 60);     // with gaps, then a long pause
    send_frame(0, 60);

    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    checks++;
    if (outputs != NFRAMES * N2 / N2 * P2W * P2W) begin failures++; $display("outputs %0d", outputs); end
    checks++;
    if (c1_seen != NFRAMES * C1W * C1W || p1_seen != NFRAMES * P1W * P1W) begin
      failures++; $display("inner counts c1=%0d p1=%0d", c1_seen, p1_seen);
    end
    checks++;
    if (out_frames != NFRAMES) begin failures++; $display("frames out %0d", out_frames); end

    $display("multiplier kinds: zero=%0d one=%0d pow2=%0d other=%0d",
             kind_cnt[0], kind_cnt[1], kind_cnt[2], kind_cnt[3]);
    $display("saturation +%0d -%0d, border pixels dropped %0d, pooled away %0d",
             sat_pos, sat_neg, border_drop, pool_drop);
    $display("input gaps %0d, back-to-back frames %0d, full-rate frames %0d, frames out %0d",
             gaps, b2b_frames, full_rate_frames, out_frames);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (kind_cnt[k] == 0) begin failures++; $display("multiplier kind %0d never mapped", k); end
    end
    checks += 7;
    if (sat_pos == 0)          begin failures++; $display("no positive saturation"); end
    if (sat_neg == 0)          begin failures++; $display("no negative saturation"); end
    if (border_drop == 0)      begin failures++; $display("no border drop"); end
    if (pool_drop == 0)        begin failures++; $display("no pooling"); end
    if (gaps == 0)             begin failures++; $display("no input gaps"); end
    if (b2b_frames == 0)       begin failures++; $display("no back-to-back frames"); end
    if (full_rate_frames == 0) begin failures++; $display("no full-rate frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
