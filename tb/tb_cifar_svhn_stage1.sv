// tb_cifar_svhn_stage1: the first stage of the CIFAR10 and SVHN feature
// extractors (32x32x3 input, 32 maps of 5x5 kernels, 6-bit data, tanh,
// 2x2 max pooling), built from conv_layer and maxpool_layer. The two
// networks share this topology and differ only in their kernels, so two
// chains are instantiated, one with stand-in weights of each network's
// kernel distribution. Two random frames (the second with gaps) are
// streamed; every 14x14x32 output of both chains is compared with a
// behavioural model at the exact predicted clock.
module tb_cifar_svhn_stage1;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int B = 6, F = B - 1;
  localparam int IW = 32, C = 3, N = 32, K = 5, P = 2;
  localparam int CW = IW - K + 1;   // 28
  localparam int PW = CW / P;       // 14
  localparam int NET = 2;           // 0: CIFAR10, 1: SVHN
  localparam int SEED [NET] = '{21, 22};

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic signed [B-1:0] in_data [C];
  logic in_dv, in_fv;
  logic signed [B-1:0] cdat [NET][N];
  logic signed [B-1:0] pdat [NET][N];
  logic cdv [NET], cfv [NET], pdv [NET], pfv [NET];

  conv_layer #(.B(B), .K(K), .C(C), .N(N), .W(IW), .H(IW), .WSEED(SEED[0]), .WDIST(CIFAR10_DIST)) u_c0 (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data(cdat[0]), .out_dv(cdv[0]), .out_fv(cfv[0]));
  maxpool_layer #(.B(B), .C(N), .P(P), .W(CW), .H(CW)) u_p0 (
    .clk, .rst_n, .in_data(cdat[0]), .in_dv(cdv[0]), .in_fv(cfv[0]),
    .out_data(pdat[0]), .out_dv(pdv[0]), .out_fv(pfv[0]));
  conv_layer #(.B(B), .K(K), .C(C), .N(N), .W(IW), .H(IW), .WSEED(SEED[1]), .WDIST(SVHN_DIST)) u_c1 (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data(cdat[1]), .out_dv(cdv[1]), .out_fv(cfv[1]));
  maxpool_layer #(.B(B), .C(N), .P(P), .W(CW), .H(CW)) u_p1 (
    .clk, .rst_n, .in_data(cdat[1]), .in_dv(cdv[1]), .in_fv(cfv[1]),
    .out_data(pdat[1]), .out_dv(pdv[1]), .out_fv(pfv[1]));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int w [NET][N][C][K][K];
  int bias [NET][N];
  int img [C][IW][IW];
  int t_in [IW][IW];
  int cm [NET][N][CW][CW];
  typedef struct { int t; int v [NET][N]; } exp_t;
  exp_t expq [$];
  int kinds [NET][4];
  int outputs = 0, gaps = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (pdv[0] != pdv[1]) begin failures++; $display("chains out of step"); end
    if (pdv[0]) begin
      exp_t e;
      outputs++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (e.t != cycle) begin failures++; $display("output at %0d expected %0d", cycle, e.t); end
        for (int k = 0; k < NET; k++) for (int n = 0; n < N; n++) begin
          checks++;
          if (int'(pdat[k][n]) != e.v[k][n]) begin
            failures++;
            if (failures < 20) $display("net %0d map %0d got %0d exp %0d", k, n, pdat[k][n], e.v[k][n]);
          end
        end
      end
    end
  end

  task automatic send_frame(input bit with_gaps);
    int gap [IW][IW];
    int t;
    t = cycle;
    for (int r = 0; r < IW; r++) for (int x = 0; x < IW; x++) begin
      for (int c = 0; c < C; c++) img[c][r][x] = rnd_code(B);
      gap[r][x] = 0;
      while (with_gaps && ($urandom % 4 == 0)) gap[r][x]++;
      t += gap[r][x];
      t_in[r][x] = t;
      t++;
    end
    // model
    for (int k = 0; k < NET; k++) for (int n = 0; n < N; n++)
      for (int r = 0; r < CW; r++) for (int x = 0; x < CW; x++) begin
        longint s;
        s = longint'(bias[k][n]) <<< F;
        for (int c = 0; c < C; c++) for (int y = 0; y < K; y++) for (int z = 0; z < K; z++)
          s += img[c][r+y][x+z] * w[k][n][c][y][z];
        cm[k][n][r][x] = tanh_q(s, B);
      end
    for (int r = 0; r < PW; r++) for (int x = 0; x < PW; x++) begin
      exp_t e;
      // pooled pixel completes with conv pixel (2r+1, 2x+1), i.e. input
      // pixel (2r+1+K-1, 2x+1+K-1); conv adds 4 clocks, pooling 2
      e.t = t_in[2*r+K][2*x+K] + 4 + 2;
      for (int k = 0; k < NET; k++) for (int n = 0; n < N; n++) begin
        int m;
        m = cm[k][n][2*r][2*x];
        for (int y = 0; y < P; y++) for (int z = 0; z < P; z++)
          if (cm[k][n][2*r+y][2*x+z] > m) m = cm[k][n][2*r+y][2*x+z];
        e.v[k][n] = m;
      end
      expq.push_back(e);
    end
    in_fv = 1;
    for (int r = 0; r < IW; r++) for (int x = 0; x < IW; x++) begin
      for (int g = 0; g < gap[r][x]; g++) begin in_dv = 0; gaps++; @(negedge clk); end
      in_dv = 1;
      for (int c = 0; c < C; c++) in_data[c] = B'(img[c][r][x]);
      @(negedge clk);
    end
    in_dv = 0;
    in_fv = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k < NET; k++) begin
      for (int q = 0; q < 4; q++) kinds[k][q] = 0;
      for (int n = 0; n < N; n++) begin
        bias[k][n] = gen_bias(SEED[k], n, B);
        for (int c = 0; c < C; c++) for (int y = 0; y < K; y++) for (int z = 0; z < K; z++) begin
          w[k][n][c][y][z] = gen_weight(SEED[k], ((n*C + c)*K + y)*K + z, B,
                                        k == 0 ? CIFAR10_DIST : SVHN_DIST);
          kinds[k][int'(mult_kind(w[k][n][c][y][z]))]++;
        end
      end
      $display("net %0d kinds zero=%0d one=%0d pow2=%0d other=%0d",
               k, kinds[k][0], kinds[k][1], kinds[k][2], kinds[k][3]);
    end
    rst_n = 0; in_dv = 0; in_fv = 0;
    for (int c = 0; c < C; c++) in_data[c] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send_frame(0);
    send_frame(1);
    checks += 2;
    if (outputs != 2 * PW * PW || expq.size() != 0) begin failures++; $display("outputs %0d", outputs); end
    if (gaps == 0) failures++;
    $display("outputs=%0d gaps=%0d", outputs, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
