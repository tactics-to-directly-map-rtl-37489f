// tb_neigh_extractor: streams random frames with random pixel-valid gaps
// into a 3x3 extractor (stride 1) and a 2x2 extractor (stride 2) and checks
// every emitted window against the stored image, the number of windows per
// frame, their raster order and the one-clock latency. Two frames are sent,
// with frame-valid low in between, to check the counter restart.
module tb_neigh_extractor;
  import cnn_ref_pkg::*;

  localparam int B = 3, W = 7, H = 5;
  localparam int KA = 3, SA = 1;
  localparam int KB = 2, SB = 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic signed [B-1:0] in_data;
  logic in_dv, in_fv;
  logic signed [B-1:0] win_a [KA][KA];
  logic signed [B-1:0] win_b [KB][KB];
  logic dv_a, fv_a, dv_b, fv_b;

  neigh_extractor #(.B(B), .K(KA), .W(W), .H(H), .STRIDE(SA)) u_a (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .win(win_a), .out_dv(dv_a), .out_fv(fv_a));
  neigh_extractor #(.B(B), .K(KB), .W(W), .H(H), .STRIDE(SB)) u_b (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .win(win_b), .out_dv(dv_b), .out_fv(fv_b));

  int checks = 0, failures = 0;
  int img [H][W];
  // expected output positions (top-left of window), in order, and the
  // cycle at which each must appear
  int exp_a_r [$], exp_a_c [$], exp_a_t [$];
  int exp_b_r [$], exp_b_c [$], exp_b_t [$];
  int cycle = 0;
  int got_a = 0, got_b = 0, gaps = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (dv_a) begin
      int r, c, t;
      got_a++;
      checks++;
      if (exp_a_r.size() == 0) begin
        failures++; $display("A: unexpected window");
      end else begin
        r = exp_a_r.pop_front(); c = exp_a_c.pop_front(); t = exp_a_t.pop_front();
        if (t != cycle) begin failures++; $display("A: window at cycle %0d, expected %0d", cycle, t); end
        for (int y = 0; y < KA; y++) for (int x = 0; x < KA; x++) begin
          checks++;
          if (int'(win_a[y][x]) != img[r+y][c+x]) begin
            failures++; $display("A: (%0d,%0d)[%0d][%0d] got %0d exp %0d", r, c, y, x, win_a[y][x], img[r+y][c+x]);
          end
        end
      end
    end
    if (dv_b) begin
      int r, c, t;
      got_b++;
      checks++;
      if (exp_b_r.size() == 0) begin
        failures++; $display("B: unexpected window");
      end else begin
        r = exp_b_r.pop_front(); c = exp_b_c.pop_front(); t = exp_b_t.pop_front();
        if (t != cycle) begin failures++; $display("B: window at cycle %0d, expected %0d", cycle, t); end
        for (int y = 0; y < KB; y++) for (int x = 0; x < KB; x++) begin
          checks++;
          if (int'(win_b[y][x]) != img[r+y][c+x]) begin
            failures++; $display("B: (%0d,%0d) mismatch", r, c);
          end
        end
      end
    end
  end

  task automatic send_frame(input bit with_gaps);
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[r][c] = rnd_code(B);
    @(negedge clk);
    in_fv = 1;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      while (with_gaps && ($urandom % 3 == 0)) begin
        in_dv = 0; gaps++;
        @(negedge clk);
      end
      in_dv = 1;
      in_data = B'(img[r][c]);
      // window completed by this pixel: output on the next clock edge + 1
      if (r >= KA - 1 && c >= KA - 1) begin
        exp_a_r.push_back(r - KA + 1); exp_a_c.push_back(c - KA + 1); exp_a_t.push_back(cycle + 1);
      end
      if (r >= KB - 1 && c >= KB - 1 && (r - KB + 1) % SB == 0 && (c - KB + 1) % SB == 0) begin
        exp_b_r.push_back(r - KB + 1); exp_b_c.push_back(c - KB + 1); exp_b_t.push_back(cycle + 1);
      end
      @(negedge clk);
    end
    in_dv = 0;
    @(negedge clk);
    in_fv = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; in_dv = 0; in_fv = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    send_frame(0);
    send_frame(1);
    repeat (5) @(negedge clk);
    checks += 3;
    if (got_a != 2 * (W - KA + 1) * (H - KA + 1)) begin failures++; $display("A count %0d", got_a); end
    if (got_b != 2 * ((W - KB) / SB + 1) * ((H - KB) / SB + 1)) begin failures++; $display("B count %0d", got_b); end
    if (exp_a_r.size() != 0 || exp_b_r.size() != 0 || gaps == 0) failures++;
    $display("windows A=%0d B=%0d, input gaps=%0d", got_a, got_b, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
