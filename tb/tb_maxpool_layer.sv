// tb_maxpool_layer: 2x2/stride-2 max pooling of 3 channels of a 9x6 map
// (the odd last column is dropped). Two random frames, the second with
// pixel-valid gaps; every pooled pixel is compared with the maximum of its
// window, in raster order and exactly 2 clocks after the completing pixel.
module tb_maxpool_layer;
  import cnn_ref_pkg::*;

  localparam int B = 3, C = 3, P = 2, W = 9, H = 6;
  localparam int LAT = 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic signed [B-1:0] in_data [C];
  logic signed [B-1:0] out_data [C];
  logic in_dv, in_fv, out_dv, out_fv;

  maxpool_layer #(.B(B), .C(C), .P(P), .W(W), .H(H)) dut (
    .clk, .rst_n, .in_data, .in_dv, .in_fv, .out_data, .out_dv, .out_fv);

  int checks = 0, failures = 0;
  int img [C][H][W];
  int cycle = 0;
  typedef struct { int t; int v [C]; } exp_t;
  exp_t expq [$];
  int got = 0, gaps = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_dv) begin
    exp_t e;
    got++;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (e.t != cycle) begin failures++; $display("output at %0d expected %0d", cycle, e.t); end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(out_data[c]) != e.v[c]) begin failures++; $display("c=%0d got %0d exp %0d", c, out_data[c], e.v[c]); end
      end
    end
  end

  task automatic send_frame(input bit with_gaps);
    for (int c = 0; c < C; c++) for (int r = 0; r < H; r++) for (int x = 0; x < W; x++)
      img[c][r][x] = rnd_code(B);
    @(negedge clk);
    in_fv = 1;
    for (int r = 0; r < H; r++) for (int x = 0; x < W; x++) begin
      while (with_gaps && ($urandom % 3 == 0)) begin in_dv = 0; gaps++; @(negedge clk); end
      in_dv = 1;
      for (int c = 0; c < C; c++) in_data[c] = B'(img[c][r][x]);
      if (r % P == P - 1 && x % P == P - 1) begin
        exp_t e;
        e.t = cycle + LAT;
        for (int c = 0; c < C; c++) begin
          e.v[c] = -1000;
          for (int y = 0; y < P; y++) for (int z = 0; z < P; z++)
            if (img[c][r-y][x-z] > e.v[c]) e.v[c] = img[c][r-y][x-z];
        end
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
    repeat (5) @(negedge clk);
    checks++;
    if (got != 2 * (W / P) * (H / P) || expq.size() != 0 || gaps == 0) begin failures++; $display("count %0d", got); end
    $display("outputs=%0d gaps=%0d", got, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
