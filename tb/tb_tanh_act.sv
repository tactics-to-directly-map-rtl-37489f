// tb_tanh_act: compares the threshold-based tanh with the real-valued
// $tanh rounded to the output code, for 3-bit and 6-bit outputs, over an
// exhaustive window around zero plus random large sums, and checks the
// one-clock latency.
module tb_tanh_act;
  import cnn_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [15:0] s3;
  logic signed [2:0]  y3;
  logic signed [19:0] s6;
  logic signed [5:0]  y6;

  tanh_act #(.B(3), .SW(16)) u3 (.clk(clk), .sum(s3), .y(y3));
  tanh_act #(.B(6), .SW(20)) u6 (.clk(clk), .sum(s6), .y(y6));

  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int a, input int b);
    int e3, e6;
    @(negedge clk);
    s3 = 16'(a);
    s6 = 20'(b);
    e3 = tanh_q(longint'(a), 3);
    e6 = tanh_q(longint'(b), 6);
    @(posedge clk);   // sampled here
    #1;               // one clock of latency: result now visible
    checks += 2;
    if (int'(y3) != e3) begin
      failures++;
      $display("B=3 sum=%0d: got %0d expected %0d", a, y3, e3);
    end
    if (int'(y6) != e6) begin
      failures++;
      $display("B=6 sum=%0d: got %0d expected %0d", b, y6, e6);
    end
    if (e3 == 3) sat_hi++;
    if (e3 == -4) sat_lo++;
  endtask

  initial begin
    for (int v = -200; v <= 200; v++) apply(v, v * 40);
    for (int v = -5000; v <= 5000; v++) apply(v / 8, v);
    for (int i = 0; i < 2000; i++)
      apply(int'($urandom_range(0, 65535)) - 32768, int'($urandom_range(0, 1048575)) - 524288);
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
