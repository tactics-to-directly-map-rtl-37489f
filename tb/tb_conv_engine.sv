// tb_conv_engine: a 3x3 engine with an explicit kernel holding every
// weight kind (0, +-1, +-2, -4, +-3) and a 5x5 engine with generated
// weights; random windows every clock, results compared with an integer
// convolution one clock later.
module tb_conv_engine;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int B = 3;
  localparam int KA = 3, KB = 5;
  // kernel entry i at bits [i*3 +: 3]; entries listed from i = 8 down to 0
  localparam int KERN [9] = '{0, 1, -1, 2, -2, -4, 3, -3, 1};
  localparam logic [KA*KA*B-1:0] KBITS = {3'(KERN[8]), 3'(KERN[7]), 3'(KERN[6]),
                                          3'(KERN[5]), 3'(KERN[4]), 3'(KERN[3]),
                                          3'(KERN[2]), 3'(KERN[1]), 3'(KERN[0])};
  localparam int SEED = 11, BASE = 100;

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [B-1:0] wa [KA][KA];
  logic signed [B-1:0] wb [KB][KB];
  logic signed [ce_width(B, KA)-1:0] acc_a;
  logic signed [ce_width(B, KB)-1:0] acc_b;

  conv_engine #(.B(B), .K(KA), .KERNEL(KBITS), .WSEED(0)) u_a (.clk, .win(wa), .acc(acc_a));
  conv_engine #(.B(B), .K(KB), .WSEED(SEED), .WBASE(BASE), .WDIST(CIFAR10_DIST)) u_b (.clk, .win(wb), .acc(acc_b));

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb, nz;
    nz = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      ea = 0; eb = 0;
      for (int y = 0; y < KA; y++) for (int x = 0; x < KA; x++) begin
        wa[y][x] = B'(rnd_code(B));
        ea += int'(wa[y][x]) * KERN[y*KA + x];
      end
      for (int y = 0; y < KB; y++) for (int x = 0; x < KB; x++) begin
        wb[y][x] = B'(rnd_code(B));
        eb += int'(wb[y][x]) * gen_weight(SEED, BASE + y*KB + x, B, CIFAR10_DIST);
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (int'(acc_a) != ea) begin failures++; $display("A: got %0d exp %0d", acc_a, ea); end
      if (int'(acc_b) != eb) begin failures++; $display("B: got %0d exp %0d", acc_b, eb); end
      if (eb != 0) nz++;
    end
    checks++;
    if (nz == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
