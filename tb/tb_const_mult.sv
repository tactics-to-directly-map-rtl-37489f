// tb_const_mult: checks every constant multiplier kind exhaustively.
// One const_mult per possible 3-bit weight (-4..3: zero, one, power of two,
// other) and a set of 6-bit weights; every input code is applied and the
// product compared with the integer product.
module tb_const_mult;
  import cnn_pkg::*;

  localparam int B3 = 3;
  localparam int B6 = 6;
  localparam int NW3 = 8;
  localparam int W6 [8] = '{0, 1, -1, 16, -32, 5, -27, 31};

  logic signed [B3-1:0]   x3;
  logic signed [2*B3-1:0] p3 [NW3];
  logic signed [B6-1:0]   x6;
  logic signed [2*B6-1:0] p6 [8];

  for (genvar i = 0; i < NW3; i++) begin : g3
    const_mult #(.B(B3), .WEIGHT(i - 4)) u (.x(x3), .p(p3[i]));
  end
  for (genvar i = 0; i < 8; i++) begin : g6
    const_mult #(.B(B6), .WEIGHT(W6[i])) u (.x(x6), .p(p6[i]));
  end

  int checks = 0, failures = 0;
  int kinds [4] = '{0, 0, 0, 0};

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NW3; i++) kinds[int'(mult_kind(i - 4))]++;
    for (int v = -4; v < 4; v++) begin
      x3 = B3'(v);
      #1;
      for (int i = 0; i < NW3; i++) begin
        checks++;
        if (int'(p3[i]) != v * (i - 4)) begin
          failures++;
          $display("B=3 w=%0d x=%0d: got %0d", i - 4, v, p3[i]);
        end
      end
    end
    for (int v = -32; v < 32; v++) begin
      x6 = B6'(v);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(p6[i]) != v * W6[i]) begin
          failures++;
          $display("B=6 w=%0d x=%0d: got %0d", W6[i], v, p6[i]);
        end
      end
    end
    // all four kinds must have been exercised
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (kinds[k] == 0) failures++;
    end
    $display("kinds zero=%0d one=%0d pow2=%0d other=%0d", kinds[0], kinds[1], kinds[2], kinds[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
