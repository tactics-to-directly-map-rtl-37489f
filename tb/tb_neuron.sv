// tb_neuron: a neuron with C = 3 input channels and 3x3 kernels from the
// stand-in generator, and one with explicit kernels and bias. Random
// neighbourhood sets are applied every clock; each output is compared,
// three clocks later, with bias + sum of integer convolutions passed
// through the rounded real-valued tanh.
module tb_neuron;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int B = 3, K = 3, C = 3;
  localparam int SEED = 5, BASE = 27, NIDX = 4;
  localparam int F = B - 1;
  // explicit neuron: channel c, entry i has weight ((c*9 + i) % 8) - 4
  function automatic logic [C*K*K*B-1:0] kbits();
    logic [C*K*K*B-1:0] v;
    for (int j = 0; j < C*K*K; j++) v[j*B +: B] = B'((j % 8) - 4);
    return v;
  endfunction
  localparam logic [C*K*K*B-1:0] KB = kbits();
  localparam int EBIAS = -3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [B-1:0] win [C][K][K];
  logic signed [B-1:0] y_g, y_e;

  neuron #(.B(B), .K(K), .C(C), .WSEED(SEED), .WBASE(BASE), .NIDX(NIDX), .WDIST(SVHN_DIST))
    u_g (.clk, .win, .y(y_g));
  neuron #(.B(B), .K(K), .C(C), .KERNELS(KB), .BIAS(EBIAS), .WSEED(0))
    u_e (.clk, .win, .y(y_e));

  int checks = 0, failures = 0;
  int exp_g [$], exp_e [$];
  int seen [int];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sg, se;
    for (int t = 0; t < 1000 + NEURON_LATENCY; t++) begin
      @(negedge clk);
      if (t >= NEURON_LATENCY) begin
        int eg, ee;
        eg = exp_g.pop_front(); ee = exp_e.pop_front();
        checks += 2;
        if (int'(y_g) != eg) begin failures++; $display("gen: t=%0d got %0d exp %0d", t, y_g, eg); end
        if (int'(y_e) != ee) begin failures++; $display("expl: t=%0d got %0d exp %0d", t, y_e, ee); end
        seen[ee] = 1;
      end
      sg = longint'(gen_bias(SEED, NIDX, B)) <<< F;
      se = longint'(EBIAS) <<< F;
      for (int c = 0; c < C; c++) for (int y = 0; y < K; y++) for (int x = 0; x < K; x++) begin
        int j;
        win[c][y][x] = B'(rnd_code(B));
        j = c*K*K + y*K + x;
        sg += int'(win[c][y][x]) * gen_weight(SEED, BASE + j, B, SVHN_DIST);
        se += int'(win[c][y][x]) * ((j % 8) - 4);
      end
      exp_g.push_back(tanh_q(sg, B));
      exp_e.push_back(tanh_q(se, B));
    end
    // the explicit neuron must have produced both saturated codes
    checks++;
    if (!seen.exists(3) || !seen.exists(-4)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
