// tanh_act: hyperbolic-tangent activation of a neuron, exact to the
// output quantisation step.
//
// The neuron sum arrives as a signed code with 2F fractional bits
// (F = B-1). The output is the B-bit code nearest to tanh(sum), i.e.
// floor(tanh(sum) * 2^F + 1/2), saturated to -2^F .. 2^F-1.
// Because tanh is monotonic, that output is a step function of the sum
// with 2^B-1 steps: the step from code c to c+1 happens where
// tanh(x) = (c + 1/2) / 2^F, that is at x = atanh((c + 1/2) / 2^F).
// Those thresholds are computed at elaboration (real arithmetic in a
// constant function) and the hardware is 2^B-1 comparators against
// constants plus a population count, followed by one output register.
// The paper only names the activation (tanh); this threshold structure is
// this design's way of realising it.
//
// Interface: sum (SW bits, SW <= 32) in, y (B bits) out.
// Timing: one clock of latency, no enable (the surrounding layer carries
// the data-valid strobe alongside).
module tanh_act #(
  parameter int unsigned B  = 3,
  parameter int unsigned SW = 16
) (
  input  logic                 clk,
  input  logic signed [SW-1:0] sum,
  output logic signed [B-1:0]  y
);

  localparam int unsigned F      = B - 1;
  localparam int unsigned NSTEP  = (1 << B) - 1;
  localparam int          CMIN   = -(1 << F);

  initial begin
    assert (SW <= 32) else $error("tanh_act: SW must be at most 32");
  end

  // ln z for z in [1,2): 2 * sum u^(2k+1)/(2k+1), u = (z-1)/(z+1).
  function automatic real ln_series(input real z);
    real u, u2, t, s;
    u  = (z - 1.0) / (z + 1.0);
    u2 = u * u;
    t  = u;
    s  = 0.0;
    for (int k = 0; k < 60; k++) begin
      s = s + t / real'(2 * k + 1);
      t = t * u2;
    end
    return 2.0 * s;
  endfunction

  // Natural logarithm for z > 0, by range reduction to [1,2).
  function automatic real ln_r(input real z);
    int m;
    m = 0;
    while (z >= 2.0) begin z = z / 2.0; m++; end
    while (z < 1.0)  begin z = z * 2.0; m--; end
    // ln 2 = ln 1.5 + ln 4/3, both inside the series' range
    return ln_series(z) + real'(m) * (ln_series(1.5) + ln_series(4.0 / 3.0));
  endfunction

  // Smallest sum code whose tanh rounds to code CMIN+j+1 or above.
  function automatic int threshold(input int j);
    real yv, xv, sv;
    int  t;
    yv = (real'(CMIN + j) + 0.5) / real'(1 << F);
    xv = 0.5 * ln_r((1.0 + yv) / (1.0 - yv));
    sv = xv * real'(1 << (2 * F));
    t  = $rtoi(sv);                 // truncates toward zero
    if (real'(t) < sv) t = t + 1;   // ceiling
    return t;
  endfunction

  logic signed [31:0] sum32;
  assign sum32 = 32'(sum);

  // One comparator per output step, against an elaboration-time constant.
  logic [NSTEP-1:0] ge;
  for (genvar j = 0; j < NSTEP; j++) begin : g_step
    localparam int TH = threshold(j);
    assign ge[j] = (sum32 >= TH);
  end

  logic [B-1:0] steps;
  always_comb begin
    steps = '0;
    for (int j = 0; j < NSTEP; j++) steps = steps + B'(ge[j]);
  end

  always_ff @(posedge clk) y <= B'(CMIN + int'(steps));

endmodule
