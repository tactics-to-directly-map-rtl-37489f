// cnn_pkg: types, constants and elaboration-time functions shared by the
// directly-mapped CNN datapath.
//
// Number format. Every activation and every kernel weight is a B-bit two's
// complement code with F = B-1 fractional bits, i.e. a value in [-1, 1).
// A product therefore has 2F fractional bits and the neuron sums keep that
// scale; the activation brings the sum back to the B-bit format. The paper
// fixes B (3 bits for LeNet5, 6 for CIFAR10/SVHN) but not the position of
// the binary point: F = B-1 is this design's choice.
//
// Multiplier kinds. A kernel weight is a constant, so each multiplier is
// specialised to it: 0 removes the multiplier, +-1 is a wire (or a
// negation), +-2^k is a shift, anything else is a generic multiplier built
// from logic. mult_kind() makes that classification.
//
// Stand-in weights. Trained kernels are not published with the design, so
// gen_weight() and gen_bias() produce a deterministic pseudo-random set
// whose share of zero, one, power-of-two and other weights follows a given
// distribution (per ten thousand). The LeNet5, CIFAR10 and SVHN shares
// below are the ones reported for the trained networks. To map a trained
// network, pass the real weights through the WEIGHTS/BIASES parameters of
// conv_layer with WSEED = 0.
package cnn_pkg;

  typedef enum logic [1:0] {
    MK_ZERO  = 2'd0,   // multiplier removed
    MK_ONE   = 2'd1,   // wire or negation
    MK_POW2  = 2'd2,   // shift (and negation)
    MK_OTHER = 2'd3    // logic-element multiplier
  } mult_kind_e;

  // Share of weight kinds, in units of 1/10000. The remainder is "other".
  typedef struct packed {
    int unsigned zero_pm;
    int unsigned one_pm;
    int unsigned pow2_pm;
  } wdist_t;

  localparam wdist_t LENET5_DIST  = '{zero_pm: 8859, one_pm: 631,  pow2_pm: 5};
  localparam wdist_t CIFAR10_DIST = '{zero_pm: 3378, one_pm: 4532, pow2_pm: 1640};
  localparam wdist_t SVHN_DIST    = '{zero_pm: 3714, one_pm: 4650, pow2_pm: 1362};

  // Pipeline depth of a neuron: conv engine register, sum register,
  // activation register.
  localparam int unsigned NEURON_LATENCY = 3;

  function automatic bit is_pow2(input int unsigned v);
    return (v != 0) && ((v & (v - 1)) == 0);
  endfunction

  function automatic mult_kind_e mult_kind(input int w);
    int unsigned a;
    a = (w < 0) ? int'(-w) : int'(w);
    if (a == 0)            return MK_ZERO;
    else if (a == 1)       return MK_ONE;
    else if (is_pow2(a))   return MK_POW2;
    else                   return MK_OTHER;
  endfunction

  function automatic int unsigned log2u(input int unsigned v);
    int unsigned r;
    r = 0;
    while ((v >> r) > 1) r++;
    return r;
  endfunction

  // 32-bit integer hash (xorshift-multiply mix), elaboration-time only.
  function automatic logic [31:0] hash32(input logic [31:0] seed,
                                          input logic [31:0] idx);
    logic [31:0] h;
    h = seed * 32'h9E37_79B1 ^ (idx + 32'h7F4A_7C15) * 32'h85EB_CA6B;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Deterministic stand-in weight code for a B-bit kernel entry.
  function automatic int gen_weight(input int unsigned seed,
                                    input int unsigned idx,
                                    input int unsigned b,
                                    input wdist_t wd);
    logic [31:0] h;
    int unsigned r, sel, maxmag, n_pow2, n_other, k;
    bit neg;
    h      = hash32(seed, idx);
    r      = 32'(h[15:0]) % 10000;
    sel    = 32'(h[31:17]);
    neg    = h[16];
    maxmag = (1 << (b - 1)) - 1;          // largest positive code
    // powers of two >= 2 with a positive code: 2 .. 2^(b-2); plus -2^(b-1)
    n_pow2  = (b >= 3) ? (b - 2) : 0;
    n_other = 0;
    for (int unsigned m = 3; m <= maxmag; m++)
      if (!is_pow2(m)) n_other++;
    if (r < wd.zero_pm) begin
      return 0;
    end else if (r < wd.zero_pm + wd.one_pm || b < 2) begin
      return neg ? -1 : 1;
    end else if (r < wd.zero_pm + wd.one_pm + wd.pow2_pm || n_other == 0) begin
      if (b < 3) return neg ? -1 : 1;
      k = sel % (n_pow2 + 1);
      if (k == n_pow2) return -(1 << (b - 1));  // most negative code
      return neg ? -(2 << k) : (2 << k);
    end else begin
      k = sel % n_other;
      for (int unsigned m = 3; m <= maxmag; m++) begin
        if (!is_pow2(m)) begin
          if (k == 0) return neg ? -int'(m) : int'(m);
          k--;
        end
      end
      return 0;
    end
  endfunction

  // Stand-in bias code: small values around zero.
  function automatic int gen_bias(input int unsigned seed,
                                  input int unsigned n,
                                  input int unsigned b);
    logic [31:0] h;
    int unsigned lim;
    h   = hash32(seed ^ 32'h5BD1_E995, n);
    lim = (1 << (b - 1));
    return int'(h % (2 * lim)) - int'(lim);
  endfunction

  // Width of a convolution engine sum: K*K products of 2B bits.
  function automatic int unsigned ce_width(input int unsigned b, input int unsigned k);
    return 2 * b + $clog2(k * k);
  endfunction

  // Width of a neuron sum: C engine sums plus the bias.
  function automatic int unsigned neuron_width(input int unsigned b, input int unsigned k,
                                               input int unsigned c);
    return ce_width(b, k) + $clog2(c + 1) + 1;
  endfunction

endpackage
