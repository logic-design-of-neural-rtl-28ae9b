// nn_pkg -- constants and the embedded network constants shared by the
// weight-embedded neural-network logic.
//
// All activations and weights are 8-bit signed integers, as in the
// quantisation-aware-trained networks the design implements. The weights,
// biases and requantisation scale factors are not inputs of the circuit: they
// are elaboration-time constants that the multipliers and requantisers are
// specialised for. Trained values are not available here, so weight(),
// bias() and req_mult() return a deterministic placeholder network built from
// an integer hash of (layer, neuron, input):
//   h            = hash32(seed, layer, neuron, input)
//   weight       = 0 when h[3:0] < PRUNE_SIXTEENTHS (unstructured pruning),
//                  otherwise the signed byte h[15:8] shifted right by 3,
//                  a value in -16..15
//   bias         = the signed 9-bit value h[24:16], a value in -256..255
//   req_mult     = 1024 + h[9:0], used with REQ_SHIFT = 16,
//                  a scale factor between 1/64 and 1/32
// The placeholder magnitudes are chosen so that, for random full-range
// inputs, most sums fit the 14-bit accumulator and a few saturate.
// To implement a trained network, replace the bodies of these three functions
// with look-ups of the trained constants; nothing else changes.
package nn_pkg;

  // Bit width of activations (inputs and outputs of every neuron).
  parameter int unsigned ACT_W = 8;
  // Bit width of the quantised weights.
  parameter int unsigned W_W = 8;
  // Bit width of the requantiser's embedded multiplier and its shift.
  parameter int unsigned REQ_MULT_W = 16;
  parameter int unsigned REQ_SHIFT = 16;
  // Largest number of layers a network may have, and the type of the list of
  // layer sizes: entry 0 is the number of network inputs, entry l+1 the
  // number of neurons of layer l; entries past the last layer are unused.
  parameter int unsigned MAX_LAYERS = 8;
  typedef int unsigned sizes_t [MAX_LAYERS+1];

  // Placeholder pruning ratio, in sixteenths of all weights.
  parameter int unsigned PRUNE_SIXTEENTHS = 6;

  // Largest and smallest value of a signed number of width w.
  function automatic longint smax(int unsigned w);
    return (longint'(1) <<< (w - 1)) - 1;
  endfunction

  function automatic longint smin(int unsigned w);
    return -(longint'(1) <<< (w - 1));
  endfunction

  // Integer mixing function (xorshift-multiply) for the placeholder network.
  function automatic logic [31:0] hash32(int unsigned seed, int unsigned layer,
                                         int unsigned neuron, int unsigned inp);
    logic [31:0] h;
    h = 32'h9E37_79B9 ^ seed;
    h = (h ^ layer) * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = (h ^ neuron) * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    h = (h ^ inp) * 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h1656_67B1;
    h = h ^ (h >> 13);
    return h;
  endfunction

  // Embedded weight of input `inp` of neuron `neuron` in layer `layer`.
  function automatic logic signed [W_W-1:0] weight(int unsigned seed, int unsigned layer,
                                                    int unsigned neuron, int unsigned inp);
    logic [31:0] h;
    logic signed [7:0] b;
    h = hash32(seed, layer, neuron, inp);
    if (h[3:0] < PRUNE_SIXTEENTHS[3:0]) return '0;
    b = signed'(h[15:8]);
    return W_W'(b >>> 3);
  endfunction

  // Embedded bias of neuron `neuron` in layer `layer` (accumulator units).
  function automatic int bias(int unsigned seed, int unsigned layer, int unsigned neuron);
    logic [31:0] h;
    h = hash32(seed, layer, neuron, 32'hFFFF_FFFF);
    return int'(signed'(h[24:16]));
  endfunction

  // Embedded requantisation multiplier of layer `layer`; the scale factor is
  // req_mult / 2**REQ_SHIFT.
  function automatic int unsigned req_mult(int unsigned seed, int unsigned layer);
    logic [31:0] h;
    h = hash32(seed, layer, 32'hFFFF_FFFE, 32'hFFFF_FFFE);
    return 1024 + int'(h[9:0]);
  endfunction

  // Canonical-signed-digit recoding of a constant: returns, per bit position,
  // whether the digit is +1 (pos) or -1 (neg). A constant multiplier needs one
  // adder or subtractor per non-zero digit.
  function automatic logic [63:0] csd_pos(longint c, int unsigned w);
    logic [63:0] p;
    longint r;
    p = '0;
    r = c;
    for (int k = 0; k < 64; k++) begin
      if (k < int'(w) + 1 && (r & 1) != 0) begin
        if ((r & 3) == 1) begin
          p[k] = 1'b1;
          r = r - 1;
        end else begin
          r = r + 1;
        end
      end
      r = r >>> 1;
    end
    return p;
  endfunction

  function automatic logic [63:0] csd_neg(longint c, int unsigned w);
    logic [63:0] n;
    longint r;
    n = '0;
    r = c;
    for (int k = 0; k < 64; k++) begin
      if (k < int'(w) + 1 && (r & 1) != 0) begin
        if ((r & 3) == 1) begin
          r = r - 1;
        end else begin
          n[k] = 1'b1;
          r = r + 1;
        end
      end
      r = r >>> 1;
    end
    return n;
  endfunction

endpackage
