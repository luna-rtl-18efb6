// luna_pkg: constants and elaboration-time helper functions shared by the LUNA
// qubit-readout datapath (trace capture, integrator, LogicNet classifier).
//
// The defaults below are the fidelity-optimised design point: readout window
// from ADC sample 100 to sample 500, two integration windows, pre-accumulation
// shift 7, post-accumulation shift 1, and a LogicNet of 145, 40, 15 and 1
// neurons with fan-in 7/6/6/8 and 1/2/2/2-bit NEQ inputs.
//
// The trained truth tables and the sparse connectivity of a real LogicNet come
// out of training and are not part of the architecture. This package therefore
// supplies a deterministic stand-in for both: a hash picks gamma distinct
// sources for every neuron, and every neuron's table is the enumeration of a
// small quantised neuron (sign weights of magnitude 1 or 2, a bias and a
// clamped, shifted sum). Replace neq_source() and neq_truth() with the values
// of a trained network to deploy a real classifier; the hardware is unchanged.
package luna_pkg;

  // ---------------- ADC and integrator -------------------------------------
  localparam int unsigned ADC_W        = 14;   // bits per I or Q sample
  localparam int unsigned END_SAMPLE   = 500;  // fixed end of the readout window
  localparam int unsigned START_SAMPLE = 100;  // first sample used
  localparam int unsigned NUM_WIN      = 2;    // non-overlapping windows
  localparam int unsigned SHIFT_M      = 7;    // pre-accumulation right shift
  localparam int unsigned SHIFT_N      = 1;    // post-accumulation right shift

  // ---------------- LogicNet ------------------------------------------------
  localparam int unsigned NUM_LAYERS = 4;      // input, two hidden, output
  localparam int unsigned MAX_LAYERS = 8;      // size of the per-layer arrays
  typedef int unsigned layer_arr_t [MAX_LAYERS];
  // neurons per layer (l0, l1, l2, output)
  localparam layer_arr_t LN_WIDTH  = '{145, 40, 15, 1, 0, 0, 0, 0};
  // fan-in gamma per layer (gamma_i, gamma, gamma, gamma_o)
  localparam layer_arr_t LN_FANIN  = '{7, 6, 6, 8, 0, 0, 0, 0};
  // input bits per fan-in slot (beta_i, beta, beta, beta_o)
  localparam layer_arr_t LN_INBITS = '{1, 2, 2, 2, 0, 0, 0, 0};
  // output bits of the final neuron (its code; the state is its MSB)
  localparam int unsigned LN_OUTBITS = 2;

  // number of bits a layer drives: its neurons times the next layer's input
  // width, or LN_OUTBITS for the last layer
  function automatic int unsigned layer_out_bits(input layer_arr_t inbits,
                                                 input int unsigned nlayers,
                                                 input int unsigned outbits,
                                                 input int unsigned l);
    return (l + 1 < nlayers) ? inbits[l+1] : outbits;
  endfunction

  // ---------------- stand-in for the trained network ------------------------
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] x;
    x = a;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [31:0] neq_hash(input int unsigned layer,
                                           input int unsigned neuron,
                                           input int unsigned slot);
    return mix32(mix32(mix32(layer + 32'h9e3779b9) ^ neuron) ^ slot);
  endfunction

  // Index of the previous-layer neuron (or input bit, for layer 0) that feeds
  // fan-in slot j of neuron n of layer l. The gamma sources of one neuron are
  // distinct: base + j*step modulo n_prev with step <= n_prev/gamma.
  function automatic int unsigned neq_source(input int unsigned l,
                                             input int unsigned n,
                                             input int unsigned j,
                                             input int unsigned n_prev,
                                             input int unsigned fanin);
    int unsigned step_max, base, step;
    step_max = (n_prev / fanin == 0) ? 1 : n_prev / fanin;
    base     = neq_hash(l, n, 32'hFFFF) % n_prev;
    step     = 1 + neq_hash(l, n, 32'hFFFE) % step_max;
    return (base + j * step) % n_prev;
  endfunction

  // Right shift that maps the neuron's sum range onto its output code range.
  function automatic int unsigned neq_shift(input int unsigned fanin,
                                            input int unsigned inbits,
                                            input int unsigned outbits);
    int unsigned mag;
    mag = fanin * ((1 << inbits) - 1) * 2;       // largest |sum| without bias
    return ($clog2(mag) > outbits) ? $clog2(mag) - outbits : 0;
  endfunction

  // Output code of neuron n of layer l for the packed input `code`
  // (slot j occupies bits [j*inbits +: inbits]); sh = neq_shift(...).
  function automatic int unsigned neq_truth(input int unsigned l,
                                            input int unsigned n,
                                            input int unsigned fanin,
                                            input int unsigned inbits,
                                            input int unsigned outbits,
                                            input int unsigned sh,
                                            input int unsigned code);
    int signed sum, v, w, q;
    logic [1:0] h;
    sum = int'(4'(neq_hash(l, n, 32'hFFFD))) - 8; // bias in [-8, 7]
    for (int unsigned j = 0; j < fanin; j++) begin
      h   = 2'(neq_hash(l, n, j));
      v   = 2 * int'((code >> (j * inbits)) & ((1 << inbits) - 1))
            - ((1 << inbits) - 1);               // centred level
      w   = h[1] ? 2 : 1;                        // weight magnitude
      sum = h[0] ? sum - w * v : sum + w * v;    // weight sign
    end
    q   = (sum >>> sh) + (1 << (outbits - 1));
    if (q < 0) q = 0;
    if (q > (1 << outbits) - 1) q = (1 << outbits) - 1;
    return $unsigned(q);
  endfunction

endpackage
