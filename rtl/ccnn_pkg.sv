// ccnn_pkg: shared sizes, number formats and pipeline-depth arithmetic of the
// drift-chamber cluster-counting network.
//
// The network maps one truncated drift-cell waveform of 500 samples to a single
// regressed number of primary ionisation clusters. Its topology (500 inputs,
// dense layers of 8, 32 and 8 ReLU units, one linear output) and the number
// format of weights and activations (10 bits, 5 of them fractional) follow the
// published model. The output width, the adder-tree register spacing and the
// latency bookkeeping below are this design's own choices.
package ccnn_pkg;

  // Number format: two's complement, FX_W bits, FX_FRAC fractional bits.
  localparam int unsigned FX_W    = 10;
  localparam int unsigned FX_FRAC = 5;

  // Network topology.
  localparam int unsigned N_SAMPLES = 500;  // samples per waveform (network inputs)
  localparam int unsigned N_H1      = 8;    // first hidden layer
  localparam int unsigned N_H2      = 32;   // second hidden layer
  localparam int unsigned N_H3      = 8;    // third hidden layer

  // Width of the regressed cluster count, same FX_FRAC fractional bits.
  // Wider than FX_W so that counts above 16 do not clip.
  localparam int unsigned CNT_W = 16;

  // Adder-tree levels evaluated per clock cycle between pipeline registers.
  localparam int unsigned LEVELS_PER_STAGE = 4;

  typedef logic signed [FX_W-1:0]  fx_t;   // sample, weight, bias, activation
  typedef logic signed [CNT_W-1:0] cnt_t;  // regressed cluster count

  // Number of pairwise-add levels needed to reduce n operands to one: ceil(log2(n)).
  function automatic int unsigned tree_levels(int unsigned n);
    int unsigned l = 0;
    while ((1 << l) < n) l++;
    return l;
  endfunction

  // Pipeline registers inside an adder tree of n operands. A register follows
  // every lps-th level except the last, whose output is registered by the layer.
  function automatic int unsigned tree_regs(int unsigned n, int unsigned lps);
    int unsigned l = tree_levels(n);
    return (l == 0) ? 0 : (l - 1) / lps;
  endfunction

  // Clock cycles from a layer's input to its registered output: one for the
  // product registers, the tree's internal registers, one for the output register.
  function automatic int unsigned layer_latency(int unsigned n, int unsigned lps);
    return 2 + tree_regs(n, lps);
  endfunction

endpackage
