// ls_pkg: types, sizes and constant tables shared by the LeNet-5 dataflow
// accelerator with an engine-free sparse first layer.
//
// The layer geometry is the classic LeNet-5 on a 32x32 single-channel image
// (C1 5x5x6, pool, C2 5x5x16, pool, C3 5x5x120, F1 120->84, F2 84->10).
// Weights are 4-bit signed, activations 4-bit unsigned, the input pixel is
// 8-bit unsigned. These sizes and the folding factors below are this
// design's own choice; the names of the layers (C1, C1M, C1P, ...) follow
// the per-layer breakdown of the accelerator.
//
// Trained weights are not available, so every weight and threshold is a
// deterministic function of (seed, row, column). The functions are constant
// functions: they are evaluated at elaboration to fill ROMs and, for the
// sparse unrolled layer, to decide which connections exist at all.
package ls_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned IN_BITS  = 8;   // input pixel (unsigned)
  localparam int unsigned W_BITS   = 4;   // weight (signed)
  localparam int unsigned A_BITS   = 4;   // activation (unsigned)
  localparam int unsigned ACC_BITS = 20;  // accumulator (signed)
  localparam int unsigned N_THR    = (1 << A_BITS) - 1; // thresholds per channel

  // --------------------------------------------------------- layer geometry
  localparam int unsigned IMG_DIM  = 32;
  localparam int unsigned K        = 5;
  localparam int unsigned C1_CH    = 6;
  localparam int unsigned C2_CH    = 16;
  localparam int unsigned C3_CH    = 120;
  localparam int unsigned F1_OUT   = 84;
  localparam int unsigned F2_OUT   = 10;

  // ----------------------------------------------------------- table seeds
  localparam int unsigned SEED_C1 = 1;
  localparam int unsigned SEED_C2 = 2;
  localparam int unsigned SEED_C3 = 3;
  localparam int unsigned SEED_F1 = 4;
  localparam int unsigned SEED_F2 = 5;

  // Percentage of C1 weights kept after unstructured pruning.
  localparam int unsigned C1_DENSITY = 30;

  // Threshold spacing per layer, sized to the spread of each layer's sums.
  localparam int unsigned TSTEP_C1 = 160;
  localparam int unsigned TSTEP_C2 = 48;
  localparam int unsigned TSTEP_C3 = 80;
  localparam int unsigned TSTEP_F1 = 40;

  typedef logic signed [ACC_BITS-1:0] acc_t;
  typedef logic        [A_BITS-1:0]   act_t;
  typedef logic signed [W_BITS-1:0]   wgt_t;

  // 32-bit integer mixer (xorshift-multiply), used as the table generator.
  function automatic int unsigned mix(input int unsigned a);
    int unsigned x;
    x = a;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int unsigned hash3(input int unsigned seed,
                                        input int unsigned r,
                                        input int unsigned c);
    return mix(mix(mix(seed * 32'h9e3779b9 + 1) + r) + c);
  endfunction

  // Weight of output row r, input column c: uniform in [-8,7], and forced to
  // zero (pruned) unless the row/column falls in the kept DENSITY percent.
  function automatic int weight(input int unsigned seed, input int unsigned r,
                                input int unsigned c, input int unsigned density);
    int unsigned h;
    h = hash3(seed, r, c);
    if ((h >> 8) % 100 >= density) return 0;
    return int'(h & 32'hf) - 8;
  endfunction

  // Threshold k (0..N_THR-1) of output channel ch. Ascending in k with a
  // per-channel offset of less than half a step, centred on zero.
  function automatic int threshold(input int unsigned seed, input int unsigned ch,
                                   input int unsigned k, input int unsigned step);
    int off;
    off = int'(hash3(seed + 1000, ch, 0) % step) - int'(step / 2);
    return (int'(k) - int'(N_THR / 2)) * int'(step) + off;
  endfunction

endpackage
