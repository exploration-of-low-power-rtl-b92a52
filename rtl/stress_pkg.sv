// stress_pkg: shared types, configuration tables and coefficient generator of
// the bespoke stress classifiers.
//
// The six configurations below are the most accurate classifier of each
// algorithm for the two stress datasets (WESAD, AffectiveROAD): feature count,
// arithmetic precision, pruning sparsity and combinational latency are the
// published figures. The classifiers run from a 2 kHz clock (500 us period);
// eval_cycles() turns each published latency into the number of clock periods
// the top waits before it samples the combinational result.
//
// The trained coefficients of those classifiers were not published. Every
// classifier therefore takes its coefficients as parameters, and their
// defaults come from placeholder_coef()/placeholder_uint(), a fixed integer
// hash of (seed, layer, row, column). Replacing the defaults with trained,
// quantized values turns the same RTL into the real classifier. The hidden
// layer width of the MLPs and the depth of the decision trees were not
// published either; MLP_HIDDEN and DT_DEPTH are this design's choices.
package stress_pkg;

  typedef enum logic [0:0] {
    WESAD          = 1'b0,
    AFFECTIVE_ROAD = 1'b1
  } dataset_e;

  typedef enum logic [1:0] {
    MODEL_DT  = 2'd0,
    MODEL_SVM = 2'd1,
    MODEL_MLP = 2'd2
  } model_e;

  // Binary task: baseline/rest (0) against stress (1).
  localparam int N_CLASSES     = 2;
  // 2 kHz synthesis clock.
  localparam int CLK_PERIOD_US = 500;
  // Not published: one hidden layer of this many ReLU neurons.
  localparam int MLP_HIDDEN    = 16;
  // Not published: complete binary tree of this depth (15 comparators).
  localparam int DT_DEPTH      = 4;

  // Number of selected input features of each configuration.
  function automatic int n_features(dataset_e d, model_e m);
    if (d == WESAD) return 25;
    case (m)
      MODEL_MLP: return 30;
      MODEL_SVM: return 20;
      default:   return 15;
    endcase
  endfunction

  // Bit width of features and coefficients of each configuration.
  function automatic int precision(dataset_e d, model_e m);
    if (d == WESAD) return (m == MODEL_DT) ? 8 : 10;
    return (m == MODEL_MLP) ? 8 : 10;
  endfunction

  // Published latency of the combinational classifier, in microseconds.
  function automatic int latency_us(dataset_e d, model_e m);
    if (d == WESAD)
      case (m)
        MODEL_MLP: return 6300;
        MODEL_SVM: return 700;
        default:   return 140;
      endcase
    case (m)
      MODEL_MLP: return 97000;
      MODEL_SVM: return 15000;
      default:   return 7100;
    endcase
  endfunction

  // Clock periods needed to cover the latency (at least one).
  function automatic int eval_cycles(dataset_e d, model_e m);
    int c = (latency_us(d, m) + CLK_PERIOD_US - 1) / CLK_PERIOD_US;
    return (c < 1) ? 1 : c;
  endfunction

  // Unstructured L2-norm pruning ratio of the two MLPs (percent of weights zero).
  function automatic int sparsity_pct(dataset_e d);
    return (d == WESAD) ? 90 : 50;
  endfunction

  // Seed of the placeholder coefficients of one configuration.
  function automatic int unsigned model_seed(dataset_e d, model_e m);
    return 32'(101 + 16 * int'(d) + int'(m));
  endfunction

  // 32-bit integer hash (multiply / xor-shift rounds, arithmetic modulo 2^32).
  function automatic int unsigned mix(int unsigned a, int unsigned b,
                                      int unsigned c, int unsigned d);
    int unsigned h;
    h = (a * 32'h9E3779B1) ^ (b * 32'h85EBCA77) ^ (c * 32'hC2B2AE3D) ^ (d * 32'h27D4EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Signed W-bit placeholder coefficient; zero (pruned) with probability
  // sparsity/100.
  function automatic int placeholder_coef(int unsigned seed, int layer, int row, int col,
                                          int w, int sparsity);
    int unsigned h = mix(seed, 32'(layer), 32'(row), 32'(col));
    if (int'(h % 100) < sparsity) return 0;
    return int'((h >> 8) % (32'd1 << w)) - (1 << (w - 1));
  endfunction

  // Unsigned W-bit placeholder value (thresholds, biases, leaf classes).
  function automatic int placeholder_uint(int unsigned seed, int layer, int row, int col, int w);
    return int'((mix(seed, 32'(layer), 32'(row), 32'(col)) >> 8) % (32'd1 << w));
  endfunction

  // ---------------------------------------------------------------------------
  // Default coefficient sets. Each returns the packed image of a parameter
  // array (element k at bits [k*w +: w], row-major) in a DEFAULT_BITS-wide
  // vector; the modules cut it to their parameter's width.
  localparam int DEFAULT_BITS = 8192;
  typedef logic [DEFAULT_BITS-1:0] default_vec_t;

  // rows x cols signed weights of one layer.
  function automatic default_vec_t coef_vec(int unsigned seed, int layer, int rows, int cols,
                                            int w, int sparsity);
    default_vec_t v = '0;
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++)
        for (int b = 0; b < w; b++)
          v[(r * cols + c) * w + b] = 1'(placeholder_coef(seed, layer, r, c, w, sparsity) >> b);
    return v;
  endfunction

  // n biases of one layer, in [-2^(bw-3), 2^(bw-3)), i.e. within +-1/4 of the
  // product range.
  function automatic default_vec_t bias_vec(int unsigned seed, int layer, int n, int bw);
    default_vec_t v = '0;
    longint b;
    for (int k = 0; k < n; k++) begin
      b = longint'(placeholder_uint(seed, layer, k, 0, bw - 2)) - (longint'(1) << (bw - 3));
      for (int i = 0; i < bw; i++) v[k * bw + i] = b[i];
    end
    return v;
  endfunction

  // Decision tree: feature index of each of n nodes (iw bits each).
  function automatic default_vec_t dt_idx_vec(int unsigned seed, int n, int nf, int iw);
    default_vec_t v = '0;
    for (int k = 0; k < n; k++)
      for (int b = 0; b < iw; b++)
        v[k * iw + b] = 1'((placeholder_uint(seed, 0, k, 0, 16) % nf) >> b);
    return v;
  endfunction

  // Decision tree: threshold of each of n nodes (fw bits each).
  function automatic default_vec_t dt_thr_vec(int unsigned seed, int n, int fw);
    default_vec_t v = '0;
    for (int k = 0; k < n; k++)
      for (int b = 0; b < fw; b++)
        v[k * fw + b] = 1'(placeholder_uint(seed, 1, k, 0, fw) >> b);
    return v;
  endfunction

  // Decision tree: class of each of n leaves (cw bits each). Leaf 0 is class
  // 0 and the last leaf the last class, so every tree predicts both outcomes.
  function automatic default_vec_t dt_leaf_vec(int unsigned seed, int n, int cw, int ncls);
    default_vec_t v = '0;
    int cls;
    for (int k = 0; k < n; k++) begin
      cls = (k == 0) ? 0 : (k == n - 1) ? ncls - 1 : placeholder_uint(seed, 2, k, 0, 16) % ncls;
      for (int b = 0; b < cw; b++) v[k * cw + b] = 1'(cls >> b);
    end
    return v;
  endfunction

endpackage
