// stress_ref_pkg: behavioural reference of the bespoke classifiers, used by
// the testbenches to work out expected outputs.
//
// The functions rebuild the default coefficients from the same placeholder
// generator the RTL uses (stress_pkg::placeholder_coef/_uint with the same
// seed and index convention) and then evaluate the models in plain integer
// arithmetic: loops over all weights (pruned ones included) for the weighted
// sums, and a sequential root-to-leaf walk for the decision tree. Nothing of
// the RTL's structure (nonzero compaction, adder trees, parallel comparator
// bank, path decode) is reused.
package stress_ref_pkg;
  import stress_pkg::*;

  // Events seen by the MLP reference, for coverage counts.
  int unsigned n_relu_clamp = 0;
  int unsigned n_saturate   = 0;

  function automatic longint bias_of(int unsigned seed, int layer, int k, int bw);
    return longint'(placeholder_uint(seed, layer, k, 0, bw - 2)) - (longint'(1) << (bw - 3));
  endfunction

  function automatic int argmax_ref(longint s[]);
    int best = 0;
    foreach (s[i]) if (s[i] > s[best]) best = i;
    return best;
  endfunction

  // Linear SVM: one score per class.
  function automatic int svm_ref(int unsigned seed, int fw, int cw, int f[], ref longint score[]);
    score = new[N_CLASSES];
    for (int c = 0; c < N_CLASSES; c++) begin
      score[c] = bias_of(seed, 1, c, fw + cw);
      foreach (f[i]) score[c] += longint'(f[i]) * placeholder_coef(seed, 0, c, i, cw, 0);
    end
    return argmax_ref(score);
  endfunction

  // MLP: ReLU hidden layer requantized to fw bits, then output layer. The
  // default coefficients prune the hidden layer only (see mlp_classifier).
  function automatic int mlp_ref(int unsigned seed, int fw, int cw, int frac, int nh,
                                 int sparsity, int f[], ref int hid[], ref longint score[]);
    longint acc;
    longint amax = (longint'(1) << fw) - 1;
    hid   = new[nh];
    score = new[N_CLASSES];
    for (int h = 0; h < nh; h++) begin
      acc = bias_of(seed, 2, h, fw + cw);
      foreach (f[i]) acc += longint'(f[i]) * placeholder_coef(seed, 0, h, i, cw, sparsity);
      if (acc <= 0) begin
        hid[h] = 0;
        n_relu_clamp++;
      end else begin
        acc = acc / (longint'(1) << frac);      // acc > 0: same as a right shift
        if (acc > amax) begin
          acc = amax;
          n_saturate++;
        end
        hid[h] = int'(acc);
      end
    end
    for (int c = 0; c < N_CLASSES; c++) begin
      score[c] = bias_of(seed, 3, c, fw + cw);
      for (int h = 0; h < nh; h++)
        score[c] += longint'(hid[h]) * placeholder_coef(seed, 1, c, h, cw, 0);
    end
    return argmax_ref(score);
  endfunction

  // Decision tree: walk from the root, 2n+1 when feature <= threshold.
  function automatic int dt_ref(int unsigned seed, int fw, int depth, int f[], output int leaf);
    int n = 0;
    int nf = f.size();
    int nleaves = 1 << depth;
    int cls;
    for (int k = 0; k < depth; k++) begin
      int fi  = placeholder_uint(seed, 0, n, 0, 16) % nf;
      int thr = placeholder_uint(seed, 1, n, 0, fw);
      n = (f[fi] <= thr) ? 2 * n + 1 : 2 * n + 2;
    end
    leaf = n - (nleaves - 1);
    if (leaf == 0)                cls = 0;
    else if (leaf == nleaves - 1) cls = N_CLASSES - 1;
    else                          cls = placeholder_uint(seed, 2, leaf, 0, 16) % N_CLASSES;
    return cls;
  endfunction

  // Fraction of zero weights of an MLP, both layers, in percent.
  function automatic int mlp_zero_pct(int unsigned seed, int cw, int nf, int nh, int sparsity);
    int z = 0, t = 0;
    for (int h = 0; h < nh; h++)
      for (int i = 0; i < nf; i++) begin
        t++;
        if (placeholder_coef(seed, 0, h, i, cw, sparsity) == 0) z++;
      end
    for (int c = 0; c < N_CLASSES; c++)
      for (int h = 0; h < nh; h++) begin
        t++;
        if (placeholder_coef(seed, 1, c, h, cw, 0) == 0) z++;
      end
    return (100 * z) / t;
  endfunction

  // Prediction of a whole configuration of the top.
  function automatic int predict(dataset_e d, model_e m, int f[]);
    int unsigned seed = model_seed(d, m);
    int p = precision(d, m);
    int leaf;
    int hid[];
    longint score[];
    case (m)
      MODEL_DT:  return dt_ref(seed, p, DT_DEPTH, f, leaf);
      MODEL_SVM: return svm_ref(seed, p, p, f, score);
      default:   return mlp_ref(seed, p, p, p - 2, MLP_HIDDEN, sparsity_pct(d), f, hid, score);
    endcase
  endfunction

endpackage
