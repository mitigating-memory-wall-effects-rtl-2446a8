// unzip_pkg: types, constants and helper functions shared by the on-the-fly
// weights-generating CNN engine.
//
// Numbers: activations, weights and alpha coefficients are 16-bit two's
// complement fixed-point words (the 16-bit precision the design targets).
// Partial sums are kept at ACC_W bits so that a dot product over a few
// thousand terms cannot overflow. The generated weight of a filter element is
// sum_j (+/-alpha_j); it is accumulated at GEN_W bits and saturated to 16.
//
// Filter sizes: the weights generator supports a design-time list of K*K
// kernel areas (K2_OPT). The default list {9, 1} serves 3x3 OVSF layers and
// 1x1 layers (for K=1 every weight is its own "filter" with the single code
// [+1], so alpha is the raw weight). Only the listed sizes get shift logic.
//
// OVSF codes: Sylvester's construction gives bit n of code j as the parity of
// (j AND n); a set bit stands for -1, a clear bit for +1.
package unzip_pkg;

  localparam int WL    = 16;       // word length of activations, weights, alphas
  localparam int ACC_W = 48;       // partial-sum width in the PE array
  localparam int GEN_W = WL + 5;   // weights generator accumulator (up to 16 codes)

  // Supported kernel areas K*K; index into this list is the per-layer "ksel".
  localparam int NK        = 2;
  localparam int K2_OPT [NK] = '{9, 1};
  localparam int KMAX2     = 9;    // widest basis vector held in the OVSF FIFO
  localparam int KSEL_W    = 1;
  localparam int PH_W      = 4;    // phase within a K*K kernel, 0..KMAX2-1
  localparam int NV_W      = 5;    // number of basis vectors per filter, 1..KMAX2

  typedef logic signed [WL-1:0]    word_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [GEN_W-1:0] gen_t;

  // Per-layer configuration written by the host before a layer starts.
  typedef struct packed {
    logic [KSEL_W-1:0] ksel;        // kernel-area option (index into K2_OPT)
    logic [NV_W-1:0]   nv;          // basis vectors per filter = ceil(rho*K*K)
    logic [11:0]       n_ptiles;    // ceil(P / T_P)
    logic [11:0]       n_ctiles;    // ceil(C / T_C)
    logic [11:0]       n_rtiles;    // ceil(R / T_R)
    logic [7:0]        c_last;      // valid columns in the last C tile (1..T_C)
    logic [7:0]        r_last;      // valid rows in the last R tile (1..T_R)
    logic [7:0]        steal_rows;  // rows of a column-short tile given to idle PEs
    logic [19:0]       alpha_base;  // first Alpha-buffer row of this layer
  } layer_cfg_t;

  // Number of alpha lanes the multiplier array can need in one cycle: the
  // most filters that M consecutive tile elements can touch, over all options.
  function automatic int nf_for(input int m);
    int n = 1;
    for (int o = 0; o < NK; o++) begin
      int f = (K2_OPT[o] - 1 + m - 1) / K2_OPT[o] + 1;
      if (f > m) f = m;
      if (f > n) n = f;
    end
    return n;
  endfunction

  // Bit n of OVSF (Walsh-Hadamard, Sylvester order) code j: 1 means -1.
  function automatic logic ovsf_bit(input int j, input int n);
    return ^(j & n);
  endfunction

  function automatic word_t sat_word(input gen_t v);
    if (v > gen_t'(32767))       return word_t'(16'sh7fff);
    else if (v < gen_t'(-32768)) return word_t'(16'sh8000);
    else                         return word_t'(v[WL-1:0]);
  endfunction

endpackage
