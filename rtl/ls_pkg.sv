// ls_pkg -- shared constants, types and elaboration-time functions of the
// logic-shrunk LUT layer.
//
// A logic-expanded binary network replaces each surviving XNOR of a binary
// neural network with a trainable K-input LUT. Training keeps, for every LUT,
// 2^K real-valued mask parameters c^(d), one per input combination
// d in {-1,+1}^K. Logic shrinkage then measures how much each LUT input
// matters and severs the least salient ones:
//
//   salience  s_i = sum over the other inputs of |c^(..,+1,..) - c^(..,-1,..)|
//   removal   the two entries that differ only in input i are both replaced by
//             their mean (the merge-and-fork matrix U_i); removing several
//             inputs multiplies the U_i, i.e. every entry becomes the mean of
//             all entries that agree with it on the inputs still connected
//   hardening the shrunk mask is binarized (sign) into the LUT's truth table.
//
// The functions below perform those three steps on synthetic 8-bit
// fixed-point mask parameters produced by a hash of (seed, channel, LUT,
// entry), so that any size of layer can be elaborated without a weight file.
// A trained network would supply its own masks; only mask_param() and conn()
// stand for training results, the rest is the method itself.
//
// Index convention: bit i-1 of a truth-table index is LUT input i, with bit
// value 1 meaning activation +1. This follows the Kronecker form
// U_i = 1/2 I(2^(K-i)) (x) 1(2x2) (x) I(2^(i-1)), whose input 1 is the least
// significant index bit. Binarization maps a mean >= 0 to 1 (+1); the mean is
// computed as a sum, which has the same sign.
//
// Pruning rule: an input is severed when its salience is below SAL_THRESH.
// In the training flow the cut is a global rank (the delta*N~*K least salient
// inputs of the layer); a rank cut over distinct scores is the same as a
// threshold on the score, and the threshold is what the hardware needs.
package ls_pkg;

  // Largest LUT size the functions support (physical FPGA LUTs have 6 inputs).
  localparam int unsigned KMAX = 6;
  localparam int unsigned EMAX = 1 << KMAX;

  // Main configuration: CIFAR-10 CNV, unrolled layer Conv(256, 3x3, stride 1)
  // on a 3x3x256 input, K = 4, node sparsity 94 %, LUT input sparsity 75 %.
  localparam int unsigned K_DEF              = 4;
  localparam int unsigned N_IN_DEF           = 2304;  // 256 channels x 3 x 3
  localparam int unsigned N_OUT_DEF          = 256;
  localparam int unsigned THETA_PERMILLE_DEF = 940;   // node sparsity 94.0 %
  localparam int unsigned SAL_THRESH_DEF     = 795;   // gives ~75 % input sparsity
  localparam int unsigned SEED_DEF           = 1;

  // Hash salts keep the different synthetic quantities independent.
  localparam logic [31:0] SALT_MASK   = 32'd1;
  localparam logic [31:0] SALT_CONN   = 32'd2;
  localparam logic [31:0] SALT_THRESH = 32'd3;

  // Layer inputs wired to the inputs of one LUT (element i feeds input i+1).
  typedef logic [KMAX-1:0][31:0] lut_src_t;

  // Configuration of one LUT after shrinkage.
  typedef struct packed {
    logic [KMAX-1:0] prune;  // 1 = input severed
    logic [EMAX-1:0] mask;   // binarized, shrunk truth table
  } lut_cfg_t;

  // 32-bit integer finalizer (xor-shift / multiply).
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [31:0] hash5(input logic [31:0] salt, input logic [31:0] seed,
                                        input logic [31:0] a, input logic [31:0] b,
                                        input logic [31:0] c);
    return mix32(mix32(mix32(mix32(mix32(salt) ^ seed) ^ a) ^ b) ^ c);
  endfunction

  // Real-valued (8-bit fixed point, -128..127) mask parameter c^ of entry e of
  // LUT n in output channel ch, as left by training before shrinkage.
  function automatic int mask_param(input int unsigned seed, input int unsigned ch,
                                    input int unsigned n, input int unsigned e);
    logic [7:0] h;
    h = 8'(hash5(SALT_MASK, seed, ch, n, e));
    return int'($signed(h));
  endfunction

  // Salience of input i (0-based) of a K-LUT whose parameters are c.
  function automatic int unsigned salience(input int c[EMAX], input int unsigned k,
                                           input int unsigned i);
    int unsigned s;
    int d;
    s = 0;
    for (int unsigned e = 0; e < (1 << k); e++) begin
      if (((e >> i) & 1) == 0) begin
        d = c[e | (1 << i)] - c[e];
        s += (d < 0) ? int'(-d) : int'(d);
      end
    end
    return s;
  endfunction

  // Logic shrinkage of one K-LUT with parameters c: inputs whose salience is
  // below sal_thresh are severed, the product of their U_i is applied and the
  // result is binarized. Applying U_i is done as a pairwise sum (twice the
  // mean), c'[e] = c[e] + c[e ^ 2^i] for every entry, which keeps the sign.
  function automatic lut_cfg_t shrink_lut(input int c_in[EMAX], input int unsigned k,
                                          input int unsigned sal_thresh);
    lut_cfg_t cfg;
    int c[EMAX];
    int t[EMAX];
    cfg = '0;
    c   = c_in;
    for (int unsigned i = 0; i < k; i++)
      cfg.prune[i] = (salience(c_in, k, i) < sal_thresh);
    for (int unsigned i = 0; i < k; i++) begin
      if (cfg.prune[i]) begin
        for (int unsigned e = 0; e < (1 << k); e++) t[e] = c[e] + c[e ^ (1 << i)];
        for (int unsigned e = 0; e < (1 << k); e++) c[e] = t[e];
      end
    end
    for (int unsigned e = 0; e < (1 << k); e++) cfg.mask[e] = (c[e] >= 0);
    return cfg;
  endfunction

  // Configuration of LUT n of channel ch from its (synthetic) trained mask.
  function automatic lut_cfg_t lut_config(input int unsigned seed, input int unsigned ch,
                                          input int unsigned n, input int unsigned k,
                                          input int unsigned sal_thresh);
    int c[EMAX];
    for (int unsigned e = 0; e < EMAX; e++) c[e] = 0;
    for (int unsigned e = 0; e < (1 << k); e++) c[e] = mask_param(seed, ch, n, e);
    return shrink_lut(c, k, sal_thresh);
  endfunction

  // Layer input feeding input i of LUT n of channel ch (random wiring, as in
  // the logic-expanded starting point).
  function automatic int unsigned conn(input int unsigned seed, input int unsigned ch,
                                       input int unsigned n, input int unsigned i,
                                       input int unsigned n_in);
    return int'(hash5(SALT_CONN, seed, ch, n, i) % n_in);
  endfunction

  function automatic lut_src_t lut_sources(input int unsigned seed, input int unsigned ch,
                                           input int unsigned n, input int unsigned k,
                                           input int unsigned n_in);
    lut_src_t s;
    s = '0;
    for (int unsigned i = 0; i < k; i++) s[i] = conn(seed, ch, n, i, n_in);
    return s;
  endfunction

  // Activation threshold of channel ch (batch normalization folded into a
  // count threshold): output +1 when at least this many LUTs output +1.
  function automatic int unsigned act_thresh(input int unsigned seed, input int unsigned ch,
                                             input int unsigned n_lut);
    int t;
    t = int'(n_lut / 2) + int'(hash5(SALT_THRESH, seed, ch, 0, 0) % 5) - 2;
    return (t < 0) ? 0 : int'(t);
  endfunction

  // Number of LUTs per channel left by node pruning: (1 - theta) * fan-in.
  function automatic int unsigned luts_per_channel(input int unsigned n_in,
                                                   input int unsigned theta_permille);
    int unsigned r;
    r = (n_in * (1000 - theta_permille)) / 1000;
    return (r == 0) ? 1 : r;
  endfunction

endpackage
