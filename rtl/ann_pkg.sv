// ann_pkg: types, sizes and elaboration-time helpers shared by every ANN block.
//
// Number formats. Every value passed between layers (primary inputs, neuron
// outputs) is a signed DW-bit fixed-point number with FRAC fractional bits, so
// 1.0 is 2**FRAC (64) and the range is [-2, 2). Weights and biases are integers
// obtained by scaling the trained floating-point values by 2**Q (Q is the
// quantization value) and are held as signed WW-bit and BW-bit numbers. A
// product w*x therefore carries FRAC+Q fractional bits; the bias is aligned to
// it by a left shift of FRAC (wiring only) and the sum is brought back to FRAC
// fractional bits by an arithmetic right shift of Q in front of the activation.
//
// The 8-bit layer inputs/outputs and the list of hardware activation functions
// (hsig, htanh, lin, ReLU, satlin) follow the paper; FRAC, WW, BW, Q and the
// default weight generator are this design's own choices, because the trained
// weights and the quantization values used for the published results are not
// given.
//
// A network is described by its number of layers NL, a topology table TOPO
// (TOPO[0] primary inputs, TOPO[k] neurons of layer k), one activation per layer,
// and flat weight/bias tables. Weight w(k,j,i) of layer k (0-based), neuron j,
// input i lives at W[w_off(TOPO,k) + j*TOPO[k] + i]; bias b(k,j) at
// B[b_off(TOPO,k) + j].
package ann_pkg;

  localparam int DW         = 8;   // layer input/output width (paper: 8 bits)
  localparam int FRAC       = 6;   // fractional bits of layer values
  localparam int WW         = 8;   // weight width
  localparam int BW         = 8;   // bias width
  localparam int MAX_LAYERS = 4;   // size of the topology/activation tables
  localparam int MAX_N      = 16;  // largest layer width supported by the tables
  localparam int MAX_W      = 1024;// weight table size
  localparam int MAX_B      = 64;  // bias table size
  localparam int CSD_N      = WW + 2;  // CSD digits needed for a WW-bit constant

  // Accumulator width: product, growth for MAX_N terms, bias alignment margin.
  localparam int ACC_W = DW + WW + $clog2(MAX_N) + 2;

  typedef enum logic [2:0] {
    ACT_LIN    = 3'd0,
    ACT_RELU   = 3'd1,
    ACT_SATLIN = 3'd2,
    ACT_HSIG   = 3'd3,
    ACT_HTANH  = 3'd4
  } act_e;

  typedef int   topo_t [MAX_LAYERS+1];
  typedef act_e act_t  [MAX_LAYERS];
  typedef int   wtab_t [MAX_W];
  typedef int   btab_t [MAX_B];
  typedef int   csd_t  [CSD_N];

  // Largest structure evaluated in the paper: 16-16-10-10.
  localparam int    DEF_NL   = 3;
  localparam topo_t DEF_TOPO = '{16, 16, 10, 10, 0};
  // Hidden layers htanh, output layer hsig (paper, ZAAL/PyTorch designs).
  localparam act_t  DEF_ACT  = '{ACT_HTANH, ACT_HTANH, ACT_HSIG, ACT_LIN};
  localparam int    DEF_Q    = 6;

  // ---------------------------------------------------------------- topology
  function automatic int w_off(topo_t t, int k);
    int s = 0;
    for (int l = 0; l < k; l++) s += t[l] * t[l+1];
    return s;
  endfunction

  function automatic int b_off(topo_t t, int k);
    int s = 0;
    for (int l = 0; l < k; l++) s += t[l+1];
    return s;
  endfunction

  function automatic int max_width(topo_t t, int nl, int first);
    int m = 1;
    for (int l = first; l <= nl; l++) if (t[l] > m) m = t[l];
    return m;
  endfunction

  // ------------------------------------------------------- default constants
  // Stand-in for trained weights: a fixed pseudo-random sequence. Neuron j of
  // every layer gets weights that are multiples of 2**(j mod 3), the shape the
  // time-multiplexed post-training produces, so the shifted MAC datapaths are
  // exercised. Roughly one weight in eleven is zero.
  function automatic int hash32(int a);
    int unsigned h = int'(a) * 32'd2654435761 + 32'd12345;
    h ^= h >> 15;
    h *= 32'd2246822519;
    h ^= h >> 13;
    return int'(h & 32'h7fffffff);
  endfunction

  function automatic wtab_t gen_weights(topo_t t, int nl, int seed);
    wtab_t w;
    int    idx;
    for (int n = 0; n < MAX_W; n++) w[n] = 0;
    for (int k = 0; k < nl; k++)
      for (int j = 0; j < t[k+1]; j++)
        for (int i = 0; i < t[k]; i++) begin
          int h;
          idx = w_off(t, k) + j * t[k] + i;
          h   = hash32(idx + 7919 * seed);
          if (h % 11 == 0) w[idx] = 0;
          else             w[idx] = ((h % 25) - 12) * (1 << (j % 3));
        end
    return w;
  endfunction

  function automatic btab_t gen_biases(topo_t t, int nl, int seed);
    btab_t b;
    int    idx;
    for (int n = 0; n < MAX_B; n++) b[n] = 0;
    for (int k = 0; k < nl; k++)
      for (int j = 0; j < t[k+1]; j++) begin
        idx    = b_off(t, k) + j;
        b[idx] = (hash32(100003 + idx + 7919 * seed) % 41) - 20;
      end
    return b;
  endfunction

  // --------------------------------------------------------------------- CSD
  // Canonical signed digit recoding: digit i of c is in {-1,0,1}, no two
  // adjacent digits are nonzero.
  function automatic csd_t csd_digits(int c);
    csd_t d;
    int   v = c;
    for (int i = 0; i < CSD_N; i++) begin
      if ((v & 1) == 0)      d[i] = 0;
      else if ((v & 3) == 1) d[i] = 1;
      else                   d[i] = -1;
      v = (v - d[i]) >>> 1;
    end
    return d;
  endfunction

  // ----------------------------------------------------------- left shifts
  // Number of trailing zero bits of c (WW for zero, which never limits sls).
  function automatic int tz(int c);
    if (c == 0) return WW;
    for (int i = 0; i < WW; i++) if (((c >>> i) & 1) != 0) return i;
    return WW;
  endfunction

  // Smallest left shift (sls) among the n weights w[off .. off+n-1]; 0 if all
  // of them are zero.
  function automatic int sls_row(wtab_t w, int off, int n);
    int s = WW;
    for (int i = 0; i < n; i++) begin
      int z = tz(w[off + i]);
      if (z < s) s = z;
    end
    return (s >= WW) ? 0 : s;
  endfunction

  // sls of neuron j of layer k.
  function automatic int sls_neuron(wtab_t w, topo_t t, int k, int j);
    return sls_row(w, w_off(t, k) + j * t[k], t[k]);
  endfunction

  // The weights of one layer (n_out rows of n_in starting at off), each row
  // divided by 2**(its own sls); the rest of the table is unchanged.
  function automatic wtab_t shift_rows(wtab_t w, int off, int n_in, int n_out);
    wtab_t c = w;
    for (int j = 0; j < n_out; j++) begin
      int s = sls_row(w, off + j * n_in, n_in);
      for (int i = 0; i < n_in; i++) c[off + j*n_in + i] = w[off + j*n_in + i] >>> s;
    end
    return c;
  endfunction

  function automatic bit all_zero(wtab_t w, topo_t t, int k, int j);
    for (int i = 0; i < t[k]; i++)
      if (w[w_off(t, k) + j * t[k] + i] != 0) return 1'b0;
    return 1'b1;
  endfunction

  // Smallest left shift among all weights of the network.
  function automatic int sls_all(wtab_t w, topo_t t, int nl);
    int s = WW;
    for (int k = 0; k < nl; k++)
      for (int j = 0; j < t[k+1]; j++) begin
        int z = sls_neuron(w, t, k, j);
        if (z < s && !(z == 0 && all_zero(w, t, k, j))) s = z;
      end
    return (s >= WW) ? 0 : s;
  endfunction

  // Weight table of layer k with every weight of neuron j divided by 2**sls.
  // per_neuron = 1: each neuron's own sls (SMAC_NEURON); 0: the global value.
  function automatic wtab_t shifted_weights(wtab_t w, topo_t t, int nl, bit per_neuron);
    wtab_t c = w;
    int    g = sls_all(w, t, nl);
    for (int k = 0; k < nl; k++)
      for (int j = 0; j < t[k+1]; j++) begin
        int s = per_neuron ? sls_neuron(w, t, k, j) : g;
        for (int i = 0; i < t[k]; i++)
          c[w_off(t, k) + j * t[k] + i] = w[w_off(t, k) + j * t[k] + i] >>> s;
      end
    return c;
  endfunction

endpackage
