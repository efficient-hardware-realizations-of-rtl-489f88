// ann_ref_pkg: integer reference model of the network used by the testbenches.
// It is written from the number-format definition (see ann_pkg) with plain
// integer arithmetic: floor division instead of shifts, explicit clamps, direct
// w*x products and no CSD or shifted weights, so it shares no datapath code
// with the RTL.
package ann_ref_pkg;
  import ann_pkg::*;

  typedef int vec_t [MAX_N];

  function automatic int floor_div(int s, int d);
    if (s >= 0) return s / d;
    return -((-s + d - 1) / d);
  endfunction

  function automatic int clamp(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // y: inner product (weights scaled by 2**q, inputs by 64); b: integer bias
  function automatic int ref_act(int y, int b, int q, act_e f);
    int a = floor_div(y + b * 64, 1 << q);
    case (f)
      ACT_LIN:    return clamp(a, -128, 127);
      ACT_RELU:   return clamp(a, 0, 127);
      ACT_SATLIN: return clamp(a, 0, 64);
      ACT_HSIG:   return clamp(floor_div(a, 4) + 32, 0, 64);
      ACT_HTANH:  return clamp(a, -64, 64);
      default:    return 0;
    endcase
  endfunction

  // Forward pass. Weight of layer k, neuron j, input i is at
  // (sum of earlier layers' in*out) + j*in + i.
  function automatic vec_t ref_net(topo_t t, int nl, act_t f, wtab_t w, btab_t b,
                                   int q, vec_t x);
    vec_t cur = x, nxt;
    int   wo = 0, bo = 0;
    for (int k = 0; k < nl; k++) begin
      for (int n = 0; n < MAX_N; n++) nxt[n] = 0;
      for (int j = 0; j < t[k+1]; j++) begin
        int y = 0;
        for (int i = 0; i < t[k]; i++) y += w[wo + j*t[k] + i] * cur[i];
        nxt[j] = ref_act(y, b[bo + j], q, f[k]);
      end
      wo += t[k] * t[k+1];
      bo += t[k+1];
      cur = nxt;
    end
    return cur;
  endfunction

  // Every weight multiplied by m (m a power of two gives shifted weights).
  function automatic wtab_t scale_w(wtab_t w, int m);
    wtab_t r;
    for (int n = 0; n < MAX_W; n++) r[n] = w[n] * m;
    return r;
  endfunction

  function automatic int rand_s8();
    return int'($urandom_range(255)) - 128;
  endfunction

endpackage
