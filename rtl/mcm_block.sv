// mcm_block: multiplierless multiple constant multiplication (MCM), p_n = c_n * x
// for NC constants and one variable x.
//
// Used by the multiplierless SMAC_NEURON layer: x is the input currently
// selected by the layer's control counter, and the block forms its product
// with every weight of the layer at once; per-neuron multiplexers then pick the
// product that belongs to each neuron. Constant n is C[C_OFF + n*C_STEP] of a
// flat table (for a layer: neuron j, input i at j*N_IN + i); C_STEP = 1 takes a
// run of the table, C_STEP = N_IN one input's column of a layer, which is how
// cmvm_block uses this block.
// Every constant is written as c = +/- f * 2**t with f odd (its fundamental).
// Each distinct fundamental is multiplied once, with csd_mult (CSD digit-based
// recoding), and every constant that shares it takes that product, shifted by
// t and negated if needed: repeated weights, and weights that differ only by
// sign or a power of two, cost no extra adders. Zero constants give zero. The
// shifted copies of x are wires shared by all constants. The minimum-adder MCM
// search the paper applies, which also shares partial sums between different
// fundamentals, comes from earlier work and is not reproduced; the sharing of
// equal fundamentals is this design's simple stand-in for it. Combinational.
module mcm_block
  import ann_pkg::*;
#(
  parameter int    NC     = 4,
  parameter wtab_t C      = '{0: 11, 1: 3, 2: 5, 3: 13, default: 0},
  parameter int    C_OFF  = 0,
  parameter int    C_STEP = 1,
  parameter int    XW     = DW,
  parameter int    PW     = DW + WW
) (
  input  logic signed [XW-1:0] x,
  output logic signed [PW-1:0] p [NC]
);

  // Odd part, power-of-two exponent and sign of a constant.
  function automatic int fund(int c);
    int v = (c < 0) ? -c : c;
    if (v == 0) return 0;
    while ((v % 2) == 0) v = v / 2;
    return v;
  endfunction

  function automatic int expo(int c);
    int v = (c < 0) ? -c : c;
    int t = 0;
    if (v == 0) return 0;
    while ((v % 2) == 0) begin
      v = v / 2;
      t++;
    end
    return t;
  endfunction

  // Index of the first constant with the same fundamental as constant n.
  function automatic int first_of(wtab_t c, int off, int step, int n);
    for (int m = 0; m < n; m++)
      if (fund(c[off + m*step]) == fund(c[off + n*step])) return m;
    return n;
  endfunction

  logic signed [PW-1:0] q [NC];   // f * x, driven only at first occurrences

  for (genvar n = 0; n < NC; n++) begin : g_const
    localparam int F  = fund(C[C_OFF + n*C_STEP]);
    localparam int T  = expo(C[C_OFF + n*C_STEP]);
    localparam int M  = first_of(C, C_OFF, C_STEP, n);
    localparam bit NG = C[C_OFF + n*C_STEP] < 0;

    if (F == 0) begin : g_zero
      assign q[n] = '0;
      assign p[n] = '0;
    end else begin : g_nz
      if (M == n) begin : g_fund
        csd_mult #(.C(F), .XW(XW), .PW(PW)) u_scm (
          .x(x),
          .p(q[n])
        );
      end else begin : g_reuse
        assign q[n] = '0;
      end
      if (NG) begin : g_neg
        assign p[n] = -(q[M] <<< T);
      end else begin : g_pos
        assign p[n] = q[M] <<< T;
      end
    end
  end

endmodule
