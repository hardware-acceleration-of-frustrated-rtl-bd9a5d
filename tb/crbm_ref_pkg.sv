// crbm_ref_pkg -- behavioural reference model of the CRBM sampler for the testbenches.
//
// Plain integer arithmetic written straight from the Gibbs-sampling equations of a
// convolutional RBM with 3x3 filters and stride 2, independently of the RTL's
// structure: the forward field of hidden node (k, i, j) sums w[k][m][n] over the
// visible nodes at (2i+m, 2j+n) (indices past the active lattice wrap when
// periodic, are dropped when open); the reverse field of visible node (r, c) sums,
// for every hidden node whose window covers (r, c) at filter offset (m, n), the
// flipped-filter weight wr[k][2-m][2-n], per filter saturated to 10 bits, plus the
// visible bias. The sigmoid is evaluated in floating point.
package crbm_ref_pkg;

  localparam int LM  = 18;  // largest lattice side the model holds
  localparam int NFM = 10;  // largest filter count
  localparam int MM  = 3;   // filter side
  localparam int SS  = 2;   // stride

  typedef int vmap_t [LM][LM];
  typedef int hmap_t [NFM][LM][LM];
  typedef int filt_t [NFM][MM][MM];
  typedef int bias_t [NFM];

  function automatic int sat_ref(input int x, input int w);
    int hi, lo;
    hi = (1 << (w - 1)) - 1;
    lo = -(1 << (w - 1));
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  // 16-bit probability for a Q.4 pre-activation.
  function automatic int sigmoid_ref(input int x);
    real v;
    v = 65536.0 / (1.0 + $exp(-real'(x) / 16.0));
    v = $floor(v + 0.5);
    return (v > 65535.0) ? 65535 : int'(v);
  endfunction

  // Lattice index reached by extended index x, or -1.
  function automatic int idx_ref(input int x, input int n, input bit per);
    if (x < n) return x;
    if (per && x < n + MM - 1) return x - n;
    return -1;
  endfunction

  function automatic int nh_ref(input int n);
    return (n + 1) / SS;
  endfunction

  // Hidden pre-activations (10-bit saturated).
  function automatic hmap_t hid_field(input vmap_t v, input filt_t w, input bias_t hb,
                                      input int nf, input int rows, input int cols,
                                      input bit pr, input bit pc);
    hmap_t f;
    for (int k = 0; k < NFM; k++) for (int i = 0; i < LM; i++) for (int j = 0; j < LM; j++) f[k][i][j] = 0;
    for (int k = 0; k < nf; k++)
      for (int i = 0; i < nh_ref(rows); i++)
        for (int j = 0; j < nh_ref(cols); j++) begin
          int acc;
          acc = hb[k];
          for (int m = 0; m < MM; m++)
            for (int n = 0; n < MM; n++) begin
              int r, c;
              r = idx_ref(SS*i + m, rows, pr);
              c = idx_ref(SS*j + n, cols, pc);
              if (r >= 0 && c >= 0 && v[r][c] != 0) acc += w[k][m][n];
            end
          f[k][i][j] = sat_ref(acc, 10);
        end
    return f;
  endfunction

  // Visible pre-activations (12-bit saturated).
  function automatic vmap_t vis_field(input hmap_t h, input filt_t wr, input int vbe,
                                      input int vbo, input bit oe, input int nf,
                                      input int rows, input int cols, input bit pr, input bit pc);
    vmap_t f;
    int part [NFM][LM][LM];
    for (int k = 0; k < NFM; k++) for (int r = 0; r < LM; r++) for (int c = 0; c < LM; c++) part[k][r][c] = 0;
    for (int k = 0; k < nf; k++)
      for (int i = 0; i < nh_ref(rows); i++)
        for (int j = 0; j < nh_ref(cols); j++)
          if (h[k][i][j] != 0)
            for (int m = 0; m < MM; m++)
              for (int n = 0; n < MM; n++) begin
                int r, c;
                r = idx_ref(SS*i + m, rows, pr);
                c = idx_ref(SS*j + n, cols, pc);
                if (r >= 0 && c >= 0) part[k][r][c] += wr[k][MM-1-m][MM-1-n];
              end
    for (int r = 0; r < LM; r++)
      for (int c = 0; c < LM; c++) begin
        int acc;
        acc = (oe && (c % 2 == 1)) ? vbo : vbe;
        for (int k = 0; k < nf; k++) acc += sat_ref(part[k][r][c], 10);
        f[r][c] = (r < rows && c < cols) ? sat_ref(acc, 12) : 0;
      end
    return f;
  endfunction

  function automatic logic [15:0] lfsr_ref(input logic [15:0] r);
    logic fb;
    fb = r[15] ^ r[13] ^ r[12] ^ r[10];
    return {r[14:0], fb};
  endfunction

endpackage
