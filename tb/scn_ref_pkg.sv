// scn_ref_pkg: reference model of the MV-SCN used by the testbenches.
//
// Written independently of the RTL: connections are kept as a full
// symmetric C x L x C x L bit matrix and activations as an unpacked C x L
// array, and each decoding rule is coded straight from its equation. The
// helpers convert to and from the packed pair-block layout of the RTL ports
// (pair p enumerates the cluster pairs a < b in row-major order).
package scn_ref_pkg;

  localparam int C     = 8;
  localparam int KAPPA = 4;
  localparam int L     = 16;
  localparam int NP    = C * (C - 1) / 2;

  typedef bit conn_t [C][L][C][L];
  typedef bit act_t  [C][L];
  typedef logic [NP-1:0][L-1:0][L-1:0] psi_vec_t;
  typedef logic [C-1:0][L-1:0]         act_vec_t;
  typedef logic [C-1:0][KAPPA-1:0]     msg_t;

  function automatic psi_vec_t conn_to_psi(input conn_t cn);
    psi_vec_t r;
    int p;
    p = 0;
    for (int a = 0; a < C; a++)
      for (int b = a + 1; b < C; b++) begin
        for (int ja = 0; ja < L; ja++)
          for (int jb = 0; jb < L; jb++)
            r[p][ja][jb] = cn[a][ja][b][jb];
        p++;
      end
    return r;
  endfunction

  function automatic act_vec_t pack_act(input act_t v);
    act_vec_t r;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < L; j++)
        r[i][j] = v[i][j];
    return r;
  endfunction

  function automatic act_t unpack_act(input act_vec_t v);
    act_t r;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < L; j++)
        r[i][j] = v[i][j];
    return r;
  endfunction

  // Local decoding: node j is active when every known bit of j agrees.
  function automatic act_t local_dec(input msg_t m, input msg_t e);
    act_t r;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < L; j++) begin
        bit ok;
        ok = 1;
        for (int b = 0; b < KAPPA; b++)
          if (!e[i][b] && (((j >> b) & 1) != m[i][b])) ok = 0;
        r[i][j] = ok;
      end
    return r;
  endfunction

  // Score with binary connections and gamma = 1: each other cluster holding
  // an active node linked to (i, j) adds one.
  function automatic int score(input conn_t cn, input act_t v, input int i, input int j);
    int s;
    s = v[i][j];
    for (int i2 = 0; i2 < C; i2++)
      if (i2 != i) begin
        bit hit;
        hit = 0;
        for (int j2 = 0; j2 < L; j2++)
          if (cn[i][j][i2][j2] && v[i2][j2]) hit = 1;
        s += hit;
      end
    return s;
  endfunction

  // Architecture II iteration: per-cluster winner-take-all, sigma = C.
  function automatic act_t step_arch2(input conn_t cn, input act_t v);
    act_t r;
    int sc [L];
    for (int i = 0; i < C; i++) begin
      int mx;
      mx = 0;
      for (int j = 0; j < L; j++) begin
        sc[j] = score(cn, v, i, j);
        if (sc[j] > mx) mx = sc[j];
      end
      for (int j = 0; j < L; j++) r[i][j] = (sc[j] == mx) && (mx >= C);
    end
    return r;
  endfunction

  // Architecture III iteration: AND over other clusters of OR of links.
  function automatic act_t step_arch3(input conn_t cn, input act_t v);
    act_t r;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < L; j++) begin
        bit keep;
        keep = v[i][j];
        for (int i2 = 0; i2 < C; i2++)
          if (i2 != i) begin
            bit any;
            any = 0;
            for (int j2 = 0; j2 < L; j2++)
              if (cn[i][j][i2][j2] && v[i2][j2]) any = 1;
            keep = keep && any;
          end
        r[i][j] = keep;
      end
    return r;
  endfunction

  function automatic bit act_eq(input act_t a, input act_t b);
    for (int i = 0; i < C; i++)
      for (int j = 0; j < L; j++)
        if (a[i][j] != b[i][j]) return 0;
    return 1;
  endfunction

endpackage
