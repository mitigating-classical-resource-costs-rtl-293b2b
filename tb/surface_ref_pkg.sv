// surface_ref_pkg -- software reference for the testbenches.
//
// Rebuilds the rotated surface code's Z checks by brute-force search over
// plaquettes (not by the closed-form index of arqade_pkg), injects errors,
// and predecodes a two-round syndrome block sequentially, stage by stage,
// from a qubit-centred description of the primitives:
//   stage 0     a check set in both rounds      -> clear both (time-like)
//   stage 1..4  qubit with two checks, parity p  -> clear both, flip if j==0
//   stage 5     qubit with one check             -> clear it,  flip if j==0
// Syndrome vectors are MAXN-bit; bit c is check c of round 0, bit NCHK+c
// the same check of round 1.
package surface_ref_pkg;

  localparam int MAXN = 1024;
  typedef bit [MAXN-1:0] vec_t;

  function automatic bit is_z(int d, int a, int b);
    bit bulk, bnd;
    if (((a + b) % 2 + 2) % 2 != 0) return 0;
    bulk = (a >= 0 && a <= d - 2 && b >= 0 && b <= d - 2);
    bnd  = ((a == -1 || a == d - 1) && b >= 0 && b <= d - 2);
    return bulk || bnd;
  endfunction

  function automatic int nchk(int d);
    int n = 0;
    for (int a = -1; a <= d - 1; a++)
      for (int b = -1; b <= d - 1; b++)
        if (is_z(d, a, b)) n++;
    return n;
  endfunction

  function automatic int chk_index(int d, int a, int b);
    int n = 0;
    for (int aa = -1; aa <= d - 1; aa++)
      for (int bb = -1; bb <= d - 1; bb++)
        if (is_z(d, aa, bb)) begin
          if (aa == a && bb == b) return n;
          n++;
        end
    return -1;
  endfunction

  // Z checks touching data qubit (i,j): count and indices.
  function automatic void qubit_checks(int d, int i, int j, output int n,
                                       output int c0, output int c1);
    n = 0; c0 = -1; c1 = -1;
    for (int a = i - 1; a <= i; a++)
      for (int b = j - 1; b <= j; b++)
        if (is_z(d, a, b)) begin
          if (n == 0) c0 = chk_index(d, a, b); else c1 = chk_index(d, a, b);
          n++;
        end
  endfunction

  // Cached qubit-to-check map for the distance last used (d <= 31).
  int cache_d = -1;
  int cache_nc;
  int qn [32][32];
  int q0 [32][32];
  int q1 [32][32];

  function automatic void ensure(int d);
    if (cache_d == d) return;
    cache_d  = d;
    cache_nc = nchk(d);
    for (int i = 0; i < d; i++)
      for (int j = 0; j < d; j++)
        qubit_checks(d, i, j, qn[i][j], q0[i][j], q1[i][j]);
  endfunction

  // X error on data qubit (i,j) in round r (0 or 1).
  function automatic vec_t data_error(int d, int i, int j, int r);
    vec_t v = '0;
    int n, c0, c1, nc;
    ensure(d);
    nc = cache_nc;
    n = qn[i][j]; c0 = q0[i][j]; c1 = q1[i][j];
    if (n >= 1) v[r * nc + c0] = 1'b1;
    if (n >= 2) v[r * nc + c1] = 1'b1;
    return v;
  endfunction

  // Measurement error on check c between the two rounds of the block.
  function automatic vec_t meas_error(int d, int c);
    vec_t v = '0;
    v[c] = 1'b1;
    ensure(d);
    v[cache_nc + c] = 1'b1;
    return v;
  endfunction

  // One stage, applied sequentially (equal to the parallel stage when the
  // stage is conflict free).  obs is toggled for every correction on j==0.
  function automatic void apply_stage(int d, int st, inout vec_t s,
                                      inout bit obs);
    int nc, n, c0, c1;
    ensure(d);
    nc = cache_nc;
    if (st == 0) begin
      for (int c = 0; c < nc; c++)
        if (s[c] && s[nc + c]) begin
          s[c] = 0; s[nc + c] = 0;
        end
    end else
      for (int r = 0; r < 2; r++)
        for (int i = 0; i < d; i++)
          for (int j = 0; j < d; j++) begin
            n = qn[i][j]; c0 = q0[i][j]; c1 = q1[i][j];
            if (st <= 4 && n == 2 && 2 * (i % 2) + (j % 2) == st - 1 &&
                s[r * nc + c0] && s[r * nc + c1]) begin
              s[r * nc + c0] = 0; s[r * nc + c1] = 0;
              if (j == 0) obs = !obs;
            end
            if (st == 5 && n == 1 && s[r * nc + c0]) begin
              s[r * nc + c0] = 0;
              if (j == 0) obs = !obs;
            end
          end
  endfunction

  // Predecoding with the first `keep` stages; a block with syndrome left
  // over is complex and carries no correction.
  function automatic void predecode(int d, int keep, vec_t syn_in,
                                    output bit obs, output bit complex_o);
    vec_t s = syn_in;
    obs = 0;
    for (int st = 0; st < keep; st++) apply_stage(d, st, s, obs);
    complex_o = (s != '0);
    if (complex_o) obs = 0;
  endfunction

endpackage
