// kb_ref_pkg: independent reference model of the complex K-best detector,
// used by the testbenches, plus a generator of test channels.
//
// The model works on plain integers (longint), with the same number format
// as the hardware (FB fraction bits, 16-bit saturating PED, ZW-bit symbols):
//   e    = y_i - sum_{j>i} R_ij z_j
//   c    = (e * inv_i) >> FB,   x0 = round(c) = (c + 2^(FB-1)) >> FB
//   node = x0 + zig-zag offset on each axis
//   PED  = min(ped_parent + ((e - R_ii z)^2 >> FB), 65535)
// One level keeps, per parent, a queue of its Rlimit real-axis children in
// Schnorr-Euchner order and, per selected node, a chain of imaginary-axis
// siblings; K times it takes the smallest head. Ties go to a real-axis head
// before an imaginary one, among real heads to the higher parent index, and
// among imaginary chains to the one started first: the order in which the
// hardware presents them to its minimum tree.
package kb_ref_pkg;

  localparam int FB    = 8;
  localparam int ZMAX  = 127;
  localparam int NTMAX = 8;
  localparam int KMAX  = 8;

  typedef struct {
    int  nt;
    int  yr  [NTMAX];
    int  yi  [NTMAX];
    int  rr  [NTMAX][NTMAX];
    int  ri  [NTMAX][NTMAX];
    int  inv [NTMAX];
    int  ztr [NTMAX];   // transmitted symbols (for information only)
    int  zti [NTMAX];
  } rvec_t;

  typedef struct {
    bit valid;
    int ped;
    int zr [NTMAX];
    int zi [NTMAX];
  } rnode_t;

  typedef struct {
    longint er, ei;
    int     x0r, x0i;
    bit     dr, di;      // first zig-zag step goes down
  } rpar_t;

  function automatic int clipz(longint v);
    if (v > ZMAX) return ZMAX;
    if (v < -ZMAX - 1) return -ZMAX - 1;
    return int'(v);
  endfunction

  function automatic int zig(int x0, bit down, int n);
    int mag;
    mag = (n + 1) / 2;
    if (n == 0) return x0;
    if (n % 2 == 1) return clipz(longint'(x0) + (down ? -mag : mag));
    return clipz(longint'(x0) + (down ? mag : -mag));
  endfunction

  function automatic rpar_t round_parent(rvec_t v, int row, rnode_t p);
    rpar_t  o;
    longint cr, ci, xr, xi;
    o.er = v.yr[row];
    o.ei = v.yi[row];
    for (int j = row + 1; j < v.nt; j++) begin
      o.er -= longint'(v.rr[row][j]) * p.zr[j] - longint'(v.ri[row][j]) * p.zi[j];
      o.ei -= longint'(v.rr[row][j]) * p.zi[j] + longint'(v.ri[row][j]) * p.zr[j];
    end
    cr = (o.er * v.inv[row]) >>> FB;
    ci = (o.ei * v.inv[row]) >>> FB;
    xr = (cr + (1 << (FB - 1))) >>> FB;
    xi = (ci + (1 << (FB - 1))) >>> FB;
    o.x0r = clipz(xr);
    o.x0i = clipz(xi);
    o.dr  = cr < (xr <<< FB);
    o.di  = ci < (xi <<< FB);
    return o;
  endfunction

  function automatic int node_ped(int pped, rpar_t q, int rii, int zr, int zi);
    longint dr, di, s;
    dr = q.er - longint'(rii) * zr;
    di = q.ei - longint'(rii) * zi;
    s  = pped + ((dr * dr + di * di) >>> FB);
    return (s > 65535) ? 65535 : int'(s);
  endfunction

  // One tree level at row `row`. par[0..k-1] in, out[0..k-1] out.
  function automatic void ref_level(input rvec_t v, input int k, input int rlimit,
                                    input int row, input rnode_t par[KMAX],
                                    output rnode_t out[KMAX],
                                    output int n_real, output int n_imag,
                                    output int n_rlim);
    rpar_t q     [KMAX];
    int    rhead [KMAX];      // next real-axis index per parent
    int    ipar  [KMAX];      // imaginary chains: parent, real index, imag index
    int    inr   [KMAX];
    int    ini   [KMAX];
    int    nchain;
    int    rii;
    n_real = 0; n_imag = 0; n_rlim = 0; nchain = 0;
    rii = v.rr[row][row];
    for (int p = 0; p < k; p++) begin
      q[p] = round_parent(v, row, par[p]);
      rhead[p] = par[p].valid ? 0 : rlimit;
    end
    for (int s = 0; s < k; s++) begin
      int best_ped, best_kind, best_i;
      best_ped = 1 << 30; best_kind = -1; best_i = -1;
      // real heads, higher parent index first on ties
      for (int p = k - 1; p >= 0; p--) begin
        if (rhead[p] < rlimit) begin
          int pd;
          pd = node_ped(par[p].ped, q[p], rii, zig(q[p].x0r, q[p].dr, rhead[p]), q[p].x0i);
          if (pd < best_ped) begin best_ped = pd; best_kind = 0; best_i = p; end
        end
      end
      for (int c = 0; c < nchain; c++) begin
        int pd, p;
        p  = ipar[c];
        pd = node_ped(par[p].ped, q[p], rii, zig(q[p].x0r, q[p].dr, inr[c]),
                      zig(q[p].x0i, q[p].di, ini[c]));
        if (pd < best_ped) begin best_ped = pd; best_kind = 1; best_i = c; end
      end
      out[s].valid = (best_kind >= 0);
      out[s].ped   = best_ped;
      if (best_kind == 0) begin
        int p;
        p = best_i;
        out[s].zr = par[p].zr; out[s].zi = par[p].zi;
        out[s].zr[row] = zig(q[p].x0r, q[p].dr, rhead[p]);
        out[s].zi[row] = q[p].x0i;
        ipar[nchain] = p; inr[nchain] = rhead[p]; ini[nchain] = 1; nchain++;
        rhead[p]++;
        n_real++;
        if (rhead[p] >= rlimit) n_rlim++;
      end else if (best_kind == 1) begin
        int c, p;
        c = best_i; p = ipar[c];
        out[s].zr = par[p].zr; out[s].zi = par[p].zi;
        out[s].zr[row] = zig(q[p].x0r, q[p].dr, inr[c]);
        out[s].zi[row] = zig(q[p].x0i, q[p].di, ini[c]);
        ini[c]++;
        n_imag++;
      end
    end
  endfunction

  // Root list: one valid parent with PED 0.
  function automatic void root(input int k, output rnode_t par[KMAX]);
    for (int p = 0; p < KMAX; p++) begin
      par[p].valid = (p == 0);
      par[p].ped = 0;
      for (int j = 0; j < NTMAX; j++) begin par[p].zr[j] = 0; par[p].zi[j] = 0; end
    end
  endfunction

  // Full detection of one vector.
  function automatic void ref_detect(input rvec_t v, input int k, input int rlimit,
                                     output rnode_t out[KMAX],
                                     output int n_real, output int n_imag, output int n_rlim);
    rnode_t par [KMAX];
    int a, b, c;
    root(k, par);
    n_real = 0; n_imag = 0; n_rlim = 0;
    for (int row = v.nt - 1; row >= 0; row--) begin
      ref_level(v, k, rlimit, row, par, out, a, b, c);
      n_real += a; n_imag += b; n_rlim += c;
      par = out;
    end
  endfunction

  // Random channel: R upper triangular, real diagonal in [1,2), off-diagonal
  // parts in [-0.5,0.5); transmitted integers in [-3,3]; noise of up to
  // +-noise LSB per part.
  function automatic rvec_t gen_vec(int nt, int noise, int zlo = -3, int zhi = 3);
    rvec_t v;
    v.nt = nt;
    for (int i = 0; i < NTMAX; i++) begin
      v.yr[i] = 0; v.yi[i] = 0; v.inv[i] = 0; v.ztr[i] = 0; v.zti[i] = 0;
      for (int j = 0; j < NTMAX; j++) begin v.rr[i][j] = 0; v.ri[i][j] = 0; end
    end
    for (int i = 0; i < nt; i++) begin
      v.ztr[i] = zlo + int'($urandom_range(zhi - zlo));
      v.zti[i] = zlo + int'($urandom_range(zhi - zlo));
      v.rr[i][i] = 256 + int'($urandom_range(255));
      v.inv[i]   = (65536 + v.rr[i][i] / 2) / v.rr[i][i];
      for (int j = i + 1; j < nt; j++) begin
        v.rr[i][j] = int'($urandom_range(255)) - 128;
        v.ri[i][j] = int'($urandom_range(255)) - 128;
      end
    end
    for (int i = 0; i < nt; i++) begin
      int ar, ai;
      ar = int'($urandom_range(2 * noise)) - noise;
      ai = int'($urandom_range(2 * noise)) - noise;
      for (int j = i; j < nt; j++) begin
        ar += v.rr[i][j] * v.ztr[j] - v.ri[i][j] * v.zti[j];
        ai += v.rr[i][j] * v.zti[j] + v.ri[i][j] * v.ztr[j];
      end
      v.yr[i] = ar; v.yi[i] = ai;
    end
    return v;
  endfunction

endpackage
