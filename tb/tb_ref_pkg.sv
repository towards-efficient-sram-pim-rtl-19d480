// tb_ref_pkg - reference arithmetic for the DB-PIM testbenches, written
// independently of the RTL.
//
//   db_value    value of one stored dyadic block: Q selects the upper (Q=1) or
//               lower (Q=0) digit of block idx, sign negates it.
//   to_csd      canonical signed digit (non-adjacent form) of an integer,
//               8 digits, least significant first.
//   fta_approx  fixed-threshold approximation: the value closest to w whose
//               8-digit CSD form has exactly phi non-zero digits.
//   csd_blocks  the non-zero dyadic blocks of a CSD number (Q, sign, index).
//   pack_row    one macro row: Q bits (bit 16c+d) and metadata ({sign, idx} at
//               bits 3(16c+d)+2 : 3(16c+d)) for weights w[c][f] of compartment c,
//               filter f; phi = 1 puts filter f in DBMU f, phi = 2 puts its two
//               blocks in DBMUs 2f (lower block) and 2f+1 (upper block).
package tb_ref_pkg;

  function automatic int db_value(bit q, bit sign, int idx);
    int mag;
    mag = q ? (1 << (2*idx + 1)) : (1 << (2*idx));
    return sign ? -mag : mag;
  endfunction

  // returns 0 when v needs more than 8 digits
  function automatic bit to_csd(int v, output int d[8]);
    int n;
    n = v;
    for (int i = 0; i < 8; i++) begin
      if (n % 2 != 0) begin
        d[i] = 2 - (((n % 4) + 4) % 4);   // +1 or -1
        n    = n - d[i];
      end else d[i] = 0;
      n = n / 2;
    end
    return n == 0;
  endfunction

  function automatic int csd_nonzeros(int v);
    int d[8];
    int c;
    if (!to_csd(v, d)) return -1;
    c = 0;
    foreach (d[i]) if (d[i] != 0) c++;
    return c;
  endfunction

  function automatic int fta_approx(int w, int phi);
    int best, bestd;
    bestd = 1 << 20;
    best  = 0;
    for (int t = -170; t <= 170; t++)
      if (csd_nonzeros(t) == phi) begin
        int dd;
        dd = (t > w) ? t - w : w - t;
        if (dd < bestd) begin
          bestd = dd;
          best  = t;
        end
      end
    return best;
  endfunction

  // non-zero blocks of v, lowest index first; returns how many
  function automatic int csd_blocks(int v, output bit q[4], output bit sign[4], output int idx[4]);
    int d[8];
    int n;
    void'(to_csd(v, d));
    n = 0;
    for (int b = 0; b < 4; b++)
      if (d[2*b+1] != 0 || d[2*b] != 0) begin
        q[n]    = d[2*b+1] != 0;
        sign[n] = (d[2*b+1] + d[2*b]) < 0;
        idx[n]  = b;
        n++;
      end
    return n;
  endfunction

  function automatic void pack_row(int w[16][16], int phi,
                                   output logic [255:0] q, output logic [767:0] m);
    q = '0;
    m = '0;
    for (int c = 0; c < 16; c++)
      for (int f = 0; f < 16 / phi; f++) begin
        bit bq[4], bs[4];
        int bi[4];
        int n;
        n = csd_blocks(w[c][f], bq, bs, bi);
        for (int k = 0; k < phi && k < n; k++) begin
          int d;
          d = phi * f + k;
          q[16*c + d] = bq[k];
          m[3*(16*c + d) +: 3] = {bs[k], 2'(bi[k])};
        end
      end
  endfunction

  // Row with phi_th chosen per DBMU pair j (pm[j] = 1: phi_th = 2). w is
  // indexed by output lane d: a phi_th = 1 pair holds filters 2j and 2j+1, a
  // phi_th = 2 pair holds filter 2j in both DBMUs (w[c][2j+1] is ignored).
  function automatic void pack_row_mix(int w[16][16], logic [7:0] pm,
                                       output logic [255:0] q, output logic [767:0] m);
    q = '0;
    m = '0;
    for (int c = 0; c < 16; c++)
      for (int d = 0; d < 16; d++)
        if (lane_used(d, pm)) begin
          bit bq[4], bs[4];
          int bi[4];
          int n, phi;
          phi = pm[d / 2] ? 2 : 1;
          n = csd_blocks(w[c][d], bq, bs, bi);
          for (int k = 0; k < phi && k < n; k++) begin
            q[16*c + d + k] = bq[k];
            m[3*(16*c + d + k) +: 3] = {bs[k], 2'(bi[k])};
          end
        end
  endfunction

  // output lane d carries a filter result under pair mask pm
  function automatic bit lane_used(int d, logic [7:0] pm);
    return !pm[d / 2] || d % 2 == 0;
  endfunction

  // a random weight for lane d under pair mask pm (0 for an unused lane)
  function automatic int rand_weight_mix(int d, logic [7:0] pm);
    return lane_used(d, pm) ? rand_weight(pm[d / 2] ? 2 : 1) : 0;
  endfunction

  // a random INT8 weight approximated to exactly phi non-zero CSD digits
  function automatic int rand_weight(int phi);
    return fta_approx($urandom_range(0, 255) - 128, phi);
  endfunction

endpackage
