// tb_ref_pkg: scene generator and floating-point reference model for the
// ground segmentation testbenches.
//
// scene_point() ray-casts a synthetic solid-state lidar frame: a sensor
// 1.8 m above flat ground, 25 degree vertical and 120 degree horizontal field
// of view split into equal subframes, a rising slope in some subframes, low
// walls 12 m ahead in others, a backdrop wall 40 m ahead, and about 3 % of
// the returns dropped. ref_segment() labels one organized subframe with real
// arithmetic, following the same rules as the hardware (hold-last-valid
// repair, elevation angle to the point above, [1 2 1]/4 column smoothing,
// bottom-up seed/below/left propagation), but with exact square roots and
// arctangents instead of CORDIC.
package tb_ref_pkg;
  import gseg_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam real H  = 1800.0;   // sensor height, mm

  function automatic int unsigned hash3(int s, int r, int c);
    int unsigned h;
    h = 32'h9E3779B9 ^ (s * 32'h85EBCA6B) ^ (r * 32'hC2B2AE35) ^ (c * 32'h27D4EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  function automatic real deg2rad(real d); return d * PI / 180.0; endfunction
  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction

  // Point seen at (subframe s, row r, column c); row 0 is the top scan line.
  function automatic point_t scene_point(int s, int r, int c, int nrows, int ncols, int nslices);
    point_t p;
    real e, a, ce, se, ca, sa, t, t_bd, t_g, t_w, x0, k, den, z;
    e  = deg2rad(12.5 - 25.0 * r / (nrows - 1));
    a  = deg2rad(-60.0 + 120.0 * (s * ncols + c + 0.5) / (nslices * ncols));
    ce = $cos(e); se = $sin(e); ca = $cos(a); sa = $sin(a);
    t_bd = 40000.0 / (ce * ca);               // backdrop wall at x = 40 m
    t    = t_bd;
    // ground, with a 4 degree slope beyond x = 15 m in odd subframes
    t_g = 1.0e9;
    if (se < 0.0) begin
      t_g = H / -se;
      k   = (s % 2 == 1) ? $tan(deg2rad(4.0)) : 0.0;
      x0  = 15000.0;
      if (k > 0.0 && t_g * ce * ca > x0) begin
        den = se - k * ce * ca;
        t_g = (den < 0.0) ? (-H - k * x0) / den : 1.0e9;
      end
    end
    if (t_g < t) t = t_g;
    // low walls (up to 0.5 m above the sensor) 12 m ahead in even subframes
    if (s % 2 == 0 && c >= ncols / 3 && c < ncols / 2) begin
      t_w = 12000.0 / (ce * ca);
      z   = t_w * se;
      if (t_w < t && z <= 500.0 && z >= -H) t = t_w;
    end
    p.x     = coord_t'($rtoi(t * ce * ca + 0.5));
    p.y     = coord_t'($rtoi(t * ce * sa + ((sa >= 0.0) ? 0.5 : -0.5)));
    p.z     = coord_t'($rtoi(t * se + ((se >= 0.0) ? 0.5 : -0.5)));
    p.valid = (t * se <= 10000.0) && (hash3(s, r, c) % 31 != 0);
    if (!p.valid) begin p.x = '0; p.y = '0; p.z = '0; end
    return p;
  endfunction

  function automatic real ang_units(real y, real x);
    return $atan2(y, x) * 65536.0 / (2.0 * PI);
  endfunction

  // Reference labels of one organized subframe (row-major, row 0 on top).
  // g[i] = 1 for ground.
  function automatic void ref_segment(input point_t pin[], input int nrows, input int ncols,
                                      input real init_th, input real delta_th,
                                      output bit g[]);
    point_t p[];
    real    rho[], al[], sm[];
    bit     av[], sv[], seen[], gb[];
    point_t hold;
    bit     have;
    real    ab, ac, left_a;
    bit     left_g, seed, bl, lf, sb;
    int     i;
    p = new[nrows * ncols]; rho = new[nrows * ncols]; al = new[nrows * ncols];
    sm = new[nrows * ncols]; av = new[nrows * ncols]; sv = new[nrows * ncols];
    g = new[nrows * ncols]; seen = new[ncols]; gb = new[ncols];
    // repair
    for (int r = 0; r < nrows; r++) begin
      have = 0;
      for (int c = 0; c < ncols; c++) begin
        i = r * ncols + c;
        p[i] = pin[i];
        if (pin[i].valid) begin hold = pin[i]; have = 1; end
        else if (have && c != 0) p[i] = hold;
        rho[i] = $sqrt(real'(p[i].x) * real'(p[i].x) + real'(p[i].y) * real'(p[i].y));
      end
    end
    // elevation angles (to the point above)
    for (int r = 0; r < nrows; r++)
      for (int c = 0; c < ncols; c++) begin
        i = r * ncols + c;
        av[i] = (r > 0) && p[i].valid && p[i - ncols].valid;
        al[i] = av[i] ? ang_units(rabs(real'(p[i].z) - real'(p[i - ncols].z)),
                                  rabs(rho[i] - rho[i - ncols])) : 0.0;
      end
    // column smoothing
    for (int r = 0; r < nrows; r++)
      for (int c = 0; c < ncols; c++) begin
        i = r * ncols + c;
        ab = (r + 1 < nrows && av[i + ncols]) ? al[i + ncols] : al[i];
        ac = (r > 0 && av[i - ncols]) ? al[i - ncols] : al[i];
        sm[i] = (ab + 2.0 * al[i] + ac) / 4.0;
        sv[i] = av[i];
      end
    // propagation, bottom-up
    for (int c = 0; c < ncols; c++) begin seen[c] = 0; gb[c] = 0; end
    for (int r = nrows - 1; r >= 0; r--) begin
      left_g = 0; left_a = 0.0;
      for (int c = 0; c < ncols; c++) begin
        i    = r * ncols + c;
        sb   = (r < nrows - 1) && seen[c];
        seed = sv[i] && !sb && sm[i] < init_th;
        bl   = sv[i] && (r < nrows - 1) && gb[c] && rabs(sm[i] - sm[i + ncols]) < delta_th;
        lf   = sv[i] && (c > 0) && left_g && rabs(sm[i] - left_a) < delta_th;
        g[i] = seed || bl || lf;
        seen[c] = sb || sv[i];
        gb[c]   = g[i];
        left_g  = g[i];
        left_a  = sm[i];
      end
    end
  endfunction
endpackage
