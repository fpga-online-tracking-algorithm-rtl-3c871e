// Test geometry and track generator shared by the testbenches.
//
// A simplified straw layout: layer L (0..26) is a ring of radius 16 + L cm;
// each of the 6 sectors holds 40 tubes per layer at azimuth
// sector*60 deg + (tube + 0.5*(L odd)) * 1.5 deg, so neighbouring layers are
// staggered by half a tube. Layers 8..15 are stereo, skewed by +-2.9 deg,
// the sign alternating every two layers. Tracks start at the origin (z = 0)
// and are described by charge q, radius R (cm), start direction phi0 and
// lambda = pz/pt. The hit generator works in double precision and uses the
// exact circle geometry, independently of the fixed-point design.
package tb_geom_pkg;
  import stt_pkg::*;

  localparam real PI      = 3.14159265358979;
  localparam real DPHI    = 1.5 * PI / 180.0;
  localparam real TANA    = 0.0506578;        // tan(2.9 deg)
  localparam real VDRIFT  = 0.0025;           // cm/ns
  localparam int  NTUBE   = 40;

  typedef struct {
    int  q;
    real rad;
    real phi0;
    real lambda;
  } trk_t;

  typedef struct {
    hit_t hit;
    real  d;          // drift radius
    int   tube;
    bit   valid;
  } ghit_t;

  function automatic real r_layer(int l);
    return 16.0 + real'(l);
  endfunction

  function automatic real wire_phi(int seg, int l, int t);
    return seg * PI / 3.0 + (real'(t) + ((l % 2) ? 0.5 : 0.0)) * DPHI;
  endfunction

  function automatic bit stereo(int l);
    return l >= 8 && l <= 15;
  endfunction

  function automatic real sigma(int l);
    return (((l - 8) >> 1) & 1) ? -1.0 : 1.0;
  endfunction

  function automatic real cx(trk_t tk);
    return tk.rad * $cos(tk.phi0 + tk.q * PI / 2.0);
  endfunction
  function automatic real cy(trk_t tk);
    return tk.rad * $sin(tk.phi0 + tk.q * PI / 2.0);
  endfunction

  // azimuth of the track where it reaches radius r
  function automatic real trk_phi(trk_t tk, real r);
    real phic;
    phic = tk.phi0 + tk.q * PI / 2.0;
    return phic - tk.q * $acos(r / (2.0 * tk.rad));
  endfunction

  function automatic real arc(trk_t tk, real r);
    return 2.0 * tk.rad * $asin(r / (2.0 * tk.rad));
  endfunction

  function automatic coord_t to_c(real v);
    return coord_t'($rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real fr(fix_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic real pt_of(trk_t tk);
    return 0.006 * tk.rad;
  endfunction

  function automatic real rabs(real v);
    return v < 0 ? -v : v;
  endfunction

  function automatic int seg_of(real phi);
    real p;
    p = phi;
    while (p < 0) p += 2.0 * PI;
    while (p >= 2.0 * PI) p -= 2.0 * PI;
    return $rtoi(p / (PI / 3.0));
  endfunction

  // Hit of track tk in layer l (valid = 0 if it leaves the sector's tubes).
  function automatic ghit_t gen_hit(trk_t tk, int l);
    ghit_t g;
    real r, ph, best, wx, wy, ux, uy, h, bq, cq, disc, px, py, rx, zc, zt, dz;
    real nx, ny, d;
    int  seg, t0, tb;
    g.valid = 0;
    r   = r_layer(l);
    ph  = trk_phi(tk, r);
    seg = seg_of(ph);
    t0  = $rtoi((ph - seg * PI / 3.0) / DPHI - ((l % 2) ? 0.5 : 0.0) + 0.5);
    if (!stereo(l)) begin
      tb = t0;
      wx = r * $cos(wire_phi(seg, l, tb));
      wy = r * $sin(wire_phi(seg, l, tb));
      d  = rabs($sqrt((wx - cx(tk)) ** 2 + (wy - cy(tk)) ** 2) - tk.rad);
    end else begin
      best = 1.0e9; tb = t0; d = 0;
      for (int t = t0 - 4; t <= t0 + 4; t++) begin
        wx = r * $cos(wire_phi(seg, l, t));
        wy = r * $sin(wire_phi(seg, l, t));
        ux = -$sin(wire_phi(seg, l, t));
        uy =  $cos(wire_phi(seg, l, t));
        // |P0 + h u - C|^2 = R^2
        bq = 2.0 * (ux * (wx - cx(tk)) + uy * (wy - cy(tk)));
        cq = (wx - cx(tk)) ** 2 + (wy - cy(tk)) ** 2 - tk.rad ** 2;
        disc = bq * bq - 4.0 * cq;
        if (disc < 0) continue;
        h = (-bq + $sqrt(disc)) / 2.0;
        if (rabs((-bq - $sqrt(disc)) / 2.0) < rabs(h)) h = (-bq - $sqrt(disc)) / 2.0;
        px = wx + h * ux; py = wy + h * uy;
        rx = $sqrt(px * px + py * py);
        zc = h / (sigma(l) * TANA);
        zt = tk.lambda * arc(tk, rx);
        dz = zt - zc;
        if (rabs(dz) < best) begin
          best = rabs(dz);
          tb   = t;
          nx = (px - cx(tk)) / tk.rad; ny = (py - cy(tk)) / tk.rad;
          d  = rabs(dz) * TANA * rabs(ux * nx + uy * ny);
        end
      end
      wx = r * $cos(wire_phi(seg, l, tb));
      wy = r * $sin(wire_phi(seg, l, tb));
    end
    if (tb < 0 || tb >= NTUBE || d > 0.5) return g;
    g.valid   = 1;
    g.tube    = tb;
    g.d       = d;
    g.hit.x   = to_c(wx);
    g.hit.y   = to_c(wy);
    g.hit.z   = '0;
    g.hit.id  = '{seg: 3'(seg), layer: 5'(l), tube: 6'(tb)};
    g.hit.t   = dtime_t'($rtoi(d / VDRIFT + 0.5));
    return g;
  endfunction
endpackage
