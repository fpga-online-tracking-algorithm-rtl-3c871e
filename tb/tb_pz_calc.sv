// Self-checking test of pz_calc. Hits of generated helix tracks sit in a
// behavioural ring buffer (one clock of read latency); the tracklet beats
// (axial and stereo) are sent, followed by an exact transverse result
// (circle of the generated track). pz must agree with a double-precision
// model of the same two-iteration straight-line fit within 2 % (+5 MeV/c)
// and lie within 15 % (+30 MeV/c) of the generated pz. A tracklet with one
// stereo hit, and a failed transverse fit, must give ok = 0. The result must
// follow the transverse result within 27 clocks per stereo hit plus two
// line fits. Both outcomes
// of the left-right choice must occur.
module tb_pz_calc;
  import stt_pkg::*;
  import tb_geom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic t_valid = 0, t_ready, t_last = 0, pt_valid = 0, pt_ready, rb_en;
  logic out_valid, out_ready = 1, busy;
  trk_hit_t t_beat;
  pt_res_t pt_in;
  hit_idx_t rb_addr;
  hit_t rb_hit;
  pz_res_t out;
  logic [15:0] n_amb_plus, n_amb_minus;

  pz_calc dut (.*);

  hit_t rb [1024];
  always_ff @(posedge clk) if (rb_en) rb_hit <= rb[rb_addr];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void line(real zz[$], real s[$], output real m, output real z0);
    real sz, ss, sss, szs, n;
    sz = 0; ss = 0; sss = 0; szs = 0; n = zz.size();
    foreach (zz[i]) begin
      sz += zz[i]; ss += s[i]; sss += s[i] * s[i]; szs += zz[i] * s[i];
    end
    m  = (n * szs - sz * ss) / (n * sss - ss * ss);
    z0 = (sz - m * ss) / n;
  endfunction

  int nidx = 0;

  task automatic run(trk_t tk, int max_stereo, bit pt_ok);
    ghit_t g;
    int idx [$], lay [$], nst, c0, lat;
    real zc [$], sa [$], dz [$], z2 [$], a, b, xc, yc, x0, y0, r0, f, gg, m, z0;
    real ptt, pzt, ref_pz;
    nst = 0;
    xc = cx(tk); yc = cy(tk); a = -2.0 * xc; b = -2.0 * yc;
    for (int l = 0; l < N_LAYERS; l++) begin
      g = gen_hit(tk, l);
      if (!g.valid) continue;
      if (stereo(l)) begin
        if (nst >= max_stereo) continue;
        nst++;
        x0 = fr(fix_t'(g.hit.x)); y0 = fr(fix_t'(g.hit.y));
        r0 = $sqrt(x0 * x0 + y0 * y0);
        f  = x0 * x0 + y0 * y0 + a * x0 + b * y0;
        gg = y0 * xc - x0 * yc;
        zc.push_back(-f * r0 / (2.0 * sigma(l) * TANA * gg));
        sa.push_back(r0 * (1.0 + (r0 / tk.rad) ** 2 / 24.0));
        dz.push_back(real'(g.hit.t) * 164.0 / 65536.0 / TANA);
      end
      rb[nidx] = g.hit;
      idx.push_back(nidx); lay.push_back(l);
      nidx = (nidx + 1) % 1024;
    end
    ptt = pt_of(tk); pzt = ptt * tk.lambda;
    if (nst >= 2) begin
      line(zc, sa, m, z0);
      foreach (zc[i]) begin
        if (rabs(zc[i] + dz[i] - m * sa[i] - z0) <= rabs(zc[i] - dz[i] - m * sa[i] - z0))
          z2.push_back(zc[i] + dz[i]);
        else
          z2.push_back(zc[i] - dz[i]);
      end
      line(z2, sa, m, z0);
      ref_pz = ptt * m;
    end
    foreach (idx[i]) begin
      @(negedge clk);
      t_valid = 1; t_beat = '{idx: hit_idx_t'(idx[i]), layer: 5'(lay[i])}; t_last = (i == idx.size() - 1);
      while (!t_ready) @(negedge clk);
    end
    @(negedge clk); t_valid = 0; t_last = 0;
    pt_valid = 1;
    pt_in = '{ok: pt_ok, a: fix_t'($rtoi(a * 65536.0)), b: fix_t'($rtoi(b * 65536.0)),
              r: fix_t'($rtoi(tk.rad * 65536.0)), inv_r: fix_t'($rtoi(65536.0 / tk.rad)),
              pt: fix_t'($rtoi(ptt * 65536.0))};
    while (!pt_ready) @(negedge clk);
    c0 = $time;
    @(negedge clk); pt_valid = 0;
    while (!out_valid) @(negedge clk);
    lat = ($time - c0) / 10;
    if (nst < 2 || !pt_ok) begin
      chk(!out.ok, "bad input flagged");
    end else begin
      chk(out.ok, "fit ok");
      chk(rabs(fr(out.pt) - ptt) < 0.001, "pt passed through");
      chk(rabs(fr(out.pz) - ref_pz) < 0.02 * rabs(ref_pz) + 0.005,
          $sformatf("pz %f model %f", fr(out.pz), ref_pz));
      chk(rabs(fr(out.pz) - pzt) < 0.15 * rabs(pzt) + 0.03,
          $sformatf("pz %f true %f", fr(out.pz), pzt));
      chk(lat <= nst * 27 + 2 * (nst + 2 * 22 + 2) + 6, $sformatf("latency %0d clocks", lat));
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run('{q: 1,  rad: 200.0, phi0: PI / 6.0, lambda: 0.5}, 99, 1);
    run('{q: -1, rad: 150.0, phi0: PI / 2.0, lambda: -0.8}, 99, 1);
    run('{q: 1,  rad: 330.0, phi0: 3.5, lambda: 0.0}, 99, 1);
    run('{q: -1, rad: 125.0, phi0: 5.0, lambda: 1.2}, 99, 1);
    run('{q: 1,  rad: 250.0, phi0: 2.0, lambda: -0.3}, 99, 1);
    run('{q: 1,  rad: 200.0, phi0: 1.0, lambda: 0.4}, 1, 1);
    run('{q: 1,  rad: 200.0, phi0: 1.0, lambda: 0.4}, 99, 0);
    chk(n_amb_plus > 0, "left-right choice + seen");
    chk(n_amb_minus > 0, "left-right choice - seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
