// Self-checking test of pt_calc (two iterations). Hits of generated tracks
// sit in a behavioural ring buffer (one clock of read latency). Each tracklet
// is sent as beats over all its layers; the result must agree with a
// double-precision model of the same two-iteration fit to 0.5 % in R and
// pt, lie within 20 % of the generated pt, and arrive within the expected
// number of clocks. A tracklet with only two axial hits must give ok = 0.
module tb_pt_calc;
  import stt_pkg::*;
  import tb_geom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic t_valid = 0, t_ready, t_last = 0, rb_en, res_valid, res_ready = 1, busy;
  trk_hit_t t_beat;
  hit_idx_t rb_addr;
  hit_t rb_hit;
  pt_res_t res;
  logic [15:0] n_fits;

  pt_calc dut (.*);

  hit_t rb [1024];
  real  rd_d [1024];
  always_ff @(posedge clk) if (rb_en) rb_hit <= rb[rb_addr];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // double-precision model: fit over (x, y) points
  function automatic void fit(real px[$], real py[$], output real a, output real b);
    real sxx, syy, sxy, qx, qy, dd;
    sxx = 0; syy = 0; sxy = 0; qx = 0; qy = 0;
    foreach (px[i]) begin
      sxx += px[i] * px[i]; syy += py[i] * py[i]; sxy += px[i] * py[i];
      qx -= px[i] ** 3 + px[i] * py[i] * py[i];
      qy -= px[i] * px[i] * py[i] + py[i] ** 3;
    end
    dd = sxx * syy - sxy * sxy;
    a = (syy * qx - sxy * qy) / dd;
    b = (-sxy * qx + sxx * qy) / dd;
  endfunction

  int nidx = 0;

  task automatic run(trk_t tk, int max_axial);
    ghit_t g;
    int idx [$], lay [$], nax, c0, lat;
    real wx [$], wy [$], dr [$], px [$], py [$], a, b, r, f, s;
    nax = 0;
    for (int l = 0; l < N_LAYERS; l++) begin
      g = gen_hit(tk, l);
      if (!g.valid) continue;
      if (!stereo(l)) begin
        if (nax >= max_axial) continue;
        nax++;
      end
      rb[nidx] = g.hit;
      idx.push_back(nidx); lay.push_back(l);
      if (!stereo(l)) begin
        wx.push_back(fr(fix_t'(g.hit.x))); wy.push_back(fr(fix_t'(g.hit.y)));
        dr.push_back(real'(g.hit.t) * 164.0 / 65536.0);
      end
      nidx = (nidx + 1) % 1024;
    end
    // reference
    fit(wx, wy, a, b);
    r = $sqrt(a * a + b * b) / 2.0;
    foreach (wx[i]) begin
      f = wx[i] ** 2 + wy[i] ** 2 + a * wx[i] + b * wy[i];
      s = (f < 0 ? 1.0 : -1.0) * dr[i] / r;
      px.push_back(wx[i] + s * (wx[i] + a / 2.0));
      py.push_back(wy[i] + s * (wy[i] + b / 2.0));
    end
    fit(px, py, a, b);
    r = $sqrt(a * a + b * b) / 2.0;
    // drive
    foreach (idx[i]) begin
      @(negedge clk);
      t_valid = 1; t_beat = '{idx: hit_idx_t'(idx[i]), layer: 5'(lay[i])}; t_last = (i == idx.size() - 1);
      while (!t_ready) @(negedge clk);
    end
    c0 = $time;
    @(negedge clk); t_valid = 0; t_last = 0;
    while (!res_valid) @(negedge clk);
    lat = ($time - c0) / 10;
    if (max_axial < 3) begin
      chk(!res.ok, "too few axial hits flagged");
    end else begin
      chk(res.ok, "fit ok");
      chk(rabs(fr(res.r) - r) / r < 0.005, $sformatf("R %f model %f", fr(res.r), r));
      chk(rabs(fr(res.pt) - 0.006 * r) / (0.006 * r) < 0.005, $sformatf("pt %f model %f", fr(res.pt), 0.006 * r));
      chk(rabs(fr(res.pt) - pt_of(tk)) / pt_of(tk) < 0.20, $sformatf("pt %f true %f", fr(res.pt), pt_of(tk)));
      chk(lat <= 2 * (nax + 2 + 1 + 3 * 22) + 4, $sformatf("latency %0d clocks", lat));
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run('{q: 1,  rad: 200.0, phi0: PI / 6.0, lambda: 0.1}, 99);
    run('{q: -1, rad: 150.0, phi0: PI / 2.0, lambda: -0.2}, 99);
    run('{q: 1,  rad: 330.0, phi0: 3.5, lambda: 0.0}, 99);
    run('{q: -1, rad: 125.0, phi0: 5.0, lambda: 0.3}, 99);
    run('{q: 1,  rad: 200.0, phi0: 1.0, lambda: 0.0}, 2);
    chk(n_fits == 5, "fit counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
