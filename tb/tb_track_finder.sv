// Self-checking test of track_finder against a behavioural 2D map. Four seeds
// are offered: track A with a hit in every layer, track B missing layer 12
// (one empty layer is tolerated), track C missing layers 3 and 4 (the search
// ends after layer 2 with too few hits) and a lone noise hit. The tracklets
// of A and B must come out complete and in layer order, C and the noise seed
// must be rejected, the wide window must be used at both axial/stereo
// transitions, and ev_done must follow. t_ready toggles at random.
module tb_track_finder;
  import stt_pkg::*;
  import tb_geom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic seed_valid = 0, ev_start = 0, ev_done, m_en, t_valid, t_ready, t_last;
  hit_idx_t seed_idx;
  tube_id_t seed_id;
  logic [13:0] m_addr;
  logic [15:0] m_data;
  trk_hit_t t_beat;
  logic [15:0] n_tracklets, n_rejected, n_wide, n_missed, n_seed_drop;

  track_finder dut (.*);

  int occ [int];              // tube id -> hit index
  always_ff @(posedge clk) if (m_en) m_data <= occ.exists(int'(m_addr)) ? {1'b1, 5'b0, 10'(occ[int'(m_addr)])} : 16'h0;
  always @(negedge clk) t_ready = ($urandom_range(3) != 0);

  int exp_l [2][$];
  int got [$][$];
  int cur [$];
  int n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_done) n_done++;
    if (t_valid && t_ready) begin
      cur.push_back(int'(t_beat.idx));
      if (t_last) begin got.push_back(cur); cur.delete(); end
    end
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nidx = 0;
  int seed_list_idx [$];
  tube_id_t seed_list_id [$];

  task automatic place(trk_t tk, int ea, int skip_a, int skip_b);
    ghit_t g;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (l == skip_a || l == skip_b) continue;
      g = gen_hit(tk, l);
      if (!g.valid) continue;
      occ[int'(g.hit.id)] = nidx;
      if (ea >= 0) exp_l[ea].push_back(nidx);
      if (l == 0) begin seed_list_idx.push_back(nidx); seed_list_id.push_back(g.hit.id); end
      nidx++;
    end
  endtask

  initial begin
    trk_t tk;
    tube_id_t nid;
    tk = '{q: 1,  rad: 200.0, phi0: PI / 6.0, lambda: 0.1};          place(tk, 0, -1, -1);
    tk = '{q: -1, rad: 150.0, phi0: PI / 2.0, lambda: -0.2};         place(tk, 1, 12, -1);
    tk = '{q: 1,  rad: 300.0, phi0: 5.0 * PI / 6.0, lambda: 0.0};    place(tk, -1, 3, 4);
    nid = '{seg: 3'd4, layer: 5'd0, tube: 6'd10};
    occ[int'(nid)] = nidx; seed_list_idx.push_back(nidx); seed_list_id.push_back(nid); nidx++;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (seed_list_idx[i]) begin
      @(negedge clk);
      seed_valid = 1; seed_idx = hit_idx_t'(seed_list_idx[i]); seed_id = seed_list_id[i];
    end
    @(negedge clk); seed_valid = 0; ev_start = 1;
    @(negedge clk); ev_start = 0;
    wait (n_done == 1);
    repeat (5) @(posedge clk);
    chk(got.size() == 2, $sformatf("%0d tracklets", got.size()));
    for (int k = 0; k < 2 && k < got.size(); k++) begin
      chk(got[k].size() == exp_l[k].size(), $sformatf("tracklet %0d size %0d/%0d", k, got[k].size(), exp_l[k].size()));
      foreach (exp_l[k][j]) chk(j < got[k].size() && got[k][j] == exp_l[k][j], $sformatf("tracklet %0d hit %0d", k, j));
    end
    chk(n_tracklets == 2, "tracklet counter");
    chk(n_rejected == 2, $sformatf("rejected %0d", n_rejected));
    chk(n_wide == 4, $sformatf("wide searches %0d", n_wide));
    chk(n_missed == 5, $sformatf("missed layers %0d", n_missed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
