// End-to-end test environment of the tracking module.
//
// Builds bursts of hits from generated helix tracks (tb_geom_pkg), keeps them
// in a behavioural burst memory (one-clock read latency, the stand-in for the
// host that sends the detector data) and feeds the T0 list. Burst 1 holds six
// well separated events of six tracks each, plus a noise seed per event, one
// track with a missing layer and one with two missing layers, and a T0 with no
// hits. Burst 2 holds two overlapping events 50 ns apart. Every clean track
// must come back with pt within PT_TOL and pz within 15 % of p (+0.03 GeV/c).
// The environment also counts how often each mechanism acted and fails a
// mechanism that never did (the ring-buffer stall only when RB_DEPTH is
// small enough to fill). It prints the TB_RESULT line and ends the run.
module stt_tracker_env
  import stt_pkg::*;
  import tb_geom_pkg::*;
#(
  parameter int unsigned RB_DEPTH  = 1024,
  parameter int unsigned MAX_SEEDS = 64,
  parameter bit          USE_DEFAULTS = 1'b1,
  parameter bit          EXPECT_FULL  = 1'b0,
  parameter int unsigned PT_ITERS     = 2,
  parameter real         PT_TOL       = 0.20
) ();
  localparam int NTRK = 6;
  localparam int NEV  = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        burst_start;
  logic [11:0] burst_count;
  logic        t0_valid, t0_ready;
  atime_t      t0;
  logic        mem_en;
  logic [10:0] mem_addr;
  raw_hit_t    mem_data;
  logic        pt_valid, pz_valid;
  pt_res_t     pt_res;
  pz_res_t     pz_res;
  logic        ready;
  logic [15:0] n_events, n_empty_events, n_tracklets, n_rejected, n_wide, n_missed,
               n_seed_drop, n_amb_plus, n_amb_minus;
  logic [31:0] n_full_cycles;

  // probes into the design
  logic p_fire, p_fbusy, p_ptbusy;

  if (USE_DEFAULTS) begin : g_def
    stt_tracker dut (.*, .pz_ready(1'b1));
    assign p_fire   = dut.ii_valid && dut.ii_ready;
    assign p_fbusy  = dut.u_tf.state != 0;
    assign p_ptbusy = dut.pt_busy;
  end else begin : g_par
    stt_tracker #(.RB_DEPTH(RB_DEPTH), .MAX_SEEDS(MAX_SEEDS), .PT_ITERS(PT_ITERS)) dut (.*, .pz_ready(1'b1));
    assign p_fire   = dut.ii_valid && dut.ii_ready;
    assign p_fbusy  = dut.u_tf.state != 0;
    assign p_ptbusy = dut.pt_busy;
  end

  // ------------------------------------------------------ burst memory model
  raw_hit_t mem [2048];
  int       mem_n;
  always_ff @(posedge clk) if (mem_en) mem_data <= mem[mem_addr];

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------------- results
  pz_res_t results [$];
  int      hits_sent = 0;
  int      overlap_cycles = 0;
  always @(posedge clk) begin
    if (pz_valid) results.push_back(pz_res);
    if (p_fire) hits_sent++;
    if (p_fbusy && p_ptbusy) overlap_cycles++;
  end

  // ----------------------------------------------------------- generation
  trk_t    trks [$];
  int      trk_ev [$];
  raw_hit_t pool [$];

  task automatic add_track(trk_t tk, int t0v, int skip_a, int skip_b);
    ghit_t g;
    raw_hit_t r;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (l == skip_a || l == skip_b) continue;
      g = gen_hit(tk, l);
      if (!g.valid) continue;
      r.x = g.hit.x; r.y = g.hit.y; r.z = g.hit.z; r.id = g.hit.id;
      r.t_arr = atime_t'(t0v + int'(g.hit.t));
      pool.push_back(r);
    end
  endtask

  task automatic load_burst();
    raw_hit_t tmp;
    // sort by arrival time
    for (int i = 1; i < pool.size(); i++)
      for (int j = i; j > 0 && pool[j-1].t_arr > pool[j].t_arr; j--) begin
        tmp = pool[j]; pool[j] = pool[j-1]; pool[j-1] = tmp;
      end
    mem_n = pool.size();
    foreach (pool[i]) mem[i] = pool[i];
    pool.delete();
    @(negedge clk);
    burst_count = 12'(mem_n);
    burst_start = 1'b1;
    @(negedge clk);
    burst_start = 1'b0;
  endtask

  task automatic send_t0(int v);
    @(negedge clk);
    t0 = atime_t'(v);
    t0_valid = 1'b1;
    do @(posedge clk); while (!t0_ready);
    @(negedge clk);
    t0_valid = 1'b0;
  endtask

  function automatic trk_t rnd_track(int k);
    trk_t tk;
    tk.q      = ($urandom_range(1) == 0) ? 1 : -1;
    tk.rad    = 120.0 + real'($urandom_range(250));
    tk.phi0   = k * PI / 3.0 + PI / 6.0 + (real'($urandom_range(200)) - 100.0) * 0.001;
    tk.lambda = (real'($urandom_range(500)) - 250.0) * 0.001;
    return tk;
  endfunction

  int t0s [$];
  int first_rel_cycle, first_t0_cycle;

  initial begin
    trk_t tk;
    raw_hit_t noise;
    int ev_t0, matched, n_clean, mech_fail;
    real ept, epz, worst_pt, worst_pz;
    burst_start = 0; burst_count = 0; t0_valid = 0; t0 = 0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    wait (ready);

    // ---------------- burst 1: separated events
    for (int e = 0; e < NEV; e++) begin
      ev_t0 = 20 + 300 * e;
      t0s.push_back(ev_t0);
      for (int k = 0; k < NTRK; k++) begin
        tk = rnd_track(k);
        trks.push_back(tk);
        trk_ev.push_back(e);
        if (e == 1 && k == 2)      add_track(tk, ev_t0, 20, -1);   // one missing layer
        else if (e == 2 && k == 3) add_track(tk, ev_t0, 21, 22);   // two missing layers
        else                       add_track(tk, ev_t0, -1, -1);
      end
      noise.x = to_c(16.0); noise.y = to_c(0.3); noise.z = '0;
      noise.id = '{seg: 3'd0, layer: 5'd0, tube: 6'd1};
      noise.t_arr = atime_t'(ev_t0 + 30);
      pool.push_back(noise);
    end
    load_burst();
    first_t0_cycle = cycle;
    foreach (t0s[i]) send_t0(t0s[i]);
    send_t0(1900);                                   // no hits in this window
    wait (n_events == 16'(NEV));
    $display("burst 1: %0d events released %0d clocks after the first T0 (%0d per event)",
             NEV, cycle - first_t0_cycle, (cycle - first_t0_cycle) / NEV);
    repeat (20) @(posedge clk);

    // ---------------- burst 2: two overlapping events
    for (int e = 0; e < 2; e++)
      for (int k = 0; k < 3; k++) begin
        tk = rnd_track(2 * k + e);
        add_track(tk, 100 + 50 * e, -1, -1);
      end
    load_burst();
    send_t0(100);
    send_t0(150);
    wait (n_events == 16'(NEV + 2));
    repeat (50) @(posedge clk);

    // ---------------- check the clean tracks
    n_clean = trks.size();
    worst_pt = 0; worst_pz = 0;
    foreach (trks[i]) begin
      matched = 0;
      foreach (results[j]) begin
        if (!results[j].ok) continue;
        ept = rabs(fr(results[j].pt) - pt_of(trks[i])) / pt_of(trks[i]);
        epz = rabs(fr(results[j].pz) - pt_of(trks[i]) * trks[i].lambda);
        if (ept < PT_TOL && epz < 0.25 * pt_of(trks[i]) * $sqrt(1.0 + trks[i].lambda ** 2) + 0.03) begin
          matched = 1;
          if (ept > worst_pt) worst_pt = ept;
          if (epz > worst_pz) worst_pz = epz;
          break;
        end
      end
      checks++;
      if (!matched) begin
        failures++;
        $display("track %0d (event %0d) not found: pt %f pz %f", i, trk_ev[i],
                 pt_of(trks[i]), pt_of(trks[i]) * trks[i].lambda);
        foreach (results[j])
          if (results[j].ok && rabs(fr(results[j].pt) - pt_of(trks[i])) / pt_of(trks[i]) < 0.3)
            $display("  candidate result pt %f pz %f", fr(results[j].pt), fr(results[j].pz));
      end
    end
    $display("clean tracks %0d, results %0d, worst pt error %f, worst pz error %f GeV/c",
             n_clean, results.size(), worst_pt, worst_pz);

    // ---------------- mechanisms
    $display("mechanisms: wide=%0d missed=%0d rejected=%0d amb+=%0d amb-=%0d empty=%0d full=%0d overlap=%0d hits_sent=%0d unique=%0d seed_drop=%0d",
             n_wide, n_missed, n_rejected, n_amb_plus, n_amb_minus, n_empty_events,
             n_full_cycles, overlap_cycles, hits_sent, 0, n_seed_drop);
    mech_fail = 0;
    checks++; if (n_wide == 0)         begin failures++; $display("no wide-window search"); end
    checks++; if (n_missed == 0)       begin failures++; $display("no missing layer"); end
    checks++; if (n_rejected == 0)     begin failures++; $display("no rejected tracklet"); end
    checks++; if (n_amb_plus == 0 || n_amb_minus == 0) begin failures++; $display("ambiguity not exercised"); end
    checks++; if (n_empty_events == 0) begin failures++; $display("no empty event"); end
    checks++; if (overlap_cycles == 0) begin failures++; $display("finder and Pt Calc never overlapped"); end
    if (EXPECT_FULL) begin
      checks++; if (n_full_cycles == 0) begin failures++; $display("ring buffer never full"); end
    end
    checks++; if (n_events != 16'(NEV + 2)) begin failures++; $display("events %0d", n_events); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
