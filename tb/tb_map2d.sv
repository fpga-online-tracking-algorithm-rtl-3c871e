// Self-checking test of map2d at full size (16384 bins). A behavioural ring
// buffer port B (one clock of latency) offers a 12-hit event followed by the
// first hits of a second event. The test checks the sweep after reset, that
// the event is mapped at one hit per clock and ev_start follows its last hit,
// that layer-0 hits are handed over as seeds, that every hit's bin reads
// Occupied with its hit index and that other bins read empty; after
// finder_done, that all bins are cleared, and that the release waits for
// downstream_idle and points just past the event. Then the second event is
// mapped.
module tb_map2d;
  import stt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_busy, rb_en, rb_last, seed_valid, ev_start, finder_done = 0, downstream_idle = 0;
  logic rel_valid, f_en = 0;
  logic [10:0] rb_head = 0, rel_ptr;
  logic [9:0] rb_addr;
  hit_t rb_hit;
  hit_idx_t seed_idx;
  tube_id_t seed_id;
  logic [13:0] f_addr = 0;
  logic [15:0] f_data, n_events;

  map2d dut (.*);

  hit_t rb [32];
  logic lastf [32];
  always_ff @(posedge clk) if (rb_en) begin rb_hit <= rb[rb_addr]; rb_last <= lastf[rb_addr]; end

  int seeds [$];
  int n_start = 0, start_cyc = 0, cyc = 0, n_rel = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && seed_valid) seeds.push_back(int'(seed_idx));
    if (rst_n && ev_start) begin n_start++; start_cyc = cyc; end
    if (rst_n && rel_valid) n_rel++;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic rd(input logic [13:0] a, output logic [15:0] v);
    @(negedge clk); f_en = 1; f_addr = a;
    @(negedge clk); f_en = 0; v = f_data;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] v;
    int c0;
    for (int i = 0; i < 32; i++) begin
      rb[i] = '0;
      rb[i].id = '{seg: 3'(i % 6), layer: 5'((i < 12) ? i % 4 : 0), tube: 6'(i + 3)};
      lastf[i] = (i == 11) || (i == 14);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(init_busy, "sweep after reset");
    wait (!init_busy);
    @(negedge clk);
    c0 = cyc;
    rb_head = 11'd15;
    wait (n_start == 1);
    chk(start_cyc - c0 <= 12 + 3, $sformatf("mapping took %0d clocks for 12 hits", start_cyc - c0));
    chk(seeds.size() == 3 && seeds[0] == 0 && seeds[1] == 4 && seeds[2] == 8, "seeds of layer 0");
    for (int i = 0; i < 12; i++) begin
      rd(14'(rb[i].id), v);
      chk(v[15] && v[9:0] == 10'(i), $sformatf("bin of hit %0d = %h", i, v));
    end
    for (int i = 12; i < 15; i++) begin
      rd(14'(rb[i].id), v);
      chk(!v[15], "hit of next event not mapped yet");
    end
    rd(14'h3fff, v);
    chk(!v[15], "untouched bin empty");
    @(negedge clk); finder_done = 1; @(negedge clk); finder_done = 0;
    repeat (30) @(negedge clk);
    chk(n_rel == 0, "release waits for downstream_idle");
    for (int i = 0; i < 12; i++) begin
      rd(14'(rb[i].id), v);
      chk(!v[15], $sformatf("bin of hit %0d cleared", i));
    end
    downstream_idle = 1;
    wait (n_rel == 1);
    @(negedge clk);
    chk(rel_ptr == 11'd12, $sformatf("release pointer %0d", rel_ptr));
    wait (n_start == 2);
    for (int i = 12; i < 15; i++) begin
      rd(14'(rb[i].id), v);
      chk(v[15] && v[9:0] == 10'(i), $sformatf("second event bin %0d", i));
    end
    chk(seeds.size() == 6, "seeds of second event");
    chk(n_events == 1, "event counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
