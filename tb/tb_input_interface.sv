// Self-checking test of input_interface. A behavioural burst memory holds 40
// hits, 9 ns apart. Four T0 values are sent: two overlapping windows, one
// window with no hit and one reaching the end of the burst. For each window
// the test checks that exactly the hits with T0 <= t <= T0+200 come out, in
// order, with drift time t - T0 and the last flag on the final one; that an
// empty window pulses empty_event; and, with out_ready held high, that the
// hits leave at one per clock. A second pass repeats the windows under random
// back-pressure.
module tb_input_interface;
  import stt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NH = 40;
  logic burst_start = 0, t0_valid = 0, t0_ready, mem_en, out_valid, out_ready, out_last, empty_event;
  logic [11:0] burst_count;
  atime_t t0;
  logic [10:0] mem_addr;
  raw_hit_t mem_data;
  hit_t out_hit;
  raw_hit_t mem [NH];

  input_interface dut (.*);
  always_ff @(posedge clk) if (mem_en) mem_data <= mem[mem_addr];

  int got_idx [$];
  int got_t [$];
  int got_last [$];
  int got_cyc [$];
  int cyc = 0;
  int n_empty = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && empty_event) n_empty++;
    if (out_valid && out_ready) begin
      got_idx.push_back(int'(out_hit.x));
      got_t.push_back(int'(out_hit.t));
      got_last.push_back(int'(out_last));
      got_cyc.push_back(cyc);
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

  bit bp = 0;
  always @(negedge clk) out_ready = bp ? ($urandom_range(2) != 0) : 1'b1;

  task automatic window(int tz);
    int exp_n, k;
    got_idx.delete(); got_t.delete(); got_last.delete(); got_cyc.delete();
    @(negedge clk);
    t0 = atime_t'(tz); t0_valid = 1;
    do @(posedge clk); while (!t0_ready);
    @(negedge clk);
    t0_valid = 0;
    repeat (3) @(posedge clk);
    exp_n = 0;
    for (int i = 0; i < NH; i++) begin
      int ta = int'(mem[i].t_arr);
      if (ta >= tz && ta <= tz + 200) begin
        k = exp_n++;
        chk(k < got_idx.size() && got_idx[k] == i && got_t[k] == ta - tz,
            $sformatf("T0 %0d hit %0d", tz, i));
      end
    end
    chk(got_idx.size() == exp_n, $sformatf("T0 %0d count %0d/%0d", tz, got_idx.size(), exp_n));
    if (exp_n > 0) begin
      chk(got_last[exp_n-1] == 1, "last flag on final hit");
      for (int j = 0; j < exp_n - 1; j++) chk(got_last[j] == 0, "no early last flag");
      if (!bp) chk(got_cyc[exp_n-1] - got_cyc[0] == exp_n - 1, "one hit per clock");
    end
  endtask

  initial begin
    foreach (mem[i]) begin
      mem[i] = '0;
      mem[i].x = coord_t'(i);
      mem[i].t_arr = atime_t'(5 + 9 * i);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      bp = (pass == 1);
      @(negedge clk);
      burst_count = 12'(NH); burst_start = 1;
      @(negedge clk);
      burst_start = 0;
      window(20);
      window(120);
      window(300);
      window(340);    // runs into the end of the burst
      window(400);    // empty window: the burst ends at 356
    end
    chk(n_empty == 2, $sformatf("empty events %0d", n_empty));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
