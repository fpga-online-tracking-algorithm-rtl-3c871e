// Self-checking test of ring_buffer (16 slots): fills the buffer through the
// write port, checks that wr_ready drops exactly when all slots are used,
// reads every slot back through ports B, D1 and D2 with one clock of latency,
// then releases part of the buffer and checks that writing resumes and that
// wrapped slots hold the new hits.
module tb_ring_buffer;
  import stt_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_valid = 0, wr_last = 0, wr_ready, full;
  hit_t wr_hit;
  logic [4:0] head, rel_ptr;
  logic rel_valid = 0;
  logic b_en = 0, d1_en = 0, d2_en = 0, b_last;
  logic [3:0] b_addr, d1_addr, d2_addr;
  hit_t b_hit, d1_hit, d2_hit;

  ring_buffer #(.DEPTH(D)) dut (.*);

  function automatic hit_t mk(int i);
    hit_t h;
    h.x = coord_t'(i * 1000 + 1); h.y = coord_t'(-i * 77); h.z = coord_t'(i);
    h.id = tube_id_t'(14'(i * 37)); h.t = dtime_t'(i * 3);
    return h;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_hit = '0; b_addr = 0; d1_addr = 0; d2_addr = 0; rel_ptr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      chk(wr_ready, $sformatf("ready before slot %0d", i));
      wr_valid = 1; wr_hit = mk(i); wr_last = (i % 5 == 4);
    end
    @(negedge clk);
    wr_valid = 1; wr_hit = mk(99);
    chk(!wr_ready && full, "full after DEPTH writes");
    chk(head == 5'(D), "head after fill");
    @(negedge clk);
    wr_valid = 0;
    chk(head == 5'(D), "no write while full");
    // read back on all three ports
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      b_en = 1; d1_en = 1; d2_en = 1;
      b_addr = 4'(i); d1_addr = 4'(D - 1 - i); d2_addr = 4'((i * 5) % D);
      @(negedge clk);
      b_en = 0; d1_en = 0; d2_en = 0;
      chk(b_hit == mk(i), $sformatf("port B slot %0d", i));
      chk(b_last == (i % 5 == 4), $sformatf("last flag slot %0d", i));
      chk(d1_hit == mk(D - 1 - i), $sformatf("port D1 slot %0d", D - 1 - i));
      chk(d2_hit == mk((i * 5) % D), $sformatf("port D2 slot %0d", (i * 5) % D));
      b_addr = 4'(i + 1);
      @(negedge clk);
      chk(b_hit == mk(i), "port B holds while disabled");
    end
    // release 6 slots, write 6 more (wrapping)
    @(negedge clk);
    rel_valid = 1; rel_ptr = 5'd6;
    @(negedge clk);
    rel_valid = 0;
    chk(wr_ready, "ready after release");
    for (int i = 0; i < 6; i++) begin
      wr_valid = 1; wr_hit = mk(100 + i); wr_last = 0;
      @(negedge clk);
    end
    wr_valid = 0;
    chk(full, "full again after 6 writes");
    for (int i = 0; i < 6; i++) begin
      d1_en = 1; d1_addr = 4'(i);
      @(negedge clk);
      d1_en = 0;
      chk(d1_hit == mk(100 + i), $sformatf("wrapped slot %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
