// Ring buffer: circular FIFO of burst-event hits, 1024 x 96 bits.
//
// The input interface writes one hit per clock at the head. Every written
// hit keeps its slot, its hit index, until the event it belongs to is
// released, so the 2D mapping (port B) and the two fitters (ports D1, D2) can
// read any stored hit by index. A release moves the tail to the given
// pointer, freeing the slots of a finished event. When all DEPTH slots are in
// use, wr_ready drops and the input interface stalls.
//
// Pointers are AW+1 bits wide (one wrap bit). Each read port returns the hit
// one clock after its enable and holds it otherwise (block-RAM behaviour).
// Besides the 96-bit record a one-bit array keeps the last-hit-of-event flag.
// Depth and width follow the source description; the three read ports (one
// RAM copy each in an FPGA), the flag array and the release scheme are this
// design's choices.
module ring_buffer
  import stt_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side (arrow A)
  input  logic          wr_valid,
  input  hit_t          wr_hit,
  input  logic          wr_last,
  output logic          wr_ready,
  output logic [AW:0]   head,
  // port B, to the 2D mapping
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output hit_t          b_hit,
  output logic          b_last,
  // ports D, to Pt Calc and Pz Calc
  input  logic          d1_en,
  input  logic [AW-1:0] d1_addr,
  output hit_t          d1_hit,
  input  logic          d2_en,
  input  logic [AW-1:0] d2_addr,
  output hit_t          d2_hit,
  // release of a finished event
  input  logic          rel_valid,
  input  logic [AW:0]   rel_ptr,
  output logic          full
);
  hit_t mem  [DEPTH];
  logic lastf[DEPTH];

  logic [AW:0] tail;

  assign full     = (head - tail) == (AW+1)'(DEPTH);
  assign wr_ready = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
    end else begin
      if (wr_valid && wr_ready) head <= head + 1'b1;
      if (rel_valid)            tail <= rel_ptr;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[head[AW-1:0]]   <= wr_hit;
      lastf[head[AW-1:0]] <= wr_last;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      b_hit  <= mem[b_addr];
      b_last <= lastf[b_addr];
    end
    if (d1_en) d1_hit <= mem[d1_addr];
    if (d2_en) d2_hit <= mem[d2_addr];
  end

  // The tail never passes the head.
  a_rel: assert property (@(posedge clk) disable iff (!rst_n)
                          rel_valid |-> ((head - rel_ptr) <= (AW+1)'(DEPTH)));
endmodule
