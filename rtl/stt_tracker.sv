// STT tracking module: the complete online tracker for one FPGA.
//
// Data flow (arrows of the block diagram in brackets):
//   burst memory + T0 list -> input_interface [A] -> ring_buffer [A]
//   ring_buffer [B] -> map2d -> track_finder
//   track_finder [C] -> pt_calc and pz_calc (one tracklet stream, taken by
//                       both at once)
//   ring_buffer [D] -> pt_calc, pz_calc (hit records by index)
//   pt_calc -> pz_calc, pt_calc [E] and pz_calc [E] -> outputs
// The front end (input interface, ring buffer, 2D mapping) handles one hit
// per clock; the back end works per tracklet, and Pt Calc and Pz Calc fit a
// tracklet while the finder looks for the next one. One event at a time
// occupies the 2D map; the next event's hits keep filling the ring buffer,
// which stalls the input interface only when all its slots are in use. A
// single event must fit in RB_DEPTH entries: a larger one can never be
// mapped completely and stalls the chain. A buffer slot is released when
// the finder and both fitters have finished that event.
// Timing: one clock per hit in the front end; per tracklet, Pt Calc needs
// about 2 x (hits + 70) clocks and Pz Calc about 26 clocks per stereo hit
// plus 2 x 50, so a 6-track event takes a few thousand clocks.
// PT_ITERS sets the number of transverse fit iterations (2 as published).
//
// Outside the module: the burst memory holding the time-sorted hits of a
// burst (read port mem_*, data one clock after mem_en) and the T0 list (t0_*).
// Results: every fitted tracklet gives one pt result (pt_valid/pt_res, also
// passed on to Pz Calc) and one pz result (pz_valid/pz_ready/pz_res).
// Counters expose how often each mechanism acted. The partition follows the
// block diagram of the source; the handshakes between blocks are this
// design's choices.
module stt_tracker
  import stt_pkg::*;
#(
  parameter int unsigned RB_DEPTH  = 1024,
  parameter int unsigned MAP_DEPTH = 16384,
  parameter int unsigned WINDOW_NS = 200,
  parameter int unsigned BURST_AW  = 11,
  parameter int unsigned MAX_SEEDS = 64,
  parameter int unsigned PT_ITERS  = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  // burst memory and T0 list
  input  logic                burst_start,
  input  logic [BURST_AW:0]   burst_count,
  input  logic                t0_valid,
  input  atime_t              t0,
  output logic                t0_ready,
  output logic                mem_en,
  output logic [BURST_AW-1:0] mem_addr,
  input  raw_hit_t            mem_data,
  // results
  output logic                pt_valid,
  output pt_res_t             pt_res,
  output logic                pz_valid,
  input  logic                pz_ready,
  output pz_res_t             pz_res,
  // status
  output logic                ready,          // map cleared after reset
  output logic [15:0]         n_events,
  output logic [15:0]         n_empty_events,
  output logic [15:0]         n_tracklets,
  output logic [15:0]         n_rejected,
  output logic [15:0]         n_wide,
  output logic [15:0]         n_missed,
  output logic [15:0]         n_seed_drop,
  output logic [15:0]         n_amb_plus,
  output logic [15:0]         n_amb_minus,
  output logic [31:0]         n_full_cycles
);
  localparam int unsigned RAW = $clog2(RB_DEPTH);

  // input interface -> ring buffer
  logic ii_valid, ii_ready, ii_last, ii_empty;
  hit_t ii_hit;

  input_interface #(.WINDOW_NS(WINDOW_NS), .BURST_AW(BURST_AW)) u_in (
    .clk, .rst_n, .burst_start, .burst_count, .t0_valid, .t0, .t0_ready,
    .mem_en, .mem_addr, .mem_data,
    .out_valid(ii_valid), .out_ready(ii_ready), .out_hit(ii_hit),
    .out_last(ii_last), .empty_event(ii_empty));

  // ring buffer
  logic [RAW:0]   rb_head, rel_ptr;
  logic           rel_valid, rb_full;
  logic           b_en, d1_en, d2_en;
  logic [RAW-1:0] b_addr;
  hit_idx_t       d1_addr, d2_addr;
  hit_t           b_hit, d1_hit, d2_hit;
  logic           b_last;

  ring_buffer #(.DEPTH(RB_DEPTH)) u_rb (
    .clk, .rst_n,
    .wr_valid(ii_valid), .wr_hit(ii_hit), .wr_last(ii_last), .wr_ready(ii_ready),
    .head(rb_head),
    .b_en, .b_addr, .b_hit, .b_last,
    .d1_en, .d1_addr(RAW'(d1_addr)), .d1_hit,
    .d2_en, .d2_addr(RAW'(d2_addr)), .d2_hit,
    .rel_valid, .rel_ptr, .full(rb_full));

  // 2D mapping
  logic        seed_valid, ev_start, finder_done, downstream_idle, init_busy;
  hit_idx_t    seed_idx;
  tube_id_t    seed_id;
  logic        f_en;
  logic [13:0] f_addr;
  logic [15:0] f_data;

  map2d #(.MAP_DEPTH(MAP_DEPTH), .RB_DEPTH(RB_DEPTH)) u_map (
    .clk, .rst_n, .init_busy,
    .rb_head, .rb_en(b_en), .rb_addr(b_addr), .rb_hit(b_hit), .rb_last(b_last),
    .seed_valid, .seed_idx, .seed_id, .ev_start, .finder_done, .downstream_idle,
    .rel_valid, .rel_ptr,
    .f_en, .f_addr($clog2(MAP_DEPTH)'(f_addr)), .f_data, .n_events);

  // track finder
  logic     t_valid, t_ready, t_last, pt_t_ready, pz_t_ready;
  trk_hit_t t_beat;

  track_finder #(.MAX_SEEDS(MAX_SEEDS)) u_tf (
    .clk, .rst_n, .seed_valid, .seed_idx, .seed_id, .ev_start, .ev_done(finder_done),
    .m_en(f_en), .m_addr(f_addr), .m_data(f_data),
    .t_valid, .t_ready, .t_beat, .t_last,
    .n_tracklets, .n_rejected, .n_wide, .n_missed, .n_seed_drop);

  assign t_ready = pt_t_ready && pz_t_ready;

  // Pt Calc
  logic pt_busy, pz_busy, pt_to_pz_ready;
  logic [15:0] n_fits;

  pt_calc #(.N_ITER(PT_ITERS)) u_pt (
    .clk, .rst_n,
    .t_valid(t_valid && t_ready), .t_ready(pt_t_ready), .t_beat, .t_last,
    .rb_en(d1_en), .rb_addr(d1_addr), .rb_hit(d1_hit),
    .res_valid(pt_valid), .res_ready(pt_to_pz_ready), .res(pt_res),
    .busy(pt_busy), .n_fits);

  // Pz Calc
  pz_calc u_pz (
    .clk, .rst_n,
    .t_valid(t_valid && t_ready), .t_ready(pz_t_ready), .t_beat, .t_last,
    .pt_valid, .pt_ready(pt_to_pz_ready), .pt_in(pt_res),
    .rb_en(d2_en), .rb_addr(d2_addr), .rb_hit(d2_hit),
    .out_valid(pz_valid), .out_ready(pz_ready), .out(pz_res),
    .busy(pz_busy), .n_amb_plus, .n_amb_minus);

  assign downstream_idle = !pt_busy && !pz_busy;
  assign ready           = !init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_empty_events <= '0;
      n_full_cycles  <= '0;
    end else begin
      if (ii_empty)            n_empty_events <= n_empty_events + 1'b1;
      if (rb_full && ii_valid) n_full_cycles  <= n_full_cycles + 1'b1;
    end
  end
endmodule
