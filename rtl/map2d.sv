// 2D mapping: occupancy map of the straw tubes for one burst event.
//
// A dual-port RAM of MAP_DEPTH x 16 bits holds one bin per tube identifier
// (3-bit sector, 5-bit layer, 6-bit tube = 14 address bits). For each hit of
// an event, read from ring-buffer port B at one hit per clock, the bin of its
// tube is marked Occupied and remembers the hit index. Hits of the innermost
// layer are also passed to the track finder as seeds. After the hit flagged
// last, ev_start starts the track finder, which reads the map through port F.
//
// Bin format: bit 15 Occupied, bits 9:0 hit index, bits 14:10 unused.
// The map is swept clear once after reset (init_busy high for MAP_DEPTH
// clocks). When the track finder reports finder_done, the event's hits are
// read again from the ring buffer and their occ_map cleared, one per clock, so
// the next event starts from an empty map. When also downstream_idle is high
// (both fitters finished), rel_valid/rel_ptr release the event's slots in the
// ring buffer and the next event is mapped.
//
// Depth, width and the mark-then-start behaviour follow the source; the bin
// layout, the clear scheme, the seed hand-over and the one-event-at-a-time
// order are this design's choices.
module map2d
  import stt_pkg::*;
#(
  parameter int unsigned MAP_DEPTH = 16384,
  parameter int unsigned RB_DEPTH  = 1024,
  localparam int unsigned MAW      = $clog2(MAP_DEPTH),
  localparam int unsigned RAW      = $clog2(RB_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic           init_busy,
  // ring buffer port B
  input  logic [RAW:0]   rb_head,
  output logic           rb_en,
  output logic [RAW-1:0] rb_addr,
  input  hit_t           rb_hit,
  input  logic           rb_last,
  // seeds and start to the track finder
  output logic           seed_valid,
  output hit_idx_t       seed_idx,
  output tube_id_t       seed_id,
  output logic           ev_start,
  input  logic           finder_done,
  input  logic           downstream_idle,
  // release of the event's ring-buffer slots
  output logic           rel_valid,
  output logic [RAW:0]   rel_ptr,
  // map read port for the track finder
  input  logic           f_en,
  input  logic [MAW-1:0] f_addr,
  output logic [15:0]    f_data,
  // counters
  output logic [15:0]    n_events
);
  typedef enum logic [2:0] {S_INIT, S_MAP, S_FIND, S_CLEAR, S_WAIT} state_t;

  logic [15:0] occ_map [MAP_DEPTH];

  state_t         state;
  logic [MAW:0]   init_cnt;
  logic [RAW:0]   ev_first;
  logic [RAW:0]   ev_end;
  logic [RAW:0]   rp;          // next ring-buffer slot to read
  logic           pend;        // rb_hit holds slot pend_ptr
  logic [RAW:0]   pend_ptr;

  // port A write
  logic           wa_en;
  logic [MAW-1:0] wa_addr;
  logic [15:0]    wa_data;

  logic           can_read;

  always_comb begin
    init_busy = (state == S_INIT);
    can_read  = 1'b0;
    if (state == S_MAP)   can_read = (rp != rb_head);
    if (state == S_CLEAR) can_read = (rp != ev_end);
    // in S_MAP stop issuing once the last hit is being processed
    if (state == S_MAP && pend && rb_last) can_read = 1'b0;
    rb_en   = can_read;
    rb_addr = rp[RAW-1:0];

    wa_en   = 1'b0;
    wa_addr = MAW'(rb_hit.id);
    wa_data = '0;
    if (state == S_INIT) begin
      wa_en   = 1'b1;
      wa_addr = init_cnt[MAW-1:0];
    end else if (pend && state == S_MAP) begin
      wa_en   = 1'b1;
      wa_data = {1'b1, 5'b0, 10'(pend_ptr[RAW-1:0])};
    end else if (pend && state == S_CLEAR) begin
      wa_en   = 1'b1;
    end

    seed_valid = pend && (state == S_MAP) && (rb_hit.id.layer == 5'd0);
    seed_idx   = hit_idx_t'(pend_ptr[RAW-1:0]);
    seed_id    = rb_hit.id;
  end

  always_ff @(posedge clk) begin
    if (wa_en) occ_map[wa_addr] <= wa_data;
  end

  always_ff @(posedge clk) begin
    if (f_en) f_data <= occ_map[f_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT; init_cnt <= '0; ev_first <= '0; ev_end <= '0;
      rp <= '0; pend <= 1'b0; pend_ptr <= '0; ev_start <= 1'b0;
      rel_valid <= 1'b0; rel_ptr <= '0; n_events <= '0;
    end else begin
      ev_start  <= 1'b0;
      rel_valid <= 1'b0;
      if (rb_en) begin
        pend     <= 1'b1;
        pend_ptr <= rp;
        rp       <= rp + 1'b1;
      end else begin
        pend <= 1'b0;
      end
      case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == (MAW+1)'(MAP_DEPTH - 1)) state <= S_MAP;
        end
        S_MAP: begin
          if (pend && rb_last) begin
            ev_end   <= pend_ptr + 1'b1;
            rp       <= pend_ptr + 1'b1;
            pend     <= 1'b0;
            ev_start <= 1'b1;
            state    <= S_FIND;
          end
        end
        S_FIND: begin
          if (finder_done) begin
            rp    <= ev_first;
            state <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          if (!rb_en && !pend) state <= S_WAIT;
        end
        S_WAIT: begin
          if (downstream_idle) begin
            rel_valid <= 1'b1;
            rel_ptr   <= ev_end;
            ev_first  <= ev_end;
            rp        <= ev_end;
            n_events  <= n_events + 1'b1;
            state     <= S_MAP;
          end
        end
        default: state <= S_INIT;
      endcase
    end
  end
endmodule
