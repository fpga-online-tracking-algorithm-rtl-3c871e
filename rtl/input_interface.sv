// Input interface: cuts burst events out of a burst of STT hits.
//
// For every event start time T0 taken from the T0 port, the module reads the
// hits of the current burst from the external burst memory in arrival-time
// order and passes on, one per clock, every hit whose arrival time lies in
// [T0, T0 + WINDOW_NS]. The drift time t = arrival - T0 replaces the arrival
// time in the record. Because consecutive T0 windows overlap, a hit may be
// sent with several events: a base pointer remembers the first hit not earlier
// than the last T0 and each new T0 restarts the scan from there.
//
// Interface: burst_start loads the number of hits of a newly stored burst and
// resets the base pointer. mem_en/mem_addr read the burst memory, whose data
// must appear on mem_data one cycle later and stay there while mem_en is low.
// Hits leave on out_valid/out_ready/out_hit; out_last marks the final hit of
// an event, found by holding each hit one cycle until its successor has been
// classified. A T0 whose window holds no hit produces no output and pulses
// empty_event. t0_ready is high for one cycle when a T0 has been handled.
//
// The 200 ns window, the 1 ns time unit implied by 10-bit drift times and the
// one-hit-per-clock rate follow the source description. The read-from-memory
// scheme, the sorted burst and the handshakes are this design's choices.
module input_interface
  import stt_pkg::*;
#(
  parameter int unsigned WINDOW_NS = 200,
  parameter int unsigned BURST_AW  = 11     // burst memory address width
) (
  input  logic                clk,
  input  logic                rst_n,
  // burst bookkeeping
  input  logic                burst_start,
  input  logic [BURST_AW:0]   burst_count,
  // T0 list
  input  logic                t0_valid,
  input  atime_t              t0,
  output logic                t0_ready,
  // burst memory read port
  output logic                mem_en,
  output logic [BURST_AW-1:0] mem_addr,
  input  raw_hit_t            mem_data,
  // burst-event hits
  output logic                out_valid,
  input  logic                out_ready,
  output hit_t                out_hit,
  output logic                out_last,
  output logic                empty_event
);
  typedef enum logic [1:0] {S_IDLE, S_RUN} state_t;
  typedef enum logic [1:0] {C_NONE, C_BEFORE, C_IN, C_END} cls_t;

  state_t            state;
  atime_t            t0_q;
  logic [BURST_AW:0] count_q;
  logic [BURST_AW:0] base;      // first hit not before the last T0
  logic [BURST_AW:0] ptr;       // next hit to read
  logic              pend;      // mem_data holds the hit read last
  logic              held_v;    // one in-window hit waiting for its successor
  hit_t              held;

  cls_t              cls;
  logic              consumed;
  logic              finish;
  logic [12:0]       t_end;

  always_comb begin
    t_end = 13'(t0_q) + 13'(WINDOW_NS);
    cls   = C_NONE;
    if (state == S_RUN) begin
      if (pend) begin
        if (mem_data.t_arr < t0_q)               cls = C_BEFORE;
        else if (13'(mem_data.t_arr) <= t_end)   cls = C_IN;
        else                                     cls = C_END;
      end else if (ptr == count_q) begin
        cls = C_END;
      end
    end
    out_valid = held_v && (cls == C_IN || cls == C_END);
    out_hit   = held;
    out_last  = (cls == C_END);
    consumed  = (cls == C_BEFORE) ||
                (cls == C_IN && (!held_v || out_ready));
    finish    = (cls == C_END) && (!held_v || out_ready);
    mem_en    = (state == S_RUN) && !finish && (ptr < count_q) &&
                (!pend || consumed);
    mem_addr  = ptr[BURST_AW-1:0];
    t0_ready  = finish;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t0_q <= '0; count_q <= '0; base <= '0; ptr <= '0;
      pend <= 1'b0; held_v <= 1'b0; held <= '0; empty_event <= 1'b0;
    end else begin
      empty_event <= 1'b0;
      if (burst_start) begin
        count_q <= burst_count;
        base    <= '0;
      end
      case (state)
        S_IDLE: begin
          if (t0_valid && !burst_start) begin
            t0_q   <= t0;
            ptr    <= base;
            pend   <= 1'b0;
            held_v <= 1'b0;
            state  <= S_RUN;
          end
        end
        S_RUN: begin
          if (cls == C_BEFORE) base <= ptr;  // the hit at ptr-1 is before T0
          if (cls == C_IN && consumed) begin
            held   <= '{x: mem_data.x, y: mem_data.y, z: mem_data.z,
                        id: mem_data.id, t: dtime_t'(mem_data.t_arr - t0_q)};
            held_v <= 1'b1;
          end
          if (mem_en) begin
            ptr  <= ptr + 1'b1;
            pend <= 1'b1;
          end else if (consumed) begin
            pend <= 1'b0;
          end
          if (finish) begin
            empty_event <= !held_v;
            held_v      <= 1'b0;
            pend        <= 1'b0;
            state       <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A hit offered downstream stays stable until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_hit));
  endproperty
  a_hold: assert property (p_hold);
endmodule
