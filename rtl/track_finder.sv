// Track finder: follows tracks outward through the straw layers.
//
// Every hit of the innermost layer (layer 0) is a seed. From a seed the finder
// moves one layer at a time and looks up candidate tubes of the next layer in
// the 2D map, attaching the first one found Occupied:
//   * normal step: the two adjacent tubes, then the two next-to-adjacent
//     tubes (tubes 1, 2, then 3, 4 of the sketch of the method). With
//     half-tube staggered layers the adjacent tubes of tube t are t-1, t when
//     the current layer is even and t, t+1 when it is odd;
//   * at the step from the inner axial into the first stereo layer (layer 8)
//     and from the last stereo into the outer axial layers (layer 16), a wide
//     window of +-WIDE tubes around the current tube, nearest first.
// A layer without a hit is tolerated once: the search continues from the
// position the track would have had in it. Two consecutive empty layers end
// the search. A finished or abandoned tracklet is delivered only if it holds
// at least MIN_AXIAL axial and MIN_STEREO stereo hits; otherwise it is
// dropped and counted in n_rejected.
//
// Timing: map lookups are issued one per clock and answered one clock later,
// so a layer costs 2 to 5 clocks (normal) or up to 14 (wide). An accepted
// tracklet is sent as one beat per hit (hit index and layer) on
// t_valid/t_ready, t_last on the final beat; the finder then continues with
// the next seed while the fitters work. ev_done pulses when all seeds of the
// event are handled. Search order, windows, the missing-layer rule and the
// acceptance cut follow the source description; the staggering convention,
// the "nearest first" order in the wide window, the search staying inside
// the seed's sector and the seed array size are this design's choices.
module track_finder
  import stt_pkg::*;
#(
  parameter int unsigned MAX_SEEDS  = 64,
  parameter int unsigned TUBES      = 64,
  parameter int unsigned WIDE       = 6,
  parameter int unsigned MIN_AXIAL  = 3,
  parameter int unsigned MIN_STEREO = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  // seeds and start from the 2D mapping
  input  logic        seed_valid,
  input  hit_idx_t    seed_idx,
  input  tube_id_t    seed_id,
  input  logic        ev_start,
  output logic        ev_done,
  // 2D map lookup
  output logic        m_en,
  output logic [13:0] m_addr,
  input  logic [15:0] m_data,
  // tracklets (arrow C)
  output logic        t_valid,
  input  logic        t_ready,
  output trk_hit_t    t_beat,
  output logic        t_last,
  // counters
  output logic [15:0] n_tracklets,
  output logic [15:0] n_rejected,
  output logic [15:0] n_wide,
  output logic [15:0] n_missed,
  output logic [15:0] n_seed_drop
);
  localparam int unsigned SW = $clog2(MAX_SEEDS + 1);
  localparam int unsigned NW = 2 * WIDE + 1;

  typedef enum logic [2:0] {S_IDLE, S_SEED, S_SEARCH, S_CHECK, S_EMIT, S_NEXT} state_t;

  hit_idx_t   seed_idx_a [MAX_SEEDS];
  tube_id_t   seed_id_a  [MAX_SEEDS];
  logic [SW-1:0] n_seeds;
  logic [SW-1:0] si;

  trk_hit_t   list [N_LAYERS];
  logic [4:0] nh;
  logic [4:0] nax;
  logic [4:0] nst;
  logic [4:0] ei;

  state_t      state;
  logic [2:0]  seg;
  logic [4:0]  cur_layer;
  logic signed [7:0] cur_tube;
  logic        missed;           // previous layer was empty

  logic [4:0]  k_issue;
  logic        r_valid;
  logic [4:0]  r_k;
  logic        r_ok;
  logic signed [7:0] r_tube;

  logic [4:0]  sl;               // layer being searched
  logic        wide;
  logic [4:0]  nc;
  logic signed [7:0] cand;
  logic        cand_ok;
  logic        occ;
  logic        resolve;
  logic        last_layer;

  function automatic logic signed [7:0] cand_tube(input logic wide_f,
                                                 input logic odd,
                                                 input logic signed [7:0] t,
                                                 input logic [4:0] k);
    logic signed [7:0] off;
    if (wide_f) begin
      if (k == 0)       off = 0;
      else if (k[0])    off = -8'(({3'b0, k} + 8'd1) >> 1);
      else              off =  8'({3'b0, k} >> 1);
    end else begin
      case (k[1:0])
        2'd0:    off = odd ? 8'sd0  : -8'sd1;
        2'd1:    off = odd ? 8'sd1  :  8'sd0;
        2'd2:    off = odd ? -8'sd1 : -8'sd2;
        default: off = odd ? 8'sd2  :  8'sd1;
      endcase
    end
    return t + off;
  endfunction

  always_comb begin
    sl         = cur_layer + 1'b1;
    wide       = (sl == 5'(STEREO_FIRST)) || (sl == 5'(STEREO_LAST + 1));
    nc         = wide ? 5'(NW) : 5'd4;
    cand       = cand_tube(wide, cur_layer[0], cur_tube, k_issue);
    cand_ok    = (cand >= 0) && (cand < 8'(TUBES));
    occ        = r_valid && r_ok && m_data[15];
    resolve    = (state == S_CHECK) && r_valid && (occ || r_k == nc - 1'b1);
    last_layer = (sl == 5'(N_LAYERS - 1));
    m_en       = (state == S_SEARCH || state == S_CHECK) && (k_issue < nc) && !resolve;
    m_addr     = {seg, sl, cand_ok ? cand[5:0] : 6'd0};
    t_valid    = (state == S_EMIT);
    t_beat     = list[ei];
    t_last     = (ei == nh - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_seeds <= '0; si <= '0; nh <= '0; nax <= '0; nst <= '0;
      ei <= '0; seg <= '0; cur_layer <= '0; cur_tube <= '0; missed <= 1'b0;
      k_issue <= '0; r_valid <= 1'b0; r_k <= '0; r_ok <= 1'b0; r_tube <= '0;
      ev_done <= 1'b0; n_tracklets <= '0; n_rejected <= '0; n_wide <= '0;
      n_missed <= '0; n_seed_drop <= '0;
    end else begin
      ev_done <= 1'b0;
      if (seed_valid) begin
        if (n_seeds < SW'(MAX_SEEDS)) begin
          seed_idx_a[n_seeds[SW-2:0]] <= seed_idx;
          seed_id_a[n_seeds[SW-2:0]]  <= seed_id;
          n_seeds <= n_seeds + 1'b1;
        end else begin
          n_seed_drop <= n_seed_drop + 1'b1;
        end
      end
      // lookup pipeline: response of the read issued last clock
      r_valid <= m_en;
      r_k     <= k_issue;
      r_ok    <= cand_ok;
      r_tube  <= cand;
      if (m_en) k_issue <= k_issue + 1'b1;

      case (state)
        S_IDLE: begin
          if (ev_start) begin
            si <= '0;
            if (n_seeds == 0) ev_done <= 1'b1;
            else              state <= S_SEED;
          end
        end
        S_SEED: begin
          list[0]   <= '{idx: seed_idx_a[si[SW-2:0]], layer: 5'd0};
          nh        <= 5'd1;
          nax       <= 5'd1;
          nst       <= 5'd0;
          seg       <= seed_id_a[si[SW-2:0]].seg;
          cur_layer <= 5'd0;
          cur_tube  <= 8'(seed_id_a[si[SW-2:0]].tube);
          missed    <= 1'b0;
          k_issue   <= '0;
          r_valid   <= 1'b0;
          state     <= S_SEARCH;
        end
        S_SEARCH: begin
          if (wide) n_wide <= n_wide + 1'b1;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (resolve) begin
            r_valid <= 1'b0;
            k_issue <= '0;
            if (occ) begin
              list[nh]  <= '{idx: hit_idx_t'(m_data[9:0]), layer: sl};
              nh        <= nh + 1'b1;
              if (is_stereo(sl)) nst <= nst + 1'b1;
              else               nax <= nax + 1'b1;
              cur_layer <= sl;
              cur_tube  <= r_tube;
              missed    <= 1'b0;
              state     <= last_layer ? S_EMIT : S_SEARCH;
            end else begin
              n_missed  <= n_missed + 1'b1;
              cur_layer <= sl;
              if (!wide) cur_tube <= cand_tube(1'b0, cur_layer[0], cur_tube, 5'd0);
              missed    <= 1'b1;
              state     <= (missed || last_layer) ? S_EMIT : S_SEARCH;
            end
            ei <= '0;
          end
        end
        S_EMIT: begin
          // acceptance cut, then one beat per hit
          if (!(nax >= 5'(MIN_AXIAL) && nst >= 5'(MIN_STEREO))) begin
            n_rejected <= n_rejected + 1'b1;
            state      <= S_NEXT;
          end else if (t_ready) begin
            if (t_last) begin
              n_tracklets <= n_tracklets + 1'b1;
              state       <= S_NEXT;
            end else begin
              ei <= ei + 1'b1;
            end
          end
        end
        S_NEXT: begin
          if (si == n_seeds - 1'b1) begin
            n_seeds <= '0;
            ev_done <= 1'b1;
            state   <= S_IDLE;
          end else begin
            si    <= si + 1'b1;
            state <= S_SEED;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
