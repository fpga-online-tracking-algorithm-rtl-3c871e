// Pt Calc: transverse-momentum fit of one tracklet, in N_ITER iterations
// (two by default).
//
// The axial hits of a tracklet are fitted with the circle
//   x^2 + y^2 + a x + b y = 0      (circle through the interaction point)
// by linear least squares. With the sums Sxx, Sxy, Syy, Sxxx, Sxxy, Sxyy,
// Syyy over the fit points,
//   a = (Syy (-Sxxx-Sxyy) - Sxy (-Sxxy-Syyy)) / (Sxx Syy - Sxy^2)
//   b = (-Sxy (-Sxxx-Sxyy) + Sxx (-Sxxy-Syyy)) / (Sxx Syy - Sxy^2).
// Iteration 1 uses the wire positions. Each further iteration replaces every
// wire by the point of its drift circle (radius d from the drift time)
// nearest to the previous circle: the wire is inside the circle when
// x^2+y^2+ax+by < 0, and the point moves by d along the radial direction
// (x - xc, y - yc) / R, outward for a wire inside, inward otherwise. Then
//   R = sqrt(a^2 + b^2) / 2,  pt = 0.3 * 2 T * R = 0.006 GeV/c per cm.
//
// Interface: the tracklet arrives as beats {hit index, layer} on
// t_valid/t_ready (t_last on the final beat); stereo beats are ignored here.
// Hit records are read from the ring buffer by index (rb_en/rb_addr, data one
// clock later). The result leaves on res_valid/res_ready; res.ok is low when
// fewer than 3 axial hits were given or the system is singular.
// Timing: per iteration one clock per hit plus one, a 1-clock solve, 21 clocks
// of division (a and b in parallel), 21 of square root and 21 for 1/R.
//
// The fit equations, c = 0, the two iterations and the inside/outside choice
// follow the source (N_ITER > 2 only helps geometries that converge more
// slowly than the detector's). It weights each hit by 1/d^2 in its cost function but
// defines the sums without weights; the sums here are unweighted, as
// defined. Products are written with * (the source uses 32-bit multiplier
// cores with 6 clocks of latency); the sequential divider and square root,
// and the 2 T field in the pt scale, are this design's choices.
module pt_calc
  import stt_pkg::*;
#(
  parameter int unsigned N_ITER = 2      // fit iterations, >= 1
) (
  input  logic     clk,
  input  logic     rst_n,
  // tracklet from the track finder (arrow C)
  input  logic     t_valid,
  output logic     t_ready,
  input  trk_hit_t t_beat,
  input  logic     t_last,
  // ring buffer (arrow D)
  output logic     rb_en,
  output hit_idx_t rb_addr,
  input  hit_t     rb_hit,
  // result (arrow E and on to Pz Calc)
  output logic     res_valid,
  input  logic     res_ready,
  output pt_res_t  res,
  output logic     busy,
  output logic [15:0] n_fits
);
  typedef enum logic [2:0] {S_CAP, S_ACC, S_SOLVE, S_DIV, S_SQRT, S_INV, S_OUT} state_t;

  state_t     state;
  hit_idx_t   ax [N_LAYERS];
  logic [4:0] n;
  logic [4:0] i_issue;
  logic [4:0] n_resp;
  logic       r_valid;
  logic [2:0] iter;

  fix_t sxx, sxy, syy, sxxx, sxxy, sxyy, syyy;
  fix_t a, b, r, inv_r;
  fix_t den, na, nb;
  logic ok;

  // per-hit datapath
  fix_t x, y, d, f, ux, uy, g, px, py, xx, yy, xy;

  always_comb begin
    x  = to_fix(rb_hit.x);
    y  = to_fix(rb_hit.y);
    d  = drift_radius(rb_hit.t);
    f  = fmul(x, x) + fmul(y, y) + fmul(a, x) + fmul(b, y);
    ux = x + (a >>> 1);
    uy = y + (b >>> 1);
    g  = fmul(d, inv_r);
    if (f >= 0) g = -g;
    px = (iter != 0) ? x + fmul(g, ux) : x;
    py = (iter != 0) ? y + fmul(g, uy) : y;
    xx = fmul(px, px);
    yy = fmul(py, py);
    xy = fmul(px, py);
  end

  // dividers and square root
  logic div_start, sqrt_start;
  fix_t div0_num, div0_den, div0_q, div1_q, sqrt_v, sqrt_r;
  logic div0_done, div1_done, div0_err, div1_err, sqrt_done;
  logic div0_busy, div1_busy, sqrt_busy;
  logic div0_seen, div1_seen;

  assign div0_num = (state == S_INV) ? ONE : na;
  assign div0_den = (state == S_INV) ? r   : den;
  assign sqrt_v   = (fmul(a, a) + fmul(b, b)) >>> 2;

  seq_div u_div0 (.clk, .rst_n, .start(div_start), .num(div0_num), .den(div0_den),
                  .busy(div0_busy), .done(div0_done), .quo(div0_q), .err(div0_err));
  seq_div u_div1 (.clk, .rst_n, .start(div_start && state == S_DIV), .num(nb), .den(den),
                  .busy(div1_busy), .done(div1_done), .quo(div1_q), .err(div1_err));
  seq_sqrt u_sqrt (.clk, .rst_n, .start(sqrt_start), .v(sqrt_v),
                   .busy(sqrt_busy), .done(sqrt_done), .res(sqrt_r));

  logic started;
  assign div_start  = (state == S_DIV || state == S_INV) && !started;
  assign sqrt_start = (state == S_SQRT) && !started;

  always_comb begin
    t_ready   = (state == S_CAP);
    rb_en     = (state == S_ACC) && (i_issue < n);
    rb_addr   = ax[i_issue];
    res_valid = (state == S_OUT);
    res       = '{ok: ok, a: a, b: b, r: r, inv_r: inv_r, pt: fmul(r, PT_PER_CM)};
    busy      = (state != S_CAP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CAP; n <= '0; i_issue <= '0; n_resp <= '0; r_valid <= 1'b0;
      iter <= '0; sxx <= '0; sxy <= '0; syy <= '0; sxxx <= '0; sxxy <= '0;
      sxyy <= '0; syyy <= '0; a <= '0; b <= '0; r <= '0; inv_r <= '0;
      den <= '0; na <= '0; nb <= '0; ok <= 1'b0; started <= 1'b0;
      div0_seen <= 1'b0; div1_seen <= 1'b0; n_fits <= '0;
    end else begin
      r_valid <= rb_en;
      if (rb_en) i_issue <= i_issue + 1'b1;
      case (state)
        S_CAP: begin
          if (t_valid) begin
            if (!is_stereo(t_beat.layer)) begin
              ax[n] <= t_beat.idx;
              n     <= n + 1'b1;
            end
            if (t_last) begin
              iter <= '0;
              ok   <= 1'b1;
              a    <= '0;
              b    <= '0;
              inv_r <= '0;
              state <= S_ACC;
            end
          end
          i_issue <= '0;
          n_resp  <= '0;
          {sxx, sxy, syy, sxxx, sxxy, sxyy, syyy} <= '0;
        end
        S_ACC: begin
          if (n < 5'd3) begin
            ok    <= 1'b0;
            state <= S_OUT;
          end else begin
            if (r_valid) begin
              sxx  <= sxx + xx;
              sxy  <= sxy + xy;
              syy  <= syy + yy;
              sxxx <= sxxx + fmul(xx, px);
              sxxy <= sxxy + fmul(xx, py);
              sxyy <= sxyy + fmul(px, yy);
              syyy <= syyy + fmul(yy, py);
              n_resp <= n_resp + 1'b1;
              if (n_resp == n - 1'b1) state <= S_SOLVE;
            end
          end
        end
        S_SOLVE: begin
          den   <= fmul(sxx, syy) - fmul(sxy, sxy);
          na    <= fmul(syy, -(sxxx + sxyy)) - fmul(sxy, -(sxxy + syyy));
          nb    <= fmul(sxx, -(sxxy + syyy)) - fmul(sxy, -(sxxx + sxyy));
          started   <= 1'b0;
          div0_seen <= 1'b0;
          div1_seen <= 1'b0;
          state <= S_DIV;
        end
        S_DIV: begin
          started <= 1'b1;
          if (div0_done) begin a <= div0_q; div0_seen <= 1'b1; if (div0_err) ok <= 1'b0; end
          if (div1_done) begin b <= div1_q; div1_seen <= 1'b1; if (div1_err) ok <= 1'b0; end
          if ((div0_seen || div0_done) && (div1_seen || div1_done)) begin
            started <= 1'b0;
            state   <= S_SQRT;
          end
        end
        S_SQRT: begin
          started <= 1'b1;
          if (sqrt_done) begin
            r       <= sqrt_r;
            started <= 1'b0;
            state   <= S_INV;
          end
        end
        S_INV: begin
          started <= 1'b1;
          if (div0_done) begin
            inv_r   <= div0_q;
            if (div0_err) ok <= 1'b0;
            started <= 1'b0;
            if (iter != 3'(N_ITER - 1) && ok && !div0_err) begin
              iter    <= iter + 1'b1;
              i_issue <= '0;
              n_resp  <= '0;
              {sxx, sxy, syy, sxxx, sxxy, sxyy, syyy} <= '0;
              state   <= S_ACC;
            end else begin
              state   <= S_OUT;
            end
          end
        end
        S_OUT: begin
          if (res_ready) begin
            n      <= '0;
            n_fits <= n_fits + 1'b1;
            state  <= S_CAP;
          end
        end
        default: state <= S_CAP;
      endcase
    end
  end
endmodule
