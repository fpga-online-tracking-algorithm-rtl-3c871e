// Pz Calc: longitudinal fit of one tracklet over its skewed (stereo) hits.
//
// With the transverse circle from Pt Calc (centre (xc, yc) = (-a/2, -b/2),
// radius R, through the origin), each skewed wire is intersected with the
// helix cylinder. A stereo wire with centre P0 = (x0, y0, zw) runs along
// u*sin(alpha) + z*cos(alpha), u being the unit tangent (-y0, x0)/r0 and
// alpha = +-2.9 deg alternating between double-layers. To first order its XY
// projection meets the circle at height
//   z = -F r0 / (2 sigma tan(alpha) G),   F = x0^2 + y0^2 + a x0 + b y0,
//   G = y0 xc - x0 yc,  r0 = sqrt(x0^2 + y0^2),  sigma = skew sign,
// giving Z_i = zw + z, the centre of the ellipse the isochrone draws on the
// cylinder. The arc length from the origin to the crossing is
// s_i = r0 (1 + (r0/R)^2 / 24). The track is the straight line
// Z = m s + z0 (the phi = K Z + phi0 line of the method, written with Z as
// the dependent coordinate and the arc length s = R phi), fitted by least
// squares:
//   m = (n Szs - Sz Ss) / (n Sss - Ss^2),  z0 = (Sz - m Ss) / n.
// Z is the dependent variable because it carries the measurement error;
// fitting s against Z (as phi = K Z + phi0 is written) biases the slope
// towards zero when the Z errors are large. Iteration 1 uses the ellipse
// centres. Iteration 2 resolves the left-right ambiguity: each Z_i is
// replaced by whichever end of the ellipse's major axis, Z_i +- d cot(alpha),
// lies closer to the first line. Then pz = pt * m (m = dZ/ds = pz/pt).
//
// Interface: tracklet beats arrive on the same stream as for Pt Calc (axial
// beats are ignored here); the Pt Calc result is taken on pt_valid/pt_ready;
// hits are read from the ring buffer by index, data one clock later. The
// result leaves on out_valid/out_ready; out.ok is low if fewer than 2 stereo
// hits were given, the transverse fit failed, or a system was singular.
// Timing: about 26 clocks per stereo hit for the intersection (read, then
// square root of r0 and the division -F / (2 sigma tan(alpha) G) side by
// side, 21 clocks, then one multiply by r0), then per iteration one clock per hit
// and two divisions.
//
// The two iterations, their purpose and the phi-Z straight line follow the
// source; the source does not spell out the intersection, so the
// linearised geometry above, the arc-length form of the line, the wire
// direction and the skew-sign pattern are this design's choices.
module pz_calc
  import stt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // tracklet from the track finder (arrow C)
  input  logic     t_valid,
  output logic     t_ready,
  input  trk_hit_t t_beat,
  input  logic     t_last,
  // transverse result from Pt Calc
  input  logic     pt_valid,
  output logic     pt_ready,
  input  pt_res_t  pt_in,
  // ring buffer (arrow D)
  output logic     rb_en,
  output hit_idx_t rb_addr,
  input  hit_t     rb_hit,
  // result (arrow E)
  output logic     out_valid,
  input  logic     out_ready,
  output pz_res_t  out,
  output logic     busy,
  output logic [15:0] n_amb_plus,
  output logic [15:0] n_amb_minus
);
  localparam int unsigned NS = STEREO_LAST - STEREO_FIRST + 1;

  typedef enum logic [3:0] {S_CAP, S_WAITPT, S_RD, S_GEO, S_SQDV, S_ZC, S_FIT,
                            S_KDIV, S_S0DIV, S_OUT} state_t;

  state_t     state;
  hit_idx_t   st_idx [NS];
  logic [4:0] st_lay [NS];
  fix_t       zc [NS];
  fix_t       sa [NS];
  fix_t       dz [NS];
  logic [3:0] n;
  logic [3:0] i;
  logic       iter;
  logic       ok;
  logic       started;
  logic       sq_got, dv_got;
  fix_t       qv;

  pt_res_t    ptr;
  fix_t       x0, y0, zw, d, f, g, r0;
  logic [4:0] lay;
  fix_t       sz, ss, sss, szs;
  fix_t       k, s0, pz;
  fix_t       nf;

  // division / square-root requests
  fix_t dv_num, dv_den, dv_q, sq_v, sq_r;
  logic dv_start, dv_done, dv_err, dv_busy, sq_start, sq_done, sq_busy;

  seq_div  u_div  (.clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
                   .busy(dv_busy), .done(dv_done), .quo(dv_q), .err(dv_err));
  seq_sqrt u_sqrt (.clk, .rst_n, .start(sq_start), .v(sq_v),
                   .busy(sq_busy), .done(sq_done), .res(sq_r));

  // current point of the fit loop
  fix_t z_sel, zp, zm, ep, em;
  logic pick_plus;
  fix_t tr;

  always_comb begin
    nf = fix_t'({1'b0, n}) <<< FRAC;
    zp = zc[i[2:0]] + dz[i[2:0]];
    zm = zc[i[2:0]] - dz[i[2:0]];
    ep = fabs(zp - fmul(k, sa[i[2:0]]) - s0);
    em = fabs(zm - fmul(k, sa[i[2:0]]) - s0);
    pick_plus = (ep <= em);
    z_sel = !iter ? zc[i[2:0]] : (pick_plus ? zp : zm);

    sq_v     = fmul(x0, x0) + fmul(y0, y0);
    sq_start = (state == S_SQDV) && !started;
    dv_start = (state == S_SQDV || state == S_KDIV || state == S_S0DIV) && !started;
    dv_num = '0;
    dv_den = ONE;
    case (state)
      S_SQDV: begin
        dv_num = -f;
        dv_den = skew_neg(lay) ? -(fmul(TAN_SKEW, g) <<< 1) : (fmul(TAN_SKEW, g) <<< 1);
      end
      S_KDIV: begin
        dv_num = fmul(nf, szs) - fmul(sz, ss);
        dv_den = fmul(nf, sss) - fmul(ss, ss);
      end
      S_S0DIV: begin
        dv_num = sz - fmul(k, ss);
        dv_den = nf;
      end
      default: ;
    endcase

    tr        = fmul(r0, ptr.inv_r);
    t_ready   = (state == S_CAP);
    pt_ready  = (state == S_WAITPT);
    rb_en     = (state == S_RD);
    rb_addr   = st_idx[i[2:0]];
    out_valid = (state == S_OUT);
    out       = '{ok: ok, pt: ptr.pt, pz: pz, dzds: k, z0: s0};
    busy      = (state != S_CAP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CAP; n <= '0; i <= '0; iter <= 1'b0; ok <= 1'b0; started <= 1'b0;
      sq_got <= 1'b0; dv_got <= 1'b0; qv <= '0;
      ptr <= '0; x0 <= '0; y0 <= '0; zw <= '0; d <= '0; f <= '0; g <= '0;
      r0 <= '0; lay <= '0; sz <= '0; ss <= '0; sss <= '0; szs <= '0;
      k <= '0; s0 <= '0; pz <= '0; n_amb_plus <= '0; n_amb_minus <= '0;
    end else begin
      case (state)
        S_CAP: begin
          if (t_valid) begin
            if (is_stereo(t_beat.layer) && n < 4'(NS)) begin
              st_idx[n[2:0]] <= t_beat.idx;
              st_lay[n[2:0]] <= t_beat.layer;
              n <= n + 1'b1;
            end
            if (t_last) state <= S_WAITPT;
          end
        end
        S_WAITPT: begin
          if (pt_valid) begin
            ptr   <= pt_in;
            i     <= '0;
            iter  <= 1'b0;
            ok    <= pt_in.ok && (n >= 4'd2);
            state <= (pt_in.ok && n >= 4'd2) ? S_RD : S_OUT;
          end
        end
        S_RD: state <= S_GEO;
        S_GEO: begin
          x0  <= to_fix(rb_hit.x);
          y0  <= to_fix(rb_hit.y);
          zw  <= to_fix(rb_hit.z);
          d   <= drift_radius(rb_hit.t);
          lay <= st_lay[i[2:0]];
          f   <= fmul(to_fix(rb_hit.x), to_fix(rb_hit.x)) + fmul(to_fix(rb_hit.y), to_fix(rb_hit.y))
               + fmul(ptr.a, to_fix(rb_hit.x)) + fmul(ptr.b, to_fix(rb_hit.y));
          // G = y0 xc - x0 yc with (xc, yc) = (-a/2, -b/2)
          g   <= fmul(to_fix(rb_hit.y), -(ptr.a >>> 1)) - fmul(to_fix(rb_hit.x), -(ptr.b >>> 1));
          started <= 1'b0;
          sq_got  <= 1'b0;
          dv_got  <= 1'b0;
          state   <= S_SQDV;
        end
        S_SQDV: begin
          // r0 = sqrt(x0^2 + y0^2) and q = -F / (2 sigma tan(alpha) G) in parallel
          started <= 1'b1;
          if (sq_done) begin
            r0     <= sq_r;
            sq_got <= 1'b1;
          end
          if (dv_done && started) begin
            qv     <= dv_q;
            dv_got <= 1'b1;
            if (dv_err) ok <= 1'b0;
          end
          if ((sq_got || sq_done) && (dv_got || (dv_done && started))) state <= S_ZC;
        end
        S_ZC: begin
          zc[i[2:0]] <= zw + fmul(qv, r0);
          sa[i[2:0]] <= r0 + fmul(fmul(fmul(tr, tr), r0), ONE_24TH);
          dz[i[2:0]] <= fmul(d, COT_SKEW);
          started <= 1'b0;
          if (i == n - 1'b1) begin
            i <= '0;
            {sz, ss, sss, szs} <= '0;
            state <= S_FIT;
          end else begin
            i     <= i + 1'b1;
            state <= S_RD;
          end
        end
        S_FIT: begin
          sz  <= sz + z_sel;
          ss  <= ss + sa[i[2:0]];
          sss <= sss + fmul(sa[i[2:0]], sa[i[2:0]]);
          szs <= szs + fmul(z_sel, sa[i[2:0]]);
          if (iter) begin
            if (pick_plus) n_amb_plus  <= n_amb_plus + 1'b1;
            else           n_amb_minus <= n_amb_minus + 1'b1;
          end
          if (i == n - 1'b1) begin
            started <= 1'b0;
            state   <= S_KDIV;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_KDIV: begin
          started <= 1'b1;
          if (dv_done) begin
            k <= dv_q;
            if (dv_err) ok <= 1'b0;
            started <= 1'b0;
            state   <= S_S0DIV;
          end
        end
        S_S0DIV: begin
          started <= 1'b1;
          if (dv_done) begin
            s0      <= dv_q;
            started <= 1'b0;
            i       <= '0;
            if (!iter) begin
              iter  <= 1'b1;
              {sz, ss, sss, szs} <= '0;
              state <= S_FIT;
            end else begin
              pz    <= fmul(ptr.pt, k);
              state <= S_OUT;
            end
          end
        end
        S_OUT: begin
          if (out_ready) begin
            n     <= '0;
            state <= S_CAP;
          end
        end
        default: state <= S_CAP;
      endcase
    end
  end
endmodule
