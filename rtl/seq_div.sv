// Sequential signed fixed-point divider: quo = num / den, all Q.16.
//
// Restoring long division on magnitudes, STEPS quotient bits per clock (two
// chained compare-and-subtract stages). The quotient is limited to QW bits
// of magnitude (QW-16 integer bits); a larger quotient or a zero divisor
// raises err and returns zero. start is taken in any cycle where busy is
// low; done pulses QW/STEPS+1 cycles later (21 by default) with quo and
// err valid until the next start. Helper of the fitters; its structure is this
// design's choice (the fitters' divisions are not detailed in the source).
module seq_div
  import stt_pkg::*;
#(
  parameter int QW    = 40,
  parameter int STEPS = 2                      // quotient bits per clock, divides QW
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fix_t num,
  input  fix_t den,
  output logic busy,
  output logic done,
  output fix_t quo,
  output logic err
);
  localparam int NW = 64 + FRAC;               // width of |num| << FRAC

  logic [NW-1:0] n_mag;
  logic [64:0]   d_mag;
  logic [65:0]   rem;
  logic [QW-1:0] q;
  logic          neg;
  logic [6:0]    cnt;

  logic [NW-1:0] n_in;
  logic [64:0]   d_in;
  logic [65:0]   rem0;
  logic [65:0]   trial;
  logic [65:0]   r_nx;
  logic [QW-1:0] q_nx;

  always_comb begin
    n_in  = NW'(unsigned'(fabs(num))) << FRAC;
    d_in  = 65'(unsigned'(fabs(den)));
    rem0  = 66'(n_in >> QW);
    r_nx  = rem;
    q_nx  = q;
    trial = '0;
    for (int k = 0; k < STEPS; k++) begin
      trial = {r_nx[64:0], n_mag[cnt - 7'(k)]};
      if (trial >= 66'(d_mag)) begin
        r_nx = trial - 66'(d_mag);
        q_nx = {q_nx[QW-2:0], 1'b1};
      end else begin
        r_nx = trial;
        q_nx = {q_nx[QW-2:0], 1'b0};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quo <= '0; err <= 1'b0;
      n_mag <= '0; d_mag <= '0; rem <= '0; q <= '0; neg <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          n_mag <= n_in;
          d_mag <= d_in;
          neg   <= (num < 0) ^ (den < 0);
          rem   <= rem0;
          q     <= '0;
          cnt   <= 7'(QW - 1);
          if (den == 0 || rem0 >= 66'(d_in)) begin
            quo  <= '0;
            err  <= 1'b1;
            done <= 1'b1;
          end else begin
            err  <= 1'b0;
            busy <= 1'b1;
          end
        end
      end else begin
        rem <= r_nx;
        q   <= q_nx;
        if (cnt == 7'(STEPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= neg ? -fix_t'(q_nx) : fix_t'(q_nx);
        end else begin
          cnt <= cnt - 7'(STEPS);
        end
      end
    end
  end
endmodule
