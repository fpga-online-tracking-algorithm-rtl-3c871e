// Sequential fixed-point square root: res = sqrt(v), v and res Q.16.
//
// Bit-by-bit restoring square root of v << 16; each of the STEPS chained
// stages per clock takes two radicand bits and yields one root bit. A
// negative input is treated as zero. start is taken while busy is low; done
// pulses HALF/STEPS+1 cycles later (HALF = 40 root bits, 21 clocks by
// default). Helper of
// the fitters; the method is this design's choice.
module seq_sqrt
  import stt_pkg::*;
#(
  parameter int STEPS = 2                      // root bits per clock, divides 40
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fix_t v,
  output logic busy,
  output logic done,
  output fix_t res
);
  localparam int RW   = 64 + FRAC;             // radicand width
  localparam int HALF = RW / 2;

  logic [RW-1:0]   rad;
  logic [HALF+1:0] rem;
  logic [HALF-1:0] root;
  logic [6:0]      cnt;

  logic [HALF+1:0] rem_sh;
  logic [HALF+1:0] trial;
  logic [HALF+1:0] r_nx;
  logic [HALF-1:0] q_nx;
  logic [5:0]      j;

  always_comb begin
    r_nx   = rem;
    q_nx   = root;
    rem_sh = '0;
    trial  = '0;
    for (int k = 0; k < STEPS; k++) begin
      j      = cnt[5:0] - 6'(k);
      rem_sh = {r_nx[HALF-1:0], rad[2*j+1], rad[2*j]};
      trial  = {q_nx, 2'b01};
      if (rem_sh >= trial) begin
        r_nx = rem_sh - trial;
        q_nx = {q_nx[HALF-2:0], 1'b1};
      end else begin
        r_nx = rem_sh;
        q_nx = {q_nx[HALF-2:0], 1'b0};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; res <= '0;
      rad <= '0; rem <= '0; root <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rad  <= (v < 0) ? '0 : (RW'(unsigned'(v)) << FRAC);
          rem  <= '0;
          root <= '0;
          cnt  <= 7'(HALF - 1);
          busy <= 1'b1;
        end
      end else begin
        rem  <= r_nx;
        root <= q_nx;
        if (cnt == 7'(STEPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          res  <= fix_t'(q_nx);
        end else begin
          cnt <= cnt - 7'(STEPS);
        end
      end
    end
  end
endmodule
