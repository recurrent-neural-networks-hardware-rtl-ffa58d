// line_segment: one stage of the piecewise-linear non-linear function.
//
// Each stage owns one line y = a*x + b and the upper end lim of the x range it
// covers. A comparator decides whether the incoming x falls in this stage's
// range (x <= lim) and no earlier stage has already taken it; if so, the
// stage's multiply-accumulate computes a*x + b (Q8.8 * Q8.8 -> Q16.16, plus b
// aligned to Q16.16, rescaled and saturated to Q8.8). Otherwise the sample
// passes on to the next stage unchanged. Segments are therefore ordered by
// increasing lim, and the last one should have lim = 0x7FFF so that every x
// is caught; a sample no stage takes leaves with y = 0. The MAC-plus-
// comparator structure and the pass-on rule follow the paper; the inclusive
// upper-bound comparison is this design's choice.
//
// Timing: one register stage. All stages of a pipeline advance together when
// en is high.
module line_segment
  import lstm_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  seg_cfg_t cfg,
  input  logic     in_valid,
  input  q88_t     in_x,
  input  q88_t     in_y,
  input  logic     in_done,
  output logic     out_valid,
  output q88_t     out_x,
  output q88_t     out_y,
  output logic     out_done
);
  logic hit;
  acc_t lin;

  assign hit = !in_done && (in_x <= cfg.lim);
  assign lin = acc_t'(cfg.a) * acc_t'(in_x) + (acc_t'(cfg.b) <<< FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      out_done  <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      out_x     <= in_x;
      out_y     <= hit ? sat_q88(lin) : in_y;
      out_done  <= in_done || hit;
    end
  end
endmodule
