// nonlinear: configurable tanh / logistic sigmoid by 13 pipelined line segments.
//
// The function is approximated by NSEG straight lines, each valid on one
// range of x. The lines' slopes a, offsets b and range limits are not fixed
// in hardware: they come from configuration registers written before use, so
// the same module is a tanh or a sigmoid depending on what was loaded. The
// sample walks through NSEG line_segment stages; the first stage whose range
// holds x computes a*x + b and the later stages pass the result on. This is
// the structure the paper describes (13 segments, one MAC and one comparator
// each); the stall handling is this design's choice.
//
// Interface: in_valid/in_ready/in_x (Q8.8) and out_valid/out_ready/out_y
// (Q8.8). Latency NSEG cycles, one sample per cycle. The whole pipeline
// stalls while its output is valid and not taken.
module nonlinear
  import lstm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  nl_cfg_t cfg,
  input  logic    in_valid,
  output logic    in_ready,
  input  q88_t    in_x,
  output logic    out_valid,
  input  logic    out_ready,
  output q88_t    out_y
);
  logic en;
  logic [NSEG:0] v, d;
  q88_t          x [NSEG+1];
  q88_t          y [NSEG+1];

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  assign v[0] = in_valid;
  assign x[0] = in_x;
  assign y[0] = '0;
  assign d[0] = 1'b0;

  for (genvar s = 0; s < NSEG; s++) begin : g_seg
    line_segment u_seg (
      .clk       (clk),
      .rst_n     (rst_n),
      .en        (en),
      .cfg       (cfg[s]),
      .in_valid  (v[s]),
      .in_x      (x[s]),
      .in_y      (y[s]),
      .in_done   (d[s]),
      .out_valid (v[s+1]),
      .out_x     (x[s+1]),
      .out_y     (y[s+1]),
      .out_done  (d[s+1])
    );
  end

  assign out_valid = v[NSEG];
  assign out_y     = y[NSEG];
endmodule
