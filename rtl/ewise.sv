// ewise: element-wise stage, c_t = f_t*c_{t-1} + i_t*c~_t and h_t = o_t*tanh(c_t).
//
// A first stream_sync aligns i_t, c~_t and f_t (from the vector FIFOs) with
// c_{t-1} (from a DMA port). Two multipliers form i*c~ and f*c_{t-1} in
// Q16.16, a 32-bit adder sums them and the result is rescaled to Q8.8: that
// is c_t. c_t leaves the module on its own stream and, at the same time, enters
// a non-linear module loaded with a tanh table. A second stream_sync aligns
// tanh(c_t) with o_t, and a last multiplier (rescaled to Q8.8) gives h_t.
// This is the block diagram of the paper's ewise module; the register stage
// after the c_t adder, the eager two-way fork of c_t and the rescale after
// each product are this design's choices.
//
// Interface: valid/ready Q8.8 streams i, ct (c~), f, o, cp (c_{t-1}) in;
// c and h out. Latency: c_t leaves 2 cycles after its inputs are all present;
// h_t follows NSEG + 2 cycles later. sat pulses when c_t or h_t was clipped.
module ewise
  import lstm_pkg::*;
#(
  parameter int unsigned SYNC_DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  nl_cfg_t tanh_cfg,
  input  logic    i_valid,  output logic i_ready,  input q88_t i_data,
  input  logic    ct_valid, output logic ct_ready, input q88_t ct_data,
  input  logic    f_valid,  output logic f_ready,  input q88_t f_data,
  input  logic    cp_valid, output logic cp_ready, input q88_t cp_data,
  input  logic    o_valid,  output logic o_ready,  input q88_t o_data,
  output logic    c_valid,  input  logic c_ready,  output q88_t c_data,
  output logic    h_valid,  input  logic h_ready,  output q88_t h_data,
  output logic    sat,
  output logic    sync_wait
);
  // ---- first sync: 0 i, 1 c~, 2 f, 3 c_{t-1}
  logic [3:0]          s1_in_valid, s1_in_ready;
  logic [3:0][DW-1:0]  s1_in_data, s1_out;
  logic                s1_valid, s1_ready, s1_wait;

  assign s1_in_valid = {cp_valid, f_valid, ct_valid, i_valid};
  assign s1_in_data  = {cp_data, f_data, ct_data, i_data};
  assign {cp_ready, f_ready, ct_ready, i_ready} = s1_in_ready;

  stream_sync #(.N(4), .W(DW), .DEPTH(SYNC_DEPTH)) u_sync_in (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s1_in_valid),
    .in_ready  (s1_in_ready),
    .in_data   (s1_in_data),
    .out_valid (s1_valid),
    .out_ready (s1_ready),
    .out_data  (s1_out),
    .waiting   (s1_wait)
  );

  // ---- c_t = i*c~ + f*c_{t-1}
  acc_t p_ic, p_fc, c_sum;
  q88_t c_new;
  logic c_sat;

  assign p_ic  = acc_t'(q88_t'(s1_out[0])) * acc_t'(q88_t'(s1_out[1]));
  assign p_fc  = acc_t'(q88_t'(s1_out[2])) * acc_t'(q88_t'(s1_out[3]));
  assign c_sum = p_ic + p_fc;

  rescale u_rescale_c (.in_acc(c_sum), .out_q(c_new), .sat(c_sat));

  // c_t register with an eager fork to the c output and the tanh module
  logic c_reg_valid, c_to_out, c_to_nl;   // branch still owed the value
  q88_t c_reg;
  logic nl_in_ready, c_free;

  assign c_free   = !c_reg_valid || (!(c_to_out && !c_ready) && !(c_to_nl && !nl_in_ready));
  assign s1_ready = c_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_reg_valid <= 1'b0;
      c_to_out    <= 1'b0;
      c_to_nl     <= 1'b0;
      c_reg       <= '0;
    end else if (c_free) begin
      c_reg_valid <= s1_valid;
      c_to_out    <= s1_valid;
      c_to_nl     <= s1_valid;
      if (s1_valid) c_reg <= c_new;
    end else begin
      if (c_ready)     c_to_out <= 1'b0;
      if (nl_in_ready) c_to_nl  <= 1'b0;
    end
  end

  assign c_valid = c_reg_valid && c_to_out;
  assign c_data  = c_reg;

  // ---- tanh(c_t)
  logic nl_valid, nl_ready;
  q88_t nl_y;

  nonlinear u_tanh (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (tanh_cfg),
    .in_valid  (c_reg_valid && c_to_nl),
    .in_ready  (nl_in_ready),
    .in_x      (c_reg),
    .out_valid (nl_valid),
    .out_ready (nl_ready),
    .out_y     (nl_y)
  );

  // ---- second sync: 0 tanh(c_t), 1 o_t
  logic [1:0]          s2_in_ready;
  logic [1:0][DW-1:0]  s2_out;
  logic                s2_valid, s2_wait;

  stream_sync #(.N(2), .W(DW), .DEPTH(SYNC_DEPTH)) u_sync_o (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  ({o_valid, nl_valid}),
    .in_ready  (s2_in_ready),
    .in_data   ({o_data, nl_y}),
    .out_valid (s2_valid),
    .out_ready (!h_valid || h_ready),
    .out_data  (s2_out),
    .waiting   (s2_wait)
  );

  assign nl_ready = s2_in_ready[0];
  assign o_ready  = s2_in_ready[1];

  // ---- h_t = o * tanh(c_t), registered
  acc_t p_oh;
  q88_t h_new;
  logic h_sat;

  assign p_oh = acc_t'(q88_t'(s2_out[1])) * acc_t'(q88_t'(s2_out[0]));
  rescale u_rescale_h (.in_acc(p_oh), .out_q(h_new), .sat(h_sat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid <= 1'b0;
      h_data  <= '0;
    end else if (!h_valid || h_ready) begin
      h_valid <= s2_valid;
      if (s2_valid) h_data <= h_new;
    end
  end

  assign sat       = (s1_valid && s1_ready && c_sat) || (s2_valid && (!h_valid || h_ready) && h_sat);
  assign sync_wait = s1_wait || s2_wait;
endmodule
