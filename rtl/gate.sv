// gate: one LSTM gate, y = f(Wx*x + Wh*h + b), f = tanh or sigmoid.
//
// Three input streams arrive from the DMA ports: the layer input x, the
// previous output h, and the weight stream whose 32-bit words carry one Wx
// element (bits 15:0) and the matching Wh element (bits 31:16), since the two
// matrices are stored side by side in memory. A stream_sync aligns the three
// streams; two mac units then compute Wx*x and Wh*h in parallel over one
// weight row (the bias sits in the last column, paired with a vector element
// of 1.0). Their 32-bit results are added in 32 bits, rescaled to Q8.8 and
// sent through the non-linear module, whose segment table decides whether
// this gate is a sigmoid or a tanh gate. The structure (sync, two MACs,
// adder, rescale, non-linear) is the paper's; the bit placement of Wx and Wh
// in the weight word and the position of the rescale (after the adder, before
// the non-linearity) are this design's choice.
//
// Interface: valid/ready streams; one output per weight row of row_len
// elements. Latency from the last element of a row to the output: 1 (sync)
// + 1 (MAC) + NSEG (non-linear) cycles. sat pulses when a row sum was clipped
// by the rescale; sync_wait reports that the sync block is holding data
// while waiting for another port.
module gate
  import lstm_pkg::*;
#(
  parameter int unsigned SYNC_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] row_len,
  input  nl_cfg_t          nl_cfg,
  input  logic             x_valid,
  output logic             x_ready,
  input  q88_t             x_data,
  input  logic             h_valid,
  output logic             h_ready,
  input  q88_t             h_data,
  input  logic             w_valid,
  output logic             w_ready,
  input  logic [AXIS_W-1:0] w_data,   // {Wh, Wx}
  output logic             out_valid,
  input  logic             out_ready,
  output q88_t             out_data,
  output logic             sat,
  output logic             sync_wait
);
  // ---- sync: port 0 x, port 1 h, port 2 {Wh, Wx}
  logic [2:0]              s_in_valid, s_in_ready;
  logic [2:0][AXIS_W-1:0]  s_in_data, s_out_data;
  logic                    s_valid, s_ready;

  assign s_in_valid = {w_valid, h_valid, x_valid};
  assign s_in_data  = {w_data, {16'b0, h_data}, {16'b0, x_data}};
  assign x_ready    = s_in_ready[0];
  assign h_ready    = s_in_ready[1];
  assign w_ready    = s_in_ready[2];

  stream_sync #(.N(3), .W(AXIS_W), .DEPTH(SYNC_DEPTH)) u_sync (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s_in_valid),
    .in_ready  (s_in_ready),
    .in_data   (s_in_data),
    .out_valid (s_valid),
    .out_ready (s_ready),
    .out_data  (s_out_data),
    .waiting   (sync_wait)
  );

  // ---- two MAC units working in lock step
  logic mx_in_ready, mh_in_ready, mx_valid, mh_valid, m_take;
  acc_t mx_acc, mh_acc;

  assign s_ready = mx_in_ready && mh_in_ready;

  mac u_mac_x (
    .clk       (clk),
    .rst_n     (rst_n),
    .row_len   (row_len),
    .in_valid  (s_valid && mh_in_ready),
    .in_ready  (mx_in_ready),
    .in_vec    (q88_t'(s_out_data[0][DW-1:0])),
    .in_w      (q88_t'(s_out_data[2][DW-1:0])),
    .out_valid (mx_valid),
    .out_ready (m_take),
    .out_acc   (mx_acc)
  );

  mac u_mac_h (
    .clk       (clk),
    .rst_n     (rst_n),
    .row_len   (row_len),
    .in_valid  (s_valid && mx_in_ready),
    .in_ready  (mh_in_ready),
    .in_vec    (q88_t'(s_out_data[1][DW-1:0])),
    .in_w      (q88_t'(s_out_data[2][AXIS_W-1:DW])),
    .out_valid (mh_valid),
    .out_ready (m_take),
    .out_acc   (mh_acc)
  );

  // ---- 32-bit adder, rescale to Q8.8, non-linear function
  acc_t sum;
  q88_t sum_q;
  logic nl_in_ready, sum_sat;

  assign sum    = mx_acc + mh_acc;
  assign m_take = mx_valid && mh_valid && nl_in_ready;

  rescale u_rescale (
    .in_acc (sum),
    .out_q  (sum_q),
    .sat    (sum_sat)
  );

  assign sat = m_take && sum_sat;

  nonlinear u_nl (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (nl_cfg),
    .in_valid  (mx_valid && mh_valid),
    .in_ready  (nl_in_ready),
    .in_x      (sum_q),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_y     (out_data)
  );
endmodule
