// out_matvec: the extra matrix-vector product y = Wy*h + by of the output layer.
//
// Besides the LSTM layer itself the accelerator has one more matrix-vector
// multiplication, used once the last LSTM layer has produced h_t, to map the
// hidden vector onto the output vector (character scores in a character
// language model). It is built like half of a gate: a stream_sync aligns
// the h stream with the weight-row stream, a mac accumulates one row (bias in
// the last column, paired with an h element of 1.0) and the 32-bit result is
// rescaled to Q8.8. No non-linearity follows; a softmax, if wanted, is left to
// software. The paper only states that this product exists; its construction
// from the same sync/MAC/rescale parts is this design's choice.
//
// Interface: valid/ready Q8.8 streams h and w in, y out; one y per row of
// row_len elements, valid 2 cycles after the row's last element arrived.
module out_matvec
  import lstm_pkg::*;
#(
  parameter int unsigned SYNC_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] row_len,
  input  logic             h_valid,
  output logic             h_ready,
  input  q88_t             h_data,
  input  logic             w_valid,
  output logic             w_ready,
  input  q88_t             w_data,
  output logic             y_valid,
  input  logic             y_ready,
  output q88_t             y_data,
  output logic             sat
);
  logic [1:0]         s_ready_in;
  logic [1:0][DW-1:0] s_out;
  logic               s_valid, s_ready;
  acc_t               acc;

  stream_sync #(.N(2), .W(DW), .DEPTH(SYNC_DEPTH)) u_sync (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  ({w_valid, h_valid}),
    .in_ready  (s_ready_in),
    .in_data   ({w_data, h_data}),
    .out_valid (s_valid),
    .out_ready (s_ready),
    .out_data  (s_out),
    .waiting   ()
  );

  assign h_ready = s_ready_in[0];
  assign w_ready = s_ready_in[1];

  mac u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .row_len   (row_len),
    .in_valid  (s_valid),
    .in_ready  (s_ready),
    .in_vec    (q88_t'(s_out[0])),
    .in_w      (q88_t'(s_out[1])),
    .out_valid (y_valid),
    .out_ready (y_ready),
    .out_acc   (acc)
  );

  rescale u_rescale (.in_acc(acc), .out_q(y_data), .sat(sat));
endmodule
