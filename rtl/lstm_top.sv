// lstm_top: LSTM layer accelerator with streaming DMA ports.
//
// One instance computes one LSTM layer time step,
//   i = sig(Wxi x + Whi h + bi)   f = sig(Wxf x + Whf h + bf)
//   o = sig(Wxo x + Who h + bo)   c~ = tanh(Wxc x + Whc h + bc)
//   c_t = f*c_{t-1} + i*c~        h_t = o*tanh(c_t)
// in Q8.8 fixed point, with all vectors and weights streamed from memory by
// four DMA input streams, and optionally the output layer y = Wy h + by. The
// blocks are those of the paper's LSTM module: three gate modules (sigmoid A,
// tanh B, sigmoid C), four vector FIFOs (i, c~, f, o), the ewise module, a
// router, the configuration registers and a controlling state machine, plus
// the extra output matrix-vector unit. Two gates work at a time, so one step
// takes three stages: IC (i and c~), FO (f and o), EW (c and h); see router
// for which stream carries what in each stage.
//
// Host interface: a word-addressed register bus (config_regs). Streams: four
// 32-bit valid/ready inputs s_* and three outputs m_* (0 c_t, 1 h_t, 2 y)
// with tlast on each vector's last element. Timing: a stage consumes one
// element per stream per cycle when the DMA keeps up, so a step of ROWS x COLS
// weights takes about 3 * ROWS * COLS cycles plus pipeline latency. done
// pulses when an operation has finished; busy is high during one.
//
// Parameters: FIFO_DEPTH bounds ROWS (128, the hidden size of the paper's
// model); SYNC_DEPTH is the per-port buffer of each sync block (this design's
// choice).
module lstm_top
  import lstm_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned SYNC_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration register bus
  input  logic                     cfg_we,
  input  logic [REG_AW-1:0]        cfg_addr,
  input  logic [31:0]              cfg_wdata,
  output logic [31:0]              cfg_rdata,
  // DMA input streams (memory to accelerator)
  input  logic [3:0]               s_tvalid,
  output logic [3:0]               s_tready,
  input  logic [3:0][AXIS_W-1:0]   s_tdata,
  // DMA output streams (accelerator to memory)
  output logic [2:0]               m_tvalid,
  input  logic [2:0]               m_tready,
  output logic [2:0][AXIS_W-1:0]   m_tdata,
  output logic [2:0]               m_tlast,
  output logic                     busy,
  output logic                     done
);
  // ---------------- configuration and control
  logic                      start;
  op_e                       op;
  logic [CNT_W-1:0]          rows, cols, cnt_a, cnt_b;
  nl_cfg_t [NL_TABLES-1:0]   nl_cfg;
  stage_e                    stage;
  logic                      sat_evt;   // a rescale clipped a value

  config_regs u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .cfg_rdata (cfg_rdata),
    .busy      (busy),
    .done      (done),
    .stage     (stage),
    .sat_evt   (sat_evt),
    .start     (start),
    .op        (op),
    .rows      (rows),
    .cols      (cols),
    .nl_cfg    (nl_cfg)
  );

  // ---------------- router wiring
  logic [3:0]              in_open, r_ready;
  logic [2:0]              g_x_valid, g_x_ready, g_h_valid, g_h_ready, g_w_valid, g_w_ready;
  logic [2:0]              g_o_valid, g_o_ready;
  q88_t                    g_x_data, g_h_data;
  logic [2:0][AXIS_W-1:0]  g_w_data;
  q88_t [2:0]              g_o_data;
  logic [2:0]              g_sat, g_wait;
  logic [3:0]              q_valid, q_ready, q_out_valid, q_out_ready;
  q88_t [3:0]              q_data, q_out_data;
  logic                    cp_valid, cp_ready, ec_valid, ec_ready, eh_valid, eh_ready;
  q88_t                    cp_data, ec_data, eh_data;
  logic                    oh_valid, oh_ready, ow_valid, ow_ready, oy_valid, oy_ready;
  q88_t                    oh_data, ow_data, oy_data;
  logic                    e_sat, e_wait, o_sat;

  router u_router (
    .stage     (stage),
    .s_valid   (s_tvalid & in_open),
    .s_ready   (r_ready),
    .s_data    (s_tdata),
    .g_x_valid (g_x_valid), .g_x_ready (g_x_ready), .g_x_data (g_x_data),
    .g_h_valid (g_h_valid), .g_h_ready (g_h_ready), .g_h_data (g_h_data),
    .g_w_valid (g_w_valid), .g_w_ready (g_w_ready), .g_w_data (g_w_data),
    .g_o_valid (g_o_valid), .g_o_ready (g_o_ready), .g_o_data (g_o_data),
    .q_valid   (q_valid),   .q_ready   (q_ready),   .q_data   (q_data),
    .cp_valid  (cp_valid),  .cp_ready  (cp_ready),  .cp_data  (cp_data),
    .ec_valid  (ec_valid),  .ec_ready  (ec_ready),  .ec_data  (ec_data),
    .eh_valid  (eh_valid),  .eh_ready  (eh_ready),  .eh_data  (eh_data),
    .oh_valid  (oh_valid),  .oh_ready  (oh_ready),  .oh_data  (oh_data),
    .ow_valid  (ow_valid),  .ow_ready  (ow_ready),  .ow_data  (ow_data),
    .oy_valid  (oy_valid),  .oy_ready  (oy_ready),  .oy_data  (oy_data),
    .m_valid   (m_tvalid),
    .m_ready   (m_tready),
    .m_data    (m_tdata)
  );

  // ---------------- gates: 0 = A (sigmoid), 1 = B (tanh), 2 = C (sigmoid)
  for (genvar g = 0; g < 3; g++) begin : g_gate
    gate #(.SYNC_DEPTH(SYNC_DEPTH)) u_gate (
      .clk       (clk),
      .rst_n     (rst_n),
      .row_len   (cols),
      .nl_cfg    (nl_cfg[g]),
      .x_valid   (g_x_valid[g]), .x_ready (g_x_ready[g]), .x_data (g_x_data),
      .h_valid   (g_h_valid[g]), .h_ready (g_h_ready[g]), .h_data (g_h_data),
      .w_valid   (g_w_valid[g]), .w_ready (g_w_ready[g]), .w_data (g_w_data[g]),
      .out_valid (g_o_valid[g]),
      .out_ready (g_o_ready[g]),
      .out_data  (g_o_data[g]),
      .sat       (g_sat[g]),
      .sync_wait (g_wait[g])
    );
  end

  // ---------------- vector FIFOs: 0 i, 1 c~, 2 f, 3 o
  for (genvar q = 0; q < 4; q++) begin : g_fifo
    stream_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (q_valid[q]),
      .in_ready  (q_ready[q]),
      .in_data   (q_data[q]),
      .out_valid (q_out_valid[q]),
      .out_ready (q_out_ready[q]),
      .out_data  (q_out_data[q]),
      .count     ()
    );
  end

  // ---------------- element-wise stage
  ewise #(.SYNC_DEPTH(SYNC_DEPTH)) u_ewise (
    .clk       (clk),
    .rst_n     (rst_n),
    .tanh_cfg  (nl_cfg[3]),
    .i_valid   (q_out_valid[0]), .i_ready  (q_out_ready[0]), .i_data  (q_out_data[0]),
    .ct_valid  (q_out_valid[1]), .ct_ready (q_out_ready[1]), .ct_data (q_out_data[1]),
    .f_valid   (q_out_valid[2]), .f_ready  (q_out_ready[2]), .f_data  (q_out_data[2]),
    .cp_valid  (cp_valid),       .cp_ready (cp_ready),       .cp_data (cp_data),
    .o_valid   (q_out_valid[3]), .o_ready  (q_out_ready[3]), .o_data  (q_out_data[3]),
    .c_valid   (ec_valid),       .c_ready  (ec_ready),       .c_data  (ec_data),
    .h_valid   (eh_valid),       .h_ready  (eh_ready),       .h_data  (eh_data),
    .sat       (e_sat),
    .sync_wait (e_wait)
  );

  // ---------------- output-layer matrix-vector product
  out_matvec #(.SYNC_DEPTH(SYNC_DEPTH)) u_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .row_len (cols),
    .h_valid (oh_valid), .h_ready (oh_ready), .h_data (oh_data),
    .w_valid (ow_valid), .w_ready (ow_ready), .w_data (ow_data),
    .y_valid (oy_valid), .y_ready (oy_ready), .y_data (oy_data),
    .sat     (o_sat)
  );

  assign sat_evt = (|g_sat) || e_sat || (o_sat && oy_valid && oy_ready);

  // ---------------- controller
  logic [3:0] q_push;
  assign q_push = q_valid & q_ready;

  lstm_ctrl u_ctrl (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (start),
    .op     (op),
    .rows   (rows),
    .cols   (cols),
    .s_fire (s_tvalid & s_tready),
    .in_open(in_open),
    .q_push (q_push),
    .c_out  (m_tvalid[0] && m_tready[0]),
    .h_out  (m_tvalid[1] && m_tready[1]),
    .y_out  (m_tvalid[2] && m_tready[2]),
    .stage  (stage),
    .busy   (busy),
    .done   (done),
    .cnt_a  (cnt_a),
    .cnt_b  (cnt_b)
  );

  assign s_tready = r_ready & in_open;

  assign m_tlast[0] = (stage == ST_EW)  && (cnt_a == rows - 1'b1);
  assign m_tlast[1] = (stage == ST_EW)  && (cnt_b == rows - 1'b1);
  assign m_tlast[2] = (stage == ST_OUT) && (cnt_a == rows - 1'b1);

  // ROWS must fit the vector FIFOs
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
                               start |=> (rows <= CNT_W'(FIFO_DEPTH)));
endmodule
