// lstm_ctrl: the state machine that sequences one accelerator operation.
//
// An LSTM layer time step runs in three stages one after the other, as in the
// paper: IC computes i_t and c~_t (gates A and B) into their FIFOs, FO
// computes f_t and o_t (gates A and C) into theirs, and EW lets the ewise
// module turn the four vectors and c_{t-1} into c_t and h_t, which go back to
// memory. The output operation (OUT) runs the extra matrix-vector product.
// Each stage ends when both of its result streams have delivered ROWS
// elements (FIFO pushes in IC and FO, output-stream handshakes in EW and
// OUT); the machine then moves on, and after EW or OUT it returns to IDLE,
// pulses done and waits for the next start (new weights and vectors, for the
// next layer or time step). Stage order is the paper's; ending a stage by
// counting results is this design's choice.
//
// The machine also meters the input streams. A stage may take only its own
// data from each DMA stream (ROWS x COLS words on every port in IC and FO,
// ROWS words of c_{t-1} on port 0 in EW, ROWS x COLS words on ports 1 and 3
// in OUT); otherwise the sync buffers of a gate would already swallow words
// of the next stage. in_open[p] is high while port p still owes words to the
// current stage, and the top gates the port's valid and ready with it.
//
// Interface: start is a one-cycle pulse sampled in IDLE, with op; the event
// inputs are one-cycle handshake strobes; s_fire[p] is the accepted-word
// strobe of input port p. cnt_a and cnt_b count the results of
// the current stage (used for tlast on the output streams). Transitions take
// effect on the clock edge on which the last result is counted.
module lstm_ctrl
  import lstm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  op_e              op,
  input  logic [CNT_W-1:0] rows,
  input  logic [CNT_W-1:0] cols,
  input  logic [3:0]       s_fire,  // input stream p accepted a word
  output logic [3:0]       in_open, // input stream p may deliver to this stage
  input  logic [3:0]       q_push,  // FIFO pushes: 0 i, 1 c~, 2 f, 3 o
  input  logic             c_out,   // c_t handshake on its output stream
  input  logic             h_out,   // h_t handshake
  input  logic             y_out,   // output-layer handshake
  output stage_e           stage,
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] cnt_a,
  output logic [CNT_W-1:0] cnt_b
);
  logic             ev_a, ev_b;
  logic [CNT_W-1:0] na, nb;
  logic             fin;

  always_comb begin
    unique case (stage)
      ST_IC:   begin ev_a = q_push[0]; ev_b = q_push[1]; end
      ST_FO:   begin ev_a = q_push[2]; ev_b = q_push[3]; end
      ST_EW:   begin ev_a = c_out;     ev_b = h_out;     end
      ST_OUT:  begin ev_a = y_out;     ev_b = y_out;     end
      default: begin ev_a = 1'b0;      ev_b = 1'b0;      end
    endcase
  end

  // ---- input metering
  logic [2*CNT_W-1:0]      mat_len;
  logic [3:0][2*CNT_W-1:0] beats, need;

  assign mat_len = rows * cols;

  always_comb begin
    unique case (stage)
      ST_IC, ST_FO: need = {4{mat_len}};
      ST_EW:        need = {{3{(2*CNT_W)'(0)}}, (2*CNT_W)'(rows)};
      ST_OUT:       need = {mat_len, (2*CNT_W)'(0), mat_len, (2*CNT_W)'(0)};
      default:      need = '0;
    endcase
    for (int p = 0; p < 4; p++) in_open[p] = (beats[p] < need[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beats <= '0;
    end else if (stage == ST_IDLE || fin) begin
      beats <= '0;
    end else begin
      for (int p = 0; p < 4; p++)
        if (s_fire[p]) beats[p] <= beats[p] + 1'b1;
    end
  end

  assign na   = cnt_a + CNT_W'(ev_a);
  assign nb   = cnt_b + CNT_W'(ev_b);
  assign fin  = (stage != ST_IDLE) && (na == rows) && (nb == rows);
  assign busy = (stage != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= ST_IDLE;
      cnt_a <= '0;
      cnt_b <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (stage == ST_IDLE) begin
        cnt_a <= '0;
        cnt_b <= '0;
        if (start) stage <= (op == OP_OUT) ? ST_OUT : ST_IC;
      end else if (fin) begin
        cnt_a <= '0;
        cnt_b <= '0;
        unique case (stage)
          ST_IC:   stage <= ST_FO;
          ST_FO:   stage <= ST_EW;
          default: begin stage <= ST_IDLE; done <= 1'b1; end
        endcase
      end else begin
        cnt_a <= na;
        cnt_b <= nb;
      end
    end
  end

  // a stage never delivers more results than the matrix has rows
  a_metered: assert property (@(posedge clk) disable iff (!rst_n)
                              (s_fire & ~in_open) == 4'b0);
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
                            busy |-> (cnt_a <= rows && cnt_b <= rows));
endmodule
