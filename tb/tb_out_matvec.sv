// tb_out_matvec: self-checking test of the output matrix-vector unit.
//
// Random ROWS x LEN weights (bias in the last column, paired with an h
// element of 1.0), h and weights from independent sources with gaps, random
// back-pressure on y. Every y must equal the 32-bit dot product rescaled to
// Q8.8. The last two rows are large enough to clip, positive and negative,
// and must give 0x7FFF and 0x8000.
module tb_out_matvec;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
  localparam int LEN = 33, ROWS = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_valid, h_ready, w_valid, w_ready, y_valid, y_ready, sat;
  logic [15:0] h_w, w_w;
  q88_t y_data;
  int checks = 0, failures = 0;
  int expv [$];

  tb_stream_src #(.W(16), .PCT(70)) u_h (.clk, .rst_n, .valid(h_valid), .ready(h_ready), .data(h_w));
  tb_stream_src #(.W(16), .PCT(85)) u_w (.clk, .rst_n, .valid(w_valid), .ready(w_ready), .data(w_w));
  tb_stream_sink #(.W(16), .PCT(60)) u_y (.clk, .rst_n, .valid(y_valid), .ready(y_ready), .data(y_data), .last(1'b0));

  out_matvec dut (.clk, .rst_n, .row_len(CNT_W'(LEN)),
                  .h_valid, .h_ready, .h_data(q88_t'(h_w)),
                  .w_valid, .w_ready, .w_data(q88_t'(w_w)),
                  .y_valid, .y_ready, .y_data, .sat);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h [LEN];
    for (int j = 0; j < LEN; j++) h[j] = (j == LEN - 1) ? 256 : int'($urandom_range(256));
    for (int r = 0; r < ROWS; r++) begin
      int s;
      s = 0;
      for (int j = 0; j < LEN; j++) begin
        int w;
        w = (r == ROWS - 2) ? 32767 : (r == ROWS - 1) ? -32768 : rnd_q(128);
        s += w * h[j];
        u_h.q.push_back(16'(h[j]));
        u_w.q.push_back(16'(w));
      end
      expv.push_back(q_sat(longint'(s)));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_y.got.size() == ROWS);
    repeat (10) @(posedge clk);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (sext16(u_y.got[r]) != expv[r]) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d] got %0d expected %0d", r, sext16(u_y.got[r]), expv[r]);
      end
    end
    checks++;
    if (expv[ROWS-2] != 32767 || expv[ROWS-1] != -32768) begin failures++; $display("FAIL clip rows not clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
