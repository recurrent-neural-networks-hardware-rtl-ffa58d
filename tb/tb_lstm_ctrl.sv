// tb_lstm_ctrl: self-checking test of the stage sequencer.
//
// Runs LSTM operations and output operations with random result strobes and
// checks: the stage order IDLE -> IC -> FO -> EW -> IDLE (or IDLE -> OUT ->
// IDLE); that a stage ends exactly on the edge where both of its result
// streams have reached ROWS and not before (strobes of the wrong stream or of
// another stage do not count); that done is a single pulse at the end; that
// busy follows the stage; and that each input port stays open for exactly
// the number of words its stage needs (ROWS x COLS, ROWS or none).
module tb_lstm_ctrl;
  import lstm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, c_out, h_out, y_out, busy, done;
  op_e op;
  logic [CNT_W-1:0] rows, cols, cnt_a, cnt_b;
  logic [3:0] s_fire, in_open;
  logic [3:0] q_push;
  stage_e stage;
  int checks = 0, failures = 0, dones = 0;

  lstm_ctrl dut (.*);

  always @(posedge clk) if (rst_n && done) dones++;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s (stage %s)", what, stage.name()); end
  endtask

  // strobe the two result streams of the expected stage until each has
  // delivered rows results, with random extra strobes on unrelated inputs
  task automatic run_stage(input stage_e st, input int a_bit, input int b_bit);
    int na, nb;
    int beats [4];
    int need  [4];
    na = 0; nb = 0;
    // input metering: each port must close after exactly its share of words
    foreach (beats[p]) beats[p] = 0;
    for (int p = 0; p < 4; p++)
      need[p] = (st == ST_IC || st == ST_FO) ? rows * cols :
                (st == ST_EW) ? ((p == 0) ? int'(rows) : 0) :
                (p == 1 || p == 3) ? rows * cols : 0;
    while (in_open != 0) begin
      @(negedge clk);
      s_fire = in_open & 4'($urandom);
      for (int p = 0; p < 4; p++) if (s_fire[p]) beats[p]++;
    end
    @(negedge clk);
    s_fire = '0;
    for (int p = 0; p < 4; p++)
      chk(beats[p] == need[p], $sformatf("port %0d metered %0d words, expected %0d", p, beats[p], need[p]));
    while (na < rows || nb < rows) begin
      logic ea, eb;
      @(negedge clk);
      chk(stage == st, $sformatf("in stage %s", st.name()));
      chk(busy, "busy");
      ea = (na < rows) && ($urandom % 2 != 0);
      eb = (nb < rows) && ($urandom % 3 == 0);
      {q_push, c_out, h_out, y_out} = '0;
      // unrelated strobes
      if (st == ST_IC) q_push[3:2] = 2'($urandom);
      if (st == ST_FO) q_push[1:0] = 2'($urandom);
      if (st == ST_EW) q_push = 4'($urandom);
      case (st)
        ST_IC:  begin q_push[0] = ea; q_push[1] = eb; end
        ST_FO:  begin q_push[2] = ea; q_push[3] = eb; end
        ST_EW:  begin c_out = ea; h_out = eb; end
        default: begin y_out = ea; eb = ea; end
      endcase
      if (ea) na++;
      if (eb) nb++;
    end
    @(negedge clk);
    {q_push, c_out, h_out, y_out} = '0;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; op = OP_LSTM; rows = 7; cols = 3; s_fire = 0; q_push = 0; c_out = 0; h_out = 0; y_out = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      rows = CNT_W'(3 + $urandom_range(20));
      cols = CNT_W'(1 + $urandom_range(9));
      @(negedge clk);
      chk(stage == ST_IDLE && !busy, "idle before start");
      op = (n % 3 == 2) ? OP_OUT : OP_LSTM;
      start = 1;
      @(negedge clk);
      start = 0;
      if (op == OP_LSTM) begin
        run_stage(ST_IC, 0, 1);
        chk(stage == ST_FO, "IC -> FO");
        run_stage(ST_FO, 2, 3);
        chk(stage == ST_EW, "FO -> EW");
        run_stage(ST_EW, 0, 0);
      end else begin
        run_stage(ST_OUT, 0, 0);
      end
      chk(stage == ST_IDLE && !busy, "back to IDLE");
      chk(done, "done pulse at the end");
      @(negedge clk);
      chk(!done, "done is one cycle");
      chk(dones == n + 1, "one done pulse per operation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
