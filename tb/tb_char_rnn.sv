// tb_char_rnn: throughput test of the LSTM accelerator on the text-generation
// workload it was built for.
//
// The same two-layer, 128-unit, 65-symbol character model as tb_lstm_top,
// with random Q8.8 weights, generates STEPS symbols. Each step runs layer 0,
// layer 1 and the output layer, and the argmax of the scores becomes the
// next one-hot input. Here the DMA models stream a word on every cycle and
// the result sinks never stall, as an ideal memory system would. The test
// checks every c_t, h_t and y value against the integer reference model,
// and it counts the cycles in which the engine is busy during each step.
// That count may not be below the streaming bound: one word per port per
// cycle, 2 * (2 * ROWS * COLS + ROWS) + 65 * COLS = 74,689 cycles for this
// model. It may exceed the bound only by the pipeline fill and drain of the
// seven stages of a step (at most 40 cycles each). STEPS is 1000, the length
// of the generated text in the published experiment, and the test prints
// the time that text takes at the 142 MHz clock of the published
// implementation. The engine's own time is counted, not the host's. Every
// 100th step is printed.
module tb_char_rnn;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int H = 128, V = 65, COLS = H + 1, L = 2;
  localparam int STEPS = 1000;
  localparam int IDEAL = 2 * (2 * H * COLS + H) + V * COLS;   // 74,689

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  logic [REG_AW-1:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [3:0] s_tvalid, s_tready;
  logic [3:0][31:0] s_tdata;
  logic [2:0] m_tvalid, m_tready, m_tlast;
  logic [2:0][31:0] m_tdata;
  logic busy, done;

  lstm_top dut (.*);

  tb_stream_src #(.W(32), .PCT(100)) u_s0 (.clk, .rst_n, .valid(s_tvalid[0]), .ready(s_tready[0]), .data(s_tdata[0]));
  tb_stream_src #(.W(32), .PCT(100)) u_s1 (.clk, .rst_n, .valid(s_tvalid[1]), .ready(s_tready[1]), .data(s_tdata[1]));
  tb_stream_src #(.W(32), .PCT(100)) u_s2 (.clk, .rst_n, .valid(s_tvalid[2]), .ready(s_tready[2]), .data(s_tdata[2]));
  tb_stream_src #(.W(32), .PCT(100)) u_s3 (.clk, .rst_n, .valid(s_tvalid[3]), .ready(s_tready[3]), .data(s_tdata[3]));
  tb_stream_sink #(.W(32), .PCT(100)) u_m0 (.clk, .rst_n, .valid(m_tvalid[0]), .ready(m_tready[0]), .data(m_tdata[0]), .last(m_tlast[0]));
  tb_stream_sink #(.W(32), .PCT(100)) u_m1 (.clk, .rst_n, .valid(m_tvalid[1]), .ready(m_tready[1]), .data(m_tdata[1]), .last(m_tlast[1]));
  tb_stream_sink #(.W(32), .PCT(100)) u_m2 (.clk, .rst_n, .valid(m_tvalid[2]), .ready(m_tready[2]), .data(m_tdata[2]), .last(m_tlast[2]));

  int checks = 0, failures = 0;

  // ---------------- model
  // gate order in the weight arrays: 0 i, 1 f, 2 o, 3 c~
  int Wx [L][4][H][COLS];
  int Wh [L][4][H][COLS];
  int Wy [V][COLS];
  int hs [L][H];
  int cs [L][H];
  tab_t sig, tnh;

  // ---------------- mechanism counters
  int n_stage [8];
  int n_sync_wait = 0, n_bcast_hold = 0, n_backpressure = 0, n_flat = 0, n_clip = 0;
  int max_fifo = 0;
  int n_busy = 0;
  stage_e prev_stage = ST_IDLE;

  always @(posedge clk) if (rst_n) begin
    if (dut.stage != prev_stage) n_stage[int'(dut.stage)]++;
    prev_stage = dut.stage;
    if (|dut.g_wait || dut.e_wait) n_sync_wait++;
    if (busy) n_busy++;
    if ((dut.stage == ST_IC || dut.stage == ST_FO) &&
        ((s_tvalid[0] && !s_tready[0] && |(dut.g_x_ready)) || (s_tvalid[3] && !s_tready[3] && |(dut.g_h_ready))))
      n_bcast_hold++;
    if (|(m_tvalid & ~m_tready)) n_backpressure++;
    if (int'(dut.g_fifo[0].u_fifo.count) > max_fifo) max_fifo = int'(dut.g_fifo[0].u_fifo.count);
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- register access
  task automatic wr(input logic [REG_AW-1:0] a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = REG_AW'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic rd(input logic [REG_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_addr = REG_AW'(a);
    #1;
    d = cfg_rdata;
  endtask

  task automatic load_table(input int t, input tab_t tb);
    for (int s = 0; s < NSEG; s++) begin
      wr(REG_AW'(256 + t * 64 + s * 4 + 0), tb.a[s]);
      wr(REG_AW'(256 + t * 64 + s * 4 + 1), tb.b[s]);
      wr(REG_AW'(256 + t * 64 + s * 4 + 2), tb.lim[s]);
    end
  endtask

  task automatic run_op(input op_e op, input int rows, input int max_cycles);
    int n;
    logic [31:0] st;
    wr(REG_ROWS, rows);
    wr(REG_CTRL, {30'b0, op, 1'b1});
    n = 0;
    while (!done && n < max_cycles) begin @(posedge clk); n++; end
    chk(n < max_cycles, $sformatf("operation %s finished in time", op.name()));
    if (n >= max_cycles)
      $display("  stuck in %s: cnt_a %0d cnt_b %0d, fifo %0d %0d %0d %0d, queues %0d %0d %0d %0d",
               dut.stage.name(), dut.cnt_a, dut.cnt_b, dut.g_fifo[0].u_fifo.count, dut.g_fifo[1].u_fifo.count,
               dut.g_fifo[2].u_fifo.count, dut.g_fifo[3].u_fifo.count,
               u_s0.q.size(), u_s1.q.size(), u_s2.q.size(), u_s3.q.size());
    rd(REG_STATUS, st);
    chk(st[1] && !st[0], "STATUS done set, busy clear");
  endtask

  function automatic int word(int v);
    return int'(32'(signed'(16'(v))));
  endfunction

  // ---------------- one LSTM layer time step
  task automatic layer_step(input int l, input int xv [COLS]);
    int hv [COLS];
    int pre [4][H];
    int act [4][H];
    int c_new [H], h_new [H];
    for (int j = 0; j < H; j++) hv[j] = hs[l][j];
    hv[H] = 256;
    // reference
    for (int g = 0; g < 4; g++)
      for (int r = 0; r < H; r++) begin
        int s;
        s = 0;
        for (int j = 0; j < COLS; j++) s += Wx[l][g][r][j] * xv[j] + Wh[l][g][r][j] * hv[j];
        pre[g][r] = q_sat(longint'(s));
        act[g][r] = nl_eval((g == 3) ? tnh : sig, pre[g][r]);
        if (nl_segment((g == 3) ? tnh : sig, pre[g][r]) inside {0, NS - 1}) n_flat++;
      end
    for (int r = 0; r < H; r++) begin
      int sum;
      sum = act[1][r] * cs[l][r] + act[0][r] * act[3][r];     // 32-bit adder
      c_new[r] = q_sat(longint'(sum));
      h_new[r] = q_sat(longint'(act[2][r]) * nl_eval(tnh, c_new[r]));
    end
    // DMA queues: stage IC (i on in1, c~ on in2), FO (f on in1, o on in2), EW
    for (int st = 0; st < 2; st++)
      for (int r = 0; r < H; r++)
        for (int j = 0; j < COLS; j++) begin
          int ga, gb;
          ga = (st == 0) ? 0 : 1;
          gb = (st == 0) ? 3 : 2;
          u_s0.q.push_back(word(xv[j]));
          u_s3.q.push_back(word(hv[j]));
          u_s1.q.push_back({16'(Wh[l][ga][r][j]), 16'(Wx[l][ga][r][j])});
          u_s2.q.push_back({16'(Wh[l][gb][r][j]), 16'(Wx[l][gb][r][j])});
        end
    for (int r = 0; r < H; r++) u_s0.q.push_back(word(cs[l][r]));
    run_op(OP_LSTM, H, 400000);
    chk(u_m0.got.size() == H && u_m1.got.size() == H, "c and h vector lengths");
    for (int r = 0; r < H && r < u_m0.got.size() && r < u_m1.got.size(); r++) begin
      checks += 2;
      if (int'(u_m0.got[r]) != word(c_new[r]) || int'(u_m1.got[r]) != word(h_new[r])) begin
        failures++;
        if (failures < 20) $display("FAIL layer %0d row %0d: c %0d/%0d h %0d/%0d", l, r,
                                    int'(u_m0.got[r]), c_new[r], int'(u_m1.got[r]), h_new[r]);
      end
      chk(u_m0.got_last[r] == (r == H - 1) && u_m1.got_last[r] == (r == H - 1), "tlast on c/h");
    end
    u_m0.got.delete(); u_m0.got_last.delete();
    u_m1.got.delete(); u_m1.got_last.delete();
    // the new c and h overwrite the old ones in memory
    for (int r = 0; r < H; r++) begin cs[l][r] = c_new[r]; hs[l][r] = h_new[r]; end
  endtask

  // ---------------- output layer; returns index of the largest score
  task automatic output_layer(input int hv_in [H], input int rows, output int best);
    int hv [COLS];
    int y [V];
    for (int j = 0; j < H; j++) hv[j] = hv_in[j];
    hv[H] = 256;
    best = 0;
    for (int r = 0; r < rows; r++) begin
      int s;
      s = 0;
      for (int j = 0; j < COLS; j++) begin
        s += Wy[r][j] * hv[j];
        u_s3.q.push_back(word(hv[j]));
        u_s1.q.push_back(32'(16'(Wy[r][j])));
      end
      y[r] = q_sat(longint'(s));
      if (q_clips(longint'(s))) n_clip++;
      if (y[r] > y[best]) best = r;
    end
    run_op(OP_OUT, rows, 200000);
    chk(u_m2.got.size() == rows, "y vector length");
    for (int r = 0; r < rows && r < u_m2.got.size(); r++) begin
      checks++;
      if (int'(u_m2.got[r]) != word(y[r])) begin
        failures++;
        if (failures < 20) $display("FAIL y[%0d] got %0d expected %0d", r, int'(u_m2.got[r]), y[r]);
      end
      chk(u_m2.got_last[r] == (r == rows - 1), "tlast on y");
    end
    u_m2.got.delete(); u_m2.got_last.delete();
  endtask

  initial begin : watchdog
    repeat (200000 * (STEPS + 2) * 3) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ch, hv [H];
    logic [31:0] st;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    foreach (n_stage[i]) n_stage[i] = 0;
    sig = make_tab(0);
    tnh = make_tab(1);
    for (int l = 0; l < L; l++)
      for (int g = 0; g < 4; g++)
        for (int r = 0; r < H; r++)
          for (int j = 0; j < COLS; j++) begin
            // layer 0 input has V real elements, the rest is zero padding
            Wx[l][g][r][j] = (j == H) ? rnd_q(384) : (l == 0 && j >= V) ? 0 : rnd_q((l == 0) ? 1200 : 40);
            Wh[l][g][r][j] = (j == H) ? 0 : rnd_q(40);
          end
    for (int r = 0; r < V; r++)
      for (int j = 0; j < COLS; j++) Wy[r][j] = (j == H) ? rnd_q(64) : rnd_q(200);
    for (int l = 0; l < L; l++)
      for (int r = 0; r < H; r++) begin hs[l][r] = 0; cs[l][r] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration stage
    load_table(0, sig);
    load_table(1, tnh);
    load_table(2, sig);
    load_table(3, tnh);
    wr(REG_COLS, COLS);
    rd(REG_COLS, st);
    chk(st == COLS, "COLS read-back");
    ch = 0;
    for (int t = 0; t < STEPS; t++) begin
      int xv [COLS];
      int b0;
      b0 = n_busy;
      for (int j = 0; j < COLS; j++) xv[j] = (j == H) ? 256 : (j == ch) ? 256 : 0;
      layer_step(0, xv);
      for (int j = 0; j < H; j++) xv[j] = hs[0][j];      // h of layer 0 -> x of layer 1
      layer_step(1, xv);
      for (int j = 0; j < H; j++) hv[j] = hs[1][j];
      output_layer(hv, V, ch);
      if (t % 100 == 0)
        $display("step %0d: %0d busy cycles (bound %0d), next symbol %0d", t, n_busy - b0, IDEAL, ch);
      chk(n_busy - b0 >= IDEAL, "step not faster than the streaming bound");
      chk(n_busy - b0 <= IDEAL + 7 * 40, "step within pipeline overhead of the streaming bound");
    end
    $display("%0d symbols: %0d busy cycles, %0d ms at 142 MHz", STEPS, n_busy,
             longint'(n_busy) / 142000);
    $display("stages: IC %0d FO %0d EW %0d OUT %0d", n_stage[ST_IC], n_stage[ST_FO], n_stage[ST_EW], n_stage[ST_OUT]);
    $display("sync waits %0d, output back-pressure %0d, DMA gaps %0d", n_sync_wait, n_backpressure,
             u_s0.gaps + u_s1.gaps + u_s2.gaps + u_s3.gaps);
    chk(n_stage[ST_IC] == 2 * STEPS && n_stage[ST_FO] == 2 * STEPS && n_stage[ST_EW] == 2 * STEPS, "LSTM stages run");
    chk(n_stage[ST_OUT] == STEPS, "output stage run");
    chk(n_backpressure == 0, "no output back-pressure at full rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
