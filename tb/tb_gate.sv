// tb_gate: self-checking test of one gate module.
//
// Builds random Wx and Wh matrices (ROWS x LEN, bias in the last column of
// Wx, paired with a vector element of 1.0) and random x and h vectors. The
// three streams (x, h, packed {Wh, Wx}) come from independent sources with
// different gap rates, and the x stream starts late, so the sync block must
// hold the others. Each output must equal the reference: 32-bit sum of the
// two dot products, rescaled to Q8.8, through the segment model of the
// loaded function. Run once as a sigmoid gate and once as a tanh gate, the
// tanh run with larger weights so that some row sums are clipped.
module tb_gate;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
  localparam int LEN = 21, ROWS = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  nl_cfg_t cfg;
  logic x_valid, x_ready, h_valid, h_ready, w_valid, w_ready, out_valid, out_ready, sat, sync_wait;
  logic [15:0] x_w, h_w;
  logic [31:0] w_data;
  q88_t out_data;
  int checks = 0, failures = 0, nout = 0, nsat = 0, nwait = 0;
  int expv [$];
  tab_t tab;

  tb_stream_src #(.W(16), .PCT(85)) u_x (.clk, .rst_n, .valid(x_valid), .ready(x_ready), .data(x_w));
  tb_stream_src #(.W(16), .PCT(60)) u_h (.clk, .rst_n, .valid(h_valid), .ready(h_ready), .data(h_w));
  tb_stream_src #(.W(32), .PCT(75)) u_w (.clk, .rst_n, .valid(w_valid), .ready(w_ready), .data(w_data));

  gate dut (.clk, .rst_n, .row_len(CNT_W'(LEN)), .nl_cfg(cfg),
            .x_valid, .x_ready, .x_data(q88_t'(x_w)),
            .h_valid, .h_ready, .h_data(q88_t'(h_w)),
            .w_valid, .w_ready, .w_data,
            .out_valid, .out_ready, .out_data, .sat, .sync_wait);

  always @(posedge clk) if (rst_n) begin
    if (sat) nsat++;
    if (sync_wait) nwait++;
    if (out_valid && out_ready) begin
      int e;
      e = expv.pop_front();
      nout++;
      checks++;
      if (int'(out_data) != e) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d: got %0d expected %0d", nout - 1, out_data, e);
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one matrix pair, streamed row by row; x is held back and pushed later
  task automatic make(input int wmax, ref int xq [$]);
    int x [LEN], h [LEN];
    for (int j = 0; j < LEN; j++) begin x[j] = rnd_q(256); h[j] = rnd_q(256); end
    x[LEN-1] = 256; h[LEN-1] = 256;                       // unity element for the bias
    for (int r = 0; r < ROWS; r++) begin
      int sx, sh;
      sx = 0; sh = 0;
      for (int j = 0; j < LEN; j++) begin
        int wx, wh;
        wx = rnd_q(wmax);
        wh = (j == LEN - 1) ? 0 : rnd_q(wmax);             // bias only in Wx
        sx += wx * x[j];
        sh += wh * h[j];
        xq.push_back(x[j]);
        u_h.q.push_back(16'(h[j]));
        u_w.q.push_back({16'(wh), 16'(wx)});
      end
      sx = sx + sh;                                        // 32-bit adder
      expv.push_back(nl_eval(tab, q_sat(longint'(sx))));
    end
  endtask

  task automatic load(input bit t);
    tab = make_tab(t);
    for (int s = 0; s < NSEG; s++)
      cfg[s] = '{a: q88_t'(tab.a[s]), b: q88_t'(tab.b[s]), lim: q88_t'(tab.lim[s])};
  endtask

  initial begin
    int xq [$];
    cfg = '0;
    out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 100) < 75; end
    join_none
    load(0);
    make(64, xq);
    repeat (30) @(posedge clk);
    checks++;
    if (nout != 0) begin failures++; $display("FAIL output without x"); end
    foreach (xq[i]) u_x.q.push_back(16'(xq[i]));
    xq.delete();
    wait (nout == ROWS);
    load(1);
    make(32767, xq);
    foreach (xq[i]) u_x.q.push_back(16'(xq[i]));
    wait (nout == 2 * ROWS);
    checks++;
    if (nwait == 0) begin failures++; $display("FAIL sync never waited"); end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no row sum was clipped"); end
    $display("gate: %0d rows, %0d sync-wait cycles, %0d clipped sums", nout, nwait, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
