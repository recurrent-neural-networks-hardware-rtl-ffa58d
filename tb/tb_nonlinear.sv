// tb_nonlinear: self-checking test of the 13-segment non-linear module.
//
// Loads a tanh table, then a sigmoid table (both built by lstm_ref_pkg), and
// sends a sweep over [-8, 8) plus random values over the whole Q8.8 range
// with random output back-pressure. Each result must match the reference
// segment model exactly and stay within 0.04 of the true function (the
// error of 11 chords over [-3, 3] for tanh). Every
// segment must be used at least once. The latency from input to output with
// no back-pressure must be NSEG = 13 cycles.
module tb_nonlinear;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  nl_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  q88_t out_y;
  logic [15:0] in_w;
  int checks = 0, failures = 0, nout = 0;
  int xs [$];
  int seg_used [NS+1];
  tab_t tab;
  bit   is_tanh;
  real  max_err;

  tb_stream_src #(.W(16), .PCT(80)) u_src (.clk, .rst_n, .valid(in_valid), .ready(in_ready), .data(in_w));

  nonlinear dut (.clk, .rst_n, .cfg, .in_valid, .in_ready, .in_x(q88_t'(in_w)),
                 .out_valid, .out_ready, .out_y);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int x, e;
    real err;
    x = xs.pop_front();
    e = nl_eval(tab, x);
    seg_used[nl_segment(tab, x)]++;
    nout++;
    checks++;
    if (int'(out_y) != e) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d: got %0d expected %0d", x, out_y, e);
    end
    err = from_q(int'(out_y)) - fn(is_tanh, from_q(x));
    if (err < 0) err = -err;
    if (err > max_err) max_err = err;
    checks++;
    if (err > 0.04) begin
      failures++;
      if (failures < 10) $display("FAIL x=%f: %f vs %f", from_q(x), from_q(int'(out_y)), fn(is_tanh, from_q(x)));
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input bit t);
    is_tanh = t;
    tab = make_tab(t);
    for (int s = 0; s < NSEG; s++)
      cfg[s] = '{a: q88_t'(tab.a[s]), b: q88_t'(tab.b[s]), lim: q88_t'(tab.lim[s])};
  endtask

  task automatic run_set();
    int n0;
    n0 = nout;
    for (int x = -2048; x < 2048; x += 3) begin xs.push_back(x); u_src.q.push_back(16'(x)); end
    for (int i = 0; i < 500; i++) begin
      int x;
      x = rnd_q(32767);
      xs.push_back(x); u_src.q.push_back(16'(x));
    end
    wait (xs.size() == 0);
    @(posedge clk);
  endtask

  initial begin
    int n_edges;
    max_err = 0.0;
    cfg = '0;
    out_ready = 1'b0;
    foreach (seg_used[i]) seg_used[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 100) < 70; end
    join_none
    load(1); run_set();
    $display("tanh    max error %f", max_err);
    max_err = 0.0;
    load(0); run_set();
    $display("sigmoid max error %f", max_err);
    for (int s = 0; s < NSEG; s++) begin
      checks++;
      if (seg_used[s] == 0) begin failures++; $display("FAIL segment %0d never used", s); end
    end
    disable fork;
    // latency
    out_ready = 1'b1;
    repeat (20) @(posedge clk);
    xs.push_back(256);
    @(negedge clk);
    force u_src.valid = 1'b1;
    force u_src.data  = 16'h0100;
    @(posedge clk);                 // accepted at this edge
    #1;
    release u_src.valid;
    release u_src.data;
    n_edges = 1;
    while (!out_valid) begin @(posedge clk); #1; n_edges++; end
    checks++;
    if (n_edges != NSEG) begin
      failures++;
      $display("FAIL latency %0d cycles", n_edges);
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
