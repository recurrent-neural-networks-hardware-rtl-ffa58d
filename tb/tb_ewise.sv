// tb_ewise: self-checking test of the element-wise module.
//
// Five independent sources (i, c~, f, o with sigmoid/tanh-like ranges and
// c_{t-1}) with different gap rates feed the module; the o stream starts
// late, so c_t must appear before h_t can. The c_t and h_t sinks apply random
// back-pressure (independently, which exercises the fork of c_t). Every c_t
// must equal clip((i*c~ + f*c_{t-1}) >> 8) and every h_t
// clip((o * tanh_model(c_t)) >> 8). A last batch with large c values checks
// clipping of c_t.
module tb_ewise;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
  localparam int N = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  nl_cfg_t cfg;
  logic i_valid, i_ready, ct_valid, ct_ready, f_valid, f_ready, cp_valid, cp_ready, o_valid, o_ready;
  logic c_valid, c_ready, h_valid, h_ready, sat, sync_wait;
  logic [15:0] i_w, ct_w, f_w, cp_w, o_w;
  q88_t c_data, h_data;
  int checks = 0, failures = 0, nsat = 0, nwait = 0;
  int expc [$], exph [$];
  tab_t tab;

  tb_stream_src #(.W(16), .PCT(90)) u_i  (.clk, .rst_n, .valid(i_valid),  .ready(i_ready),  .data(i_w));
  tb_stream_src #(.W(16), .PCT(70)) u_ct (.clk, .rst_n, .valid(ct_valid), .ready(ct_ready), .data(ct_w));
  tb_stream_src #(.W(16), .PCT(80)) u_f  (.clk, .rst_n, .valid(f_valid),  .ready(f_ready),  .data(f_w));
  tb_stream_src #(.W(16), .PCT(60)) u_cp (.clk, .rst_n, .valid(cp_valid), .ready(cp_ready), .data(cp_w));
  tb_stream_src #(.W(16), .PCT(85)) u_o  (.clk, .rst_n, .valid(o_valid),  .ready(o_ready),  .data(o_w));
  tb_stream_sink #(.W(16), .PCT(70)) u_c (.clk, .rst_n, .valid(c_valid), .ready(c_ready), .data(c_data), .last(1'b0));
  tb_stream_sink #(.W(16), .PCT(50)) u_h (.clk, .rst_n, .valid(h_valid), .ready(h_ready), .data(h_data), .last(1'b0));

  ewise dut (.clk, .rst_n, .tanh_cfg(cfg),
             .i_valid, .i_ready, .i_data(q88_t'(i_w)),
             .ct_valid, .ct_ready, .ct_data(q88_t'(ct_w)),
             .f_valid, .f_ready, .f_data(q88_t'(f_w)),
             .cp_valid, .cp_ready, .cp_data(q88_t'(cp_w)),
             .o_valid, .o_ready, .o_data(q88_t'(o_w)),
             .c_valid, .c_ready, .c_data,
             .h_valid, .h_ready, .h_data, .sat, .sync_wait);

  always @(posedge clk) if (rst_n) begin
    if (sat) nsat++;
    if (sync_wait) nwait++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int oq [$];
    tab = make_tab(1);
    for (int s = 0; s < NSEG; s++)
      cfg[s] = '{a: q88_t'(tab.a[s]), b: q88_t'(tab.b[s]), lim: q88_t'(tab.lim[s])};
    for (int k = 0; k < N; k++) begin
      int iv, ctv, fv, cpv, ov, c, h, sum;
      bit big;
      big = (k >= N - 20);
      iv  = int'($urandom_range(256));
      fv  = int'($urandom_range(256));
      ov  = int'($urandom_range(256));
      ctv = big ? 32767 : rnd_q(256);
      cpv = big ? rnd_q(32767) : rnd_q(1024);
      if (big) iv = 256;
      sum = iv * ctv + fv * cpv;                   // 32-bit adder
      c = q_sat(longint'(sum));
      h = q_sat(longint'(ov) * nl_eval(tab, c));
      u_i.q.push_back(16'(iv)); u_ct.q.push_back(16'(ctv)); u_f.q.push_back(16'(fv));
      u_cp.q.push_back(16'(cpv)); oq.push_back(ov);
      expc.push_back(c); exph.push_back(h);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (u_c.got.size() == 0) begin failures++; $display("FAIL c_t held back by o_t"); end
    foreach (oq[k]) u_o.q.push_back(16'(oq[k]));
    wait (u_h.got.size() == N && u_c.got.size() == N);
    repeat (20) @(posedge clk);
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (sext16(u_c.got[k]) != expc[k]) begin
        failures++;
        if (failures < 10) $display("FAIL c[%0d] got %0d expected %0d", k, sext16(u_c.got[k]), expc[k]);
      end
      if (sext16(u_h.got[k]) != exph[k]) begin
        failures++;
        if (failures < 10) $display("FAIL h[%0d] got %0d expected %0d", k, sext16(u_h.got[k]), exph[k]);
      end
    end
    checks++;
    if (u_h.got.size() != N || u_c.got.size() != N) begin failures++; $display("FAIL extra outputs"); end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL c_t never clipped"); end
    checks++;
    if (nwait == 0) begin failures++; $display("FAIL sync never waited"); end
    $display("ewise: %0d elements, %0d clipped, %0d sync-wait cycles", N, nsat, nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
