// tb_line_segment: self-checking test of one line_segment stage.
//
// Random a, b, lim, x and incoming done/y values: the stage must compute
// a*x + b (clipped to Q8.8) only when x <= lim and no earlier stage took the
// sample, and otherwise pass y on unchanged; done must be set when it
// computes. Also checks that nothing moves while en is low.
module tb_line_segment;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, in_done, out_valid, out_done;
  seg_cfg_t cfg;
  q88_t in_x, in_y, out_x, out_y;
  int checks = 0, failures = 0, hits = 0, passes = 0;

  line_segment dut (.clk, .rst_n, .en, .cfg, .in_valid, .in_x, .in_y, .in_done,
                    .out_valid, .out_x, .out_y, .out_done);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; in_valid = 0; in_done = 0; in_x = 0; in_y = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int a, b, lim, x, y, e;
      bit d, hit;
      a = rnd_q(1024); b = rnd_q(1024); lim = rnd_q(2048); x = rnd_q(2048); y = rnd_q(30000);
      if (i % 7 == 0) a = rnd_q(32767);          // large slopes: clipping
      d = ($urandom % 4) == 0;
      @(negedge clk);
      cfg = '{a: q88_t'(a), b: q88_t'(b), lim: q88_t'(lim)};
      in_x = q88_t'(x); in_y = q88_t'(y); in_done = d; in_valid = 1'b1; en = 1'b1;
      @(posedge clk); #1;
      hit = !d && (x <= lim);
      e = hit ? q_sat(longint'(a) * x + longint'(b) * 256) : y;
      if (hit) hits++; else passes++;
      checks++;
      if (int'(out_y) != e || out_done != (d || hit) || out_x != q88_t'(x) || !out_valid) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d lim=%0d x=%0d d=%0b: y=%0d exp %0d", a, b, lim, x, d, out_y, e);
      end
    end
    // hold: en low keeps the stage
    @(negedge clk);
    en = 1'b0; in_x = 16'sh0123; in_valid = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL stage moved while en was low"); end
    $display("segment: %0d computed, %0d passed", hits, passes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
