// tb_mac: self-checking test of the mac unit.
//
// Streams ROWS weight rows, each paired with the same vector, with random
// input gaps and random output back-pressure; every output must equal the
// 32-bit wrap-around dot product of its row with the vector. Large operands
// are included so that the 32-bit accumulator wraps. A second phase feeds
// one pair per cycle with the output always taken and checks the rate: ROWS
// rows of LEN elements take ROWS*LEN cycles.
module tb_mac;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
  localparam int LEN = 37, ROWS = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  q88_t in_vec, in_w;
  acc_t out_acc;
  logic [31:0] pair;
  int checks = 0, failures = 0, nout = 0;
  int vec [LEN];
  int w   [ROWS][LEN];
  int expv [$];

  tb_stream_src #(.W(32), .PCT(70)) u_src (.clk, .rst_n, .valid(in_valid), .ready(in_ready), .data(pair));
  assign in_vec = q88_t'(pair[15:0]);
  assign in_w   = q88_t'(pair[31:16]);

  mac dut (.clk, .rst_n, .row_len(CNT_W'(LEN)), .in_valid, .in_ready, .in_vec, .in_w,
           .out_valid, .out_ready, .out_acc);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    e = expv.pop_front();
    checks++;
    nout++;
    if (out_acc !== e) begin
      failures++;
      if (failures < 10) $display("FAIL row %0d: got %0d expected %0d", nout - 1, out_acc, e);
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input bit big);
    for (int j = 0; j < LEN; j++) vec[j] = big ? rnd_q(32767) : rnd_q(512);
    for (int r = 0; r < ROWS; r++) begin
      int s;
      s = 0;
      for (int j = 0; j < LEN; j++) begin
        w[r][j] = big ? rnd_q(32767) : rnd_q(512);
        s += vec[j] * w[r][j];          // 32-bit wrap, as in hardware
        u_src.q.push_back({16'(w[r][j]), 16'(vec[j])});
      end
      expv.push_back(s);
    end
  endtask

  initial begin
    longint t0, t1;
    out_ready = 1'b0;
    load(0);
    load(1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 100) < 60; end
    join_none
    wait (nout == 2 * ROWS);
    disable fork;
    out_ready = 1'b1;
    // rate: one element per cycle
    force u_src.valid = 1'b1;
    force u_src.data  = {16'h0100, 16'h0100};   // 1.0 * 1.0
    for (int r = 0; r < ROWS; r++) expv.push_back(LEN * 65536);
    @(posedge clk);
    t0 = $time;
    wait (nout == 3 * ROWS);
    t1 = $time;
    release u_src.valid;
    checks++;
    if ((t1 - t0) / 10 > ROWS * LEN + 1) begin
      failures++;
      $display("FAIL rate: %0d cycles for %0d elements", (t1 - t0) / 10, ROWS * LEN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
