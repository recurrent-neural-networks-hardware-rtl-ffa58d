// tb_stream_sync: self-checking test of stream_sync.
//
// Three sources with different random gap rates (and a late start of one of
// them) feed a 3-port sync block. The k-th output beat must carry the k-th
// word of every port; the block must report waiting while only some ports
// have data, and it must stream one beat per cycle once all ports keep up.
module tb_stream_sync;
  localparam int N = 3, W = 16, DEPTH = 4, LEN = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready;
  logic [N-1:0][W-1:0] in_data, out_data;
  logic out_valid, out_ready, waiting;
  int checks = 0, failures = 0, wait_cycles = 0, beats = 0;

  tb_stream_src #(.W(W), .PCT(90)) u_s0 (.clk, .rst_n, .valid(in_valid[0]), .ready(in_ready[0]), .data(in_data[0]));
  tb_stream_src #(.W(W), .PCT(50)) u_s1 (.clk, .rst_n, .valid(in_valid[1]), .ready(in_ready[1]), .data(in_data[1]));
  tb_stream_src #(.W(W), .PCT(75)) u_s2 (.clk, .rst_n, .valid(in_valid[2]), .ready(in_ready[2]), .data(in_data[2]));

  stream_sync #(.N(N), .W(W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .waiting
  );

  logic [W-1:0] exp0 [$], exp1 [$], exp2 [$];
  bit phase2 = 0;

  always @(posedge clk) if (rst_n) begin
    if (waiting) wait_cycles++;
    if (out_valid && out_ready) begin
      checks++;
      beats++;
      if (out_data[0] !== exp0.pop_front() || out_data[1] !== exp1.pop_front() ||
          out_data[2] !== exp2.pop_front()) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d misaligned: %h %h %h", beats, out_data[0], out_data[1], out_data[2]);
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    out_ready = 1'b0;
    for (int i = 0; i < LEN; i++) begin
      logic [W-1:0] a, b, c;
      a = W'(i); b = W'(16'h4000 + i); c = W'(16'h8000 + 3 * i);
      u_s0.q.push_back(a); exp0.push_back(a);
      u_s2.q.push_back(c); exp2.push_back(c);
      exp1.push_back(b);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // port 1 starts late: the other ports must be held back
    repeat (20) @(posedge clk);
    checks++;
    if (beats != 0) begin failures++; $display("FAIL output before all ports streamed"); end
    for (int i = 0; i < LEN; i++) u_s1.q.push_back(W'(16'h4000 + i));
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 100) < 80; end
    join_none
    wait (beats == LEN);
    checks++;
    if (wait_cycles == 0) begin failures++; $display("FAIL waiting never reported"); end
    // throughput: with every port always valid, one beat per cycle
    disable fork;
    out_ready = 1'b1;
    force u_s0.valid = 1'b1; force u_s1.valid = 1'b1; force u_s2.valid = 1'b1;
    begin
      // constant data while forced: expected data equals held source data
      int b0;
      force u_s0.data = 16'h0011; force u_s1.data = 16'h0022; force u_s2.data = 16'h0033;
      for (int i = 0; i < 200; i++) begin exp0.push_back(16'h0011); exp1.push_back(16'h0022); exp2.push_back(16'h0033); end
      repeat (10) @(posedge clk);
      b0 = beats;
      repeat (100) @(posedge clk);
      checks++;
      if (beats - b0 != 100) begin failures++; $display("FAIL throughput %0d beats in 100 cycles", beats - b0); end
    end
    $display("sync: %0d beats, %0d waiting cycles", beats, wait_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
