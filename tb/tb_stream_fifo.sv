// tb_stream_fifo: self-checking test of stream_fifo.
//
// Random bursty source and random back-pressure sink around a 5-deep FIFO
// (a depth that is not a power of two, so pointer wrap is exercised). Every
// word must come out once, in order. The test also checks that the FIFO
// fills up (in_ready low at count = DEPTH) and that a word pushed into the
// empty FIFO is visible at the output one cycle later.
module tb_stream_fifo;
  localparam int W = 16, DEPTH = 5, N = 2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, last_unused;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, full_seen = 0;

  assign last_unused = 1'b0;

  tb_stream_src  #(.W(W), .PCT(70)) u_src (.clk, .rst_n, .valid(in_valid), .ready(in_ready), .data(in_data));
  tb_stream_sink #(.W(W), .PCT(40)) u_snk (.clk, .rst_n, .valid(out_valid), .ready(out_ready), .data(out_data), .last(last_unused));

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .count
  );

  always @(posedge clk) if (rst_n) begin
    if (int'(count) == DEPTH) begin
      full_seen++;
      if (in_ready) begin failures++; $display("FAIL in_ready high while full"); end
    end
    if (int'(count) > DEPTH) begin failures++; $display("FAIL count %0d > DEPTH", count); end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_q [$];
    for (int i = 0; i < N; i++) begin
      logic [W-1:0] v;
      v = W'($urandom);
      u_src.q.push_back(v);
      exp_q.push_back(v);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_snk.got.size() == N);
    repeat (5) @(posedge clk);
    checks++;
    if (u_snk.got.size() != N) begin failures++; $display("FAIL got %0d words", u_snk.got.size()); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (u_snk.got[i] !== exp_q[i]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: got %h expected %h", i, u_snk.got[i], exp_q[i]);
      end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL FIFO never filled"); end
    // latency: one word into an empty FIFO appears one cycle later
    @(negedge clk);
    force u_snk.ready = 1'b0;
    u_src.q.push_back(16'hBEEF);
    wait (in_valid && in_ready);
    @(posedge clk); #1;
    checks++;
    if (!(out_valid && out_data == 16'hBEEF)) begin failures++; $display("FAIL fall-through latency"); end
    release u_snk.ready;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
