// tb_stream_sink: testbench stream sink with random back-pressure.
//
// ready is high with probability PCT percent in each cycle; every word taken
// (valid and ready at a clock edge) is appended to got. stalls counts cycles
// in which valid was high and ready low.
module tb_stream_sink #(
  parameter int unsigned W   = 16,
  parameter int unsigned PCT = 100
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  output logic         ready,
  input  logic [W-1:0] data,
  input  logic         last
);
  logic [W-1:0] got [$];
  logic         got_last [$];
  int unsigned  stalls = 0;

  initial ready = 1'b0;

  always @(posedge clk) begin
    if (rst_n && valid && ready) begin
      got.push_back(data);
      got_last.push_back(last);
    end
    if (rst_n && valid && !ready) stalls++;
    ready <= rst_n && (($urandom % 100) < PCT);
  end
endmodule
