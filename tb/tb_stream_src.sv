// tb_stream_src: testbench stream source with random gaps.
//
// Words pushed into q are sent in order on a valid/ready stream. Each cycle
// in which the source may present a new word it does so with probability
// PCT percent, so the stream has random bubbles. valid and data are
// registered and held until ready is seen high at a clock edge.
module tb_stream_src #(
  parameter int unsigned W   = 16,
  parameter int unsigned PCT = 100
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic         valid,
  input  logic         ready,
  output logic [W-1:0] data
);
  logic [W-1:0] q [$];
  int unsigned  sent = 0;
  int unsigned  gaps = 0;

  initial begin
    valid = 1'b0;
    data  = '0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0;
    end else if (!valid || ready) begin
      if (valid) sent++;
      if (q.size() > 0 && ($urandom % 100) < PCT) begin
        data  <= q.pop_front();
        valid <= 1'b1;
      end else begin
        if (q.size() > 0) gaps++;
        valid <= 1'b0;
      end
    end
  end
endmodule
