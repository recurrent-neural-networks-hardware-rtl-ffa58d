// stream_sync: aligns N independent valid/ready streams.
//
// The DMA ports that feed a MAC run independently, so the vector element and
// the weight element that belong together do not arrive in the same cycle.
// Each input port has its own small FIFO (stream_fifo) that caches words
// while the other ports have not started yet; once every FIFO holds a word,
// the block presents one word of every stream together and pops all of them
// at once. This is the "sync" block of the paper, which describes it as a
// buffer that caches data until all ports are streaming; the per-port FIFO
// depth is this design's choice.
//
// Interface: in_valid/in_ready/in_data per port (packed arrays, port p in
// in_data[p]); one output handshake out_valid/out_ready for all ports, data in
// out_data[p]. Latency: one cycle from the last port's word to out_valid.
// waiting is high in cycles in which some but not all ports have data, the
// situation the block exists for.
module stream_sync #(
  parameter int unsigned N     = 2,
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        in_valid,
  output logic [N-1:0]        in_ready,
  input  logic [N-1:0][W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N-1:0][W-1:0] out_data,
  output logic                waiting    // some, not all, ports have data
);
  logic [N-1:0] f_valid;
  logic         pop_all;

  assign out_valid = &f_valid;
  assign pop_all   = out_valid && out_ready;
  assign waiting   = (|f_valid) && !(&f_valid);

  for (genvar p = 0; p < N; p++) begin : g_port
    stream_fifo #(.W(W), .DEPTH(DEPTH)) u_buf (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid[p]),
      .in_ready  (in_ready[p]),
      .in_data   (in_data[p]),
      .out_valid (f_valid[p]),
      .out_ready (pop_all),
      .out_data  (out_data[p]),
      .count     ()
    );
  end
endmodule
