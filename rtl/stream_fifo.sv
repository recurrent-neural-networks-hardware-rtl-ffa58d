// stream_fifo: first-word-fall-through FIFO with valid/ready handshakes.
//
// Used twice in the accelerator: as the per-port buffer inside the stream
// synchroniser (a few words deep) and as the four vector FIFOs that hold
// i_t, c~_t, f_t and o_t between stages (one hidden vector deep). The paper
// names these FIFOs; their depth, the first-word-fall-through behaviour and
// the array-plus-pointers construction are this design's choice.
//
// Interface: in_valid/in_ready/in_data push when both are high; out_valid is
// high whenever the FIFO holds a word, out_data shows the oldest word and it
// is popped when out_ready is also high. A push into an empty FIFO is visible
// at the output on the next cycle. in_ready is low only while the FIFO is full
// (it does not look at out_ready, so no combinational path runs from the
// output side to the input side). count gives the fill level.
module stream_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  assign out_valid = (count != 0);
  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A pop never happens from an empty FIFO and the count never passes DEPTH.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
