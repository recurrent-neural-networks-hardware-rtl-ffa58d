// mac: multiply-accumulate unit for one matrix-vector product.
//
// Takes two aligned streams, vector elements and weight-row elements, both
// Q8.8, multiplies them into Q16.16 and accumulates in 32 bits. After
// row_len elements (one weight row) the sum is emitted as one output element
// and the accumulator starts again from zero, so consecutive rows of a weight
// matrix, each paired with the same vector stream, give consecutive elements
// of W*v. The bias is not a separate input: it is the last column of the
// weight row, paired with a vector element of 1.0, as the paper describes.
// The paper gives this behaviour; the register structure (one accumulator
// register, one output register) and wrap-around 32-bit accumulation are this
// design's choice.
//
// Interface: in_valid/in_ready with in_vec, in_w; out_valid/out_ready with
// out_acc (Q16.16). One element is accepted per cycle; the row result is
// valid the cycle after its last element was accepted. A row result that is
// not taken stalls the input (in_ready low) until it is taken.
module mac
  import lstm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] row_len,   // elements per row, >= 1
  input  logic             in_valid,
  output logic             in_ready,
  input  q88_t             in_vec,
  input  q88_t             in_w,
  output logic             out_valid,
  input  logic             out_ready,
  output acc_t             out_acc
);
  acc_t             acc;
  acc_t             prod;
  logic [CNT_W-1:0] idx;
  logic             accept, last;

  assign prod     = acc_t'(in_vec) * acc_t'(in_w);
  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign last     = (idx == row_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (last) begin
          out_acc   <= acc + prod;
          out_valid <= 1'b1;
          acc       <= '0;       // reset after every output element
          idx       <= '0;
        end else begin
          acc <= acc + prod;
          idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
