// rescale: converts a 32-bit MAC result (Q16.16) to a 16-bit Q8.8 word.
//
// The paper's gate module contains a rescale block that turns the 32-bit
// sums of the MAC units into 16-bit values for the non-linear stage. This
// module does it by an arithmetic shift right by 8 fractional bits followed
// by saturation to the signed 16-bit range; the shift (truncation, no
// rounding) and the saturation are this design's choice.
//
// Purely combinational. sat is high when the value was clipped.
module rescale
  import lstm_pkg::*;
(
  input  acc_t in_acc,
  output q88_t out_q,
  output logic sat
);
  assign out_q = sat_q88(in_acc);
  assign sat   = sat_hit(in_acc);
endmodule
