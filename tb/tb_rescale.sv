// tb_rescale: self-checking test of rescale (Q16.16 -> Q8.8 with clipping).
//
// Directed corner values (zero, one LSB, negative fractions, the largest and
// smallest representable results and values just beyond them) and random
// values over the whole 32-bit range, compared with the reference floor-shift
// and clip; the sat flag is checked as well.
module tb_rescale;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  acc_t in_acc;
  q88_t out_q;
  logic sat;
  int checks = 0, failures = 0;

  rescale dut (.in_acc, .out_q, .sat);

  task automatic check(input int v);
    in_acc = v;
    #1;
    checks++;
    if (int'(out_q) != q_sat(longint'(v)) || sat != q_clips(longint'(v))) begin
      failures++;
      if (failures < 10) $display("FAIL in %0d: got %0d sat %0b expected %0d", v, out_q, sat, q_sat(longint'(v)));
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int dir [] = '{0, 1, 255, 256, -1, -255, -256, -257, 65536, -65536,
                   32767*256, 32767*256 + 255, 32768*256, -32768*256, -32768*256 - 1,
                   32'h7FFFFFFF, 32'h80000000};
    foreach (dir[i]) check(dir[i]);
    checks++;
    in_acc = 32768 * 256; #1;
    if (out_q != 16'sh7FFF || !sat) begin failures++; $display("FAIL positive clip"); end
    for (int i = 0; i < 5000; i++) check(int'($urandom));
    for (int i = 0; i < 5000; i++) check(int'($urandom_range(16'hFFFF * 256)) - 32768 * 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
