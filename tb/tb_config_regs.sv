// tb_config_regs: self-checking test of the configuration registers.
//
// Writes random values to ROWS, COLS and every field of the four non-linear
// tables through the register bus and checks both the read-back and the
// values presented to the datapath. Checks that a CTRL write with the start
// bit gives a one-cycle start pulse with the written op, that start is
// ignored while busy, that done and the saturation flag are sticky in STATUS
// and cleared by the next start, and that STATUS shows the stage.
module tb_config_regs;
  import lstm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, busy, done, sat_evt, start;
  logic [REG_AW-1:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  stage_e stage;
  op_e op;
  logic [CNT_W-1:0] rows, cols;
  nl_cfg_t [NL_TABLES-1:0] nl_cfg;
  int checks = 0, failures = 0, starts = 0;

  config_regs dut (.*);

  always @(posedge clk) if (rst_n && start) starts++;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = REG_AW'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    cfg_addr = REG_AW'(a);
    #1;
    d = cfg_rdata;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] v [NL_TABLES][NSEG][3];
    logic [31:0] r;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; busy = 0; done = 0; sat_evt = 0; stage = ST_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(2, 32'd128);
    wr(3, 32'd129);
    chk(rows == 128 && cols == 129, "rows/cols outputs");
    rd(2, r);
    chk(r == 128, "rows read-back");
    rd(3, r);
    chk(r == 129, "cols read-back");
    for (int t = 0; t < NL_TABLES; t++)
      for (int s = 0; s < NSEG; s++)
        for (int f = 0; f < 3; f++) begin
          v[t][s][f] = 16'($urandom);
          wr(256 + t * 64 + s * 4 + f, {16'hDEAD, v[t][s][f]});
        end
    for (int t = 0; t < NL_TABLES; t++)
      for (int s = 0; s < NSEG; s++) begin
        chk(nl_cfg[t][s].a == q88_t'(v[t][s][0]) && nl_cfg[t][s].b == q88_t'(v[t][s][1]) &&
            nl_cfg[t][s].lim == q88_t'(v[t][s][2]), $sformatf("table %0d seg %0d output", t, s));
        rd(256 + t * 64 + s * 4 + 2, r);
        chk(r == 32'(signed'(v[t][s][2])), $sformatf("table %0d seg %0d read-back", t, s));
      end
    // start pulse and op
    wr(0, 32'h3);
    chk(start && op == OP_OUT, "start pulse with op OUT");
    @(posedge clk); #1;
    chk(!start, "start is one cycle");
    busy = 1;
    wr(0, 32'h1);
    chk(starts == 1 && op == OP_LSTM, "start ignored while busy");
    // sticky done and saturation
    stage = ST_EW;
    @(negedge clk); sat_evt = 1; @(negedge clk); sat_evt = 0;
    @(negedge clk); done = 1; busy = 0; stage = ST_IDLE; @(negedge clk); done = 0;
    repeat (3) @(negedge clk);
    rd(1, r);
    chk(r[1] == 1'b1 && r[5] == 1'b1 && r[0] == 1'b0, "sticky done and saturation");
    busy = 1; stage = ST_FO; #1;
    rd(1, r);
    chk(r[4:2] == 3'(ST_FO) && r[0], "stage and busy in STATUS");
    busy = 0; stage = ST_IDLE;
    wr(0, 32'h1);
    rd(1, r);
    chk(r[1] == 1'b0 && r[5] == 1'b0 && start && starts == 1, "start clears flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
