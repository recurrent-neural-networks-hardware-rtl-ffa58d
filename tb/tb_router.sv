// tb_router: self-checking test of the stage-dependent stream routing.
//
// For every stage, random valid/ready/data values are applied to all router
// inputs and the outputs are compared with the routing table (written out
// here separately from the RTL): which DMA stream feeds which gate, ewise or
// output-MAC input, where gate results go, which output stream carries c_t,
// h_t and y, and that broadcast x/h words advance only when both active gates
// accept them. Idle ports must see ready low and idle blocks valid low.
module tb_router;
  import lstm_pkg::*;

  stage_e stage;
  logic [3:0] s_valid, s_ready;
  logic [3:0][31:0] s_data;
  logic [2:0] g_x_valid, g_x_ready, g_h_valid, g_h_ready, g_w_valid, g_w_ready;
  q88_t g_x_data, g_h_data;
  logic [2:0][31:0] g_w_data;
  logic [2:0] g_o_valid, g_o_ready;
  q88_t [2:0] g_o_data;
  logic [3:0] q_valid, q_ready;
  q88_t [3:0] q_data;
  logic cp_valid, cp_ready, ec_valid, ec_ready, eh_valid, eh_ready;
  q88_t cp_data, ec_data, eh_data;
  logic oh_valid, oh_ready, ow_valid, ow_ready, oy_valid, oy_ready;
  q88_t oh_data, ow_data, oy_data;
  logic [2:0] m_valid, m_ready;
  logic [2:0][31:0] m_data;
  int checks = 0, failures = 0;

  router dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL stage %s: %s", stage.name(), what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static stage_e st [5] = '{ST_IDLE, ST_IC, ST_FO, ST_EW, ST_OUT};
    for (int n = 0; n < 2000; n++) begin
      logic [2:0] act;
      int other;
      stage = st[n % 5];
      s_valid = 4'($urandom); s_data = {$urandom, $urandom, $urandom, $urandom};
      g_x_ready = 3'($urandom); g_h_ready = 3'($urandom); g_w_ready = 3'($urandom);
      g_o_valid = 3'($urandom); g_o_data = {16'($urandom), 16'($urandom), 16'($urandom)};
      q_ready = 4'($urandom); cp_ready = 1'($urandom);
      ec_valid = 1'($urandom); eh_valid = 1'($urandom); ec_data = 16'($urandom); eh_data = 16'($urandom);
      oh_ready = 1'($urandom); ow_ready = 1'($urandom); oy_valid = 1'($urandom); oy_data = 16'($urandom);
      m_ready = 3'($urandom);
      #1;
      act = (stage == ST_IC) ? 3'b011 : (stage == ST_FO) ? 3'b101 : 3'b000;
      // vectors to gates (broadcast)
      chk(g_x_data == q88_t'(s_data[0][15:0]) && g_h_data == q88_t'(s_data[3][15:0]), "vector data");
      for (int g = 0; g < 3; g++) begin
        other = (g == 0) ? ((stage == ST_IC) ? 1 : 2) : 0;
        chk(g_x_valid[g] == (act[g] && s_valid[0] && g_x_ready[other]), $sformatf("x valid gate %0d", g));
        chk(g_h_valid[g] == (act[g] && s_valid[3] && g_h_ready[other]), $sformatf("h valid gate %0d", g));
      end
      chk(s_ready[0] == ((act != 0) ? (g_x_ready[0] && g_x_ready[(stage == ST_IC) ? 1 : 2])
                                    : (stage == ST_EW) ? cp_ready : 1'b0), "ready in0");
      chk(s_ready[3] == ((act != 0) ? (g_h_ready[0] && g_h_ready[(stage == ST_IC) ? 1 : 2])
                                    : (stage == ST_OUT) ? oh_ready : 1'b0), "ready in3");
      // weights
      chk(g_w_data[0] == s_data[1] && g_w_data[1] == s_data[2] && g_w_data[2] == s_data[2], "weight data");
      chk(g_w_valid[0] == ((act != 0) && s_valid[1]), "w valid A");
      chk(g_w_valid[1] == ((stage == ST_IC) && s_valid[2]), "w valid B");
      chk(g_w_valid[2] == ((stage == ST_FO) && s_valid[2]), "w valid C");
      chk(s_ready[1] == ((act != 0) ? g_w_ready[0] : (stage == ST_OUT) ? ow_ready : 1'b0), "ready in1");
      chk(s_ready[2] == ((stage == ST_IC) ? g_w_ready[1] : (stage == ST_FO) ? g_w_ready[2] : 1'b0), "ready in2");
      // gate results to FIFOs
      chk(q_valid[0] == ((stage == ST_IC) && g_o_valid[0]) && (stage != ST_IC || q_data[0] == g_o_data[0]), "A -> i");
      chk(q_valid[1] == ((stage == ST_IC) && g_o_valid[1]) && (stage != ST_IC || q_data[1] == g_o_data[1]), "B -> c~");
      chk(q_valid[2] == ((stage == ST_FO) && g_o_valid[0]) && (stage != ST_FO || q_data[2] == g_o_data[0]), "A -> f");
      chk(q_valid[3] == ((stage == ST_FO) && g_o_valid[2]) && (stage != ST_FO || q_data[3] == g_o_data[2]), "C -> o");
      chk(g_o_ready[0] == ((stage == ST_IC) ? q_ready[0] : (stage == ST_FO) ? q_ready[2] : 1'b0), "A ready");
      chk(g_o_ready[1] == ((stage == ST_IC) && q_ready[1]), "B ready");
      chk(g_o_ready[2] == ((stage == ST_FO) && q_ready[3]), "C ready");
      // ewise and output MAC
      chk(cp_valid == ((stage == ST_EW) && s_valid[0]) && cp_data == q88_t'(s_data[0][15:0]), "c_{t-1}");
      chk(oh_valid == ((stage == ST_OUT) && s_valid[3]) && ow_valid == ((stage == ST_OUT) && s_valid[1]), "out MAC inputs");
      chk(ow_data == q88_t'(s_data[1][15:0]) && oh_data == q88_t'(s_data[3][15:0]), "out MAC data");
      chk(m_valid[0] == ((stage == ST_EW) && ec_valid) && ec_ready == ((stage == ST_EW) && m_ready[0]), "c_t stream");
      chk(m_valid[1] == ((stage == ST_EW) && eh_valid) && eh_ready == ((stage == ST_EW) && m_ready[1]), "h_t stream");
      chk(m_valid[2] == ((stage == ST_OUT) && oy_valid) && oy_ready == ((stage == ST_OUT) && m_ready[2]), "y stream");
      if (stage == ST_EW)
        chk(m_data[0] == 32'(signed'(ec_data)) && m_data[1] == 32'(signed'(eh_data)), "c/h sign extension");
      if (stage == ST_OUT)
        chk(m_data[2] == 32'(signed'(oy_data)), "y sign extension");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
