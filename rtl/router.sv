// router: connects the DMA streams to the compute blocks for each stage.
//
// The accelerator has four 32-bit input DMA streams and sends results back on
// output DMA streams. Which block a stream feeds depends on the stage the
// controller is in; this purely combinational block does the switching. The
// paper says only that streams are routed to different modules depending on
// the operation; the assignment below is this design's choice:
//
//   stage   in0 (x / c_{t-1})  in1 (weights)      in2 (weights)      in3 (h_{t-1})
//   IC      x -> gates A, B    {Whi,Wxi} -> A     {Whc,Wxc} -> B     h -> A, B
//   FO      x -> gates A, C    {Whf,Wxf} -> A     {Who,Wxo} -> C     h -> A, C
//   EW      c_{t-1} -> ewise   -                  -                  -
//   OUT     -                  Wy (bits 15:0)     -                  h -> output MAC
//
// Gate A is a sigmoid gate (i in IC, f in FO), gate B the tanh gate (c~),
// gate C the second sigmoid gate (o). Gate results go to the vector FIFOs:
// A -> i or f, B -> c~, C -> o. In EW the ewise c_t and h_t streams go out on
// output streams 0 and 1; in OUT the output MAC's y goes out on stream 2.
// Output words carry the Q8.8 value sign-extended to 32 bits; input vector
// words use bits 15:0. A stream shared by two gates (x, h) is broadcast: it
// advances only when both gates accept it. Ports not used in a stage see
// ready low, blocks not used see valid low. Input data buses are wired
// straight to every block that may take them, whatever the stage. Only
// valid and ready are switched, which saves multiplexers. Many output bits
// are therefore plain wires from an input, by design.
module router
  import lstm_pkg::*;
(
  input  stage_e                  stage,
  // DMA input streams
  input  logic [3:0]              s_valid,
  output logic [3:0]              s_ready,
  input  logic [3:0][AXIS_W-1:0]  s_data,
  // gates A, B, C inputs
  output logic [2:0]              g_x_valid,
  input  logic [2:0]              g_x_ready,
  output q88_t                    g_x_data,
  output logic [2:0]              g_h_valid,
  input  logic [2:0]              g_h_ready,
  output q88_t                    g_h_data,
  output logic [2:0]              g_w_valid,
  input  logic [2:0]              g_w_ready,
  output logic [2:0][AXIS_W-1:0]  g_w_data,
  // gates A, B, C outputs
  input  logic [2:0]              g_o_valid,
  output logic [2:0]              g_o_ready,
  input  q88_t [2:0]              g_o_data,
  // vector FIFO pushes: 0 i, 1 c~, 2 f, 3 o
  output logic [3:0]              q_valid,
  input  logic [3:0]              q_ready,
  output q88_t [3:0]              q_data,
  // ewise c_{t-1} input and c_t, h_t outputs
  output logic                    cp_valid,
  input  logic                    cp_ready,
  output q88_t                    cp_data,
  input  logic                    ec_valid,
  output logic                    ec_ready,
  input  q88_t                    ec_data,
  input  logic                    eh_valid,
  output logic                    eh_ready,
  input  q88_t                    eh_data,
  // output MAC
  output logic                    oh_valid,
  input  logic                    oh_ready,
  output q88_t                    oh_data,
  output logic                    ow_valid,
  input  logic                    ow_ready,
  output q88_t                    ow_data,
  input  logic                    oy_valid,
  output logic                    oy_ready,
  input  q88_t                    oy_data,
  // DMA output streams
  output logic [2:0]              m_valid,
  input  logic [2:0]              m_ready,
  output logic [2:0][AXIS_W-1:0]  m_data
);
  // the two gates that run in the current stage (A plus B or C)
  logic [2:0] act;
  always_comb begin
    unique case (stage)
      ST_IC:   act = 3'b011;
      ST_FO:   act = 3'b101;
      default: act = 3'b000;
    endcase
  end

  // peer = the other active gate; a gate may take a broadcast word only
  // when its peer can take it too.
  function automatic logic peer_ready(input logic [2:0] a, input logic [2:0] r, input int g);
    logic ok;
    ok = 1'b1;
    for (int k = 0; k < 3; k++)
      if (k != g && a[k]) ok = ok && r[k];
    return ok;
  endfunction

  always_comb begin
    g_x_data = q88_t'(s_data[0][DW-1:0]);
    g_h_data = q88_t'(s_data[3][DW-1:0]);
    g_w_data = {s_data[2], s_data[2], s_data[1]};   // A <- in1, B/C <- in2
    cp_data  = q88_t'(s_data[0][DW-1:0]);
    oh_data  = q88_t'(s_data[3][DW-1:0]);
    ow_data  = q88_t'(s_data[1][DW-1:0]);

    g_x_valid = '0;
    g_h_valid = '0;
    g_w_valid = '0;
    g_o_ready = '0;
    q_valid   = '0;
    q_data    = '{default: '0};
    cp_valid  = 1'b0;
    ec_ready  = 1'b0;
    eh_ready  = 1'b0;
    oh_valid  = 1'b0;
    ow_valid  = 1'b0;
    oy_ready  = 1'b0;
    s_ready   = '0;
    m_valid   = '0;
    m_data    = '{default: '0};

    unique case (stage)
      ST_IC, ST_FO: begin
        for (int g = 0; g < 3; g++) begin
          g_x_valid[g] = act[g] && s_valid[0] && peer_ready(act, g_x_ready, g);
          g_h_valid[g] = act[g] && s_valid[3] && peer_ready(act, g_h_ready, g);
        end
        s_ready[0] = &(g_x_ready | ~act);
        s_ready[3] = &(g_h_ready | ~act);
        // weights: in1 -> A, in2 -> B (IC) or C (FO)
        g_w_valid[0] = s_valid[1];
        s_ready[1]   = g_w_ready[0];
        if (stage == ST_IC) begin
          g_w_valid[1] = s_valid[2];
          s_ready[2]   = g_w_ready[1];
          // A -> i, B -> c~
          q_valid[0] = g_o_valid[0]; q_data[0] = g_o_data[0]; g_o_ready[0] = q_ready[0];
          q_valid[1] = g_o_valid[1]; q_data[1] = g_o_data[1]; g_o_ready[1] = q_ready[1];
        end else begin
          g_w_valid[2] = s_valid[2];
          s_ready[2]   = g_w_ready[2];
          // A -> f, C -> o
          q_valid[2] = g_o_valid[0]; q_data[2] = g_o_data[0]; g_o_ready[0] = q_ready[2];
          q_valid[3] = g_o_valid[2]; q_data[3] = g_o_data[2]; g_o_ready[2] = q_ready[3];
        end
      end
      ST_EW: begin
        cp_valid   = s_valid[0];
        s_ready[0] = cp_ready;
        m_valid[0] = ec_valid; m_data[0] = AXIS_W'(ec_data); ec_ready = m_ready[0];
        m_valid[1] = eh_valid; m_data[1] = AXIS_W'(eh_data); eh_ready = m_ready[1];
      end
      ST_OUT: begin
        oh_valid   = s_valid[3];
        s_ready[3] = oh_ready;
        ow_valid   = s_valid[1];
        s_ready[1] = ow_ready;
        m_valid[2] = oy_valid; m_data[2] = AXIS_W'(oy_data); oy_ready = m_ready[2];
      end
      default: ;
    endcase
  end
endmodule
