// config_regs: the configuration registers the host CPU writes and reads.
//
// The driver software controls the accelerator only through these registers:
// it loads the four non-linear tables once (configuration stage), sets the
// weight-matrix height (ROWS) and the length of one streamed row (COLS,
// including zero padding and the bias column), and writes CTRL to start one
// operation: an LSTM layer time step (op 0) or the output matrix-vector
// product (op 1). STATUS shows busy, a sticky done flag, the current stage
// and a sticky flag that some value was clipped by a rescale (both flags are
// cleared by the next start). The paper says that the line segments' a, b
// and x range and the control information live in configuration registers;
// the simple word-addressed bus and the register map (see lstm_pkg) are this
// design's choice, standing in for the SoC's memory-mapped register port.
//
// Bus: cfg_we writes cfg_wdata to cfg_addr at the clock edge; cfg_rdata shows
// the register at cfg_addr combinationally. Table words: address
// REG_NL_BASE + table*64 + seg*4 + field, field 0 = a, 1 = b, 2 = lim, all Q8.8
// in bits 15:0. Tables: 0 gate A (sigmoid), 1 gate B (tanh), 2 gate C
// (sigmoid), 3 ewise tanh. start is a one-cycle pulse.
module config_regs
  import lstm_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [REG_AW-1:0]     cfg_addr,
  input  logic [31:0]           cfg_wdata,
  output logic [31:0]           cfg_rdata,
  input  logic                  busy,
  input  logic                  done,
  input  stage_e                stage,
  input  logic                  sat_evt,
  output logic                  start,
  output op_e                   op,
  output logic [CNT_W-1:0]      rows,
  output logic [CNT_W-1:0]      cols,
  output nl_cfg_t [NL_TABLES-1:0] nl_cfg
);
  logic       done_q;
  logic       sat_q;
  logic       in_nl;
  logic [1:0] tbl;
  logic [3:0] seg;
  logic [1:0] fld;

  assign in_nl = (cfg_addr >= REG_NL_BASE);
  assign tbl   = cfg_addr[7:6];
  assign seg   = cfg_addr[5:2];
  assign fld   = cfg_addr[1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start  <= 1'b0;
      op     <= OP_LSTM;
      rows   <= '0;
      cols   <= '0;
      done_q <= 1'b0;
      sat_q  <= 1'b0;
      nl_cfg <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_q <= 1'b1;
      if (sat_evt) sat_q <= 1'b1;
      if (cfg_we) begin
        if (in_nl) begin
          if (seg < 4'(NSEG)) begin
            unique case (fld)
              2'd0:    nl_cfg[tbl][seg].a   <= q88_t'(cfg_wdata[DW-1:0]);
              2'd1:    nl_cfg[tbl][seg].b   <= q88_t'(cfg_wdata[DW-1:0]);
              2'd2:    nl_cfg[tbl][seg].lim <= q88_t'(cfg_wdata[DW-1:0]);
              default: ;
            endcase
          end
        end else begin
          unique case (cfg_addr)
            REG_CTRL: begin
              op <= op_e'(cfg_wdata[1]);
              if (cfg_wdata[0] && !busy) begin
                start  <= 1'b1;
                done_q <= 1'b0;
                sat_q  <= 1'b0;
              end
            end
            REG_ROWS: rows <= cfg_wdata[CNT_W-1:0];
            REG_COLS: cols <= cfg_wdata[CNT_W-1:0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (in_nl) begin
      if (seg < 4'(NSEG)) begin
        unique case (fld)
          2'd0:    cfg_rdata = 32'(nl_cfg[tbl][seg].a);
          2'd1:    cfg_rdata = 32'(nl_cfg[tbl][seg].b);
          2'd2:    cfg_rdata = 32'(nl_cfg[tbl][seg].lim);
          default: ;
        endcase
      end
    end else begin
      unique case (cfg_addr)
        REG_CTRL:   cfg_rdata = {30'b0, op, 1'b0};
        REG_STATUS: cfg_rdata = {26'b0, sat_q, stage, done_q, busy};
        REG_ROWS:   cfg_rdata = 32'(rows);
        REG_COLS:   cfg_rdata = 32'(cols);
        default: ;
      endcase
    end
  end
endmodule
