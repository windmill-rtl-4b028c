// gpe: general-purpose process element of the WindMill array.
//
// Four pipeline stages: configuration fetch and configuration decode (in
// pe_ctrl, the config flow), execute and write back (here, the data flow).
// The PE reads its program from the context memory through ctx_addr /
// ctx_data. In execute it waits until both operands of the active step are
// available (neighbour tokens, local register, immediate or shared register)
// and then fires: the ALU result is registered in write back and leaves on
// out_data with out_valid high for one cycle; it can also be written to the
// local register and to the shared register selected by the step
// (sreg_mode selects the register read, sreg_wmode the one written, both
// from the step's configuration). The
// Iteration Control Block in pe_ctrl moves to the next step after `iter`
// firings, and raises `done` after the last one.
//
// Timing: result valid one cycle after the firing cycle; at most one firing
// per cycle. Following the paper: four stages, split into config flow and
// data flow, static step switching with dynamic firing on valid operands.
// The ALU operation set, the operand sources and the local register are
// this design's own choices (the paper's Fig. 1 PE inset names a local
// register, INT/FLOAT/DIV units, control and output; no float or divide
// unit is built here).
module gpe
  import windmill_pkg::*;
#(
  parameter int unsigned PCW = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  output logic [PCW-1:0]       ctx_addr,
  input  cfg_t                 ctx_data,
  input  logic [NB-1:0][DW-1:0] link_data,
  input  logic [NB-1:0]        link_valid,
  input  logic [DW-1:0]        sreg_rdata,
  output sreg_mode_e           sreg_mode,
  output sreg_mode_e           sreg_wmode,
  output logic                 sreg_we,
  output logic [DW-1:0]        sreg_wdata,
  output logic [DW-1:0]        out_data,
  output logic                 out_valid
);
  cfg_t          cfg;
  logic          ex_v, step_end, fire;
  logic          a_rdy, b_rdy;
  logic [DW-1:0] a_val, b_val, loc, imm_ext;

  pe_ctrl #(.PCW(PCW)) u_ctrl (
    .clk, .rst_n, .start, .fire,
    .ctx_addr, .ctx_data,
    .cfg, .ex_v, .step_end, .done
  );

  assign imm_ext   = {{(DW-16){cfg.imm[15]}}, cfg.imm};
  assign sreg_mode = cfg.sreg_mode;

  opnd_slot u_a (
    .clk, .rst_n, .flush(start), .enable(ex_v), .sel(cfg.src_a),
    .link_data, .link_valid, .loc, .imm(imm_ext), .sreg(sreg_rdata),
    .consume(fire), .ready(a_rdy), .value(a_val)
  );
  opnd_slot u_b (
    .clk, .rst_n, .flush(start), .enable(ex_v), .sel(cfg.src_b),
    .link_data, .link_valid, .loc, .imm(imm_ext), .sreg(sreg_rdata),
    .consume(fire), .ready(b_rdy), .value(b_val)
  );

  // execute: fire when the step is active and both operands are present
  assign fire = ex_v && (cfg.op != OP_NOP) && (cfg.op != OP_LOAD) &&
                (cfg.op != OP_STORE) && a_rdy && b_rdy;

  // write back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_data   <= '0;
      loc        <= '0;
      sreg_we    <= 1'b0;
      sreg_wdata <= '0;
      sreg_wmode <= SR_LINE;
    end else begin
      out_valid <= fire;
      sreg_we   <= fire && cfg.sreg_we;
      if (start) loc <= '0;
      if (fire) begin
        out_data   <= alu(cfg.op, a_val, b_val, loc);
        sreg_wdata <= alu(cfg.op, a_val, b_val, loc);
        sreg_wmode <= cfg.sreg_mode;
        if (cfg.loc_we) loc <= alu(cfg.op, a_val, b_val, loc);
      end
    end
  end
endmodule
