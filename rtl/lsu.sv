// lsu: load/store unit, the special PE on the border of the WindMill array.
//
// It shares the GPE's configuration flow (pe_ctrl: fetch, decode, Iteration
// Control Block) and operand buffers, but its execute stage issues accesses
// to the shared memory through the parallel access interface.
//   OP_LOAD,  affine:     address = imm + i*stride, no operand needed
//   OP_LOAD,  non-affine: address = imm + operand a
//   OP_STORE, affine:     mem[imm + i*stride] = operand a
//   OP_STORE, non-affine: mem[imm + operand b] = operand a
// i counts the firings of the step from 0. Address bit 12 selects the
// shared memory of the next RCA on the ring instead of the local one;
// bits 11..0 address the 4096 words of a memory. An access fires when the
// interface grants it (mem_gnt, same cycle as mem_req); load data come back
// on mem_rvalid one cycle after the grant and leave on out_data/out_valid in
// the cycle after that. Other opcodes are executed as in a GPE and give
// their result one cycle after firing.
//
// The paper states that LSUs surround the GPEs, reach the shared memory
// through the parallel access interface and support affine and non-affine
// access patterns; the address formulas, the ring bit and the handshake are
// this design's own.
module lsu
  import windmill_pkg::*;
#(
  parameter int unsigned PCW = 5,
  parameter int unsigned AW  = 13
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
  output logic                 mem_req,
  output logic                 mem_we,
  output logic [AW-1:0]        mem_addr,
  output logic [DW-1:0]        mem_wdata,
  input  logic                 mem_gnt,
  input  logic                 mem_rvalid,
  input  logic [DW-1:0]        mem_rdata,
  output logic [DW-1:0]        out_data,
  output logic                 out_valid
);
  cfg_t          cfg;
  logic          ex_v, step_end, fire, is_mem, alu_fire, ld_pend;
  logic          a_rdy, b_rdy;
  logic [DW-1:0] a_val, b_val, loc, imm_ext;
  logic [AW-1:0] idx_off;
  logic [7:0]    idx;

  pe_ctrl #(.PCW(PCW)) u_ctrl (
    .clk, .rst_n, .start, .fire,
    .ctx_addr, .ctx_data,
    .cfg, .ex_v, .step_end, .done
  );

  assign imm_ext   = {{(DW-16){1'b0}}, cfg.imm};
  assign sreg_mode = cfg.sreg_mode;
  assign loc       = '0;

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

  assign is_mem  = (cfg.op == OP_LOAD) || (cfg.op == OP_STORE);
  assign idx_off = AW'(idx) * AW'(cfg.stride);

  always_comb begin
    mem_we    = (cfg.op == OP_STORE);
    mem_wdata = a_val;
    if (cfg.affine)
      mem_addr = cfg.imm[AW-1:0] + idx_off;
    else if (cfg.op == OP_STORE)
      mem_addr = cfg.imm[AW-1:0] + b_val[AW-1:0];
    else
      mem_addr = cfg.imm[AW-1:0] + a_val[AW-1:0];
  end

  // a load needs operand a only when it is non-affine; a store always needs a,
  // and b as well when it is non-affine
  always_comb begin
    mem_req = 1'b0;
    if (ex_v && is_mem) begin
      if (cfg.op == OP_LOAD) mem_req = cfg.affine ? 1'b1 : a_rdy;
      else                   mem_req = a_rdy && (cfg.affine || b_rdy);
    end
  end

  assign alu_fire = ex_v && !is_mem && (cfg.op != OP_NOP) && a_rdy && b_rdy && !ld_pend;
  assign fire     = (mem_req && mem_gnt) || alu_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      ld_pend   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      ld_pend   <= mem_req && mem_gnt && !mem_we;
      out_valid <= mem_rvalid || alu_fire;
      if (mem_rvalid)    out_data <= mem_rdata;
      else if (alu_fire) out_data <= alu(cfg.op, a_val, b_val, loc);
      if (start || step_end) idx <= '0;
      else if (mem_req && mem_gnt) idx <= idx + 8'd1;
    end
  end

  // the interface must not grant an access that was not requested
  assert property (@(posedge clk) disable iff (!rst_n) mem_gnt |-> mem_req);
endmodule
