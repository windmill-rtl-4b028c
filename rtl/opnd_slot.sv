// opnd_slot: one operand input of a PE with its one-entry token buffer.
//
// The selected source is either a neighbour link (a token carrying a valid
// bit) or an always-available value (local register, immediate, shared
// register, or zero for "none"). A link token that arrives while the PE is
// not ready to fire is held in a one-word buffer; `ready` says the operand
// is available this cycle, either from the buffer or straight from the link.
// `consume` (the PE fires) empties the buffer. The buffer is cleared by
// `flush` at the start of a run. There is no back-pressure: the schedule
// compiled for the array must not send a second token before the first is
// used. The paper says the PE "process[es] valid operands dynamically";
// the one-entry buffer and the absence of back-pressure are this design's
// own choices.
module opnd_slot
  import windmill_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic               enable,    // a control step is active
  input  src_e               sel,
  input  logic [NB-1:0][DW-1:0] link_data,
  input  logic [NB-1:0]      link_valid,
  input  logic [DW-1:0]      loc,
  input  logic [DW-1:0]      imm,
  input  logic [DW-1:0]      sreg,
  input  logic               consume,
  output logic               ready,
  output logic [DW-1:0]      value
);
  logic          full;
  logic [DW-1:0] buf_q;
  logic          is_link;
  logic          in_v;
  logic [DW-1:0] in_d;

  always_comb begin
    is_link = src_is_link(sel);
    in_v    = is_link && link_valid[sel[2:0]];
    in_d    = link_data[sel[2:0]];
    if (is_link) begin
      ready = full || in_v;
      value = full ? buf_q : in_d;
    end else begin
      ready = 1'b1;
      unique case (sel)
        SRC_LOC:  value = loc;
        SRC_IMM:  value = imm;
        SRC_SREG: value = sreg;
        default:  value = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= 1'b0;
      buf_q <= '0;
    end else if (flush) begin
      full  <= 1'b0;
    end else if (enable && is_link) begin
      if (consume) begin
        // a token arriving in the cycle the buffered one is used is kept
        full <= full && in_v;
        if (full && in_v) buf_q <= in_d;
      end else if (!full && in_v) begin
        full  <= 1'b1;
        buf_q <= in_d;
      end
    end
  end

  // a second token on the link before the first one was used would be lost:
  // the compiled schedule must never do this
  assert property (@(posedge clk) disable iff (!rst_n)
                   enable && is_link && full && in_v && !consume |-> 1'b0)
    else $error("opnd_slot: operand token overrun");
endmodule
