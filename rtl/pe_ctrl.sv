// pe_ctrl: configuration flow of a PE (the "config-flow" half of its
// pipeline) together with its Iteration Control Block.
//
// Stage 1, configuration fetch: the program counter addresses the context
// memory and the word read is registered. Stage 2, configuration decode:
// the word is checked and the step's last-iteration index is derived.
// The decoded word then waits until the execute stage (in the PE) finishes
// the current control step, and takes its place in the same cycle, so the
// next step is fetched and decoded while the current one executes. The
// Iteration Control Block counts firings (`fire` from the execute stage);
// after `iter` firings (0 encodes 256) the step ends. A step whose op is
// NOP ends at once. When a step marked `last` ends, the PE raises `done`
// and stops until the next `start`, which also resets the PC to 0.
//
// Timing: after `start` the first step is active (`ex_v`) three cycles
// later; a step switch costs no cycle if the next word is already decoded.
// The four pipeline stages and the overlap of configuration and execution
// follow the paper; the encoding and the counting rule are this design's own.
module pe_ctrl
  import windmill_pkg::*;
#(
  parameter int unsigned PCW = 5   // program counter width (context addresses)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           fire,
  output logic [PCW-1:0] ctx_addr,
  input  cfg_t           ctx_data,
  output cfg_t           cfg,
  output logic           ex_v,
  output logic           step_end,
  output logic           done
);
  logic [PCW-1:0] pc;
  logic           running, fetch_stop;
  logic           cf_v, cd_v;
  cfg_t           cf_q, cd_q;
  logic [7:0]     cd_last_it, ex_last_it, cnt;
  logic           cf_adv, cd_adv, do_fetch;

  assign ctx_addr = pc;
  assign step_end = ex_v && ((cfg.op == OP_NOP) || (fire && cnt == ex_last_it));
  assign cd_adv   = cd_v && (!ex_v || (step_end && !cfg.last));
  assign cf_adv   = cf_v && (!cd_v || cd_adv);
  assign do_fetch = running && !fetch_stop && (!cf_v || cf_adv);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; fetch_stop <= 1'b0;
      cf_v <= 1'b0; cd_v <= 1'b0; ex_v <= 1'b0; done <= 1'b0;
      cf_q <= '0; cd_q <= '0; cfg <= '0;
      cd_last_it <= '0; ex_last_it <= '0; cnt <= '0;
    end else if (start) begin
      pc <= '0; running <= 1'b1; fetch_stop <= 1'b0;
      cf_v <= 1'b0; cd_v <= 1'b0; ex_v <= 1'b0; done <= 1'b0; cnt <= '0;
    end else begin
      // stage 1: configuration fetch
      if (do_fetch) begin
        cf_q       <= ctx_data;
        cf_v       <= 1'b1;
        pc         <= pc + 1'b1;
        fetch_stop <= ctx_data.last;
      end else if (cf_adv) begin
        cf_v <= 1'b0;
      end
      // stage 2: configuration decode
      if (cf_adv) begin
        cd_q       <= cf_q;
        cd_v       <= 1'b1;
        cd_last_it <= cf_q.iter - 8'd1;
      end else if (cd_adv) begin
        cd_v <= 1'b0;
      end
      // execute-stage control: iteration counting and step switch
      if (ex_v && fire && !step_end) cnt <= cnt + 8'd1;
      if (step_end && cfg.last) begin
        ex_v    <= 1'b0;
        done    <= 1'b1;
        running <= 1'b0;
      end else if (cd_adv) begin
        cfg        <= cd_q;
        ex_last_it <= cd_last_it;
        ex_v       <= 1'b1;
        cnt        <= '0;
      end else if (step_end) begin
        ex_v <= 1'b0;
        cnt  <= '0;
      end
    end
  end
endmodule
