// cpe: controller process element - runs a stored list of RTT instructions
// so that the arrays work through a multi-step job without the host.
//
// Like a GPE it has a context (program) memory, a program counter and an
// iteration counter. The host writes up to DEPTH instructions (four words
// each: opcode word, arg0, arg1, arg2) through prog_we/prog_idx/prog_word/
// prog_data, then pulses `start` with `len` instructions and `iter`
// repetitions (0 counts as 1). The CPE then offers instruction pc to the RTT
// (out_valid/out_ready), waits for the RTT's in_done, and moves on; after
// the last instruction of the last repetition it raises `done` and goes
// idle. `busy` is high while it runs; the top gives it the RTT while busy.
//
// The paper gives the CPE's role (managing data and configuration movement
// and launch timing once the host has configured it), says it is built like
// a GPE extended with access to the RTT, and gives no further detail. The
// program format, depth and repetition count are this design's own.
module cpe
  import windmill_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     prog_we,
  input  logic [$clog2(DEPTH)-1:0] prog_idx,
  input  logic [1:0]               prog_word,
  input  logic [31:0]              prog_data,
  input  logic                     start,
  input  logic [7:0]               len,
  input  logic [7:0]               iter,
  output logic                     busy,
  output logic                     done,
  output logic                     out_valid,
  input  logic                     out_ready,
  output rtt_instr_t               out_instr,
  input  logic                     rtt_done
);
  logic [3:0][31:0] prog [DEPTH];
  logic [7:0] pc, it, c_len, c_iter;
  logic       waiting;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_idx][prog_word] <= prog_data;
  end

  assign out_instr = rtt_instr_t'({prog[pc[$clog2(DEPTH)-1:0]][3], prog[pc[$clog2(DEPTH)-1:0]][2],
                                   prog[pc[$clog2(DEPTH)-1:0]][1], prog[pc[$clog2(DEPTH)-1:0]][0]});
  assign out_valid = busy && !waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; waiting <= 1'b0;
      pc <= '0; it <= '0; c_len <= '0; c_iter <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && len != 8'd0) begin
          busy   <= 1'b1;
          pc     <= '0;
          it     <= '0;
          c_len  <= len;
          c_iter <= (iter == 8'd0) ? 8'd1 : iter;
        end
      end else if (!waiting) begin
        if (out_ready) waiting <= 1'b1;
      end else if (rtt_done) begin
        waiting <= 1'b0;
        if (pc + 8'd1 == c_len) begin
          pc <= '0;
          if (it + 8'd1 == c_iter) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            it <= it + 8'd1;
          end
        end else begin
          pc <= pc + 8'd1;
        end
      end
    end
  end

  initial assert (DEPTH <= 256) else $error("cpe DEPTH must fit the 8-bit program counter");
endmodule
