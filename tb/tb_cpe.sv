// tb_cpe: controller PE. A 3-instruction program is stored and run with 2
// repetitions; the testbench acts as the RTT (accepting when ready and
// answering done after a random delay). The instructions must come out in
// program order, 6 in all, each only after the previous one completed, and
// `done` must pulse once at the end.
module tb_cpe;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic prog_we, start, busy, done, out_valid, out_ready, rtt_done;
  logic [3:0] prog_idx;
  logic [1:0] prog_word;
  logic [31:0] prog_data;
  logic [7:0] len, iter;
  rtt_instr_t out_instr;
  cpe #(.DEPTH(16)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  rtt_instr_t prog [3];
  int seen = 0, dones = 0;
  always @(negedge clk) if (rst_n && done) dones++;
  initial begin
    prog_we = 0; start = 0; out_ready = 0; rtt_done = 0; prog_idx = 0; prog_word = 0; prog_data = 0; len = 0; iter = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    for (int j = 0; j < 3; j++) begin
      prog[j] = rtt_instr_t'({$urandom, $urandom, $urandom, $urandom});
      for (int w = 0; w < 4; w++) begin
        @(negedge clk); prog_we = 1; prog_idx = 4'(j); prog_word = 2'(w); prog_data = prog[j][32 * w +: 32];
      end
    end
    @(negedge clk); prog_we = 0; start = 1; len = 3; iter = 2;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (busy) begin
      out_ready = 1'b1;
      if (out_valid) begin
        check(out_instr == prog[seen % 3], $sformatf("instruction %0d", seen));
        seen++;
        @(negedge clk); out_ready = 0;
        repeat ($urandom_range(0, 5)) begin
          check(!out_valid, "no new instruction before completion");
          @(negedge clk);
        end
        rtt_done = 1; @(negedge clk); rtt_done = 0;
      end else @(negedge clk);
    end
    @(negedge clk);
    check(seen == 6, $sformatf("six instructions issued (%0d)", seen));
    check(dones == 1, "done pulsed once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
