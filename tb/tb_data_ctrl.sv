// tb_data_ctrl: data controller. Runs of random length are launched; a
// model of the array raises pea_done after the run. Checked: one start
// pulse per launch (none while busy), busy/done, the cycle count, the mode
// register (ignored while busy) and the ping-pong flip at each finish only
// when ping-pong is enabled.
module tb_data_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic launch, mode_we, mode_scmd, mode_pp, pea_done, pea_start, busy, done, scmd, pp_en, pp_sel;
  logic [31:0] cycles;
  data_ctrl dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int starts = 0;
  always @(negedge clk) if (pea_start) starts++;
  task automatic run(int len, bit extra_launch);
    launch <= 1'b1; @(posedge clk); launch <= 1'b0; #1;
    check(busy == 1'b1, "busy after launch");
    for (int i = 0; i < len; i++) begin
      if (extra_launch && i == 1) begin launch <= 1'b1; mode_we <= 1'b1; mode_scmd <= !scmd; end
      @(posedge clk);
      launch <= 1'b0; mode_we <= 1'b0;
    end
    pea_done <= 1'b1; @(posedge clk); pea_done <= 1'b0; #1;
    check(!busy && done, "done after the run");
    check(cycles == 32'(len + 1), $sformatf("cycles %0d for %0d", cycles, len));
  endtask
  initial begin
    bit pp;
    launch = 0; mode_we = 0; mode_scmd = 0; mode_pp = 0; pea_done = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1; @(posedge clk);
    mode_we <= 1'b1; mode_scmd <= 1'b1; mode_pp <= 1'b0; @(posedge clk); mode_we <= 1'b0; #1;
    check(scmd && !pp_en, "mode write");
    run(5, 1'b1);
    check(starts == 1, "no second start while busy");
    check(scmd == 1'b1, "mode not changed while busy");
    check(pp_sel == 1'b0, "no flip with ping-pong off");
    mode_we <= 1'b1; mode_scmd <= 1'b0; mode_pp <= 1'b1; @(posedge clk); mode_we <= 1'b0;
    pp = 0;
    for (int k = 0; k < 6; k++) begin
      run($urandom_range(2, 30), 1'b0);
      pp = !pp;
      check(pp_sel == pp, "ping-pong flip at finish");
    end
    check(starts == 7, "one start per launch");
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
