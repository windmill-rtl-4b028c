// tb_ctx_line: context memory of one line. Random words are written to all
// entries; every PE's read port is then checked in MCMD (own DEPTH words,
// address taken modulo DEPTH) and SCMD (whole line). Entries hold the
// NOP/last word after reset.
module tb_ctx_line;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic scmd, we;
  logic [4:0] waddr;
  cfg_t wdata;
  logic [7:0][4:0] raddr;
  cfg_t [7:0] rdata;
  cfg_t model [32];
  ctx_line #(.COLS(8), .DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    scmd = 0; we = 0; waddr = '0; wdata = '0; raddr = '0;
    repeat (2) @(posedge clk); rst_n <= 1'b1; @(posedge clk);
    #1;
    check(rdata[3].last == 1'b1 && rdata[3].op == OP_NOP, "reset word is NOP/last");
    for (int i = 0; i < 32; i++) begin
      model[i] = cfg_t'({$urandom, $urandom});
      we <= 1'b1; waddr <= 5'(i); wdata <= model[i];
      @(posedge clk);
    end
    we <= 1'b0;
    for (int t = 0; t < 40; t++) begin
      scmd = t[0];
      for (int c = 0; c < 8; c++) raddr[c] = 5'($urandom);
      #1;
      for (int c = 0; c < 8; c++)
        check(rdata[c] == (scmd ? model[raddr[c]] : model[c * 4 + raddr[c] % 4]),
              $sformatf("read port %0d scmd=%0d addr=%0d", c, scmd, raddr[c]));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
