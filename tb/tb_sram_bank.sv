// tb_sram_bank: 256 x 32 bank. Random writes and reads against a model;
// read data must appear one cycle after the read and hold afterwards.
module tb_sram_bank;
  logic clk = 1'b0;
  always #5 clk = !clk;
  logic en, we;
  logic [7:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [256];
  sram_bank #(.DEPTH(256), .WIDTH(32)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 256; i++) begin
      model[i] = $urandom;
      @(negedge clk); en = 1; we = 1; addr = 8'(i); wdata = model[i];
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      en = 1; we = $urandom_range(0, 1); addr = 8'($urandom); wdata = $urandom;
      if (we) model[addr] = wdata;
      else begin
        logic [31:0] e;
        e = model[addr];
        @(negedge clk); en = 0;
        check(rdata == e, $sformatf("read %0d", addr));
        @(negedge clk);
        check(rdata == e, "read data held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
