// tb_shared_mem: 16 x 256 x 32 shared memory behind the PAI, 30 requesters.
// Each requester holds a random read or write until granted; writes update
// a model; each read's data, returned one cycle after the grant, is
// compared with the model at grant time. Requesters use disjoint address
// slices so the model order does not depend on arbitration.
module tb_shared_mem;
  localparam int NREQ = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic [NREQ-1:0] req, we, gnt, rvalid;
  logic [NREQ-1:0][11:0] addr;
  logic [NREQ-1:0][31:0] wdata, rdata;
  shared_mem #(.NREQ(NREQ), .NBANK(16), .BDEPTH(256)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [31:0] model [4096];
  logic [31:0] expd [NREQ];
  logic [NREQ-1:0] pend;
  int nreads = 0;
  initial begin
    req = '0; we = '0; addr = '0; wdata = '0; pend = '0;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    // initialise every word through requester 0
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk); req[0] = 1; we[0] = 1; addr[0] = 12'(i); wdata[0] = $urandom; model[i] = wdata[0];
      @(posedge clk); #1;
      while (!gnt[0]) @(posedge clk);
    end
    @(negedge clk); req = '0;
    for (int t = 0; t < 800; t++) begin
      @(negedge clk);
      for (int r = 0; r < NREQ; r++) begin
        if (pend[r]) begin
          check(rvalid[r] && rdata[r] == expd[r], $sformatf("read data requester %0d", r));
          nreads++;
        end
        if (!req[r]) begin
          req[r] = 1'b1; we[r] = $urandom_range(0, 1); wdata[r] = $urandom;
          // requester r owns the words whose address mod 30 is r
          addr[r] = 12'(($urandom_range(0, 135) * NREQ + r) % 4080);
        end
      end
      pend = '0;
      #1;
      for (int r = 0; r < NREQ; r++) if (gnt[r]) begin
        if (we[r]) model[addr[r]] = wdata[r];
        else begin pend[r] = 1'b1; expd[r] = model[addr[r]]; end
      end
      @(posedge clk); #1;
      for (int r = 0; r < NREQ; r++) if (pend[r] || (gnt[r] && we[r])) req[r] = 1'b0;
    end
    check(nreads > 100, "enough reads checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
