// tb_pai: parallel access interface, 30 requesters, 16 banks. Requesters
// hold a random access until granted. Each cycle: every bank with a
// request grants exactly one requester that targets it, the bank port
// carries that requester's access, and a read returns the bank's data one
// cycle later to the requester that was granted (rvalid). Round-robin fairness: no requester
// waits more than NREQ cycles.
module tb_pai;
  localparam int NREQ = 30, NBANK = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic [NREQ-1:0] req, we, gnt, rvalid;
  logic [NREQ-1:0][11:0] addr;
  logic [NREQ-1:0][31:0] wdata, rdata;
  logic [NBANK-1:0] b_en, b_we;
  logic [NBANK-1:0][7:0] b_addr;
  logic [NBANK-1:0][31:0] b_wdata, b_rdata;
  pai #(.NREQ(NREQ), .NBANK(NBANK), .BDEPTH(256), .DW(32)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int waitc [NREQ];
  logic [NREQ-1:0] exp_rv, gset;
  logic [NBANK-1:0][31:0] tag;
  always_comb for (int b = 0; b < NBANK; b++) b_rdata[b] = tag[b];
  initial begin
    req = '0; we = '0; addr = '0; wdata = '0; exp_rv = '0;
    foreach (waitc[i]) waitc[i] = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      // check read returns of the previous cycle
      for (int r = 0; r < NREQ; r++) begin
        check(rvalid[r] == exp_rv[r], $sformatf("rvalid %0d t=%0d got %0d", r, t, rvalid[r]));
      end
      // new requests for requesters that were granted or idle
      for (int r = 0; r < NREQ; r++) if (!req[r] && $urandom_range(0, 2) != 0) begin
        req[r] = 1'b1; we[r] = $urandom_range(0, 1); wdata[r] = $urandom;
        addr[r] = 12'($urandom_range(0, 4095) & ($urandom_range(0, 1) ? 12'hFF3 : 12'hFFF));
      end
      for (int b = 0; b < NBANK; b++) tag[b] = {16'(b), 16'($urandom)};
      #1;
      exp_rv = '0;
      for (int b = 0; b < NBANK; b++) begin
        int n, g;
        bit any;
        n = 0; g = -1; any = 0;
        for (int r = 0; r < NREQ; r++) begin
          if (req[r] && addr[r][3:0] == 4'(b)) any = 1;
          if (gnt[r] && addr[r][3:0] == 4'(b)) begin n++; g = r; end
        end
        check(n == (any ? 1 : 0), $sformatf("bank %0d grants %0d", b, n));
        check(b_en[b] == any, "bank enable");
        if (g >= 0) begin
          check(b_we[b] == we[g] && b_addr[b] == addr[g][11:4] && (!we[g] || b_wdata[b] == wdata[g]),
                $sformatf("bank %0d carries requester %0d", b, g));
        end
      end
      for (int r = 0; r < NREQ; r++) begin
        check(!gnt[r] || req[r], "grant without request");
        if (req[r] && !gnt[r]) waitc[r]++;
        else waitc[r] = 0;
        check(waitc[r] <= NREQ, $sformatf("requester %0d starved", r));
      end
      gset = gnt;
      @(posedge clk); #1;
      for (int r = 0; r < NREQ; r++) if (gset[r]) begin
        if (!we[r]) exp_rv[r] = 1'b1;
        req[r] = 1'b0;
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
