// tb_rtt: register transformation table. Each instruction type is issued
// and the control outputs are checked: DMA command fields for CFG, LOAD
// and STORE (completion only after dma_done), one-cycle launch and mode
// pulses on the masked RCAs, and WAIT completing only when the masked RCAs
// are idle. A model of the DMA answers dma_done after a random delay.
module tb_rtt;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic in_valid, in_ready, in_done;
  rtt_instr_t in_instr;
  logic dma_start, dma_dir, dma_to_cfg, dma_done, mode_scmd, mode_pp;
  logic [1:0] dma_rca;
  logic [3:0] dma_mask, cfg_sync, launch, mode_we, rca_busy;
  logic [31:0] dma_ext;
  logic [11:0] dma_sm;
  logic [15:0] dma_len;
  rtt #(.NRCA(4), .MAW(12)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int dma_starts = 0, launches = 0, modes = 0, syncs = 0;
  always @(negedge clk) if (rst_n) begin
    if (dma_start) dma_starts++;
    if (launch != '0) begin launches++; check(launch == 4'b0110, "launch mask"); end
    if (mode_we != '0) begin modes++; check(mode_we == 4'b1001 && mode_scmd && !mode_pp, "mode fields"); end
    if (cfg_sync != '0) begin syncs++; check(cfg_sync == 4'b0011, "cfg sync mask"); end
  end
  initial begin
    dma_done = 0;
    forever begin
      @(negedge clk);
      if (dma_start) begin
        repeat ($urandom_range(1, 10)) @(negedge clk);
        dma_done = 1; @(negedge clk); dma_done = 0;
      end
    end
  end
  task automatic issue(rtt_op_e op, int mask, int field, int a0, int a1, int a2, output int lat);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_instr = '{arg2: 32'(a2), arg1: 32'(a1), arg0: 32'(a0), op: op, mask: 4'(mask), field: 24'(field)};
    @(negedge clk); in_valid = 0;
    lat = 0;
    while (!in_done) begin @(negedge clk); lat++; end
  endtask
  initial begin
    int lat;
    in_valid = 0; in_instr = '0; rca_busy = '0;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    issue(RI_CFG, 3, 0, 'h40, 0, 30, lat);
    check(dma_to_cfg && !dma_dir && dma_mask == 4'b0011 && dma_ext == 32'h40 && dma_len == 16'd30, "CFG command");
    check(lat >= 1, "CFG waits for the DMA");
    issue(RI_LOAD, 0, 2, 'h100, 77, 16, lat);
    check(!dma_to_cfg && !dma_dir && dma_rca == 2'd2 && dma_sm == 12'd77 && dma_len == 16'd16, "LOAD command");
    issue(RI_STORE, 0, 1, 'h200, 5, 8, lat);
    check(dma_dir && dma_rca == 2'd1 && dma_ext == 32'h200 && dma_sm == 12'd5, "STORE command");
    issue(RI_LAUNCH, 6, 0, 0, 0, 0, lat);
    check(lat == 0, "LAUNCH completes at once");
    issue(RI_MODE, 9, 1, 0, 0, 0, lat);
    rca_busy = 4'b0100;
    fork
      begin repeat (12) @(negedge clk); rca_busy = 4'b0000; end
      issue(RI_WAIT, 4, 0, 0, 0, 0, lat);
    join
    check(lat >= 10, $sformatf("WAIT holds while busy (%0d)", lat));
    rca_busy = 4'b1000;
    issue(RI_WAIT, 4, 0, 0, 0, 0, lat);
    check(lat <= 1, "WAIT ignores RCAs outside the mask");
    check(dma_starts == 3 && launches == 1 && modes == 1 && syncs == 1, "pulse counts");
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
