// tb_rca: one RCA with models of the DMA port, the configuration stream
// and the next RCA's memory (ring_out, granting at once, read data one cycle
// later). Steps: stream 6 configuration records, write vectors A and B
// through the DMA port, launch, wait for done, read C back through the DMA
// port and check the copy that went out over ring_out. The array computes
// C[i] = A[i]+B[i] for i < 8 and A[i]-B[i] for i >= 8. Then a write from
// the previous RCA (ring_in) is read back through the DMA port, and a run
// with ping-pong on checks that pp_sel flips after the array finishes and
// that the DMA port then reaches the other half.
module tb_rca;
  import windmill_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic launch, mode_we, mode_scmd, mode_pp, busy, done, pp_sel;
  logic [31:0] cycles;
  logic [15:0] cfg_records;
  logic cfg_sync, cfg_valid;
  logic [31:0] cfg_data;
  logic dma_req, dma_we, dma_gnt, dma_rvalid;
  logic [11:0] dma_addr, ro_addr, ri_addr;
  logic [31:0] dma_wdata, dma_rdata, ro_wdata, ro_rdata, ri_wdata, ri_rdata;
  logic ro_req, ro_we, ro_gnt, ro_rvalid, ri_req, ri_we, ri_gnt, ri_rvalid;
  rca dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // next RCA's memory
  logic [31:0] rmem [4096];
  assign ro_gnt = ro_req;
  always @(posedge clk) begin
    ro_rvalid <= ro_req && !ro_we;
    if (ro_req && ro_we) rmem[ro_addr] <= ro_wdata;
    if (ro_req) ro_rdata <= rmem[ro_addr];
  end
  task automatic cfg_word(logic [31:0] w);
    @(negedge clk); cfg_valid = 1; cfg_data = w;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic rec(int line, int entry, cfg_t c);
    cfg_word(cfg_hdr(line, entry)); cfg_word(c[31:0]); cfg_word(c[63:32]);
  endtask
  task automatic dwrite(int a, logic [31:0] d);
    @(negedge clk); dma_req = 1; dma_we = 1; dma_addr = 12'(a); dma_wdata = d;
    #1; while (!dma_gnt) begin @(negedge clk); #1; end
    @(negedge clk); dma_req = 0; dma_we = 0;
  endtask
  task automatic dread(int a, output logic [31:0] d);
    @(negedge clk); dma_req = 1; dma_we = 0; dma_addr = 12'(a);
    #1; while (!dma_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1; dma_req = 0;
    while (!dma_rvalid) begin @(posedge clk); #1; end
    d = dma_rdata;
  endtask
  task automatic run();
    @(negedge clk); launch = 1; @(negedge clk); launch = 0;
    check(busy, "busy after launch");
    while (!done) @(negedge clk);
  endtask
  initial begin
    int a[N], b[N];
    logic [31:0] d;
    bit pp0;
    launch = 0; mode_we = 0; mode_scmd = 0; mode_pp = 0; cfg_sync = 0; cfg_valid = 0; cfg_data = 0;
    dma_req = 0; dma_we = 0; dma_addr = 0; dma_wdata = 0;
    ri_req = 0; ri_we = 0; ri_addr = 0; ri_wdata = 0;
    for (int i = 0; i < 4096; i++) rmem[i] = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    @(negedge clk); cfg_sync = 1; @(negedge clk); cfg_sync = 0;
    rec(0, 1 * 4, mk_cfg(OP_LOAD, .imm(0), .iter(N), .affine(1)));
    rec(1, 0 * 4, mk_cfg(OP_LOAD, .imm(64), .iter(N), .affine(1)));
    rec(1, 1 * 4 + 0, mk_cfg(OP_ADD, SRC_N, SRC_W, .iter(N / 2), .last(0)));
    rec(1, 1 * 4 + 1, mk_cfg(OP_SUB, SRC_N, SRC_W, .iter(N / 2)));
    rec(7, 1 * 4, mk_cfg(OP_STORE, SRC_S2, .imm(128), .iter(N), .affine(1)));
    rec(1, 7 * 4, mk_cfg(OP_STORE, SRC_E2, .imm('h1000 + 256), .iter(N), .affine(1)));
    repeat (2) @(negedge clk);
    check(cfg_records == 6, "six configuration records taken");
    for (int i = 0; i < N; i++) begin
      a[i] = $urandom_range(0, 1 << 20); b[i] = $urandom_range(0, 1 << 20);
      dwrite(i, a[i]); dwrite(64 + i, b[i]);
    end
    run();
    check(cycles >= N && cycles < 4 * N + 40, $sformatf("run length %0d cycles", cycles));
    for (int i = 0; i < N; i++) begin
      int e;
      e = (i < N / 2) ? a[i] + b[i] : a[i] - b[i];
      dread(128 + i, d);
      check(d == 32'(e), $sformatf("C[%0d] in local memory", i));
      check(rmem[256 + i] == 32'(e), $sformatf("C[%0d] over ring_out", i));
    end
    // ring_in write into the local memory
    @(negedge clk); ri_req = 1; ri_we = 1; ri_addr = 12'd777; ri_wdata = 32'hCAFE_F00D;
    #1; while (!ri_gnt) begin @(negedge clk); #1; end
    @(negedge clk); ri_req = 0; ri_we = 0;
    dread(777, d);
    check(d == 32'hCAFE_F00D, "ring_in write landed");
    // ping-pong: the DMA port sees the half the array does not use
    @(negedge clk); mode_we = 1; mode_pp = 1; @(negedge clk); mode_we = 0;
    pp0 = pp_sel;
    dwrite(5, 32'h1111_2222);  // written to the half opposite pp_sel
    run();
    @(negedge clk);
    check(pp_sel != pp0, "pp_sel flipped at finish");
    dread(5, d);
    check(d != 32'h1111_2222, "DMA now sees the other half");
    @(negedge clk); mode_we = 1; mode_pp = 0; @(negedge clk); mode_we = 0;
    dread({pp0 ? 1'b0 : 1'b1, 11'd5}, d);
    check(d == 32'h1111_2222, "word in the expected half");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
