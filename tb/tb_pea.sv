// tb_pea: the 8x8 process element array with a memory model behind its 28
// LSU ports (every request granted at once, as the static schedule assumes
// a fixed memory latency). Program, in MCMD:
// LSU(0,1) loads A, LSU(1,0) loads B, GPE(1,1) computes A+B for 8 firings
// then A-B for 8, LSU(7,1) stores the result (reached over the torus
// one-hop link) and LSU(1,7) stores a second copy. Then the same array is
// run in SCMD: line 0's 6-step program (5 NOPs then a load) is shared by
// all eight LSUs of the line. Results and `done` are checked.
module tb_pea;
  import windmill_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic start, done, scmd, cfg_we;
  logic [2:0] cfg_line;
  logic [4:0] cfg_addr;
  cfg_t cfg_wdata;
  logic [27:0] mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [27:0][12:0] mem_addr;
  logic [27:0][31:0] mem_wdata, mem_rdata;
  pea #(.ROWS(8), .COLS(8), .DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [31:0] mem [8192];
  logic [27:0] coin;
  int loads_per_lsu [28];
  always_comb mem_gnt = mem_req & coin;
  always @(posedge clk) begin
    coin <= '1;  // fixed one-cycle latency: the schedule is static, no back-pressure
    mem_rvalid <= '0;
    for (int k = 0; k < 28; k++) if (mem_req[k] && mem_gnt[k]) begin
      if (mem_we[k]) mem[mem_addr[k]] <= mem_wdata[k];
      else begin mem_rvalid[k] <= 1'b1; mem_rdata[k] <= mem[mem_addr[k]]; loads_per_lsu[k]++; end
    end
  end
  task automatic wcfg(int line, int entry, cfg_t c);
    @(negedge clk); cfg_we = 1; cfg_line = 3'(line); cfg_addr = 5'(entry); cfg_wdata = c;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic run();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask
  initial begin
    int a[N], b[N];
    start = 0; scmd = 0; cfg_we = 0; cfg_line = 0; cfg_addr = 0; cfg_wdata = '0; mem_rdata = '0;
    foreach (loads_per_lsu[i]) loads_per_lsu[i] = 0;
    for (int i = 0; i < 8192; i++) mem[i] = 32'hBAD0_0000 + i;
    for (int i = 0; i < N; i++) begin
      a[i] = $urandom_range(0, 1 << 20); b[i] = $urandom_range(0, 1 << 20);
      mem[i] = a[i]; mem[64 + i] = b[i];
    end
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    wcfg(0, 1 * 4, mk_cfg(OP_LOAD, .imm(0), .iter(N), .affine(1)));
    wcfg(1, 0 * 4, mk_cfg(OP_LOAD, .imm(64), .iter(N), .affine(1)));
    wcfg(1, 1 * 4 + 0, mk_cfg(OP_ADD, SRC_N, SRC_W, .iter(N / 2), .last(0)));
    wcfg(1, 1 * 4 + 1, mk_cfg(OP_SUB, SRC_N, SRC_W, .iter(N / 2)));
    wcfg(7, 1 * 4, mk_cfg(OP_STORE, SRC_S2, .imm(128), .iter(N), .affine(1)));
    wcfg(1, 7 * 4, mk_cfg(OP_STORE, SRC_E2, .imm(256), .iter(N), .affine(1)));
    run();
    for (int i = 0; i < N; i++) begin
      int e;
      e = (i < N / 2) ? a[i] + b[i] : a[i] - b[i];
      check(mem[128 + i] == 32'(e), $sformatf("result via LSU(7,1) [%0d]", i));
      check(mem[256 + i] == 32'(e), $sformatf("result via LSU(1,7) [%0d]", i));
    end
    // SCMD: line 0 shares a 6-step program among its 8 LSUs
    for (int s = 0; s < 5; s++) wcfg(0, s, mk_cfg(OP_NOP, .last(0)));
    wcfg(0, 5, mk_cfg(OP_LOAD, .imm(0), .iter(3), .affine(1)));
    for (int l = 1; l < 8; l++) for (int e = 0; e < 32; e++) wcfg(l, e, mk_cfg(OP_NOP));
    foreach (loads_per_lsu[i]) loads_per_lsu[i] = 0;
    scmd = 1;
    run();
    for (int k = 0; k < 8; k++) check(loads_per_lsu[k] == 3, $sformatf("SCMD LSU %0d ran the shared load", k));
    check(loads_per_lsu[8] == 0, "other lines idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
