// tb_dma: DMA controller against the external-memory model and four
// shared-memory port models that grant at random. Checked: a load into
// RCA 2, a store from RCA 2 back to another external region, a
// configuration load whose words reach exactly the RCAs of the mask in
// order, and the busy/done handshake.
module tb_dma;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic start, dir, to_cfg, busy, done, err;
  logic [1:0] rca;
  logic [3:0] mask;
  logic [31:0] ext_addr;
  logic [11:0] sm_addr;
  logic [15:0] len;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready, m_arvalid, m_arready, m_rvalid, m_rready;
  logic [31:0] m_awaddr, m_wdata, m_araddr, m_rdata;
  logic [3:0] m_wstrb;
  logic [1:0] m_bresp, m_rresp;
  logic [3:0] sm_req, sm_gnt, sm_rvalid, cfg_valid;
  logic sm_we;
  logic [11:0] sm_a;
  logic [31:0] sm_wdata, cfg_data;
  logic [3:0][31:0] sm_rdata;
  dma #(.NRCA(4), .MAW(12)) dut (.*);
  ext_mem #(.WORDS(1024)) u_mem (.clk, .rst_n,
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .wvalid(m_wvalid), .wready(m_wready),
    .wdata(m_wdata), .wstrb(m_wstrb), .bvalid(m_bvalid), .bready(m_bready), .bresp(m_bresp),
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rresp(m_rresp));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [31:0] sm [4][4096];
  bit coin;
  always_comb for (int r = 0; r < 4; r++) sm_gnt[r] = sm_req[r] && coin;
  always @(posedge clk) begin
    coin <= $urandom_range(0, 1);
    sm_rvalid <= '0;
    for (int r = 0; r < 4; r++) if (sm_req[r] && sm_gnt[r]) begin
      if (sm_we) sm[r][sm_a] <= sm_wdata;
      else begin sm_rvalid[r] <= 1'b1; sm_rdata[r] <= sm[r][sm_a]; end
    end
  end
  int cfg_seen [4];
  logic [31:0] cfg_q [$];
  always @(negedge clk) if (rst_n) for (int r = 0; r < 4; r++) if (cfg_valid[r]) begin
    cfg_seen[r]++;
    if (r == 1) cfg_q.push_back(cfg_data);
  end
  task automatic cmd(bit d, bit c, int rr, int m, int ea, int sa, int l);
    @(negedge clk);
    start = 1; dir = d; to_cfg = c; rca = 2'(rr); mask = 4'(m); ext_addr = 32'(ea); sm_addr = 12'(sa); len = 16'(l);
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (busy) @(negedge clk);
  endtask
  initial begin
    start = 0; dir = 0; to_cfg = 0; rca = 0; mask = 0; ext_addr = 0; sm_addr = 0; len = 0;
    foreach (cfg_seen[i]) cfg_seen[i] = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = $urandom;
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    cmd(0, 0, 2, 0, 0, 100, 20);
    for (int i = 0; i < 20; i++) check(sm[2][100 + i] == u_mem.mem[i], $sformatf("load word %0d", i));
    cmd(1, 0, 2, 0, 400 * 4, 100, 20);
    for (int i = 0; i < 20; i++) check(u_mem.mem[400 + i] == u_mem.mem[i], $sformatf("store word %0d", i));
    cmd(0, 1, 0, 4'b1010, 50 * 4, 0, 9);
    check(cfg_seen[1] == 9 && cfg_seen[3] == 9 && cfg_seen[0] == 0 && cfg_seen[2] == 0, "config stream mask");
    for (int i = 0; i < 9 && i < cfg_q.size(); i++) check(cfg_q[i] == u_mem.mem[50 + i], "config word order");
    check(!err, "no AXI error");
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
