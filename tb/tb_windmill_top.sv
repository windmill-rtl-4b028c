// tb_windmill_top: end-to-end test of the WindMill accelerator at its
// default (standard) configuration: 4 RCAs of 8x8 PEs, 16 x 256 x 32 shared
// memory per RCA.
//
// Job 1, driven by the host over AXI4-Lite, on RCA0 in MCMD mode:
//   load 6 configuration records, load vectors A and B (16 words each),
//   launch, wait, store both result copies. The array computes
//   C[i] = A[i] + B[i] for i < 8 and A[i] - B[i] for i >= 8 (one GPE with two
//   control steps); C is written by one LSU into RCA0's memory and by
//   another LSU into RCA1's memory over the ring.
// Job 2, run by the CPE on RCA2 in SCMD mode with ping-pong on: the program
//   of PE line 1 has 6 steps (more than one PE's 4 private entries): a
//   global shared register is set to K, then every PE of the line adds K
//   to the vector X loaded by line 0; line 7 stores Y. Data for the next
//   run are loaded while the array computes.
// The results are compared with values computed here. The test counts each
// mechanism (bank conflicts, step switches, ring accesses, SCMD run,
// ping-pong flips, DMA/compute overlap, shared-register writes, CPE
// completion, configuration records) and fails a mechanism that never
// happened.
module tb_windmill_top;
  import windmill_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 16;
  localparam int K = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [11:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0]  s_bresp, s_rresp, m_bresp, m_rresp;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic        m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready;
  logic        m_arvalid, m_arready, m_rvalid, m_rready;
  logic [31:0] m_awaddr, m_wdata, m_araddr, m_rdata;
  logic [3:0]  m_wstrb;
  logic [3:0]  rca_done;

  windmill_top dut (.*);

  ext_mem #(.WORDS(4096)) u_mem (
    .clk, .rst_n,
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wstrb(m_wstrb),
    .bvalid(m_bvalid), .bready(m_bready), .bresp(m_bresp),
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rresp(m_rresp)
  );

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_conflict = 0, n_step = 0, n_remote = 0, n_scmd = 0, n_pp = 0;
  int n_overlap = 0, n_sreg = 0, n_cpe = 0;
  logic pp2_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if ((dut.g_rca[0].u_rca.m_req & ~dut.g_rca[0].u_rca.m_gnt) != '0) n_conflict++;
    if (dut.g_rca[0].u_rca.u_pea.g_row[1].g_col[1].g_gpe.u_gpe.u_ctrl.step_end &&
        !dut.g_rca[0].u_rca.u_pea.g_row[1].g_col[1].g_gpe.u_gpe.u_ctrl.cfg.last) n_step++;
    if (dut.g_rca[0].u_rca.ro_req && dut.g_rca[0].u_rca.ro_gnt) n_remote++;
    if (dut.g_rca[2].u_rca.scmd && dut.rca_busy[2]) n_scmd++;
    pp2_q <= dut.rca_pp[2];
    if (dut.rca_pp[2] != pp2_q) n_pp++;
    if (dut.u_dma.busy && dut.rca_busy[2]) n_overlap++;
    if (dut.g_rca[2].u_rca.u_pea.sr_we != '0) n_sreg++;
    if (dut.u_cpe.done) n_cpe++;
  end

  // ---------------- AXI4-Lite host ----------------
  task automatic axi_write(logic [11:0] a, logic [31:0] d);
    s_awaddr <= a; s_wdata <= d; s_awvalid <= 1'b1; s_wvalid <= 1'b1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 1'b0; s_wvalid <= 1'b0;
    s_bready <= 1'b1;
    do @(posedge clk); while (!s_bvalid);
    s_bready <= 1'b0;
  endtask

  task automatic axi_read(logic [11:0] a, output logic [31:0] d);
    s_araddr <= a; s_arvalid <= 1'b1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 1'b0; s_rready <= 1'b1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    s_rready <= 1'b0;
  endtask

  function automatic logic [31:0] iw(rtt_op_e op, int mask, int field);
    return {op, 4'(mask), 24'(field)};
  endfunction

  task automatic host_issue(rtt_op_e op, int mask, int field, int a0, int a1, int a2);
    logic [31:0] st;
    axi_write(12'h000, 32'(a0));
    axi_write(12'h004, 32'(a1));
    axi_write(12'h008, 32'(a2));
    axi_write(12'h00C, iw(op, mask, field));
    do axi_read(12'h010, st); while (st[0]);
  endtask

  task automatic cpe_entry(int j, rtt_op_e op, int mask, int field, int a0, int a1, int a2);
    axi_write(12'(32'h100 + 16 * j + 0), iw(op, mask, field));
    axi_write(12'(32'h100 + 16 * j + 4), 32'(a0));
    axi_write(12'(32'h100 + 16 * j + 8), 32'(a1));
    axi_write(12'(32'h100 + 16 * j + 12), 32'(a2));
  endtask

  // configuration records placed in external memory
  int rec_ptr;
  task automatic put_rec(int line, int entry, cfg_t c);
    u_mem.mem[rec_ptr]     = cfg_hdr(line, entry);
    u_mem.mem[rec_ptr + 1] = c[31:0];
    u_mem.mem[rec_ptr + 2] = c[63:32];
    rec_ptr += 3;
  endtask

  // word addresses in external memory
  localparam int CFG1 = 'h000, A_W = 'h100, B_W = 'h200, C0_W = 'h300, C1_W = 'h380;
  localparam int CFG2 = 'h400, X0_W = 'h500, X1_W = 'h580, Y_W = 'h600;

  int a_v[N], b_v[N], x_v[N];

  initial begin
    logic [31:0] st, cyc0;
    int recs1, recs2;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 32'hDEAD_0000 + i;
    for (int i = 0; i < N; i++) begin
      a_v[i] = $urandom_range(0, 50000);
      b_v[i] = $urandom_range(0, 50000);
      x_v[i] = $urandom_range(0, 50000);
      u_mem.mem[A_W + i]  = a_v[i];
      u_mem.mem[B_W + i]  = b_v[i];
      u_mem.mem[X0_W + i] = x_v[i];
      u_mem.mem[X1_W + i] = x_v[i] + 7;
    end
    // job 1 configuration (RCA0, MCMD: entry = column*4 + step)
    rec_ptr = CFG1;
    put_rec(0, 1 * 4, mk_cfg(OP_LOAD, .imm(0), .iter(N), .affine(1)));
    put_rec(1, 0 * 4, mk_cfg(OP_LOAD, .imm(64), .iter(N), .affine(1)));
    put_rec(1, 1 * 4 + 0, mk_cfg(OP_ADD, SRC_N, SRC_W, .iter(N / 2), .last(0)));
    put_rec(1, 1 * 4 + 1, mk_cfg(OP_SUB, SRC_N, SRC_W, .iter(N / 2)));
    put_rec(7, 1 * 4, mk_cfg(OP_STORE, SRC_S2, .imm(128), .iter(N), .affine(1)));
    put_rec(1, 7 * 4, mk_cfg(OP_STORE, SRC_E2, .imm('h1000 + 256), .iter(N), .affine(1)));
    recs1 = (rec_ptr - CFG1) / 3;
    // job 2 configuration (RCA2, SCMD: entry = step)
    rec_ptr = CFG2;
    for (int s = 0; s < 5; s++) put_rec(0, s, mk_cfg(OP_NOP, .last(0)));
    put_rec(0, 5, mk_cfg(OP_LOAD, .imm(0), .iter(N), .affine(1)));
    put_rec(1, 0, mk_cfg(OP_PASS, SRC_IMM, .imm(K), .last(0), .sreg_we(1), .sm(SR_GLOB)));
    for (int s = 1; s < 5; s++) put_rec(1, s, mk_cfg(OP_NOP, .last(0)));
    put_rec(1, 5, mk_cfg(OP_ADD, SRC_N, SRC_SREG, .iter(N), .sm(SR_GLOB)));
    put_rec(7, 0, mk_cfg(OP_PASS, SRC_S2, .last(0)));
    put_rec(7, 1, mk_cfg(OP_STORE, SRC_S2, .imm(40), .iter(N), .affine(1)));
    recs2 = (rec_ptr - CFG2) / 3;

    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // ---------------- job 1: host-driven, RCA0 ----------------
    host_issue(RI_CFG,    1, 0, CFG1 * 4, 0, recs1 * 3);
    check(dut.g_rca[0].u_rca.cfg_records == 16'(recs1), "RCA0 configuration records written");
    host_issue(RI_LOAD,   0, 0, A_W * 4, 0,  N);
    host_issue(RI_LOAD,   0, 0, B_W * 4, 64, N);
    host_issue(RI_LAUNCH, 1, 0, 0, 0, 0);
    host_issue(RI_WAIT,   1, 0, 0, 0, 0);
    axi_read(12'h010, st);
    check(st[8] == 1'b1, "RCA0 done flag after WAIT");
    axi_read(12'h020, cyc0);
    $display("RCA0 run took %0d cycles", cyc0);
    // N loads per LSU and the pipeline fill bound the run from below
    check(cyc0 >= 32'(N) && cyc0 <= 32'(4 * N + 40), "RCA0 run length");
    host_issue(RI_STORE,  0, 0, C0_W * 4, 128, N);
    host_issue(RI_STORE,  0, 1, C1_W * 4, 256, N);
    for (int i = 0; i < N; i++) begin
      int exp_c;
      exp_c = (i < N / 2) ? a_v[i] + b_v[i] : a_v[i] - b_v[i];
      check(u_mem.mem[C0_W + i] == 32'(exp_c), $sformatf("C local [%0d] = %0d, expected %0d", i, u_mem.mem[C0_W + i], exp_c));
      check(u_mem.mem[C1_W + i] == 32'(exp_c), $sformatf("C ring  [%0d] = %0d, expected %0d", i, u_mem.mem[C1_W + i], exp_c));
    end

    // ---------------- job 2: CPE-driven, RCA2 ----------------
    cpe_entry(0, RI_MODE,   4, 3, 0, 0, 0);
    cpe_entry(1, RI_CFG,    4, 0, CFG2 * 4, 0, recs2 * 3);
    cpe_entry(2, RI_LOAD,   0, 2, X0_W * 4, 0, N);
    cpe_entry(3, RI_LAUNCH, 4, 0, 0, 0, 0);
    cpe_entry(4, RI_WAIT,   4, 0, 0, 0, 0);
    cpe_entry(5, RI_LAUNCH, 4, 0, 0, 0, 0);
    cpe_entry(6, RI_LOAD,   0, 2, X1_W * 4, 0, N);
    cpe_entry(7, RI_WAIT,   4, 0, 0, 0, 0);
    cpe_entry(8, RI_STORE,  0, 2, Y_W * 4, 40, N);
    axi_write(12'h014, {16'd0, 8'd9, 8'd1});
    do axi_read(12'h010, st); while (st[12] || st[0]);
    check(dut.g_rca[2].u_rca.cfg_records == 16'(recs2), "RCA2 configuration records written");
    check(dut.rca_pp[2] == 1'b0, "RCA2 ping-pong half back to 0 after two runs");
    for (int i = 0; i < N; i++)
      check(u_mem.mem[Y_W + i] == 32'(x_v[i] + K),
            $sformatf("Y[%0d] = %0d, expected %0d", i, u_mem.mem[Y_W + i], x_v[i] + K));

    // ---------------- mechanisms ----------------
    $display("mechanisms: bank_conflict=%0d step_switch=%0d ring_access=%0d scmd_cycles=%0d pingpong_flips=%0d dma_overlap=%0d sreg_writes=%0d cpe_jobs=%0d cfg_records=%0d",
             n_conflict, n_step, n_remote, n_scmd, n_pp, n_overlap, n_sreg, n_cpe, recs1 + recs2);
    check(n_conflict > 0, "bank conflict stall happened");
    check(n_step == 1, "control-step switch happened once");
    check(n_remote == N, "ring accesses to the neighbour memory");
    check(n_scmd > 0, "SCMD run happened");
    check(n_pp == 2, "ping-pong half flipped twice");
    check(n_overlap > 0, "DMA overlapped with computation");
    check(n_sreg > 0, "shared register written");
    check(n_cpe == 1, "CPE completed its program");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
