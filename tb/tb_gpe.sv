// tb_gpe: self-checking test of the general-purpose PE.
// A two-step program is served from a context array in the testbench:
//   step 0: ADD N + E, 3 firings, result also written to the line shared register
//   step 1: MAC loc + W*3 into the local register, 2 firings, last
// Tokens are sent with gaps so that operands arrive in different cycles.
// Outputs, shared-register writes, the one-cycle result latency and `done`
// are checked against values computed here.
module tb_gpe;
  import windmill_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic start, done, out_valid, sreg_we;
  logic [4:0] ctx_addr;
  cfg_t ctx_data;
  logic [NB-1:0][DW-1:0] link_data;
  logic [NB-1:0] link_valid;
  logic [DW-1:0] sreg_rdata, sreg_wdata, out_data;
  sreg_mode_e sreg_mode, sreg_wmode;
  cfg_t prog [32];

  assign ctx_data   = prog[ctx_addr];
  assign sreg_rdata = 32'd0;

  gpe #(.PCW(5)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int exp_q[$], got_q[$], got_cyc[$];
  int n_sreg = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin got_q.push_back(out_data); got_cyc.push_back(cyc); end
    if (sreg_we) begin
      n_sreg++;
      check(sreg_wmode == SR_LINE && sreg_wdata == out_data, "shared register write of step 0");
    end
  end

  task automatic send(int link, int v);
    link_data[link]  <= 32'(v);
    link_valid[link] <= 1'b1;
    @(posedge clk);
    link_valid[link] <= 1'b0;
  endtask

  initial begin
    int n, e, w, loc, fire_cyc;
    for (int i = 0; i < 32; i++) prog[i] = mk_cfg(OP_NOP);
    prog[0] = mk_cfg(OP_ADD, SRC_N, SRC_E, .iter(3), .last(0), .sreg_we(1), .sm(SR_LINE));
    prog[1] = mk_cfg(OP_MAC, SRC_W, SRC_IMM, .imm(3), .iter(2), .loc_we(1));
    link_valid = '0; link_data = '0; start = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (4) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      n = $urandom_range(0, 1 << 20);
      e = $urandom_range(0, 1 << 20);
      exp_q.push_back(n + e);
      send(0, n);
      repeat (i) @(posedge clk);
      fire_cyc = cyc;
      send(1, e);
    end
    loc = 0;
    for (int i = 0; i < 2; i++) begin
      w = $urandom_range(0, 1000);
      loc = loc + w * 3;
      exp_q.push_back(loc);
      send(3, w);
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("result count %0d", got_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("result %0d: %0d expected %0d", i, got_q[i], exp_q[i]));
    // token driven after edge k, PE fires before edge k+1, out_valid is high
    // after edge k+1 and is sampled by the monitor at edge k+2
    if (got_cyc.size() >= 3) check(got_cyc[2] == fire_cyc + 2, $sformatf("one-cycle execute/write-back latency (%0d vs %0d)", got_cyc[2], fire_cyc));
    check(n_sreg == 3, "shared register written by each ADD");
    check(done == 1'b1, "done after the last step");
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
