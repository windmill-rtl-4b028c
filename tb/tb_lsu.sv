// tb_lsu: self-checking test of the load/store unit.
// Program: step 0 affine load of 4 words (base 10, stride 3); step 1
// non-affine store of 3 words, data from link N, offset from link E, base
// 100, last. A memory model in the testbench grants each request only with
// probability 1/2 and answers reads one cycle after the grant. Loaded
// values, the addresses used, the stored words and `done` are checked.
module tb_lsu;
  import windmill_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic start, done, out_valid;
  logic [4:0] ctx_addr;
  cfg_t ctx_data;
  logic [NB-1:0][DW-1:0] link_data;
  logic [NB-1:0] link_valid;
  logic [DW-1:0] sreg_rdata, out_data;
  sreg_mode_e sreg_mode;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [12:0] mem_addr;
  logic [DW-1:0] mem_wdata, mem_rdata;
  cfg_t prog [32];
  logic [31:0] mem [1024];

  assign ctx_data   = prog[ctx_addr];
  assign sreg_rdata = '0;

  lsu #(.PCW(5), .AW(13)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit coin;
  always_comb mem_gnt = mem_req && coin;
  always @(posedge clk) begin
    coin <= $urandom_range(0, 1);
    mem_rvalid <= 1'b0;
    if (mem_req && mem_gnt) begin
      if (mem_we) mem[mem_addr[9:0]] <= mem_wdata;
      else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= mem[mem_addr[9:0]];
      end
    end
  end

  int got_q[$];
  always @(posedge clk) if (rst_n && out_valid) got_q.push_back(out_data);

  initial begin
    int d[3], o[3];
    for (int i = 0; i < 1024; i++) mem[i] = 32'h5000 + i;
    for (int i = 0; i < 32; i++) prog[i] = mk_cfg(OP_NOP);
    prog[0] = mk_cfg(OP_LOAD, .imm(10), .iter(4), .last(0), .affine(1), .stride(3));
    prog[1] = mk_cfg(OP_STORE, SRC_N, SRC_E, .imm(100), .iter(3), .affine(0));
    link_valid = '0; link_data = '0; start = 0; mem_rvalid = 0; mem_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (20) @(posedge clk);
    check(got_q.size() == 4, $sformatf("load count %0d", got_q.size()));
    for (int i = 0; i < 4 && i < got_q.size(); i++)
      check(got_q[i] == 32'h5000 + 10 + 3 * i, $sformatf("load %0d = %h", i, got_q[i]));
    for (int i = 0; i < 3; i++) begin
      d[i] = $urandom; o[i] = 5 * i + 1;
      link_data[0] <= d[i]; link_data[1] <= o[i];
      link_valid[0] <= 1'b1; link_valid[1] <= 1'b1;
      @(posedge clk);
      link_valid <= '0;
      wait (dut.u_a.full == 1'b0);
      @(posedge clk);
    end
    repeat (10) @(posedge clk);
    for (int i = 0; i < 3; i++)
      check(mem[100 + o[i]] == d[i], $sformatf("store %0d", i));
    check(done == 1'b1, "done after the store step");
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
