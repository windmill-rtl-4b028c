// tb_host_if: AXI4-Lite host interface. Argument registers are written and
// read back; a write to INSTR must present the packed instruction to the
// RTT, hold it until taken and show in STATUS; the status and cycle-count
// registers must reflect their inputs; CPE program writes must decode to
// entry/word; CPE_CTRL must pulse cpe_start with its fields.
module tb_host_if;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready;
  logic [11:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic instr_valid, instr_taken, rtt_busy, cpe_we, cpe_start, cpe_busy, dma_err;
  rtt_instr_t instr;
  logic [3:0] cpe_idx;
  logic [1:0] cpe_word;
  logic [31:0] cpe_data;
  logic [7:0] cpe_len, cpe_iter;
  logic [3:0] rca_busy, rca_done, rca_pp;
  logic [3:0][31:0] rca_cycles;
  host_if #(.NRCA(4), .CDEPTH(16)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int cpe_writes = 0, cpe_starts = 0;
  always @(negedge clk) if (rst_n) begin
    if (cpe_we) begin
      cpe_writes++;
      check(cpe_idx == 4'd5 && cpe_word == 2'd2 && cpe_data == 32'hABCD, "CPE program write decode");
    end
    if (cpe_start) begin
      cpe_starts++;
      check(cpe_len == 8'd7 && cpe_iter == 8'd3, "CPE start fields");
    end
  end
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d;
    #1;
    while (!(s_awready && s_wready)) @(negedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk); s_bready = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) @(negedge clk);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask
  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0; s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    instr_taken = 0; rtt_busy = 0; cpe_busy = 0; dma_err = 0;
    rca_busy = 4'b0101; rca_done = 4'b0010; rca_pp = 4'b1000;
    for (int i = 0; i < 4; i++) rca_cycles[i] = 32'(1000 + i);
    repeat (2) @(posedge clk); rst_n <= 1'b1;
    wr(12'h000, 32'h1111); wr(12'h004, 32'h2222); wr(12'h008, 32'h3333);
    rd(12'h004, d); check(d == 32'h2222, "ARG1 readback");
    wr(12'h00C, 32'h2300_0001);
    check(instr_valid && instr.op == RI_LOAD && instr.mask == 4'h3 && instr.field == 24'd1 &&
          instr.arg0 == 32'h1111 && instr.arg1 == 32'h2222 && instr.arg2 == 32'h3333, "instruction packed");
    rd(12'h010, d);
    check(d[0] && d[7:4] == 4'b0101 && d[11:8] == 4'b0010 && d[19:16] == 4'b1000 && !d[12], "STATUS fields");
    @(negedge clk); instr_taken = 1; @(negedge clk); instr_taken = 0;
    check(!instr_valid, "instruction taken");
    rd(12'h010, d); check(!d[0], "STATUS idle");
    rd(12'h028, d); check(d == 32'd1002, "cycle count of RCA 2");
    wr(12'h100 + 16 * 5 + 8, 32'hABCD);
    wr(12'h014, {16'd0, 8'd7, 8'd3});
    check(cpe_writes == 1 && cpe_starts == 1, "CPE writes and start");
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
