// tb_cfg_ctrl: configuration controller. Random three-word records are
// streamed with random gaps; each must produce exactly one context write
// with the header's line and entry and the 64-bit word. A `sync` in the
// middle of a record must restart the framing.
module tb_cfg_ctrl;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic sync, s_valid, cfg_we;
  logic [31:0] s_data;
  logic [2:0] cfg_line;
  logic [4:0] cfg_addr;
  cfg_t cfg_wdata;
  logic [15:0] records;
  cfg_ctrl #(.ROWS(8), .PCW(5)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int exp_line[$], exp_addr[$];
  logic [63:0] exp_word[$];
  always @(negedge clk) if (rst_n && cfg_we) begin
    if (exp_line.size() == 0) check(0, "unexpected write");
    else begin
      int el, ea;
      logic [63:0] ew;
      el = exp_line.pop_front(); ea = exp_addr.pop_front(); ew = exp_word.pop_front();
      check(cfg_line == 3'(el) && cfg_addr == 5'(ea) && cfg_wdata == ew,
            $sformatf("rec %0d: context write %0d/%0d %h, expected %0d/%0d %h", records, cfg_line, cfg_addr, cfg_wdata, el, ea, ew));
    end
  end
  task automatic put(logic [31:0] w);
    s_valid = 1'b1; s_data = w; @(negedge clk); s_valid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask
  initial begin
    sync = 0; s_valid = 0; s_data = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1; @(negedge clk);
    for (int k = 0; k < 50; k++) begin
      int l, a;
      logic [63:0] w;
      l = $urandom_range(0, 7); a = $urandom_range(0, 31); w = {$urandom, $urandom};
      if (k == 20) begin
        put(32'h0000_0105); put(32'h1234);      // partial record, then sync
        sync = 1'b1; @(negedge clk); sync = 1'b0;
      end
      exp_line.push_back(l); exp_addr.push_back(a); exp_word.push_back(w);
      put(32'((l << 8) | a)); put(w[31:0]); put(w[63:32]);
    end
    repeat (5) @(posedge clk);
    check(exp_line.size() == 0, "all records written");
    check(records == 16'd50, "record counter");
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
