// tb_shared_reg: shared registers. Random writes in all four modes by random
// PEs are applied to a model (lowest PE index wins a conflict) and every
// PE's read in every mode is compared with the model.
module tb_shared_reg;
  import windmill_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  sreg_mode_e [63:0] mode, wmode;
  logic [63:0] we;
  logic [63:0][31:0] wdata, rdata;
  logic [31:0] m_line [8], m_col [8], m_quad [4], m_glob;
  shared_reg #(.ROWS(8), .COLS(8)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int q(int p);
    return ((p / 8) >= 4 ? 2 : 0) + ((p % 8) >= 4 ? 1 : 0);
  endfunction
  initial begin
    mode = '0; wmode = '0; we = '0; wdata = '0;
    foreach (m_line[i]) m_line[i] = 0;
    foreach (m_col[i]) m_col[i] = 0;
    foreach (m_quad[i]) m_quad[i] = 0;
    m_glob = 0;
    repeat (2) @(posedge clk); rst_n <= 1'b1; @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      we = '0;
      for (int k = 0; k < 3; k++) begin
        int p;
        p = $urandom_range(0, 63);
        we[p] = 1'b1; wmode[p] = sreg_mode_e'($urandom_range(0, 3)); wdata[p] = $urandom;
      end
      for (int p = 63; p >= 0; p--) if (we[p])
        case (wmode[p])
          SR_LINE: m_line[p / 8] = wdata[p];
          SR_ROW:  m_col[p % 8]  = wdata[p];
          SR_QUAD: m_quad[q(p)]  = wdata[p];
          SR_GLOB: m_glob        = wdata[p];
        endcase
      @(posedge clk); #1;
      we = '0;
      for (int p = 0; p < 64; p++) begin
        mode[p] = sreg_mode_e'($urandom_range(0, 3));
      end
      #1;
      for (int p = 0; p < 64; p += 7) begin
        logic [31:0] e;
        case (mode[p])
          SR_LINE: e = m_line[p / 8];
          SR_ROW:  e = m_col[p % 8];
          SR_QUAD: e = m_quad[q(p)];
          default: e = m_glob;
        endcase
        check(rdata[p] == e, $sformatf("PE %0d mode %0d", p, mode[p]));
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
