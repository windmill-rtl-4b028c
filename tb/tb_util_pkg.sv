// tb_util_pkg: helpers shared by the testbenches - building configuration
// words and the header word of a configuration record.
package tb_util_pkg;
  import windmill_pkg::*;

  function automatic cfg_t mk_cfg(op_e op, src_e a = SRC_NONE, src_e b = SRC_NONE,
                                  int imm = 0, int iter = 1, bit last = 1'b1,
                                  bit affine = 1'b0, int stride = 1, bit loc_we = 1'b0,
                                  bit sreg_we = 1'b0, sreg_mode_e sm = SR_GLOB);
    cfg_t c;
    c           = '0;
    c.op        = op;
    c.src_a     = a;
    c.src_b     = b;
    c.imm       = 16'(imm);
    c.iter      = 8'(iter);
    c.last      = last;
    c.affine    = affine;
    c.stride    = 8'(stride);
    c.loc_we    = loc_we;
    c.sreg_we   = sreg_we;
    c.sreg_mode = sm;
    return c;
  endfunction

  function automatic logic [31:0] cfg_hdr(int line, int entry);
    return 32'((line << 8) | entry);
  endfunction
endpackage
