// ctx_line: context (configuration) memory of one PE line of the array.
//
// The line holds COLS*DEPTH configuration words: DEPTH private words for
// each of its COLS PEs, stored at entry col*DEPTH + k. It has one write
// port (from the configuration controller) and one combinational read port
// per PE. In MCMD mode (scmd = 0) PE c reads entry c*DEPTH + (addr mod
// DEPTH), i.e. its own words. In SCMD mode (scmd = 1) every PE of the line
// addresses the whole line, entry = addr, so one program of up to
// COLS*DEPTH = 8x DEPTH steps is shared by the line - the paper's "8x
// configurations than MCMD". Reset fills every entry with a NOP step marked
// last, so a PE that is given no program finishes at once.
//
// Following the paper: per-PE context memory, line sharing in SCMD with an
// 8x larger program. DEPTH = 4 is read off Fig. 6(c), whose 4-entry bar
// has the same area as the standard 8x8 array of Fig. 6(a); the paper does
// not state the default depth. Flip-flop storage and the address mapping
// are this design's own.
module ctx_line
  import windmill_pkg::*;
#(
  parameter int unsigned COLS  = 8,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned PCW   = $clog2(COLS * DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      scmd,
  input  logic                      we,
  input  logic [PCW-1:0]            waddr,
  input  cfg_t                      wdata,
  input  logic [COLS-1:0][PCW-1:0]  raddr,
  output cfg_t [COLS-1:0]           rdata
);
  localparam int unsigned N  = COLS * DEPTH;

  cfg_t mem [N];
  cfg_t empty_word;

  always_comb begin
    empty_word      = '0;
    empty_word.op   = OP_NOP;
    empty_word.last = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) mem[i] <= empty_word;
    end else if (we && int'(waddr) < int'(N)) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      int unsigned e;
      if (scmd) e = int'(raddr[c]) % N;
      else      e = c * DEPTH + (int'(raddr[c]) % DEPTH);
      rdata[c] = mem[e];
    end
  end
endmodule
