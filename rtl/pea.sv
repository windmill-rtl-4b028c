// pea: the process element array of one RCA.
//
// A ROWS x COLS grid. The PEs on the border are LSUs (28 of them in the
// standard 8x8 array), the inner (ROWS-2) x (COLS-2) are GPEs (36). Every PE
// broadcasts its registered output (data + valid) to the eight PEs that can
// select it: its mesh neighbours N/E/S/W and the one-hop neighbours two
// steps away, all with torus wrap-around at the array edges. Each PE line
// (array row) has one context memory (ctx_line); `scmd` switches all lines
// between SCMD (program shared by the line) and MCMD (private programs).
// The shared registers (shared_reg) are read and written by the GPEs; LSUs
// read them only. `start` launches every PE at once; `done` is high when
// all PEs have finished their last step.
//
// LSU k, numbered in row-major order of the border positions, drives
// mem_*[k]. Configuration words are written with cfg_we into line cfg_line,
// entry cfg_addr (entry = col*DEPTH + step).
//
// Following the paper: 8x8 standard size, 36 GPE + 28 LSU (Fig. 6(d)),
// GPEs surrounded by LSUs, mesh + 1-hop + torus network, SCMD/MCMD, shared
// registers. Exact link set and numbering are this design's own.
module pea
  import windmill_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 8,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned NLSU  = 2 * COLS + 2 * (ROWS - 2),
  parameter int unsigned PCW   = $clog2(COLS * DEPTH),
  parameter int unsigned AW    = 13
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    done,
  input  logic                    scmd,
  input  logic                    cfg_we,
  input  logic [$clog2(ROWS)-1:0] cfg_line,
  input  logic [PCW-1:0]          cfg_addr,
  input  cfg_t                    cfg_wdata,
  output logic [NLSU-1:0]         mem_req,
  output logic [NLSU-1:0]         mem_we,
  output logic [NLSU-1:0][AW-1:0] mem_addr,
  output logic [NLSU-1:0][DW-1:0] mem_wdata,
  input  logic [NLSU-1:0]         mem_gnt,
  input  logic [NLSU-1:0]         mem_rvalid,
  input  logic [NLSU-1:0][DW-1:0] mem_rdata
);
  localparam int unsigned NPE = ROWS * COLS;

  function automatic bit is_border(int r, int c);
    return (r == 0) || (c == 0) || (r == int'(ROWS) - 1) || (c == int'(COLS) - 1);
  endfunction

  function automatic int lsu_index(int r, int c);
    int n = 0;
    for (int i = 0; i < int'(NPE); i++)
      if (i < r * int'(COLS) + c && is_border(i / int'(COLS), i % int'(COLS))) n++;
    return n;
  endfunction

  function automatic int wrap(int v, int m);
    return ((v % m) + m) % m;
  endfunction

  logic [NPE-1:0][DW-1:0] out_data;
  logic [NPE-1:0]         out_valid;
  logic [NPE-1:0]         pe_done;
  logic [ROWS-1:0][COLS-1:0][PCW-1:0] ctx_addr;
  cfg_t [ROWS-1:0][COLS-1:0]          ctx_data;
  sreg_mode_e [NPE-1:0]         sr_mode, sr_wmode;
  logic [NPE-1:0]               sr_we;
  logic [NPE-1:0][DW-1:0]       sr_wdata, sr_rdata;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_line
    ctx_line #(.COLS(COLS), .DEPTH(DEPTH), .PCW(PCW)) u_ctx (
      .clk, .rst_n, .scmd,
      .we(cfg_we && cfg_line == r), .waddr(cfg_addr), .wdata(cfg_wdata),
      .raddr(ctx_addr[r]), .rdata(ctx_data[r])
    );
  end

  shared_reg #(.ROWS(ROWS), .COLS(COLS)) u_sreg (
    .clk, .rst_n, .mode(sr_mode), .wmode(sr_wmode), .we(sr_we), .wdata(sr_wdata), .rdata(sr_rdata)
  );

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      localparam int P = r * int'(COLS) + c;
      localparam int RN = int'(ROWS), CN = int'(COLS);
      logic [NB-1:0][DW-1:0] ld;
      logic [NB-1:0]         lv;
      // link order: N, E, S, W, N2, E2, S2, W2 (torus)
      localparam int SRC0 = wrap(r - 1, RN) * CN + c;
      localparam int SRC1 = r * CN + wrap(c + 1, CN);
      localparam int SRC2 = wrap(r + 1, RN) * CN + c;
      localparam int SRC3 = r * CN + wrap(c - 1, CN);
      localparam int SRC4 = wrap(r - 2, RN) * CN + c;
      localparam int SRC5 = r * CN + wrap(c + 2, CN);
      localparam int SRC6 = wrap(r + 2, RN) * CN + c;
      localparam int SRC7 = r * CN + wrap(c - 2, CN);
      assign ld = {out_data[SRC7], out_data[SRC6], out_data[SRC5], out_data[SRC4],
                   out_data[SRC3], out_data[SRC2], out_data[SRC1], out_data[SRC0]};
      assign lv = {out_valid[SRC7], out_valid[SRC6], out_valid[SRC5], out_valid[SRC4],
                   out_valid[SRC3], out_valid[SRC2], out_valid[SRC1], out_valid[SRC0]};

      if (is_border(r, c)) begin : g_lsu
        localparam int K = lsu_index(r, c);
        lsu #(.PCW(PCW), .AW(AW)) u_lsu (
          .clk, .rst_n, .start, .done(pe_done[P]),
          .ctx_addr(ctx_addr[r][c]), .ctx_data(ctx_data[r][c]),
          .link_data(ld), .link_valid(lv),
          .sreg_rdata(sr_rdata[P]), .sreg_mode(sr_mode[P]),
          .mem_req(mem_req[K]), .mem_we(mem_we[K]), .mem_addr(mem_addr[K]),
          .mem_wdata(mem_wdata[K]), .mem_gnt(mem_gnt[K]),
          .mem_rvalid(mem_rvalid[K]), .mem_rdata(mem_rdata[K]),
          .out_data(out_data[P]), .out_valid(out_valid[P])
        );
        assign sr_we[P]    = 1'b0;
        assign sr_wmode[P] = SR_LINE;
        assign sr_wdata[P] = '0;
      end else begin : g_gpe
        gpe #(.PCW(PCW)) u_gpe (
          .clk, .rst_n, .start, .done(pe_done[P]),
          .ctx_addr(ctx_addr[r][c]), .ctx_data(ctx_data[r][c]),
          .link_data(ld), .link_valid(lv),
          .sreg_rdata(sr_rdata[P]), .sreg_mode(sr_mode[P]), .sreg_wmode(sr_wmode[P]),
          .sreg_we(sr_we[P]), .sreg_wdata(sr_wdata[P]),
          .out_data(out_data[P]), .out_valid(out_valid[P])
        );
      end
    end
  end

  // done is registered so that it rises the cycle after the last PE finishes
  // and stays low in the cycle of `start`
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     done <= 1'b0;
    else if (start) done <= 1'b0;
    else            done <= &pe_done;
  end

  initial assert (NLSU == 2 * COLS + 2 * (ROWS - 2)) else $error("NLSU must equal the border size");
endmodule
