// shared_mem: the shared memory of one RCA - NBANK SRAM banks of BDEPTH x 32
// bits behind the parallel access interface (pai).
//
// Standard size, as in the paper: 16 banks of 256 x 32 bits, 4096 words.
// Requesters see the pai handshake: req/we/addr/wdata, gnt in the same
// cycle, read data on rvalid/rdata one cycle after the grant. The
// ping-pong half selection is applied to the addresses before they reach
// this block (see rca).
module shared_mem #(
  parameter int unsigned NREQ   = 30,
  parameter int unsigned NBANK  = 16,
  parameter int unsigned BDEPTH = 256,
  parameter int unsigned DW     = 32,
  parameter int unsigned AW     = $clog2(NBANK * BDEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NREQ-1:0]         req,
  input  logic [NREQ-1:0]         we,
  input  logic [NREQ-1:0][AW-1:0] addr,
  input  logic [NREQ-1:0][DW-1:0] wdata,
  output logic [NREQ-1:0]         gnt,
  output logic [NREQ-1:0]         rvalid,
  output logic [NREQ-1:0][DW-1:0] rdata
);
  logic [NBANK-1:0]                     b_en, b_we;
  logic [NBANK-1:0][$clog2(BDEPTH)-1:0] b_addr;
  logic [NBANK-1:0][DW-1:0]             b_wdata, b_rdata;

  pai #(.NREQ(NREQ), .NBANK(NBANK), .BDEPTH(BDEPTH), .DW(DW), .AW(AW)) u_pai (
    .clk, .rst_n, .req, .we, .addr, .wdata, .gnt, .rvalid, .rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  for (genvar b = 0; b < int'(NBANK); b++) begin : g_bank
    sram_bank #(.DEPTH(BDEPTH), .WIDTH(DW)) u_bank (
      .clk, .en(b_en[b]), .we(b_we[b]), .addr(b_addr[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b])
    );
  end
endmodule
