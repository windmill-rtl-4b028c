// pai: parallel access interface of the shared memory.
//
// NREQ requesters (the LSUs of the array, the DMA and the neighbouring RCA)
// each present one word access per cycle: req, we, a word address and write
// data. The low log2(NBANK) address bits select the bank (word
// interleaving), the rest the row. Every bank has its own round-robin
// arbiter: among the requesters that target it in a cycle, one is granted
// (gnt, combinational in the same cycle) and the access goes to the bank;
// the others wait and ask again. Read data return on rvalid/rdata one cycle
// after the grant. Up to NBANK accesses proceed per cycle when they hit
// different banks.
//
// The paper gives the round-robin arbiter, the parallel access and the
// banked memory; the per-bank arbitration and the interleaving are this
// design's own.
module pai #(
  parameter int unsigned NREQ  = 30,
  parameter int unsigned NBANK = 16,
  parameter int unsigned BDEPTH = 256,
  parameter int unsigned DW    = 32,
  parameter int unsigned AW    = $clog2(NBANK * BDEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NREQ-1:0]          req,
  input  logic [NREQ-1:0]          we,
  input  logic [NREQ-1:0][AW-1:0]  addr,
  input  logic [NREQ-1:0][DW-1:0]  wdata,
  output logic [NREQ-1:0]          gnt,
  output logic [NREQ-1:0]          rvalid,
  output logic [NREQ-1:0][DW-1:0]  rdata,
  // bank side
  output logic [NBANK-1:0]                     b_en,
  output logic [NBANK-1:0]                     b_we,
  output logic [NBANK-1:0][$clog2(BDEPTH)-1:0] b_addr,
  output logic [NBANK-1:0][DW-1:0]             b_wdata,
  input  logic [NBANK-1:0][DW-1:0]             b_rdata
);
  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned IW = $clog2(NREQ);

  logic [NBANK-1:0][NREQ-1:0] breq, bgnt;
  logic [NBANK-1:0][IW-1:0]   bidx;
  logic [NBANK-1:0]           bany;
  logic [NBANK-1:0]           rd_q;
  logic [NBANK-1:0][IW-1:0]   idx_q;

  always_comb begin
    for (int b = 0; b < int'(NBANK); b++)
      for (int r = 0; r < int'(NREQ); r++)
        breq[b][r] = req[r] && (addr[r][BW-1:0] == BW'(b));
  end

  for (genvar b = 0; b < int'(NBANK); b++) begin : g_bank
    rr_arbiter #(.N(NREQ)) u_arb (
      .clk, .rst_n, .req(breq[b]), .advance(1'b1),
      .gnt(bgnt[b]), .gnt_idx(bidx[b]), .gnt_any(bany[b])
    );
    assign b_en[b]    = bany[b];
    assign b_we[b]    = we[bidx[b]];
    assign b_addr[b]  = addr[bidx[b]][AW-1:BW];
    assign b_wdata[b] = wdata[bidx[b]];
  end

  always_comb begin
    gnt = '0;
    for (int b = 0; b < int'(NBANK); b++) gnt |= bgnt[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      idx_q <= '0;
    end else begin
      for (int b = 0; b < int'(NBANK); b++) begin
        rd_q[b]  <= bany[b] && !we[bidx[b]];
        idx_q[b] <= bidx[b];
      end
    end
  end

  always_comb begin
    rvalid = '0;
    rdata  = '0;
    for (int b = 0; b < int'(NBANK); b++) begin
      if (rd_q[b]) begin
        rvalid[idx_q[b]] = 1'b1;
        rdata[idx_q[b]]  = b_rdata[b];
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
