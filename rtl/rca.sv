// rca: one reconfigurable computing array (RCA) of WindMill - the PE array
// with its shared registers, its shared memory behind the parallel access
// interface, and its configuration and data controllers.
//
// Memory access paths. Each LSU address is 13 bits: bit 12 = 0 targets the
// local shared memory, bit 12 = 1 the shared memory of the next RCA on the
// ring (ring_out); the RCA before this one reaches the local memory through
// ring_in. Local requesters of the PAI: the NLSU LSUs, ring_in, and the DMA
// port. With ping-pong on, the array and ring_in see the half selected by
// pp_sel (address bit 11 replaced) and the DMA the other half; with it off
// all see the full 4096 words. Remote requests from several LSUs are
// arbitrated round-robin; ring_out carries one at a time, with the grant
// coming back in the same cycle and read data one cycle later.
//
// Control: launch/mode_* from the RTT, busy/done/cycles back. Configuration
// words arrive on cfg_valid/cfg_data (see cfg_ctrl).
//
// Following the paper: the RCA as PEA + shared memory with a parallel access
// interface, the ring with access to a neighbour, ping-pong by the address
// MSB. The ring direction (to the next RCA) and the single ring port are
// this design's own choices.
module rca
  import windmill_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned NBANK  = 16,
  parameter int unsigned BDEPTH = 256,
  parameter int unsigned NLSU   = 2 * COLS + 2 * (ROWS - 2),
  parameter int unsigned MAW    = $clog2(NBANK * BDEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // control from the RTT
  input  logic            launch,
  input  logic            mode_we,
  input  logic            mode_scmd,
  input  logic            mode_pp,
  output logic            busy,
  output logic            done,
  output logic            pp_sel,
  output logic [31:0]     cycles,
  output logic [15:0]     cfg_records,
  // configuration stream from the DMA
  input  logic            cfg_sync,
  input  logic            cfg_valid,
  input  logic [DW-1:0]   cfg_data,
  // DMA port into the shared memory
  input  logic            dma_req,
  input  logic            dma_we,
  input  logic [MAW-1:0]  dma_addr,
  input  logic [DW-1:0]   dma_wdata,
  output logic            dma_gnt,
  output logic            dma_rvalid,
  output logic [DW-1:0]   dma_rdata,
  // to the shared memory of the next RCA
  output logic            ro_req,
  output logic            ro_we,
  output logic [MAW-1:0]  ro_addr,
  output logic [DW-1:0]   ro_wdata,
  input  logic            ro_gnt,
  input  logic            ro_rvalid,
  input  logic [DW-1:0]   ro_rdata,
  // from the previous RCA
  input  logic            ri_req,
  input  logic            ri_we,
  input  logic [MAW-1:0]  ri_addr,
  input  logic [DW-1:0]   ri_wdata,
  output logic            ri_gnt,
  output logic            ri_rvalid,
  output logic [DW-1:0]   ri_rdata
);
  localparam int unsigned PCW  = $clog2(COLS * DEPTH);
  localparam int unsigned AW   = MAW + 1;
  localparam int unsigned NREQ = NLSU + 2;
  localparam int unsigned IW   = $clog2(NLSU);

  logic pea_start, pea_done, scmd, pp_en;
  logic cfg_we;
  logic [$clog2(ROWS)-1:0] cfg_line;
  logic [PCW-1:0] cfg_addr;
  cfg_t cfg_wdata;

  logic [NLSU-1:0]         l_req, l_we, l_gnt, l_rvalid;
  logic [NLSU-1:0][AW-1:0] l_addr;
  logic [NLSU-1:0][DW-1:0] l_wdata, l_rdata;

  logic [NREQ-1:0]          m_req, m_we, m_gnt, m_rvalid;
  logic [NREQ-1:0][MAW-1:0] m_addr;
  logic [NREQ-1:0][DW-1:0]  m_wdata, m_rdata;

  logic [NLSU-1:0] r_req, r_gnt;
  logic [IW-1:0]   r_idx;
  logic            r_any, r_rd_q;
  logic [IW-1:0]   r_idx_q;

  data_ctrl u_dctl (
    .clk, .rst_n, .launch, .mode_we, .mode_scmd, .mode_pp, .pea_done,
    .pea_start, .busy, .done, .scmd, .pp_en, .pp_sel, .cycles
  );

  cfg_ctrl #(.ROWS(ROWS), .PCW(PCW)) u_cctl (
    .clk, .rst_n, .sync(cfg_sync), .s_valid(cfg_valid), .s_data(cfg_data),
    .cfg_we, .cfg_line, .cfg_addr, .cfg_wdata, .records(cfg_records)
  );

  pea #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .NLSU(NLSU), .PCW(PCW), .AW(AW)) u_pea (
    .clk, .rst_n, .start(pea_start), .done(pea_done), .scmd,
    .cfg_we, .cfg_line, .cfg_addr, .cfg_wdata,
    .mem_req(l_req), .mem_we(l_we), .mem_addr(l_addr), .mem_wdata(l_wdata),
    .mem_gnt(l_gnt), .mem_rvalid(l_rvalid), .mem_rdata(l_rdata)
  );

  // address of the array side and of the DMA side after ping-pong steering
  function automatic logic [MAW-1:0] pea_half(logic [MAW-1:0] a, logic en, logic sel);
    return en ? {sel, a[MAW-2:0]} : a;
  endfunction

  always_comb begin
    for (int k = 0; k < int'(NLSU); k++) begin
      m_req[k]   = l_req[k] && !l_addr[k][AW-1];
      m_we[k]    = l_we[k];
      m_addr[k]  = pea_half(l_addr[k][MAW-1:0], pp_en, pp_sel);
      m_wdata[k] = l_wdata[k];
      r_req[k]   = l_req[k] && l_addr[k][AW-1];
    end
    m_req[NLSU]     = ri_req;
    m_we[NLSU]      = ri_we;
    m_addr[NLSU]    = pea_half(ri_addr, pp_en, pp_sel);
    m_wdata[NLSU]   = ri_wdata;
    m_req[NLSU+1]   = dma_req;
    m_we[NLSU+1]    = dma_we;
    m_addr[NLSU+1]  = pea_half(dma_addr, pp_en, !pp_sel);
    m_wdata[NLSU+1] = dma_wdata;
  end

  shared_mem #(.NREQ(NREQ), .NBANK(NBANK), .BDEPTH(BDEPTH), .DW(DW), .AW(MAW)) u_sm (
    .clk, .rst_n, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata),
    .gnt(m_gnt), .rvalid(m_rvalid), .rdata(m_rdata)
  );

  assign ri_gnt     = m_gnt[NLSU];
  assign ri_rvalid  = m_rvalid[NLSU];
  assign ri_rdata   = m_rdata[NLSU];
  assign dma_gnt    = m_gnt[NLSU+1];
  assign dma_rvalid = m_rvalid[NLSU+1];
  assign dma_rdata  = m_rdata[NLSU+1];

  // remote (ring) requests: one LSU at a time goes to the next RCA
  rr_arbiter #(.N(NLSU)) u_ring_arb (
    .clk, .rst_n, .req(r_req), .advance(ro_gnt),
    .gnt(r_gnt), .gnt_idx(r_idx), .gnt_any(r_any)
  );

  assign ro_req   = r_any;
  assign ro_we    = l_we[r_idx];
  assign ro_addr  = l_addr[r_idx][MAW-1:0];
  assign ro_wdata = l_wdata[r_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_rd_q  <= 1'b0;
      r_idx_q <= '0;
    end else begin
      r_rd_q  <= r_any && ro_gnt && !l_we[r_idx];
      r_idx_q <= r_idx;
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NLSU); k++) begin
      l_gnt[k]    = m_gnt[k] || (r_gnt[k] && ro_gnt);
      l_rvalid[k] = m_rvalid[k];
      l_rdata[k]  = m_rdata[k];
    end
    if (r_rd_q) begin
      l_rvalid[r_idx_q] = ro_rvalid;
      l_rdata[r_idx_q]  = ro_rdata;
    end
  end
endmodule
