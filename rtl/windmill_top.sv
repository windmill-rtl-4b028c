// windmill_top: the WindMill CGRA accelerator - four RCAs on a ring with the
// host interface, the register transformation table (RTT), the controller PE
// (CPE) and the DMA controller.
//
// The host (a RISC-V processor in the paper, outside this block) drives the
// AXI4-Lite slave port s_*: it writes instructions that the RTT turns into
// the four steps of a job - load configurations into the arrays, load data
// into the shared memories, launch, store results back - or it programs the
// CPE with such a list and lets it run alone. The DMA reaches external
// storage through the AXI4-Lite master port m_*. RCA i can access the shared
// memory of RCA (i+1) mod 4, so consecutive RCAs can work as a pipeline.
//
// Defaults are the paper's standard configuration: 4 RCAs, 8x8 arrays
// (36 GPEs + 28 LSUs), 16 shared-memory banks of 256 x 32 bits per RCA.
// The context depth (4) is read off Fig. 6(c); the CPE depth (16) is this
// design's own.
module windmill_top
  import windmill_pkg::*;
#(
  parameter int unsigned NRCA   = 4,
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned NBANK  = 16,
  parameter int unsigned BDEPTH = 256,
  parameter int unsigned CDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave from the host
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [11:0] s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [11:0] s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // AXI4-Lite master to external storage
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_awaddr,
  output logic        m_wvalid,
  input  logic        m_wready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  input  logic        m_bvalid,
  output logic        m_bready,
  input  logic [1:0]  m_bresp,
  output logic        m_arvalid,
  input  logic        m_arready,
  output logic [31:0] m_araddr,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  // completion flags of the arrays (e.g. for an interrupt)
  output logic [NRCA-1:0] rca_done
);
  localparam int unsigned MAW = $clog2(NBANK * BDEPTH);
  localparam int unsigned RW  = $clog2(NRCA);

  // host interface <-> RTT / CPE
  rtt_instr_t host_instr, cpe_instr, rtt_in;
  logic host_valid, host_taken, rtt_ready, rtt_done, rtt_valid;
  logic cpe_we, cpe_start, cpe_busy, cpe_done, cpe_valid, cpe_ready;
  logic [$clog2(CDEPTH)-1:0] cpe_idx;
  logic [1:0]  cpe_word;
  logic [31:0] cpe_data;
  logic [7:0]  cpe_len, cpe_iter;

  // RTT -> DMA / RCAs
  logic dma_start, dma_dir, dma_to_cfg, dma_done, dma_busy, dma_err;
  logic [RW-1:0] dma_rca;
  logic [NRCA-1:0] dma_mask;
  logic [31:0] dma_ext;
  logic [MAW-1:0] dma_sm;
  logic [15:0] dma_len;
  logic [NRCA-1:0] cfg_sync, launch, mode_we;
  logic mode_scmd, mode_pp;

  // RCA signals
  logic [NRCA-1:0] rca_busy, rca_pp;
  logic [NRCA-1:0][31:0] rca_cycles;
  logic [NRCA-1:0][15:0] rca_cfg_records;
  logic [NRCA-1:0] sm_req, sm_gnt, sm_rvalid, cfg_valid;
  logic sm_we;
  logic [MAW-1:0] sm_a;
  logic [DW-1:0] sm_wdata, cfg_data;
  logic [NRCA-1:0][DW-1:0] sm_rdata;
  logic [NRCA-1:0] ro_req, ro_we, ro_gnt, ro_rvalid;
  logic [NRCA-1:0][MAW-1:0] ro_addr;
  logic [NRCA-1:0][DW-1:0] ro_wdata, ro_rdata;

  host_if #(.NRCA(NRCA), .CDEPTH(CDEPTH)) u_host (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .instr_valid(host_valid), .instr_taken(host_taken), .rtt_busy(!rtt_ready),
    .instr(host_instr),
    .cpe_we, .cpe_idx, .cpe_word, .cpe_data, .cpe_start, .cpe_len, .cpe_iter,
    .rca_busy, .rca_done, .rca_pp, .rca_cycles, .cpe_busy, .dma_err
  );

  cpe #(.DEPTH(CDEPTH)) u_cpe (
    .clk, .rst_n,
    .prog_we(cpe_we), .prog_idx(cpe_idx), .prog_word(cpe_word), .prog_data(cpe_data),
    .start(cpe_start), .len(cpe_len), .iter(cpe_iter),
    .busy(cpe_busy), .done(cpe_done),
    .out_valid(cpe_valid), .out_ready(cpe_ready), .out_instr(cpe_instr),
    .rtt_done
  );

  // the CPE owns the RTT while it runs; otherwise the host's instruction goes
  assign rtt_valid  = cpe_busy ? cpe_valid : host_valid;
  assign rtt_in     = cpe_busy ? cpe_instr : host_instr;
  assign cpe_ready  = cpe_busy && rtt_ready;
  assign host_taken = !cpe_busy && host_valid && rtt_ready;

  rtt #(.NRCA(NRCA), .MAW(MAW)) u_rtt (
    .clk, .rst_n,
    .in_valid(rtt_valid), .in_ready(rtt_ready), .in_instr(rtt_in), .in_done(rtt_done),
    .dma_start, .dma_dir, .dma_to_cfg, .dma_rca, .dma_mask, .dma_ext, .dma_sm, .dma_len,
    .dma_done, .cfg_sync, .launch, .mode_we, .mode_scmd, .mode_pp, .rca_busy
  );

  dma #(.NRCA(NRCA), .MAW(MAW)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .dir(dma_dir), .to_cfg(dma_to_cfg), .rca(dma_rca), .mask(dma_mask),
    .ext_addr(dma_ext), .sm_addr(dma_sm), .len(dma_len), .busy(dma_busy), .done(dma_done),
    .m_awvalid, .m_awready, .m_awaddr, .m_wvalid, .m_wready, .m_wdata, .m_wstrb,
    .m_bvalid, .m_bready, .m_bresp, .m_arvalid, .m_arready, .m_araddr,
    .m_rvalid, .m_rready, .m_rdata, .m_rresp,
    .sm_req, .sm_we, .sm_a, .sm_wdata, .sm_gnt, .sm_rvalid, .sm_rdata,
    .cfg_valid, .cfg_data, .err(dma_err)
  );

  for (genvar i = 0; i < int'(NRCA); i++) begin : g_rca
    localparam int unsigned PREV = (i + NRCA - 1) % NRCA;
    rca #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .NBANK(NBANK), .BDEPTH(BDEPTH)) u_rca (
      .clk, .rst_n,
      .launch(launch[i]), .mode_we(mode_we[i]), .mode_scmd, .mode_pp,
      .busy(rca_busy[i]), .done(rca_done[i]), .pp_sel(rca_pp[i]), .cycles(rca_cycles[i]),
      .cfg_records(rca_cfg_records[i]),
      .cfg_sync(cfg_sync[i]), .cfg_valid(cfg_valid[i]), .cfg_data,
      .dma_req(sm_req[i]), .dma_we(sm_we), .dma_addr(sm_a), .dma_wdata(sm_wdata),
      .dma_gnt(sm_gnt[i]), .dma_rvalid(sm_rvalid[i]), .dma_rdata(sm_rdata[i]),
      .ro_req(ro_req[i]), .ro_we(ro_we[i]), .ro_addr(ro_addr[i]), .ro_wdata(ro_wdata[i]),
      .ro_gnt(ro_gnt[i]), .ro_rvalid(ro_rvalid[i]), .ro_rdata(ro_rdata[i]),
      .ri_req(ro_req[PREV]), .ri_we(ro_we[PREV]), .ri_addr(ro_addr[PREV]),
      .ri_wdata(ro_wdata[PREV]), .ri_gnt(ro_gnt[PREV]), .ri_rvalid(ro_rvalid[PREV]),
      .ri_rdata(ro_rdata[PREV])
    );
  end
endmodule
