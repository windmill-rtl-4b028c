// host_if: AXI4-Lite slave through which the host processor drives the
// accelerator.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 ARG0  external byte address        (RW)
//   0x04 ARG1  shared-memory word address   (RW)
//   0x08 ARG2  length in words              (RW)
//   0x0C INSTR writing issues {INSTR, ARG0..2} to the RTT (W)
//   0x10 STATUS [0] an instruction is pending or running, [7:4] RCA busy,
//          [11:8] RCA done, [12] CPE busy, [13] DMA error, [19:16] ping-pong
//          half of each RCA (R)
//   0x14 CPE_CTRL writing starts the CPE: [7:0] repetitions, [15:8] length
//   0x20 + 4*i  cycle count of the last run of RCA i (R)
//   0x100 + 16*j + 4*w  word w of CPE program entry j (W)
// Write: address and data are taken together (awready = wready), then the
// response is given; read data come one cycle after the address. One
// instruction is held while the RTT is busy; a second write to INSTR while
// one is pending is dropped, so the host polls STATUS[0] first.
//
// The paper connects the host to the accelerator over AXI; the register map
// is this design's own.
module host_if
  import windmill_pkg::*;
#(
  parameter int unsigned NRCA   = 4,
  parameter int unsigned CDEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // AXI4-Lite slave
  input  logic                      s_awvalid,
  output logic                      s_awready,
  input  logic [11:0]               s_awaddr,
  input  logic                      s_wvalid,
  output logic                      s_wready,
  input  logic [31:0]               s_wdata,
  output logic                      s_bvalid,
  input  logic                      s_bready,
  output logic [1:0]                s_bresp,
  input  logic                      s_arvalid,
  output logic                      s_arready,
  input  logic [11:0]               s_araddr,
  output logic                      s_rvalid,
  input  logic                      s_rready,
  output logic [31:0]               s_rdata,
  output logic [1:0]                s_rresp,
  // instruction to the RTT
  output logic                      instr_valid,
  input  logic                      instr_taken,
  input  logic                      rtt_busy,
  output rtt_instr_t                instr,
  // CPE programming
  output logic                      cpe_we,
  output logic [$clog2(CDEPTH)-1:0] cpe_idx,
  output logic [1:0]                cpe_word,
  output logic [31:0]               cpe_data,
  output logic                      cpe_start,
  output logic [7:0]                cpe_len,
  output logic [7:0]                cpe_iter,
  // status
  input  logic [NRCA-1:0]           rca_busy,
  input  logic [NRCA-1:0]           rca_done,
  input  logic [NRCA-1:0]           rca_pp,
  input  logic [NRCA-1:0][31:0]     rca_cycles,
  input  logic                      cpe_busy,
  input  logic                      dma_err
);
  logic [31:0] arg0, arg1, arg2;
  logic        wr;
  logic [31:0] status;

  assign wr        = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  assign cpe_idx   = s_awaddr[4 +: $clog2(CDEPTH)];
  assign cpe_word  = s_awaddr[3:2];
  assign cpe_data  = s_wdata;
  assign cpe_we    = wr && s_awaddr[11:8] == 4'h1;

  always_comb begin
    status        = '0;
    status[0]     = instr_valid || rtt_busy;
    status[4 +: NRCA]  = rca_busy;
    status[8 +: NRCA]  = rca_done;
    status[12]    = cpe_busy;
    status[13]    = dma_err;
    status[16 +: NRCA] = rca_pp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arg0 <= '0; arg1 <= '0; arg2 <= '0;
      instr <= '0; instr_valid <= 1'b0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      cpe_start <= 1'b0; cpe_len <= '0; cpe_iter <= '0;
    end else begin
      cpe_start <= 1'b0;
      if (instr_taken) instr_valid <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          12'h000: arg0 <= s_wdata;
          12'h004: arg1 <= s_wdata;
          12'h008: arg2 <= s_wdata;
          12'h00C: if (!instr_valid) begin
            instr       <= rtt_instr_t'({arg2, arg1, arg0, s_wdata});
            instr_valid <= 1'b1;
          end
          12'h014: begin
            cpe_start <= 1'b1;
            cpe_iter  <= s_wdata[7:0];
            cpe_len   <= s_wdata[15:8];
          end
          default: ;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          12'h000: s_rdata <= arg0;
          12'h004: s_rdata <= arg1;
          12'h008: s_rdata <= arg2;
          12'h010: s_rdata <= status;
          default: begin
            if (s_araddr[11:4] == 8'h02 && int'(s_araddr[3:2]) < int'(NRCA))
              s_rdata <= rca_cycles[s_araddr[3:2]];
            else
              s_rdata <= '0;
          end
        endcase
      end
    end
  end
endmodule
