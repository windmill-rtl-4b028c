// dma: DMA controller between external storage and the RCAs.
//
// One command at a time (start with the command fields, busy until done
// pulses). Moves `len` 32-bit words, one at a time:
//   load  (dir = 0): read external memory at ext_addr + 4*i over the AXI4-Lite
//         master port; write the word to shared memory word sm_addr + i of RCA
//         `rca`, or, with to_cfg = 1, hand it to the configuration
//         controllers of every RCA in `mask` (cfg_valid/cfg_data).
//   store (dir = 1): read shared memory word sm_addr + i of RCA `rca` and write
//         it to external memory at ext_addr + 4*i.
// The shared-memory port uses the pai handshake (gnt same cycle, read data
// one cycle after the grant). The AXI side keeps one transaction
// outstanding; a store issues address and data together and waits for the
// write response. With ping-pong on, the RCA steers these accesses into the
// half the array is not using.
//
// The paper places a DMA controller next to the shared memory and the AXI
// bus and says it moves data from external storage; the command format,
// the word-at-a-time transfer and the configuration path are this design's
// own.
module dma
  import windmill_pkg::*;
#(
  parameter int unsigned NRCA = 4,
  parameter int unsigned MAW  = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  input  logic                      dir,
  input  logic                      to_cfg,
  input  logic [$clog2(NRCA)-1:0]   rca,
  input  logic [NRCA-1:0]           mask,
  input  logic [31:0]               ext_addr,
  input  logic [MAW-1:0]            sm_addr,
  input  logic [15:0]               len,
  output logic                      busy,
  output logic                      done,
  // AXI4-Lite master to external storage
  output logic                      m_awvalid,
  input  logic                      m_awready,
  output logic [31:0]               m_awaddr,
  output logic                      m_wvalid,
  input  logic                      m_wready,
  output logic [31:0]               m_wdata,
  output logic [3:0]                m_wstrb,
  input  logic                      m_bvalid,
  output logic                      m_bready,
  input  logic [1:0]                m_bresp,
  output logic                      m_arvalid,
  input  logic                      m_arready,
  output logic [31:0]               m_araddr,
  input  logic                      m_rvalid,
  output logic                      m_rready,
  input  logic [31:0]               m_rdata,
  input  logic [1:0]                m_rresp,
  // shared-memory ports, one per RCA
  output logic [NRCA-1:0]           sm_req,
  output logic                      sm_we,
  output logic [MAW-1:0]            sm_a,
  output logic [DW-1:0]             sm_wdata,
  input  logic [NRCA-1:0]           sm_gnt,
  input  logic [NRCA-1:0]           sm_rvalid,
  input  logic [NRCA-1:0][DW-1:0]   sm_rdata,
  // configuration stream
  output logic [NRCA-1:0]           cfg_valid,
  output logic [DW-1:0]             cfg_data,
  // error seen on the AXI side during the last command
  output logic                      err
);
  typedef enum logic [3:0] {
    S_IDLE, S_LD_AR, S_LD_R, S_LD_SM, S_ST_SM, S_ST_WAIT, S_ST_W, S_ST_B, S_NEXT
  } state_e;

  state_e                  st;
  logic                    c_dir, c_cfg;
  logic [$clog2(NRCA)-1:0] c_rca;
  logic [NRCA-1:0]         c_mask;
  logic [31:0]             c_ext;
  logic [MAW-1:0]          c_sm;
  logic [15:0]             c_len, cnt;
  logic [DW-1:0]           word;
  logic                    aw_done, w_done;

  assign busy      = (st != S_IDLE);
  assign m_araddr  = c_ext + {14'd0, cnt, 2'b00};
  assign m_awaddr  = c_ext + {14'd0, cnt, 2'b00};
  assign m_wdata   = word;
  assign m_wstrb   = 4'hF;
  assign m_arvalid = (st == S_LD_AR);
  assign m_rready  = (st == S_LD_R);
  assign m_awvalid = (st == S_ST_W) && !aw_done;
  assign m_wvalid  = (st == S_ST_W) && !w_done;
  assign m_bready  = (st == S_ST_B);
  assign sm_we     = (st == S_LD_SM);
  assign sm_a      = c_sm + MAW'(cnt);
  assign sm_wdata  = word;

  always_comb begin
    sm_req = '0;
    if (st == S_LD_SM || st == S_ST_SM) sm_req[c_rca] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; err <= 1'b0;
      c_dir <= 1'b0; c_cfg <= 1'b0; c_rca <= '0; c_mask <= '0;
      c_ext <= '0; c_sm <= '0; c_len <= '0; cnt <= '0; word <= '0;
      aw_done <= 1'b0; w_done <= 1'b0;
      cfg_valid <= '0; cfg_data <= '0;
    end else begin
      done      <= 1'b0;
      cfg_valid <= '0;
      unique case (st)
        S_IDLE: if (start) begin
          c_dir <= dir; c_cfg <= to_cfg; c_rca <= rca; c_mask <= mask;
          c_ext <= ext_addr; c_sm <= sm_addr; c_len <= len; cnt <= '0; err <= 1'b0;
          if (len == 16'd0) done <= 1'b1;
          else              st   <= dir ? S_ST_SM : S_LD_AR;
        end
        S_LD_AR: if (m_arready) st <= S_LD_R;
        S_LD_R: if (m_rvalid) begin
          word <= m_rdata;
          if (m_rresp != 2'b00) err <= 1'b1;
          if (c_cfg) begin
            cfg_valid <= c_mask;
            cfg_data  <= m_rdata;
            st        <= S_NEXT;
          end else begin
            st <= S_LD_SM;
          end
        end
        S_LD_SM: if (sm_gnt[c_rca]) st <= S_NEXT;
        S_ST_SM: if (sm_gnt[c_rca]) st <= S_ST_WAIT;
        S_ST_WAIT: if (sm_rvalid[c_rca]) begin
          word    <= sm_rdata[c_rca];
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          st      <= S_ST_W;
        end
        S_ST_W: begin
          if (m_awready) aw_done <= 1'b1;
          if (m_wready)  w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) st <= S_ST_B;
        end
        S_ST_B: if (m_bvalid) begin
          if (m_bresp != 2'b00) err <= 1'b1;
          st <= S_NEXT;
        end
        S_NEXT: begin
          if (cnt + 16'd1 == c_len) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            cnt <= cnt + 16'd1;
            st  <= c_dir ? S_ST_SM : S_LD_AR;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // AXI: a valid address must stay until accepted
  assert property (@(posedge clk) disable iff (!rst_n) m_arvalid && !m_arready |=> m_arvalid);
endmodule
