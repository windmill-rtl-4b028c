// cfg_ctrl: configuration controller of one RCA.
//
// It receives a stream of 32-bit words from the DMA (s_valid/s_data, always
// accepted) while the RTT executes a configuration-load instruction, and
// writes them into the context memories of the array. The stream is a list
// of three-word records:
//   word 0  header: bits [10:8] PE line (array row), bits [4:0] entry in that
//           line's context memory (entry = column*DEPTH + step in MCMD,
//           the step itself in SCMD)
//   word 1  configuration word bits 31..0
//   word 2  configuration word bits 63..32
// The context-memory write happens in the cycle after the third word.
// `sync` (start of a load) restarts the record framing. `records` counts the
// words written since reset.
//
// The paper names the Config Controller (Fig. 5(c)) and says configurations
// are loaded onto the PEA from the host side; the record format is this
// design's own.
module cfg_ctrl
  import windmill_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned PCW  = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sync,
  input  logic                    s_valid,
  input  logic [DW-1:0]           s_data,
  output logic                    cfg_we,
  output logic [$clog2(ROWS)-1:0] cfg_line,
  output logic [PCW-1:0]          cfg_addr,
  output cfg_t                    cfg_wdata,
  output logic [15:0]             records
);
  typedef enum logic [1:0] {W_HDR, W_LO, W_HI} phase_e;
  phase_e        phase;
  logic [DW-1:0] lo_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= W_HDR;
      lo_q      <= '0;
      cfg_we    <= 1'b0;
      cfg_line  <= '0;
      cfg_addr  <= '0;
      cfg_wdata <= '0;
      records   <= '0;
    end else begin
      cfg_we <= 1'b0;
      if (sync) begin
        phase <= W_HDR;
      end else if (s_valid) begin
        unique case (phase)
          W_HDR: begin
            cfg_line <= s_data[8 +: $clog2(ROWS)];
            cfg_addr <= s_data[PCW-1:0];
            phase    <= W_LO;
          end
          W_LO: begin
            lo_q  <= s_data;
            phase <= W_HI;
          end
          W_HI: begin
            cfg_wdata <= cfg_t'({s_data, lo_q});
            cfg_we    <= 1'b1;
            records   <= records + 16'd1;
            phase     <= W_HDR;
          end
          default: phase <= W_HDR;
        endcase
      end
    end
  end
endmodule
