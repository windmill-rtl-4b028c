// rtt: register transformation table - turns the accelerator's custom
// instructions (from the host or from the CPE) into the control signals of
// the DMA and the RCAs.
//
// An instruction (rtt_instr_t) is one opcode word - opcode [31:28], RCA mask
// [27:24], field [23:0] - plus three argument registers: arg0 external byte
// address, arg1 shared-memory word address, arg2 length in words. It is
// accepted when in_valid and in_ready are both high, and in_done pulses when
// it has completed; one instruction runs at a time. The opcode indexes a
// table (ctl_table) whose row says which unit the instruction drives and
// whether it must wait:
//   RI_CFG    DMA load into the configuration controllers of the mask
//   RI_LOAD   DMA load into the shared memory of RCA field[1:0]
//   RI_STORE  DMA store from the shared memory of RCA field[1:0]
//   RI_LAUNCH start the arrays of the mask (completes in one cycle)
//   RI_WAIT   complete when no array of the mask is busy
//   RI_MODE   write SCMD = field[0], ping-pong = field[1] into the mask
// LAUNCH does not wait for the arrays, so a LOAD/STORE issued after it runs
// while they compute (used with ping-pong).
//
// The paper says the RTT decodes customized CPU instructions into PEA
// control signals for the four steps load configuration, load data, launch
// and store results; the instruction encoding and the WAIT and MODE
// instructions are this design's own.
module rtt
  import windmill_pkg::*;
#(
  parameter int unsigned NRCA = 4,
  parameter int unsigned MAW  = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  rtt_instr_t              in_instr,
  output logic                    in_done,
  // DMA
  output logic                    dma_start,
  output logic                    dma_dir,
  output logic                    dma_to_cfg,
  output logic [$clog2(NRCA)-1:0] dma_rca,
  output logic [NRCA-1:0]         dma_mask,
  output logic [31:0]             dma_ext,
  output logic [MAW-1:0]          dma_sm,
  output logic [15:0]             dma_len,
  input  logic                    dma_done,
  // RCAs
  output logic [NRCA-1:0]         cfg_sync,
  output logic [NRCA-1:0]         launch,
  output logic [NRCA-1:0]         mode_we,
  output logic                    mode_scmd,
  output logic                    mode_pp,
  input  logic [NRCA-1:0]         rca_busy
);
  typedef struct packed {
    logic use_dma;
    logic dir;
    logic to_cfg;
    logic launch;
    logic wait_rca;
    logic mode;
  } ctl_t;

  function automatic ctl_t ctl_table(rtt_op_e op);
    unique case (op)
      RI_CFG:    return '{use_dma: 1'b1, dir: 1'b0, to_cfg: 1'b1, launch: 1'b0, wait_rca: 1'b0, mode: 1'b0};
      RI_LOAD:   return '{use_dma: 1'b1, dir: 1'b0, to_cfg: 1'b0, launch: 1'b0, wait_rca: 1'b0, mode: 1'b0};
      RI_STORE:  return '{use_dma: 1'b1, dir: 1'b1, to_cfg: 1'b0, launch: 1'b0, wait_rca: 1'b0, mode: 1'b0};
      RI_LAUNCH: return '{use_dma: 1'b0, dir: 1'b0, to_cfg: 1'b0, launch: 1'b1, wait_rca: 1'b0, mode: 1'b0};
      RI_WAIT:   return '{use_dma: 1'b0, dir: 1'b0, to_cfg: 1'b0, launch: 1'b0, wait_rca: 1'b1, mode: 1'b0};
      RI_MODE:   return '{use_dma: 1'b0, dir: 1'b0, to_cfg: 1'b0, launch: 1'b0, wait_rca: 1'b0, mode: 1'b1};
      default:   return '0;
    endcase
  endfunction

  typedef enum logic [1:0] {R_IDLE, R_DMA, R_WAIT} state_e;
  state_e     st;
  ctl_t       ctl;
  logic [3:0] c_mask;
  logic       accept;

  assign in_ready = (st == R_IDLE);
  assign accept   = in_valid && in_ready;
  assign ctl      = ctl_table(in_instr.op);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; in_done <= 1'b0; c_mask <= '0;
      dma_start <= 1'b0; dma_dir <= 1'b0; dma_to_cfg <= 1'b0; dma_rca <= '0;
      dma_mask <= '0; dma_ext <= '0; dma_sm <= '0; dma_len <= '0;
      cfg_sync <= '0; launch <= '0; mode_we <= '0; mode_scmd <= 1'b0; mode_pp <= 1'b0;
    end else begin
      in_done   <= 1'b0;
      dma_start <= 1'b0;
      cfg_sync  <= '0;
      launch    <= '0;
      mode_we   <= '0;
      unique case (st)
        R_IDLE: if (accept) begin
          c_mask <= in_instr.mask;
          if (ctl.use_dma) begin
            dma_start  <= 1'b1;
            dma_dir    <= ctl.dir;
            dma_to_cfg <= ctl.to_cfg;
            dma_rca    <= in_instr.field[$clog2(NRCA)-1:0];
            dma_mask   <= in_instr.mask[NRCA-1:0];
            dma_ext    <= in_instr.arg0;
            dma_sm     <= in_instr.arg1[MAW-1:0];
            dma_len    <= in_instr.arg2[15:0];
            if (ctl.to_cfg) cfg_sync <= in_instr.mask[NRCA-1:0];
            st <= R_DMA;
          end else if (ctl.wait_rca) begin
            st <= R_WAIT;
          end else begin
            launch    <= ctl.launch ? in_instr.mask[NRCA-1:0] : '0;
            mode_we   <= ctl.mode   ? in_instr.mask[NRCA-1:0] : '0;
            mode_scmd <= in_instr.field[0];
            mode_pp   <= in_instr.field[1];
            in_done   <= 1'b1;
          end
        end
        R_DMA: if (dma_done) begin
          st      <= R_IDLE;
          in_done <= 1'b1;
        end
        R_WAIT: if ((rca_busy & c_mask[NRCA-1:0]) == '0) begin
          st      <= R_IDLE;
          in_done <= 1'b1;
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
