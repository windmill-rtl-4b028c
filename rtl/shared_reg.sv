// shared_reg: shared registers that pass values between PEs across control
// steps.
//
// Four sharing modes, as in the paper: line-shared (one register per array
// row), row-shared (one per array column), quadrant-shared (one per quarter
// of the array) and global-shared (one for the whole array). Each PE names a
// mode for reading (mode) and one for writing (wmode); reading returns the register of that mode which covers the PE, and
// a write (sreg_we) updates it at the next clock edge. When several PEs
// write the same register in one cycle, the lowest PE index wins. PE p sits
// at row p / COLS, column p mod COLS.
//
// The four modes are the paper's; mapping "line" to array rows and "row" to
// array columns, the write priority and the reset to zero are this design's
// own choices.
module shared_reg
  import windmill_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  sreg_mode_e [ROWS*COLS-1:0]   mode,
  input  sreg_mode_e [ROWS*COLS-1:0]   wmode,
  input  logic [ROWS*COLS-1:0]         we,
  input  logic [ROWS*COLS-1:0][DW-1:0] wdata,
  output logic [ROWS*COLS-1:0][DW-1:0] rdata
);
  localparam int unsigned NPE = ROWS * COLS;

  logic [DW-1:0] line_r [ROWS];
  logic [DW-1:0] col_r  [COLS];
  logic [DW-1:0] quad_r [4];
  logic [DW-1:0] glob_r;

  function automatic int unsigned quad_of(int unsigned p);
    return ((p / COLS) >= ROWS / 2 ? 2 : 0) + ((p % COLS) >= COLS / 2 ? 1 : 0);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ROWS); i++) line_r[i] <= '0;
      for (int i = 0; i < int'(COLS); i++) col_r[i]  <= '0;
      for (int i = 0; i < 4; i++)          quad_r[i] <= '0;
      glob_r <= '0;
    end else begin
      // descending order: the lowest index is assigned last and wins
      for (int p = int'(NPE) - 1; p >= 0; p--) begin
        if (we[p]) begin
          unique case (wmode[p])
            SR_LINE: line_r[p / COLS]        <= wdata[p];
            SR_ROW:  col_r[p % COLS]         <= wdata[p];
            SR_QUAD: quad_r[quad_of(p)]      <= wdata[p];
            SR_GLOB: glob_r                  <= wdata[p];
          endcase
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < int'(NPE); p++) begin
      unique case (mode[p])
        SR_LINE: rdata[p] = line_r[p / COLS];
        SR_ROW:  rdata[p] = col_r[p % COLS];
        SR_QUAD: rdata[p] = quad_r[quad_of(p)];
        SR_GLOB: rdata[p] = glob_r;
      endcase
    end
  end
endmodule
