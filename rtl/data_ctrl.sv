// data_ctrl: data controller of one RCA - launch, completion and ping-pong.
//
// `launch` (from the RTT) starts the array with a one-cycle pea_start pulse
// unless it is already busy. `busy` stays high until the array reports
// done; then `done` is set and held until the next launch, and `cycles`
// holds the length of the run in clock cycles. The mode register holds SCMD
// (shared programs on a PE line) and the ping-pong enable; it is written
// with mode_we. With ping-pong on, `pp_sel` - the most significant address
// bit given to the array's accesses - flips every time the array finishes,
// while the DMA is steered to the other half (see rca), so data movement
// for the next run overlaps the current computation.
//
// The paper names the Data Controller (Fig. 5(c)) and describes the
// ping-pong use of the address MSB after the PEA's finish signal; the
// register layout and the cycle counter are this design's own.
module data_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        launch,
  input  logic        mode_we,
  input  logic        mode_scmd,
  input  logic        mode_pp,
  input  logic        pea_done,
  output logic        pea_start,
  output logic        busy,
  output logic        done,
  output logic        scmd,
  output logic        pp_en,
  output logic        pp_sel,
  output logic [31:0] cycles
);
  assign pea_start = launch && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      scmd   <= 1'b0;
      pp_en  <= 1'b0;
      pp_sel <= 1'b0;
      cycles <= '0;
    end else begin
      if (mode_we && !busy) begin
        scmd  <= mode_scmd;
        pp_en <= mode_pp;
        if (!mode_pp) pp_sel <= 1'b0;
      end
      if (pea_start) begin
        busy   <= 1'b1;
        done   <= 1'b0;
        cycles <= '0;
      end else if (busy) begin
        cycles <= cycles + 32'd1;
        if (pea_done) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (pp_en) pp_sel <= !pp_sel;
        end
      end
    end
  end
endmodule
