// sram_bank: one bank of the shared memory, DEPTH x WIDTH single-port SRAM.
//
// Synchronous: a write (en & we) updates the word at the clock edge; a read
// (en & !we) gives the word on rdata one cycle later, and rdata holds until
// the next read. The standard bank is 256 x 32 bits, as in the paper. It is
// written as an array so that synthesis maps it to a memory macro; the
// single-port, one-cycle-read behaviour is this design's assumption.
module sram_bank #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
