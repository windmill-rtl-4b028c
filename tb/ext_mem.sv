// ext_mem: behavioural model of the external storage seen by the DMA - an
// AXI4-Lite slave holding WORDS 32-bit words at byte address 4*i. The ready
// signals are withheld for a pseudo-random number of cycles (0..3) to
// exercise the master's handshakes. Testbench only; not synthesizable intent.
module ext_mem #(
  parameter int unsigned WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [31:0] araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp
);
  logic [31:0] mem [WORDS];
  logic        aw_got, w_got;
  logic [31:0] aw_q, w_q;
  int unsigned wait_r, wait_w;

  assign bresp = 2'b00;
  assign rresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      arready <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      aw_got <= 1'b0; w_got <= 1'b0; aw_q <= '0; w_q <= '0;
      wait_r <= 0; wait_w <= 0;
    end else begin
      // read channel
      arready <= 1'b0;
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && !arready && !rvalid) begin
        if (wait_r == 0) begin
          arready <= 1'b1;
          rvalid  <= 1'b1;
          rdata   <= mem[(araddr >> 2) % WORDS];
          wait_r  <= $urandom_range(0, 3);
        end else wait_r <= wait_r - 1;
      end
      // write channel
      awready <= 1'b0;
      wready  <= 1'b0;
      if (awvalid && !awready && !aw_got && wait_w == 0) begin
        awready <= 1'b1; aw_got <= 1'b1; aw_q <= awaddr;
      end
      if (wvalid && !wready && !w_got && wait_w == 0) begin
        wready <= 1'b1; w_got <= 1'b1; w_q <= wdata;
      end
      if ((awvalid || wvalid) && wait_w != 0) wait_w <= wait_w - 1;
      if (aw_got && w_got && !bvalid) begin
        mem[(aw_q >> 2) % WORDS] <= w_q;
        bvalid <= 1'b1;
        aw_got <= 1'b0;
        w_got  <= 1'b0;
        wait_w <= $urandom_range(0, 3);
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
