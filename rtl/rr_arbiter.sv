// rr_arbiter: round-robin arbiter over N requesters.
//
// The grant is combinational from the request vector. The requester that
// follows the last granted one has the highest priority, so every
// requester is served within N grants. The pointer moves only when
// `advance` is high with a grant given (the access was accepted). The paper
// names a round-robin arbiter in the parallel access interface; the
// implementation is this design's own.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 gnt_any
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (!gnt_any && req[idx]) begin
        gnt_any  = 1'b1;
        gnt_idx  = IW'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last <= IW'(N - 1);
    else if (advance && gnt_any) last <= gnt_idx;
  end

  initial assert (N >= 2) else $error("rr_arbiter needs N >= 2");
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
