// rr_arbiter -- round-robin arbiter among N requesters.
//
// gnt is a one-hot grant computed combinationally from req: the first
// requester at or after the rotating priority pointer wins. When the grant is
// taken (accept = 1 in the same cycle) the pointer moves to the requester just
// after the winner, so every persistent requester is served within N grants.
// Used for the per-worker merge of the synapse lanes and for the merge of the
// workers' spike streams; the source names round-robin merging for both, the
// rotating-pointer form is this design's choice.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] req,
  input  logic         accept,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic         any
);
  localparam int IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int k = 0; k < N; k++) begin
      logic [31:0] idx;
      idx = 32'((int'(ptr) + k) % N);
      if (!any && req[idx]) begin
        any          = 1'b1;
        gnt[idx]     = 1'b1;
        gnt_idx      = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else if (accept && any) ptr <= (int'(gnt_idx) == N-1) ? '0 : gnt_idx + 1'b1;
  end

  assert property (@(posedge clk) disable iff (rst) $onehot0(gnt));
endmodule
