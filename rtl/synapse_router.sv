// synapse_router -- local per-worker routing of synapse words.
//
// Each of the P lanes from the memory handler carries one synapse word. Its
// ID_post is resolved into the destination worker (ID_W) and the local
// (neuron, receptor) pair, and the contribution {n, r, delay, weight, ts} is
// written into that lane's FIFO for that worker: P x W FIFOs of FDEPTH
// entries. A row is accepted only when every valid lane finds room, so the
// lanes advance together. For each worker a round-robin arbiter merges its P
// lane FIFOs into one stream into the worker's accumulator, one contribution
// per cycle. `empty` is high when no contribution is buffered.
// Timing: a contribution accepted in cycle c can reach its worker in c+1.
// Routing by ID_post and the round-robin merge follow the source; the FIFO
// arrangement per (lane, worker) is this design's reading of the diagram
// (the text says per-receptor FIFOs).
module synapse_router
  import aigor_pkg::*;
#(
  parameter int P      = 8,
  parameter int W      = 8,
  parameter int NPW    = 32,
  parameter int R      = 2,
  parameter int FDEPTH = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [P-1:0]      in_mask,
  input  syn_word_t [P-1:0] in_words,
  input  logic [TIME_W-1:0] in_ts,
  output logic [W-1:0]      acc_valid,
  input  logic [W-1:0]      acc_ready,
  output acc_t [W-1:0]      acc,
  output logic              empty
);
  localparam int WB = (W > 1) ? $clog2(W) : 1;
  localparam int AW = $bits(acc_t);

  logic [P-1:0][W-1:0] f_in_ready, f_out_valid, f_out_ready, f_empty;
  acc_t [P-1:0][W-1:0] f_out;
  acc_t [P-1:0]        lane_acc;
  logic [P-1:0][WB-1:0] lane_w;
  logic [P-1:0]        lane_ok;

  always_comb begin
    for (int p = 0; p < P; p++) begin
      lane_w[p]          = in_words[p].post.w[WB-1:0];
      lane_acc[p].n      = in_words[p].post.n;
      lane_acc[p].r      = in_words[p].post.r;
      lane_acc[p].delay  = in_words[p].delay;
      lane_acc[p].weight = fix_t'(in_words[p].weight);
      lane_acc[p].ts     = in_ts;
      lane_ok[p]         = !in_mask[p] || f_in_ready[p][lane_w[p]];
    end
    in_ready = &lane_ok;
  end

  for (genvar p = 0; p < P; p++) begin : g_lane
    for (genvar w = 0; w < W; w++) begin : g_fifo
      logic [AW-1:0] fo;
      sync_fifo #(.WIDTH(AW), .DEPTH(FDEPTH)) u_f (
        .clk, .rst,
        .in_valid(in_valid && in_ready && in_mask[p] && lane_w[p] == WB'(w)),
        .in_ready(f_in_ready[p][w]), .in_data(lane_acc[p]),
        .out_valid(f_out_valid[p][w]), .out_ready(f_out_ready[p][w]),
        .out_data(fo), .empty(f_empty[p][w]));
      assign f_out[p][w] = acc_t'(fo);
    end
  end

  for (genvar w = 0; w < W; w++) begin : g_merge
    logic [P-1:0] req, gnt;
    logic [(P > 1 ? $clog2(P) : 1)-1:0] gi;
    logic any;
    for (genvar p = 0; p < P; p++) begin : g_req
      assign req[p] = f_out_valid[p][w];
      assign f_out_ready[p][w] = gnt[p] && acc_ready[w];
    end
    rr_arbiter #(.N(P)) u_rr (.clk, .rst, .req, .accept(acc_ready[w]), .gnt, .gnt_idx(gi), .any);
    assign acc_valid[w] = any;
    assign acc[w]       = f_out[gi][w];
  end

  assign empty = &f_empty;

  // a lane may only address a worker that exists, and a neuron/receptor inside it
  for (genvar p = 0; p < P; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (rst)
      (in_valid && in_mask[p]) |-> (int'(in_words[p].post.w) < W &&
                                    int'(in_words[p].post.n) < NPW &&
                                    int'(in_words[p].post.r) < R));
  end
endmodule
