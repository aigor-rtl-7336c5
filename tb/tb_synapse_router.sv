// tb_synapse_router -- random rows of P synapse words with random lane masks
// and random worker back-pressure. Each word carries a unique weight tag;
// checks that every word reaches exactly the worker named in its ID_post
// with its neuron, receptor, delay and timestep intact, that words of one
// lane keep their order per worker, that the lanes back-pressure the
// handler, and that `empty` is high once everything is delivered.
`include "tb_check.svh"
module tb_synapse_router;
  import aigor_pkg::*;
  localparam int P = 4, W = 3, NPW = 8, R = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 100000)

  logic in_valid, in_ready, empty;
  logic [P-1:0] in_mask;
  syn_word_t [P-1:0] in_words;
  logic [TIME_W-1:0] in_ts;
  logic [W-1:0] acc_valid, acc_ready;
  acc_t [W-1:0] acc;
  synapse_router #(.P(P), .W(W), .NPW(NPW), .R(R), .FDEPTH(2)) dut (.*);

  acc_t expq [W][P][$];     // per worker, per lane, in order
  int   lane_of [int];      // weight tag -> lane
  int sent = 0, recv = 0, stalls = 0, tag = 1;

  always @(negedge clk) acc_ready = W'($urandom);

  always @(posedge clk) if (!rst) begin
    for (int w = 0; w < W; w++) if (acc_valid[w] && acc_ready[w]) begin
      automatic int t = int'(acc[w].weight);
      automatic int l = lane_of.exists(t) ? lane_of[t] : 0;
      `CHECK(lane_of.exists(t), "known word")
      `CHECK(expq[w][l].size() > 0 && acc[w] == expq[w][l][0], "right worker, fields intact, lane order kept")
      if (expq[w][l].size() > 0) void'(expq[w][l].pop_front());
      recv++;
    end
  end

  initial begin
    in_valid = 0; in_mask = 0; in_words = '0; in_ts = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 800; k++) begin
      @(negedge clk);
      in_valid = 1; in_ts = TIME_W'($urandom);
      in_mask  = P'($urandom) | P'(1);
      for (int p = 0; p < P; p++) begin
        in_words[p] = '0;
        in_words[p].post.w = WID_W'($urandom_range(0, W-1));
        in_words[p].post.n = NID_W'($urandom_range(0, NPW-1));
        in_words[p].post.r = RID_W'($urandom_range(0, R-1));
        in_words[p].delay  = DELAY_W'($urandom_range(1, 15));
        in_words[p].weight = WEIGHT_W'(tag + p);
      end
      @(posedge clk);
      while (!in_ready) begin stalls++; @(posedge clk); end
      for (int p = 0; p < P; p++) if (in_mask[p]) begin
        acc_t a;
        a.n = in_words[p].post.n; a.r = in_words[p].post.r; a.delay = in_words[p].delay;
        a.weight = fix_t'(in_words[p].weight); a.ts = in_ts;
        expq[in_words[p].post.w][p].push_back(a);
        lane_of[tag + p] = p;
        sent++;
      end
      tag += P;
      #1 in_valid = 0;
    end
    repeat (200) @(posedge clk);
    `CHECK(recv == sent, "every word delivered once")
    `CHECK(empty, "empty after delivery")
    `CHECK(stalls > 20, "lanes were back-pressured")
    $display("sent %0d words, %0d stall cycles", sent, stalls);
    `TB_END
  end
endmodule
