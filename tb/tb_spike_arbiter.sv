// tb_spike_arbiter -- three workers offer random spike lists under random
// fabric back-pressure. Checks the ID_pre re-encoding and timestep of every
// event, that every spike is sent once, that round-robin bounds how long a
// busy worker waits, and that the sync event comes only when no worker has a
// spike left and carries the core ID.
`include "tb_check.svh"
module tb_spike_arbiter;
  import aigor_pkg::*;
  localparam int W = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 100000)

  logic [CORE_W-1:0] core_id = 12'h5A;
  logic [TIME_W-1:0] ts;
  logic [W-1:0] sp_valid, sp_ready;
  logic [W-1:0][NID_W-1:0] sp_n;
  logic sync_req, sync_ack, out_valid, out_ready;
  event_t out_event;
  spike_arbiter #(.W(W)) dut (.*);

  int q [W][$];
  int since [W];
  int syncs = 0, spikes = 0;

  always_comb for (int w = 0; w < W; w++) begin
    sp_valid[w] = q[w].size() > 0;
    sp_n[w]     = (q[w].size() > 0) ? NID_W'(q[w][0]) : '0;
  end

  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      `CHECK(out_event.ts == ts && out_event.id.core == core_id, "timestep and ID_core")
      if (out_event.sync) begin
        syncs++;
        `CHECK(sync_req && q[0].size() + q[1].size() + q[2].size() == 0, "sync only after all spikes")
      end else begin
        automatic int w = int'(out_event.id.w);
        `CHECK(w < W && q[w].size() > 0 && int'(out_event.id.n) == q[w][0], "ID_pre = <core, worker, neuron>")
        `CHECK(sp_ready == W'(1) << w, "handshake to the granted worker")
        for (int k = 0; k < W; k++) if (k != w && q[k].size() > 0) begin
          since[k]++;
          `CHECK(since[k] < W, "round-robin wait bound")
        end
        since[w] = 0;
        if (w < W && q[w].size() > 0) void'(q[w].pop_front());
        spikes++;
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  initial begin
    sync_req = 0; ts = 0;
    foreach (since[w]) since[w] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      ts = TIME_W'(t);
      for (int w = 0; w < W; w++) repeat ($urandom_range(0, 12)) q[w].push_back($urandom_range(0, 1023));
      foreach (since[w]) since[w] = 0;
      while (q[0].size() + q[1].size() + q[2].size() != 0) @(negedge clk);
      sync_req = 1;
      @(posedge clk); while (!sync_ack) @(posedge clk);
      @(negedge clk) sync_req = 0;
      `CHECK(syncs == t + 1, "one sync per timestep")
    end
    `CHECK(spikes > 100, "spikes sent")
    `TB_END
  end
endmodule
