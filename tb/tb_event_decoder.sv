// tb_event_decoder -- checks ID_pre translation, dropping of sources without
// local targets, back-pressure, and the two-parity sync barrier: the token
// appears exactly on the last expected sync of the current timestep, and a
// sync of t+1 that arrives early is kept for the next barrier.
`include "tb_check.svh"
module tb_event_decoder;
  import aigor_pkg::*;
  localparam int CB = 2, WB = 2, NB = 3, RAW = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 50000)

  cfg_t cfg;
  logic [CORE_W-1:0] exp_sync;
  logic [TIME_W-1:0] cur_ts;
  logic in_valid, in_ready, out_valid, out_ready, out_token, dropped;
  event_t in_event;
  logic [TIME_W-1:0] out_ts;
  logic [RAW-1:0] out_row;

  event_decoder #(.SRC_CB(CB), .SRC_WB(WB), .SRC_NB(NB), .ROW_AW(RAW)) dut (.*);

  logic [RAW-1:0] tbl [2**(CB+WB+NB)];
  bit             vld [2**(CB+WB+NB)];
  int tokens = 0, drops = 0;

  task automatic send(event_t e, bit rdy, output bit got_out, output bit got_tok, output logic [RAW-1:0] row);
    @(negedge clk);
    in_valid = 1; in_event = e; out_ready = rdy;
    #1;
    got_out = out_valid; got_tok = out_token; row = out_row;
    `CHECK(in_ready == (!out_valid || rdy), "in_ready follows out_ready")
    if (out_valid) `CHECK(out_ts == e.ts, "timestep forwarded")
    if (dropped) drops++;
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  function automatic event_t spk(int c, int w, int n, int t);
    event_t e; e = '0; e.ts = TIME_W'(t); e.id.core = CORE_W'(c); e.id.w = WID_W'(w); e.id.n = NID_W'(n);
    return e;
  endfunction
  function automatic event_t syn(int c, int t);
    event_t e; e = '0; e.sync = 1; e.ts = TIME_W'(t); e.id.core = CORE_W'(c);
    return e;
  endfunction

  bit go, gt; logic [RAW-1:0] row;
  initial begin
    cfg = '0; in_valid = 0; out_ready = 1; in_event = '0; exp_sync = 3; cur_ts = 4;
    repeat (3) @(posedge clk);
    rst = 0;
    // fill the table, every third entry without targets
    for (int i = 0; i < 2**(CB+WB+NB); i++) begin
      @(negedge clk);
      tbl[i] = RAW'($urandom); vld[i] = (i % 3 != 0);
      cfg.we = 1; cfg.region = CFG_ADDRT; cfg.addr = CFG_AW'(i);
      cfg.data = '0; cfg.data[RAW-1:0] = tbl[i]; cfg.data[RAW] = vld[i];
    end
    @(negedge clk) cfg.we = 0;
    // spikes
    for (int k = 0; k < 300; k++) begin
      automatic int c = $urandom_range(0, 3), w = $urandom_range(0, 3), n = $urandom_range(0, 7);
      automatic int i = (c << (WB+NB)) | (w << NB) | n;
      automatic bit rdy = ($urandom_range(0, 3) != 0);
      send(spk(c, w, n, 4), rdy, go, gt, row);
      `CHECK(go == vld[i], "forwarded iff the source has local targets")
      if (go) `CHECK(!gt && row == tbl[i], "translated row")
    end
    `CHECK(drops > 50, "spikes were dropped")
    // barrier of t=4 with an early sync of t=5 in between
    send(syn(0, 4), 1, go, gt, row); `CHECK(!go, "1st sync: no token")
    send(syn(2, 5), 1, go, gt, row); `CHECK(!go, "early sync of t+1: no token")
    send(syn(1, 4), 1, go, gt, row); `CHECK(!go, "2nd sync: no token")
    send(syn(2, 4), 0, go, gt, row); `CHECK(go && gt, "3rd sync presents token")
    // not accepted (out_ready=0): resend with ready
    send(syn(2, 4), 1, go, gt, row); `CHECK(go && gt, "token accepted"); if (go && gt) tokens++;
    cur_ts = 5;
    send(syn(0, 5), 1, go, gt, row); `CHECK(!go, "t=5: 2nd sync (one early) no token")
    send(syn(1, 5), 1, go, gt, row); `CHECK(go && gt, "t=5: barrier closes with the early sync counted"); if (go && gt) tokens++;
    cur_ts = 6;
    for (int k = 0; k < 2; k++) begin
      send(syn(k, 6), 1, go, gt, row); `CHECK(!go, "t=6 counter restarted from zero")
    end
    send(syn(2, 6), 1, go, gt, row); `CHECK(go && gt, "t=6 barrier"); if (go && gt) tokens++;
    `CHECK(tokens == 3, "three barriers")
    `TB_END
  end
endmodule
