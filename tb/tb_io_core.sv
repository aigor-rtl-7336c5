// tb_io_core -- the I/O core on a two-port broadcast fabric; the testbench
// plays an SNN core (ID_core 2). Checks, against an LFSR model written here:
// the Poisson source spikes of every timestep, then the rate-coded 16x16
// downsampled image spikes; that no event of t+1 leaves before the
// testbench's sync(t) (barrier); the per-neuron output counters and the
// record stream for spikes of the selected core/worker.
`include "tb_check.svh"
module tb_io_core;
  import aigor_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 400000)

  cfg_t cfg;
  logic start, done, rec_valid;
  logic [TIME_W-1:0] cur_ts;
  event_t rec_event;
  logic [15:0][15:0] cnt;
  logic [1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  event_t [1:0] tx_event, rx_event;

  io_core dut (.clk, .rst, .cfg, .start, .done, .cur_ts,
    .in_valid(rx_valid[0]), .in_ready(rx_ready[0]), .in_event(rx_event[0]),
    .out_valid(tx_valid[0]), .out_ready(tx_ready[0]), .out_event(tx_event[0]),
    .rec_valid, .rec_event, .cnt);
  bcast_switch_model #(.N(2), .QDEPTH(4)) u_sw (.*);

  event_t tbq [$];
  int got [int][$];         // ts -> source indices from the I/O core
  bit io_sync [int];
  bit tb_sync_sent [int];
  int exp_cnt [16];
  int recs = 0;
  assign tx_valid[1] = tbq.size() > 0;
  assign tx_event[1] = (tbq.size() > 0) ? tbq[0] : '0;
  assign rx_ready[1] = 1'b1;
  always @(posedge clk) if (!rst) begin
    if (tx_valid[1] && tx_ready[1]) begin
      if (tbq[0].sync) tb_sync_sent[int'(tbq[0].ts)] = 1;
      void'(tbq.pop_front());
    end
    if (tx_valid[0] && tx_ready[0]) begin
      automatic int t = int'(tx_event[0].ts);
      `CHECK(t == 0 || tb_sync_sent.exists(t-1), "I/O core waits for the barrier of t-1")
      if (tx_event[0].sync) io_sync[t] = 1;
      else got[t].push_back(int'(tx_event[0].id.w) * 128 + int'(tx_event[0].id.n));
    end
    if (rec_valid) recs++;
  end

  task automatic wr(cfg_region_e rg, int a, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.region = rg; cfg.addr = CFG_AW'(a); cfg.data = SLOT_W'(d);
  endtask
  function automatic logic [15:0] nx(logic [15:0] x);
    return x[0] ? ((x >> 1) ^ 16'hB400) : (x >> 1);
  endfunction

  logic [7:0] img [784];
  initial begin
    logic [15:0] l;
    int exp [$];
    cfg = '0; start = 0;
    foreach (exp_cnt[i]) exp_cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // ---- Poisson: 300 sources, p = 0.08, 10 timesteps ----
    wr(CFG_REGS, REG_EXP_SYNC, 2); wr(CFG_REGS, REG_NUM_STEPS, 10); wr(CFG_REGS, REG_CORE_ID, 7);
    wr(CFG_REGS, REG_IO_MODE, 2); wr(CFG_REGS, REG_IO_PROB, 5243); wr(CFG_REGS, REG_IO_NSRC, 300);
    wr(CFG_REGS, REG_IO_SEED, 16'hACE1); wr(CFG_REGS, REG_IO_CNTSRC, (2 << WID_W) | 1);
    @(negedge clk) cfg = '0; start = 1; @(negedge clk) start = 0;
    l = 16'hACE1;
    for (int t = 0; t < 10; t++) begin
      exp.delete();
      for (int i = 0; i < 300; i++) begin if (l < 5243) exp.push_back(i); l = nx(l); end
      wait (io_sync.exists(t));
      `CHECK(got.exists(t) ? got[t] == exp : exp.size() == 0, $sformatf("Poisson spikes of t=%0d", t))
      // output spikes from "core 2": worker 1 counted, worker 0 not
      repeat ($urandom_range(0, 6)) begin
        event_t e; automatic int n = $urandom_range(0, 15); automatic int w = $urandom_range(0, 1);
        e = '0; e.ts = TIME_W'(t); e.id.core = 2; e.id.w = WID_W'(w); e.id.n = NID_W'(n);
        tbq.push_back(e); if (w == 1) exp_cnt[n]++;
      end
      begin event_t e; e = '0; e.sync = 1; e.ts = TIME_W'(t); e.id.core = 2; tbq.push_back(e); end
    end
    wait (done);
    repeat (5) @(posedge clk);
    for (int i = 0; i < 16; i++) `CHECK(int'(cnt[i]) == exp_cnt[i], "output spike counter")
    `CHECK(recs > 0, "received spikes recorded")
    // ---- image: 28x28 random pixels, 5 timesteps ----
    foreach (img[i]) begin img[i] = 8'($urandom); wr(CFG_IMAGE, i, int'(img[i])); end
    wr(CFG_REGS, REG_IO_MODE, 1); wr(CFG_REGS, REG_NUM_STEPS, 5); wr(CFG_REGS, REG_IO_SEED, 16'h1234);
    got.delete(); io_sync.delete(); tb_sync_sent.delete();
    @(negedge clk) cfg = '0; start = 1; @(negedge clk) start = 0;
    l = 16'h1234;
    for (int t = 0; t < 5; t++) begin
      exp.delete();
      for (int i = 0; i < 256; i++) begin
        automatic int p = img[((i / 16) * 28 / 16) * 28 + (i % 16) * 28 / 16];
        if (int'(l[7:0]) < p) exp.push_back(i);
        l = nx(l);
      end
      wait (io_sync.exists(t));
      `CHECK(got.exists(t) && got[t] == exp, $sformatf("image spikes of t=%0d", t))
      begin event_t e; e = '0; e.sync = 1; e.ts = TIME_W'(t); e.id.core = 2; tbq.push_back(e); end
    end
    wait (done);
    `CHECK(cnt == '0, "start clears the counters")
    `TB_END
  end
endmodule
