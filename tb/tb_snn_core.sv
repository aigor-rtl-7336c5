// tb_snn_core -- one SNN core (2 workers x 4 neurons, 2 datapaths each, so
// time-multiplexed) whose output is looped back to its own input through the
// broadcast switch model, together with an external source port played by
// the testbench (6 Poisson-like sources, ID_core 5). The recurrent network
// has random weights, receptors and delays, and some sources without targets
// on the core. Per timestep the spikes the core emits must equal those of
// the reference model; the run also checks the sync protocol (one sync per
// timestep, after the spikes), the sample-window reset and that the fabric
// back-pressured the core at least once.
`include "tb_check.svh"
`include "tb_ref.svh"
module tb_snn_core;
  import aigor_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 4, W = 2, NPW = 4, NPAR = 2, MD = 8, ROWS = 256, RAW = 8;
  localparam int CB = 3, WB = 2, NB = 3, NEXT = 6, STEPS = 40, WINDOW = 17;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 400000)

  cfg_t cfg;
  logic start, done;
  logic [TIME_W-1:0] cur_ts;
  logic [1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  event_t [1:0] tx_event, rx_event;

  snn_core #(.P(P), .W(W), .NPW(NPW), .NPAR(NPAR), .MAX_DELAY(MD), .ROWS(ROWS),
             .SRC_CB(CB), .SRC_WB(WB), .SRC_NB(NB)) dut (
    .clk, .rst, .cfg, .start, .done, .cur_ts,
    .in_valid(rx_valid[0]), .in_ready(rx_ready[0]), .in_event(rx_event[0]),
    .out_valid(tx_valid[0]), .out_ready(tx_ready[0]), .out_event(tx_event[0]));
  bcast_switch_model #(.N(2), .QDEPTH(2)) u_sw (.*);

  localparam longint ONE = 64'd1 << 20;
  ref_net net;
  cfg_t wq [$];
  event_t extq [$];
  int core_spk [int][$];   // ts -> neuron indices seen on the fabric
  int syncs_seen [int];
  int stall_cycles = 0, nspikes = 0, resets = 0;

  // port 1: the testbench's external source
  assign tx_valid[1] = extq.size() > 0;
  assign tx_event[1] = (extq.size() > 0) ? extq[0] : '0;
  assign rx_ready[1] = 1'b1;
  always @(posedge clk) if (!rst) begin
    if (tx_valid[1] && tx_ready[1]) void'(extq.pop_front());
    if (tx_valid[0] && !tx_ready[0]) stall_cycles++;
    if (rx_valid[1] && rx_event[1].id.core == 3) begin
      if (rx_event[1].sync) begin
        syncs_seen[int'(rx_event[1].ts)] = 1;
      end else begin
        `CHECK(!syncs_seen.exists(int'(rx_event[1].ts)), "spikes of t precede sync(t)")
        core_spk[int'(rx_event[1].ts)].push_back(net.g_of(0, rx_event[1].id.w, rx_event[1].id.n));
        nspikes++;
      end
    end
  end

  task automatic wr(cfg_region_e rg, int a, longint d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.region = rg; cfg.addr = CFG_AW'(a); cfg.data = SLOT_W'(d);
  endtask

  initial begin
    int keys [$]; idpre_t ids [$]; int rows; int spk [$]; int rowsz;
    cfg = '0; start = 0; extq.delete();
    net = new(W*NPW, MD, W, NPW);
    net.prm = '0; net.prm.model = NM_LIF_SUB; net.prm.decay = fix_t'(ONE*8/10);
    net.prm.thr = fix_t'(ONE); net.prm.iext = fix_t'(ONE/20);
    // connectivity: externals -> neurons, neurons -> neurons (recurrent, incl. self)
    for (int s = 0; s < NEXT + W*NPW; s++) begin
      automatic int key = (s < NEXT) ? EXT_BASE + s : s - NEXT;
      idpre_t id;
      id = '0;
      if (s < NEXT) begin id.core = 5; id.w = 0; id.n = NID_W'(s); end
      else begin id.core = 3; id.w = WID_W'(net.w_of(key)); id.n = NID_W'(net.n_of(key)); end
      keys.push_back(key); ids.push_back(id);
      if (s == 2 || s == NEXT + 5) continue;          // sources without targets
      for (int d = 0; d < W*NPW; d++) if ($urandom_range(0, 2) != 0) begin
        automatic int r = (s >= NEXT && $urandom_range(0, 3) == 0) ? 1 : 0;
        automatic longint wt = (r == 0) ? longint'($urandom_range(ONE/10, ONE/2)) : -longint'($urandom_range(0, ONE/2));
        net.add_syn(key, d, r, $urandom_range(1, MD-1), wt);
      end
    end
    net.build_image(0, P, RAW, CB, WB, NB, keys, ids, wq, rows);
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (wq[i]) begin @(negedge clk); cfg = wq[i]; end
    wr(CFG_REGS, REG_EXP_SYNC, 2); wr(CFG_REGS, REG_NUM_STEPS, STEPS);
    wr(CFG_REGS, REG_WINDOW, WINDOW); wr(CFG_REGS, REG_CORE_ID, 3);
    wr(CFG_NEURON, NP_MODEL, net.prm.model); wr(CFG_NEURON, NP_DECAY, net.prm.decay);
    wr(CFG_NEURON, NP_THR, net.prm.thr); wr(CFG_NEURON, NP_IEXT, net.prm.iext);
    wr(CFG_NEURON, NP_VRESET, 0); wr(CFG_NEURON, NP_TREF, 0);
    @(negedge clk) cfg = '0; start = 1;
    @(negedge clk) start = 0;
    for (int t = 0; t < STEPS; t++) begin
      int ext [$];
      ext.delete();
      net.update(t, spk);
      // external spikes of t, then sync(t); the sender waits for the core's sync(t-1)
      if (t > 0) wait (syncs_seen.exists(t-1));
      for (int i = 0; i < NEXT; i++) if ($urandom_range(0, 2) == 0) begin
        event_t e; e = '0; e.ts = TIME_W'(t); e.id.core = 5; e.id.n = NID_W'(i);
        extq.push_back(e); ext.push_back(i);
      end
      begin event_t e; e = '0; e.sync = 1; e.ts = TIME_W'(t); e.id.core = 5; extq.push_back(e); end
      wait (syncs_seen.exists(t));
      if (core_spk.exists(t)) core_spk[t].sort();
      `CHECK(core_spk.exists(t) ? (core_spk[t] == spk) : (spk.size() == 0),
             $sformatf("spikes of timestep %0d match the reference", t))
      foreach (spk[k]) net.deliver(spk[k], t);
      foreach (ext[k]) net.deliver(EXT_BASE + ext[k], t);
      if ((t + 1) % WINDOW == 0) begin net.reset(); resets++; end   // sample boundary after t
    end
    wait (done);
    `CHECK(cur_ts == STEPS, "ran NUM_STEPS timesteps")
    `CHECK(nspikes > 30, "network was active")
    `CHECK(stall_cycles > 0, "fabric back-pressure happened")
    `CHECK(resets == STEPS / WINDOW, "sample-window resets happened")
    $display("spikes %0d, stall cycles %0d, rows %0d", nspikes, stall_cycles, rows);
    `TB_END
  end
endmodule
