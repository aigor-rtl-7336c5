// tb_aigor_node -- end-to-end test of one node: two SNN cores (2 workers x 4
// neurons, 2 time-multiplexed datapaths each) and two I/O cores, joined by the
// broadcast fabric model. I/O core 2 drives 8 Poisson sources, I/O core 3 a
// rate-coded 16x16 image; only some of their sources have synapses, so the
// SNN cores' ID_pre tables drop the rest. The SNN neurons are connected all
// to all across both cores with random weights, receptors and delays.
// The run is done twice, with the snnTorch-style and the NEST-style neuron
// model. Every timestep the spikes of both SNN cores are compared with the
// reference model fed with the I/O cores' observed spikes; the I/O counters
// are compared with the reference at the end. Mechanisms counted (each must
// occur): fabric back-pressure, cores one timestep apart held by the
// barrier, dropped events, multi-row fanouts, inter-core spikes,
// sample-window resets, both I/O modes and both neuron models.
`include "tb_check.svh"
`include "tb_ref.svh"
module tb_aigor_node;
  import aigor_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 4, W = 2, NPW = 4, NPAR = 2, MD = 8, ROWS = 256, RAW = 8;
  localparam int NC = 4, STEPS = 30, WINDOW = 12, NPOI = 8, NIMG = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 1500000)

  cfg_t cfg;
  logic [3:0] cfg_sel;
  logic cfg_bcast, start, done;
  logic [NC-1:0][TIME_W-1:0] core_ts;
  logic [NC-1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  event_t [NC-1:0] tx_event, rx_event;
  logic [1:0] rec_valid;
  event_t [1:0] rec_event;
  logic [1:0][15:0][15:0] io_cnt;

  aigor_node #(.P(P), .W(W), .NPW(NPW), .NPAR(NPAR), .MAX_DELAY(MD), .ROWS(ROWS)) dut (.*);
  bcast_switch_model #(.N(NC), .QDEPTH(3)) u_sw (.*);

  localparam longint ONE = 64'd1 << 20;
  ref_net net;
  int spk_hw [int][$];      // ts -> global neuron index (SNN cores)
  int ext_hw [int][$];      // ts -> source key (I/O cores)
  int nsync [int];
  int m_stall = 0, m_skew = 0, m_drop = 0, m_multirow = 0, m_inter = 0, m_reset = 0;
  int m_poi = 0, m_img = 0, m_lif = 0, m_iaf = 0, recs = 0;
  int run_no = 0;

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < NC; c++) if (tx_valid[c] && tx_ready[c]) begin
      automatic int t = int'(tx_event[c].ts) + run_no * 1000;
      if (tx_event[c].sync) nsync[t] = nsync.exists(t) ? nsync[t] + 1 : 1;
      else if (c < 2) spk_hw[t].push_back(net.g_of(c, tx_event[c].id.w, tx_event[c].id.n));
      else begin
        ext_hw[t].push_back(EXT_BASE + c * 1024 + int'(tx_event[c].id.w) * 128 + int'(tx_event[c].id.n));
        if (c == 2) m_poi++; else m_img++;
      end
    end
    for (int c = 0; c < 2; c++) if (tx_valid[c] && !tx_ready[c]) m_stall++;
    if (core_ts[0] != core_ts[1]) begin
      m_skew++;
      `CHECK(core_ts[0] - core_ts[1] == 1 || core_ts[1] - core_ts[0] == 1, "barrier keeps cores within one timestep")
    end
    if (dut.g_core[0].g_snn.u_snn.dropped) m_drop++;
    if (dut.g_core[1].g_snn.u_snn.dropped) m_drop++;
    recs += int'(rec_valid[0]) + int'(rec_valid[1]);
  end

  task automatic wr(int sel, cfg_region_e rg, int a, longint d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.region = rg; cfg.addr = CFG_AW'(a); cfg.data = SLOT_W'(d);
    cfg_sel = 4'(sel < 0 ? 0 : sel); cfg_bcast = (sel < 0);
  endtask

  initial begin
    int keys [$]; idpre_t ids [$]; cfg_t wq [$]; int rows; int spk [$];
    int cnt_ref [2][4];
    cfg = '0; cfg_sel = 0; cfg_bcast = 0; start = 0;
    net = new(2*W*NPW, MD, W, NPW);
    // sources: Poisson 0..7 (core 2), image pixels 0..9 (core 3), 16 neurons
    for (int s = 0; s < NPOI + NIMG + 2*W*NPW; s++) begin
      automatic int key; idpre_t id; id = '0;
      if (s < NPOI) begin key = EXT_BASE + 2*1024 + s; id.core = 2; id.n = NID_W'(s); end
      else if (s < NPOI + NIMG) begin key = EXT_BASE + 3*1024 + (s - NPOI); id.core = 3; id.n = NID_W'(s - NPOI); end
      else begin
        key = s - NPOI - NIMG;
        id.core = CORE_W'(net.core_of(key)); id.w = WID_W'(net.w_of(key)); id.n = NID_W'(net.n_of(key));
      end
      keys.push_back(key); ids.push_back(id);
      for (int d = 0; d < 2*W*NPW; d++) if ($urandom_range(0, 2) != 0) begin
        automatic int r = (s >= NPOI + NIMG && $urandom_range(0, 3) == 0) ? 1 : 0;
        automatic longint wt = (r == 0) ? longint'($urandom_range(ONE/10, ONE/3)) : -longint'($urandom_range(0, ONE/2));
        net.add_syn(key, d, r, $urandom_range(1, MD-1), wt);
      end
    end
    foreach (keys[k]) for (int c = 0; c < 2; c++) begin
      automatic int f = 0;
      foreach (net.fan[keys[k]][j]) if (net.core_of(net.fan[keys[k]][j].dst) == c) f++;
      if (f > P) m_multirow++;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 2; c++) begin
      wq.delete();
      net.build_image(c, P, RAW, 3, 5, 7, keys, ids, wq, rows);
      foreach (wq[i]) begin @(negedge clk); cfg = wq[i]; cfg_sel = 4'(c); cfg_bcast = 0; end
    end
    wr(-1, CFG_REGS, REG_EXP_SYNC, NC); wr(-1, CFG_REGS, REG_NUM_STEPS, STEPS);
    for (int c = 0; c < NC; c++) wr(c, CFG_REGS, REG_CORE_ID, c);
    wr(0, CFG_REGS, REG_WINDOW, WINDOW); wr(1, CFG_REGS, REG_WINDOW, WINDOW);
    wr(2, CFG_REGS, REG_IO_MODE, 2); wr(2, CFG_REGS, REG_IO_PROB, 16384); wr(2, CFG_REGS, REG_IO_NSRC, NPOI);
    wr(2, CFG_REGS, REG_IO_SEED, 16'hBEEF); wr(2, CFG_REGS, REG_IO_CNTSRC, (0 << WID_W) | 1);
    wr(3, CFG_REGS, REG_IO_MODE, 1); wr(3, CFG_REGS, REG_IO_SEED, 16'h0F0F);
    wr(3, CFG_REGS, REG_IO_CNTSRC, (1 << WID_W) | 0);
    for (int i = 0; i < 784; i++) wr(3, CFG_IMAGE, i, $urandom_range(0, 120));
    for (run_no = 0; run_no < 2; run_no++) begin
      net.prm = '0; net.prm.thr = fix_t'(ONE);
      if (run_no == 0) begin net.prm.model = NM_LIF_SUB; net.prm.decay = fix_t'(ONE*8/10); net.prm.iext = fix_t'(ONE/20); end
      else begin net.prm.model = NM_IAF_DELTA; net.prm.decay = fix_t'(ONE*9/10); net.prm.tref = 2;
        net.prm.vreset = fix_t'(ONE/5); end
      wr(-1, CFG_NEURON, NP_MODEL, net.prm.model); wr(-1, CFG_NEURON, NP_DECAY, net.prm.decay);
      wr(-1, CFG_NEURON, NP_THR, net.prm.thr); wr(-1, CFG_NEURON, NP_IEXT, net.prm.iext);
      wr(-1, CFG_NEURON, NP_VRESET, net.prm.vreset); wr(-1, CFG_NEURON, NP_TREF, net.prm.tref);
      net.reset();
      foreach (cnt_ref[i, j]) cnt_ref[i][j] = 0;
      @(negedge clk) cfg = '0; start = 1;
      @(negedge clk) start = 0;
      for (int t = 0; t < STEPS; t++) begin
        automatic int k = t + run_no * 1000;
        net.update(t, spk);
        while (!(nsync.exists(k) && nsync[k] == NC)) @(posedge clk);
        if (spk_hw.exists(k)) spk_hw[k].sort();
        `CHECK(spk_hw.exists(k) ? (spk_hw[k] == spk) : (spk.size() == 0),
               $sformatf("run %0d: spikes of timestep %0d match the reference", run_no, t))
        foreach (spk[i]) begin
          if (net.core_of(spk[i]) == 0 && net.w_of(spk[i]) == 1) cnt_ref[0][net.n_of(spk[i])]++;
          if (net.core_of(spk[i]) == 1 && net.w_of(spk[i]) == 0) cnt_ref[1][net.n_of(spk[i])]++;
          foreach (net.fan[spk[i]][j]) if (net.core_of(net.fan[spk[i]][j].dst) != net.core_of(spk[i])) m_inter++;
          net.deliver(spk[i], t);
        end
        if (ext_hw.exists(k)) foreach (ext_hw[k][i]) net.deliver(ext_hw[k][i], t);
        if ((t + 1) % WINDOW == 0) begin net.reset(); m_reset++; end
        if (spk.size() > 0) begin if (run_no == 0) m_lif++; else m_iaf++; end
      end
      wait (done);
      repeat (4) @(posedge clk);
      for (int i = 0; i < 2; i++) for (int n = 0; n < 4; n++)
        `CHECK(int'(io_cnt[i][n]) == cnt_ref[i][n], $sformatf("run %0d: I/O core %0d counter %0d", run_no, i, n))
      `CHECK(core_ts[0] == STEPS && core_ts[1] == STEPS, "SNN cores ran NUM_STEPS timesteps")
    end
    $display("stall %0d skew %0d drop %0d multirow %0d inter %0d reset %0d poi %0d img %0d lif %0d iaf %0d rec %0d",
             m_stall, m_skew, m_drop, m_multirow, m_inter, m_reset, m_poi, m_img, m_lif, m_iaf, recs);
    `CHECK(m_stall > 0, "mechanism: fabric back-pressure")
    `CHECK(m_skew > 0, "mechanism: barrier holding a core")
    `CHECK(m_drop > 0, "mechanism: unknown ID_pre dropped")
    `CHECK(m_multirow > 0, "mechanism: multi-row fanout")
    `CHECK(m_inter > 0, "mechanism: inter-core spikes")
    `CHECK(m_reset == 2 * (STEPS / WINDOW), "mechanism: sample-window reset")
    `CHECK(m_poi > 0 && m_img > 0, "mechanism: both I/O modes")
    `CHECK(m_lif > 0 && m_iaf > 0, "mechanism: both neuron models spiked")
    `CHECK(recs > 0, "mechanism: I/O recording")
    `TB_END
  end
endmodule
