// tb_aigor_node_full -- the node at its default size (two SNN cores of
// 8 workers x 32 neurons with 32 spatial datapaths, 8 synapse lanes, 16384
// synaptic rows, and two I/O cores), running one sample of an MNIST-shaped
// feed-forward network: I/O core 2 rate-codes a random 28x28 image into
// 16x16 = 256 input spikes trains, SNN core 0 holds a 128-neuron hidden
// layer (workers 0-3) and a 10-neuron output layer (worker 4) with random
// weights; SNN core 1 and I/O core 3 only take part in the barrier. Each
// timestep the hidden and output spikes are compared with the reference
// model fed with the observed input spikes, and at the end I/O core 2's
// counters of the output layer are compared with the reference counts.
`include "tb_check.svh"
`include "tb_ref.svh"
module tb_aigor_node_full;
  import aigor_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 8, W = 8, NPW = 32, MD = 16, RAW = 14, NC = 4, STEPS = 12;
  localparam int NIN = 256, NHID = 128, NOUT = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 2000000)

  cfg_t cfg;
  logic [3:0] cfg_sel;
  logic cfg_bcast, start, done;
  logic [NC-1:0][TIME_W-1:0] core_ts;
  logic [NC-1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  event_t [NC-1:0] tx_event, rx_event;
  logic [1:0] rec_valid;
  event_t [1:0] rec_event;
  logic [1:0][15:0][15:0] io_cnt;

  aigor_node dut (.*);
  bcast_switch_model #(.N(NC), .QDEPTH(8)) u_sw (.*);

  localparam longint ONE = 64'd1 << 20;
  ref_net net;
  int spk_hw [int][$];
  int ext_hw [int][$];
  int nsync [int];
  int nin = 0, nhid = 0, nout = 0;

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < NC; c++) if (tx_valid[c] && tx_ready[c]) begin
      automatic int t = int'(tx_event[c].ts);
      if (tx_event[c].sync) nsync[t] = nsync.exists(t) ? nsync[t] + 1 : 1;
      else if (c < 2) spk_hw[t].push_back(net.g_of(c, tx_event[c].id.w, tx_event[c].id.n));
      else begin ext_hw[t].push_back(EXT_BASE + int'(tx_event[c].id.w) * 128 + int'(tx_event[c].id.n)); nin++; end
    end
  end

  task automatic wr(int sel, cfg_region_e rg, int a, longint d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.region = rg; cfg.addr = CFG_AW'(a); cfg.data = SLOT_W'(d);
    cfg_sel = 4'(sel < 0 ? 0 : sel); cfg_bcast = (sel < 0);
  endtask

  initial begin
    int keys [$]; idpre_t ids [$]; cfg_t wq [$]; int rows; int spk [$]; int cnt_ref [NOUT];
    int t0;
    cfg = '0; cfg_sel = 0; cfg_bcast = 0; start = 0;
    net = new(2*W*NPW, MD, W, NPW);
    net.prm = '0; net.prm.model = NM_LIF_SUB; net.prm.decay = fix_t'(ONE*9/10); net.prm.thr = fix_t'(ONE);
    // input i -> hidden (global 0..127), hidden h -> output (global 128..137)
    for (int i = 0; i < NIN; i++) begin
      idpre_t id; id = '0; id.core = 2; id.w = WID_W'(i >> 7); id.n = NID_W'(i & 127);
      keys.push_back(EXT_BASE + i); ids.push_back(id);
      for (int h = 0; h < NHID; h++) if ($urandom_range(0, 3) == 0)
        net.add_syn(EXT_BASE + i, h, 0, 1, longint'($urandom_range(0, ONE/3)) - ONE/12);
    end
    for (int h = 0; h < NHID; h++) begin
      idpre_t id; id = '0; id.core = 0; id.w = WID_W'(net.w_of(h)); id.n = NID_W'(net.n_of(h));
      keys.push_back(h); ids.push_back(id);
      for (int o = 0; o < NOUT; o++) begin
        automatic longint wt = longint'($urandom_range(0, ONE/2)) - ONE/6;
        net.add_syn(h, NHID + o, (wt < 0) ? 1 : 0, 1, wt);
      end
    end
    repeat (3) @(posedge clk);
    rst = 0;
    net.build_image(0, P, RAW, 3, 5, 7, keys, ids, wq, rows);
    foreach (wq[i]) begin @(negedge clk); cfg = wq[i]; cfg_sel = 0; cfg_bcast = 0; end
    wr(-1, CFG_REGS, REG_EXP_SYNC, NC); wr(-1, CFG_REGS, REG_NUM_STEPS, STEPS);
    for (int c = 0; c < NC; c++) wr(c, CFG_REGS, REG_CORE_ID, c);
    wr(2, CFG_REGS, REG_IO_MODE, 1); wr(2, CFG_REGS, REG_IO_SEED, 16'h2024);
    wr(2, CFG_REGS, REG_IO_CNTSRC, (0 << WID_W) | (NHID / NPW));
    for (int i = 0; i < 784; i++) wr(2, CFG_IMAGE, i, $urandom_range(0, 80));
    wr(-1, CFG_NEURON, NP_MODEL, net.prm.model); wr(-1, CFG_NEURON, NP_DECAY, net.prm.decay);
    wr(-1, CFG_NEURON, NP_THR, net.prm.thr); wr(-1, CFG_NEURON, NP_IEXT, 0);
    wr(-1, CFG_NEURON, NP_VRESET, 0); wr(-1, CFG_NEURON, NP_TREF, 0);
    foreach (cnt_ref[i]) cnt_ref[i] = 0;
    @(negedge clk) cfg = '0; start = 1;
    @(negedge clk) start = 0;
    t0 = $time;
    for (int t = 0; t < STEPS; t++) begin
      net.update(t, spk);
      while (!(nsync.exists(t) && nsync[t] == NC)) @(posedge clk);
      if (spk_hw.exists(t)) spk_hw[t].sort();
      `CHECK(spk_hw.exists(t) ? (spk_hw[t] == spk) : (spk.size() == 0),
             $sformatf("spikes of timestep %0d match the reference", t))
      foreach (spk[i]) begin
        if (spk[i] >= NHID) begin cnt_ref[spk[i] - NHID]++; nout++; end else nhid++;
        net.deliver(spk[i], t);
      end
      if (ext_hw.exists(t)) foreach (ext_hw[t][i]) net.deliver(ext_hw[t][i], t);
    end
    wait (done);
    repeat (4) @(posedge clk);
    for (int o = 0; o < NOUT; o++) `CHECK(int'(io_cnt[0][o]) == cnt_ref[o], $sformatf("output counter %0d", o))
    $display("rows %0d, input spikes %0d, hidden spikes %0d, output spikes %0d, %0d cycles per timestep",
             rows, nin, nhid, nout, ($time - t0) / 10 / STEPS);
    `CHECK(nin > 0 && nhid > 0 && nout > 0, "every layer was active")
    `TB_END
  end
endmodule
