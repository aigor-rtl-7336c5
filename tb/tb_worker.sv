// tb_worker -- a time-multiplexed worker (8 neurons on 2 datapaths) against
// a behavioural model of delay rings plus the LIF / IAF equations. Random
// contributions are sent between boundaries; after each `start` the emitted
// spike set (lowest index first) and the membrane potentials must match the
// model. Checks the update latency: busy lasts NPW/NPAR + max(1, spikes)
// cycles with the output always ready. Ends with a sample clear.
`include "tb_check.svh"
module tb_worker;
  import aigor_pkg::*;
  localparam int NPW = 8, NPAR = 2, R = 2, MD = 8, DB = NPW/NPAR;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 200000)

  nparams_t prm;
  logic acc_valid, acc_ready, start, clear, busy, sp_valid, sp_ready;
  acc_t acc;
  logic [TIME_W-1:0] ts, sample_start = '0;
  logic [NID_W-1:0] sp_n;
  worker #(.NPW(NPW), .NPAR(NPAR), .R(R), .MAX_DELAY(MD)) dut (.*);

  localparam longint ONE = 64'd1 << 20;
  longint buf_m [NPW][R][MD];
  longint vm [NPW]; int tr [NPW];
  int exp_spk [$], got_spk [$];
  int total_spikes = 0, busy_cyc;

  always @(posedge clk) if (!rst && sp_valid && sp_ready) got_spk.push_back(int'(sp_n));

  task automatic model_step(int t);
    exp_spk.delete();
    for (int n = 0; n < NPW; n++) begin
      longint i_in, v;
      i_in = buf_m[n][0][t % MD] + buf_m[n][1][t % MD];
      buf_m[n][0][t % MD] = 0; buf_m[n][1][t % MD] = 0;
      v = ((longint'(prm.decay) * vm[n]) >>> 20) + longint'(prm.iext) + i_in;
      if (prm.model == NM_LIF_SUB) begin
        if (vm[n] > longint'(prm.thr)) v -= longint'(prm.thr);
        vm[n] = longint'(fix_t'(v));
        if (vm[n] > longint'(prm.thr)) exp_spk.push_back(n);
      end else begin
        if (tr[n] > 0) begin tr[n]--; vm[n] = longint'(prm.vreset); end
        else if (fix_t'(v) >= prm.thr) begin exp_spk.push_back(n); vm[n] = longint'(prm.vreset); tr[n] = int'(prm.tref); end
        else vm[n] = longint'(fix_t'(v));
      end
    end
  endtask

  initial begin
    acc_valid = 0; start = 0; clear = 0; ts = 0; acc = '0; sp_ready = 1;
    prm = '0; prm.model = NM_LIF_SUB; prm.decay = fix_t'(ONE*9/10); prm.thr = fix_t'(ONE);
    prm.iext = fix_t'(ONE/50); prm.vreset = 0; prm.tref = 2;
    repeat (3) @(posedge clk);
    rst = 0;
    // initial clear
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    wait (!busy);
    foreach (buf_m[n, r, s]) buf_m[n][r][s] = 0;
    foreach (vm[n]) begin vm[n] = 0; tr[n] = 0; end
    for (int t = 0; t < 60; t++) begin
      if (t == 30) prm.model = NM_IAF_DELTA;
      // boundary of timestep t
      @(negedge clk); start = 1; ts = TIME_W'(t);
      @(negedge clk); start = 0;
      model_step(t);
      got_spk.delete();
      busy_cyc = 0;
      while (busy) begin busy_cyc++; @(negedge clk); end
      `CHECK(got_spk == exp_spk, $sformatf("spike set of step %0d", t))
      `CHECK(busy_cyc == DB + ((exp_spk.size() > 0) ? exp_spk.size() : 1), "update latency")
      total_spikes += exp_spk.size();
      for (int j = 0; j < DB; j++) begin
        `CHECK(dut.g_dp[0].st_mem[j].vm == fix_t'(vm[j*NPAR]), "membrane state")
        `CHECK(dut.g_dp[1].st_mem[j].vm == fix_t'(vm[j*NPAR+1]), "membrane state")
      end
      // contributions of spikes emitted at t
      repeat ($urandom_range(3, 25)) begin
        @(negedge clk);
        acc = '0; acc.ts = TIME_W'(t);
        acc.n = NID_W'($urandom_range(0, NPW-1)); acc.r = RID_W'($urandom_range(0, R-1));
        acc.delay = DELAY_W'($urandom_range(1, MD-1));
        acc.weight = (acc.r == 0) ? fix_t'($urandom_range(0, ONE/2)) : -fix_t'($urandom_range(0, ONE/4));
        acc_valid = 1;
        #1 `CHECK(acc_ready, "accepts contributions while idle")
        buf_m[acc.n][acc.r][(t + int'(acc.delay)) % MD] += longint'(acc.weight);
      end
      @(negedge clk) acc_valid = 0;
      sp_ready = ($urandom_range(0, 1) == 0);   // vary output pressure; latency checked when 1
      if (!sp_ready) fork begin repeat (3) @(negedge clk); sp_ready = 1; end join_none
      @(negedge clk) sp_ready = 1;
    end
    `CHECK(total_spikes > 20, "neurons fired")
    // sample clear: state and buffers zero
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    busy_cyc = 0;
    while (busy) begin busy_cyc++; @(negedge clk); end
    `CHECK(busy_cyc == DB*MD, "clear takes NPW/NPAR*MAX_DELAY cycles")
    for (int j = 0; j < DB; j++)
      `CHECK(dut.g_dp[0].st_mem[j].vm == 0 && dut.g_dp[1].st_mem[j].vm == 0, "state cleared")
    `TB_END
  end
endmodule
