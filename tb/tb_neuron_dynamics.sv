// tb_neuron_dynamics -- the kernel against an independent reference written
// with 64-bit integers: random states, inputs and parameters for both models,
// plus directed cases (LIF subtraction reset, IAF refractory hold, IAF with
// decay 1.0 as plain integrate-and-fire).
`include "tb_check.svh"
module tb_neuron_dynamics;
  import aigor_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 100000)

  nparams_t prm; nstate_t st, st_next; fix_t in_exc, in_inh; logic spike;
  neuron_dynamics dut (.*);

  localparam longint ONE = 64'd1 << 20;
  longint v, vn; bit es; int etr;

  task automatic ref_model();
    longint leak;
    leak = (longint'(prm.decay) * longint'(st.vm)) >>> 20;
    vn = leak + longint'(prm.iext) + longint'(in_exc) + longint'(in_inh);
    etr = 0; es = 0;
    if (prm.model == NM_LIF_SUB) begin
      if (longint'(st.vm) > longint'(prm.thr)) vn -= longint'(prm.thr);
      es = (fix_t'(vn) > prm.thr);
    end else begin
      if (st.tr != 0) begin etr = int'(st.tr) - 1; vn = longint'(prm.vreset); end
      else if (fix_t'(vn) >= prm.thr) begin es = 1; vn = longint'(prm.vreset); etr = int'(prm.tref); end
    end
  endtask

  task automatic cmp(string what);
    #1; ref_model();
    `CHECK(spike == es, {what, ": spike"})
    `CHECK(st_next.vm == fix_t'(vn), {what, ": membrane"})
    `CHECK(int'(st_next.tr) == etr, {what, ": refractory counter"})
    `CHECK(st_next.iexc == in_exc && st_next.iinh == in_inh, {what, ": stored currents"})
  endtask

  int nspk = 0, nref = 0;
  initial begin
    for (int k = 0; k < 4000; k++) begin
      prm.model  = (k % 2) ? NM_IAF_DELTA : NM_LIF_SUB;
      prm.decay  = fix_t'($urandom_range(0, 32'h100000));
      prm.thr    = fix_t'($urandom_range(32'h080000, 32'h200000));
      prm.vreset = fix_t'($urandom_range(0, 32'h40000));
      prm.tref   = 8'($urandom_range(0, 20));
      prm.iext   = fix_t'($urandom_range(0, 32'h20000));
      st.vm   = fix_t'($urandom_range(0, 32'h300000)) - fix_t'(32'h100000);
      st.tr   = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(1, 20)) : 8'd0;
      st.iexc = fix_t'($urandom); st.iinh = fix_t'($urandom);
      in_exc  = fix_t'($urandom_range(0, 32'h100000));
      in_inh  = -fix_t'($urandom_range(0, 32'h80000));
      cmp("random");
      if (spike) nspk++;
      if (st.tr != 0 && prm.model == NM_IAF_DELTA) nref++;
    end
    `CHECK(nspk > 100 && nref > 100, "random cases covered spikes and refractory steps")
    // directed: LIF, V=1.5 > thr=1.0, beta=0.5, no input -> V' = 0.75-1.0 = -0.25, no spike
    prm = '0; prm.model = NM_LIF_SUB; prm.decay = fix_t'(ONE/2); prm.thr = fix_t'(ONE);
    st = '0; st.vm = fix_t'(3*ONE/2); in_exc = 0; in_inh = 0;
    #1 `CHECK(st_next.vm == -fix_t'(ONE/4) && !spike, "LIF reset by subtraction")
    // directed: IAF decay 1.0, V=0.9, input 0.2 -> spike, V=vreset, Tr=tref
    prm.model = NM_IAF_DELTA; prm.decay = fix_t'(ONE); prm.vreset = 0; prm.tref = 8'd3;
    st = '0; st.vm = fix_t'(ONE*9/10); in_exc = fix_t'(ONE/5);
    #1 `CHECK(spike && st_next.vm == 0 && st_next.tr == 3, "IAF fires, resets and goes refractory")
    st = st_next; in_exc = fix_t'(4*ONE);
    #1 `CHECK(!spike && st_next.vm == 0 && st_next.tr == 2, "refractory neuron ignores input")
    `TB_END
  end
endmodule
