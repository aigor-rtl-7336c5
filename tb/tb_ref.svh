`ifndef TB_REF_SVH
`define TB_REF_SVH
// tb_ref.svh (package tb_ref_pkg) -- reference model and memory-image builder shared by the core
// and node testbenches.
//
// ref_net is a behavioural spiking network: NN neurons with the same two
// neuron models as the hardware (64-bit integer arithmetic on the 32-bit
// fixed-point values), per-(neuron, receptor) delay rings of MD slots, and a
// connectivity list per source key (neuron g, or EXT_BASE + i for external
// source i). Per timestep t: update(t) returns the neurons that fire; then
// deliver(src, t) for every spike of t adds its weights into slot t + delay.
// build_image() turns the connectivity of the neurons hosted on one SNN core
// into that core's host writes: ID_pre table, fanout headers, synapse rows.
package tb_ref_pkg;
  import aigor_pkg::*;

  localparam int EXT_BASE = 1 << 20;

  typedef struct { int dst; int r; int d; longint w; } syn_s;

  class ref_net;
    int NN, MD, W, NPW;
    nparams_t prm;
    longint vm [];
    int     tr [];
    longint bufm [][2][];
    syn_s   fan [int][$];

    function new(int nn, int md, int w, int npw);
      NN = nn; MD = md; W = w; NPW = npw;
      vm = new[nn]; tr = new[nn]; bufm = new[nn];
      foreach (bufm[i]) begin bufm[i][0] = new[md]; bufm[i][1] = new[md]; end
      reset();
    endfunction

    function void reset();
      foreach (vm[i]) begin
        vm[i] = 0; tr[i] = 0;
        for (int s = 0; s < MD; s++) begin bufm[i][0][s] = 0; bufm[i][1][s] = 0; end
      end
    endfunction

    function void add_syn(int src, int dst, int r, int d, longint w);
      syn_s s; s.dst = dst; s.r = r; s.d = d; s.w = w;
      fan[src].push_back(s);
    endfunction

    function void deliver(int src, int t);
      if (fan.exists(src))
        foreach (fan[src][k]) begin
          automatic syn_s s = fan[src][k];
          bufm[s.dst][s.r][(t + s.d) % MD] += s.w;
        end
    endfunction

    function void update(int t, ref int spk[$]);
      spk.delete();
      for (int n = 0; n < NN; n++) begin
        longint i_in, v;
        i_in = bufm[n][0][t % MD] + bufm[n][1][t % MD];
        bufm[n][0][t % MD] = 0; bufm[n][1][t % MD] = 0;
        v = ((longint'(prm.decay) * vm[n]) >>> 20) + longint'(prm.iext) + i_in;
        if (prm.model == NM_LIF_SUB) begin
          if (vm[n] > longint'(prm.thr)) v -= longint'(prm.thr);
          vm[n] = longint'(fix_t'(v));
          if (vm[n] > longint'(prm.thr)) spk.push_back(n);
        end else begin
          if (tr[n] > 0) begin tr[n]--; vm[n] = longint'(prm.vreset); end
          else if (fix_t'(v) >= prm.thr) begin
            spk.push_back(n); vm[n] = longint'(prm.vreset); tr[n] = int'(prm.tref);
          end else vm[n] = longint'(fix_t'(v));
        end
      end
    endfunction

    // global neuron index <-> (core, worker, neuron)
    function int core_of(int g); return g / (W*NPW); endfunction
    function int w_of(int g);    return (g % (W*NPW)) / NPW; endfunction
    function int n_of(int g);    return g % NPW; endfunction
    function int g_of(int c, int w, int n); return c*W*NPW + w*NPW + n; endfunction

    // host writes for SNN core `core`; sources are given as key + ID_pre
    function void build_image(int core, int P, int row_aw, int cb, int wb, int nb,
                              int src_keys[$], idpre_t src_ids[$], ref cfg_t wq[$], output int rows_used);
      int row = 0;
      foreach (src_keys[k]) begin
        syn_s loc [$];
        cfg_t c;
        syn_hdr_t h;
        int idx;
        if (fan.exists(src_keys[k]))
          foreach (fan[src_keys[k]][j]) if (core_of(fan[src_keys[k]][j].dst) == core) loc.push_back(fan[src_keys[k]][j]);
        if (loc.size() == 0) continue;
        idx = (int'(src_ids[k].core) % (1 << cb)) << (wb + nb) | (int'(src_ids[k].w) % (1 << wb)) << nb |
              (int'(src_ids[k].n) % (1 << nb));
        c = '0; c.we = 1; c.region = CFG_ADDRT; c.addr = CFG_AW'(idx);
        c.data = SLOT_W'(row); c.data[row_aw] = 1'b1;
        wq.push_back(c);
        h = '0; h.fanout = FANOUT_W'(loc.size()); h.id = src_ids[k];
        c = '0; c.we = 1; c.region = CFG_SYNMEM; c.addr = CFG_AW'(row * P); c.data = SLOT_W'(h);
        wq.push_back(c);
        foreach (loc[j]) begin
          syn_word_t sw;
          sw = '0;
          sw.post.w = WID_W'(w_of(loc[j].dst)); sw.post.n = NID_W'(n_of(loc[j].dst));
          sw.post.r = RID_W'(loc[j].r); sw.delay = DELAY_W'(loc[j].d); sw.weight = WEIGHT_W'(loc[j].w);
          c = '0; c.we = 1; c.region = CFG_SYNMEM; c.addr = CFG_AW'((row + 1 + j / P) * P + j % P);
          c.data = SLOT_W'(sw);
          wq.push_back(c);
        end
        row += 1 + (loc.size() + P - 1) / P;
      end
      rows_used = row;
    endfunction
  endclass
endpackage
`endif
