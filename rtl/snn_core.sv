// snn_core -- one SNN processing core: receives spike/sync events from the
// fabric, delivers each spike's fanout to the workers hosting its targets,
// advances all its neurons once per timestep and sends its own spikes and
// sync event back to the fabric.
//
// Data path: event_decoder (spike/sync split, ID_pre -> fanout row, barrier
// counting) -> memory_handler reading synaptic_memory (P lanes of synapse
// words) -> synapse_router (per-worker FIFOs, round-robin merge) -> W workers
// (delay buffers, neuron state, NPAR datapaths each) -> spike_arbiter
// (round-robin, ID_pre re-encoding, sync) -> fabric.
// Timestep controller, per timestep t:
//   UPD   start all workers on slot t, wait until every worker has emitted
//         its spikes (tagged t);
//   SYNC  send sync(t);
//   WAIT  wait for the barrier token of t (all exp_sync syncs of t seen,
//         queued behind every spike of t), then for the handler and router to
//         drain, so every spike of t is accumulated; then t = t+1.
// Spikes of t+1 from faster cores may arrive during WAIT; they are written
// by their own timestep and so land in the right slot. After REG_NUM_STEPS
// timesteps the core stops with done = 1. A nonzero REG_WINDOW resets neuron
// states and delay buffers every WINDOW timesteps (sample boundary): the
// reset is done after the update of a window's last timestep and before this
// core's sync, so no spike of the next sample can have arrived; spikes of
// the old sample still in flight are dropped by the workers (their timestep
// is older than sample_start). `start` always resets first.
// Host interface: cfg bus writes core registers (CFG_REGS), the ID_pre table
// (CFG_ADDRT), synaptic-memory slots (CFG_SYNMEM, addr = row*P + slot) and the
// neuron parameters shared by all workers (CFG_NEURON).
// The structure follows the source's core diagram; the controller phases,
// the drain condition and the register map are this design's choices.
module snn_core
  import aigor_pkg::*;
#(
  parameter int P         = 8,
  parameter int W         = 8,
  parameter int NPW       = 32,
  parameter int NPAR      = 32,
  parameter int R         = 2,
  parameter int MAX_DELAY = 16,
  parameter int ROWS      = 16384,
  parameter int SRC_CB    = 3,
  parameter int SRC_WB    = 5,
  parameter int SRC_NB    = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic              start,
  output logic              done,
  output logic [TIME_W-1:0] cur_ts,
  input  logic              in_valid,
  output logic              in_ready,
  input  event_t            in_event,
  output logic              out_valid,
  input  logic              out_ready,
  output event_t            out_event
);
  localparam int ROW_AW = $clog2(ROWS);
  localparam int PB     = (P > 1) ? $clog2(P) : 1;

  // ---------------- registers ----------------
  logic [CORE_W-1:0] exp_sync, core_id;
  logic [TIME_W-1:0] num_steps, window, win_cnt, sample_start;
  nparams_t          prm;

  always_ff @(posedge clk) begin
    if (rst) begin
      exp_sync  <= CORE_W'(1);
      core_id   <= '0;
      num_steps <= '0;
      window    <= '0;
      prm       <= '0;
    end else if (cfg.we) begin
      if (cfg.region == CFG_REGS) begin
        case (cfg.addr[3:0])
          REG_EXP_SYNC:  exp_sync  <= cfg.data[CORE_W-1:0];
          REG_NUM_STEPS: num_steps <= cfg.data[TIME_W-1:0];
          REG_WINDOW:    window    <= cfg.data[TIME_W-1:0];
          REG_CORE_ID:   core_id   <= cfg.data[CORE_W-1:0];
          default: ;
        endcase
      end else if (cfg.region == CFG_NEURON) begin
        case (cfg.addr[3:0])
          NP_MODEL:  prm.model  <= nmodel_e'(cfg.data[1:0]);
          NP_DECAY:  prm.decay  <= fix_t'(cfg.data[DATA_W-1:0]);
          NP_THR:    prm.thr    <= fix_t'(cfg.data[DATA_W-1:0]);
          NP_VRESET: prm.vreset <= fix_t'(cfg.data[DATA_W-1:0]);
          NP_TREF:   prm.tref   <= cfg.data[7:0];
          NP_IEXT:   prm.iext   <= fix_t'(cfg.data[DATA_W-1:0]);
          default: ;
        endcase
      end
    end
  end

  // ---------------- event decoder ----------------
  logic              rq_valid, rq_ready, rq_token, dropped;
  logic [TIME_W-1:0] rq_ts;
  logic [ROW_AW-1:0] rq_row;

  event_decoder #(.SRC_CB(SRC_CB), .SRC_WB(SRC_WB), .SRC_NB(SRC_NB), .ROW_AW(ROW_AW)) u_dec (
    .clk, .rst, .cfg, .exp_sync, .cur_ts,
    .in_valid, .in_ready, .in_event,
    .out_valid(rq_valid), .out_ready(rq_ready), .out_token(rq_token),
    .out_ts(rq_ts), .out_row(rq_row), .dropped);

  // ---------------- synaptic memory + handler ----------------
  logic                     mem_re;
  logic [ROW_AW-1:0]        mem_raddr;
  logic [P-1:0][SLOT_W-1:0] mem_rdata;

  synaptic_memory #(.P(P), .ROWS(ROWS)) u_mem (
    .clk,
    .wr_en(cfg.we && cfg.region == CFG_SYNMEM),
    .wr_row(ROW_AW'(cfg.addr >> PB)), .wr_slot(cfg.addr[PB-1:0]), .wr_data(cfg.data),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  logic              ln_valid, ln_ready, barrier, h_idle;
  logic [P-1:0]      ln_mask;
  syn_word_t [P-1:0] ln_words;
  logic [TIME_W-1:0] ln_ts;

  memory_handler #(.P(P), .ROW_AW(ROW_AW)) u_hdl (
    .clk, .rst,
    .req_valid(rq_valid), .req_ready(rq_ready), .req_token(rq_token), .req_ts(rq_ts), .req_row(rq_row),
    .mem_re, .mem_raddr, .mem_rdata,
    .out_valid(ln_valid), .out_ready(ln_ready), .out_mask(ln_mask), .out_words(ln_words), .out_ts(ln_ts),
    .barrier, .idle(h_idle));

  // ---------------- router ----------------
  logic [W-1:0] acc_valid, acc_ready;
  acc_t [W-1:0] acc;
  logic         r_empty;

  synapse_router #(.P(P), .W(W), .NPW(NPW), .R(R)) u_rt (
    .clk, .rst,
    .in_valid(ln_valid), .in_ready(ln_ready), .in_mask(ln_mask), .in_words(ln_words), .in_ts(ln_ts),
    .acc_valid, .acc_ready, .acc, .empty(r_empty));

  // ---------------- workers ----------------
  logic                    w_start, w_clear;
  logic [W-1:0]            w_busy, sp_valid, sp_ready;
  logic [W-1:0][NID_W-1:0] sp_n;

  for (genvar w = 0; w < W; w++) begin : g_w
    worker #(.NPW(NPW), .NPAR(NPAR), .R(R), .MAX_DELAY(MAX_DELAY)) u_w (
      .clk, .rst, .prm,
      .acc_valid(acc_valid[w]), .acc_ready(acc_ready[w]), .acc(acc[w]),
      .start(w_start), .ts(cur_ts), .sample_start, .clear(w_clear), .busy(w_busy[w]),
      .sp_valid(sp_valid[w]), .sp_ready(sp_ready[w]), .sp_n(sp_n[w]));
  end

  // ---------------- output arbiter ----------------
  logic sync_req, sync_ack;

  spike_arbiter #(.W(W)) u_arb (
    .clk, .rst, .core_id, .ts(cur_ts),
    .sp_valid, .sp_ready, .sp_n, .sync_req, .sync_ack,
    .out_valid, .out_ready, .out_event);

  // ---------------- timestep controller ----------------
  typedef enum logic [3:0] {C_IDLE, C_CLR, C_CLRW, C_UPD, C_UPDW, C_BCLR, C_BCLRW,
                            C_SYNC, C_WAIT, C_DONE} cstate_e;
  cstate_e cs;
  logic    barrier_seen;
  logic    win_end;

  assign w_clear  = (cs == C_CLR) || (cs == C_BCLR);
  assign w_start  = (cs == C_UPD);
  assign sync_req = (cs == C_SYNC);
  assign done     = (cs == C_DONE);
  assign win_end  = (window != 0) && (win_cnt + 1'b1 == window) && (cur_ts + 1'b1 != num_steps);

  always_ff @(posedge clk) begin
    if (rst) begin
      cs           <= C_IDLE;
      cur_ts       <= '0;
      win_cnt      <= '0;
      sample_start <= '0;
      barrier_seen <= 1'b0;
    end else begin
      if (barrier) barrier_seen <= 1'b1;
      case (cs)
        C_IDLE, C_DONE: if (start) begin
          cs           <= C_CLR;
          cur_ts       <= '0;
          win_cnt      <= '0;
          sample_start <= '0;
        end
        C_CLR:  cs <= C_CLRW;
        C_CLRW: if (w_busy == 0) cs <= C_UPD;
        C_UPD:  cs <= C_UPDW;
        // last timestep of a sample window: reset before this core's sync,
        // so nothing of the next sample can have arrived yet
        C_UPDW: if (w_busy == 0) cs <= win_end ? C_BCLR : C_SYNC;
        C_BCLR: begin
          cs           <= C_BCLRW;
          sample_start <= cur_ts + 1'b1;
        end
        C_BCLRW: if (w_busy == 0) cs <= C_SYNC;
        C_SYNC: if (sync_ack) cs <= C_WAIT;
        C_WAIT: if ((barrier_seen || barrier) && h_idle && r_empty) begin
          barrier_seen <= 1'b0;
          cur_ts       <= cur_ts + 1'b1;
          win_cnt      <= (window != 0 && win_cnt + 1'b1 == window) ? '0 : win_cnt + 1'b1;
          cs           <= (cur_ts + 1'b1 == num_steps) ? C_DONE : C_UPD;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
endmodule
