// aigor_node -- one FPGA node of the system: N_SNN SNN cores and N_IO I/O
// cores, each attached by an event port pair to the node's routing fabric.
//
// The cores exchange spike and sync events only through the fabric; the
// routing switch itself (intra-node and inter-node ports, routing tables,
// network link) is not part of this RTL, so every core's outgoing stream
// (tx_*) and incoming stream (rx_*) is a port of the node. Port index
// 0 .. N_SNN-1 are the SNN cores, N_SNN .. N_SNN+N_IO-1 the I/O cores. A
// fabric that delivers every event to every core (broadcast) gives the
// recurrent operating mode; delivery must keep the order of events from one
// sender to one receiver, because a core's sync(t) must follow its spikes of t.
// The host configures the cores through one configuration bus: a write goes
// to the core selected by cfg_sel, or to every core when cfg_bcast is set.
// `start` starts all cores together; `done` is high when all have finished
// REG_NUM_STEPS timesteps. I/O core results come out as rec_* (received
// spikes) and io_cnt (spike counters).
// The node composition (two SNN cores and two I/O cores) follows the
// source's per-FPGA organisation; bus and port arrangement are this design's.
module aigor_node
  import aigor_pkg::*;
#(
  parameter int N_SNN     = 2,
  parameter int N_IO      = 2,
  parameter int P         = 8,
  parameter int W         = 8,
  parameter int NPW       = 32,
  parameter int NPAR      = 32,
  parameter int MAX_DELAY = 16,
  parameter int ROWS      = 16384,
  parameter int NCNT      = 16,
  localparam int NC       = N_SNN + N_IO
) (
  input  logic                         clk,
  input  logic                         rst,
  input  cfg_t                         cfg,
  input  logic [3:0]                   cfg_sel,
  input  logic                         cfg_bcast,
  input  logic                         start,
  output logic                         done,
  output logic [NC-1:0][TIME_W-1:0]    core_ts,
  // fabric side
  output logic   [NC-1:0]              tx_valid,
  input  logic   [NC-1:0]              tx_ready,
  output event_t [NC-1:0]              tx_event,
  input  logic   [NC-1:0]              rx_valid,
  output logic   [NC-1:0]              rx_ready,
  input  event_t [NC-1:0]              rx_event,
  // host side of the I/O cores
  output logic   [N_IO-1:0]            rec_valid,
  output event_t [N_IO-1:0]            rec_event,
  output logic   [N_IO-1:0][NCNT-1:0][15:0] io_cnt
);
  logic [NC-1:0] c_done;
  assign done = &c_done;

  for (genvar c = 0; c < NC; c++) begin : g_core
    cfg_t ccfg;
    always_comb begin
      ccfg    = cfg;
      ccfg.we = cfg.we && (cfg_bcast || cfg_sel == 4'(c));
    end
    if (c < N_SNN) begin : g_snn
      snn_core #(.P(P), .W(W), .NPW(NPW), .NPAR(NPAR), .MAX_DELAY(MAX_DELAY), .ROWS(ROWS)) u_snn (
        .clk, .rst, .cfg(ccfg), .start, .done(c_done[c]), .cur_ts(core_ts[c]),
        .in_valid(rx_valid[c]), .in_ready(rx_ready[c]), .in_event(rx_event[c]),
        .out_valid(tx_valid[c]), .out_ready(tx_ready[c]), .out_event(tx_event[c]));
    end else begin : g_io
      io_core #(.NCNT(NCNT)) u_io (
        .clk, .rst, .cfg(ccfg), .start, .done(c_done[c]), .cur_ts(core_ts[c]),
        .in_valid(rx_valid[c]), .in_ready(rx_ready[c]), .in_event(rx_event[c]),
        .out_valid(tx_valid[c]), .out_ready(tx_ready[c]), .out_event(tx_event[c]),
        .rec_valid(rec_valid[c-N_SNN]), .rec_event(rec_event[c-N_SNN]), .cnt(io_cnt[c-N_SNN]));
    end
  end
endmodule
