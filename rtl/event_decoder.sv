// event_decoder -- front end of an SNN core: spike/sync split, ID_pre to
// synaptic-memory address translation, and the per-timestep sync barrier.
//
// Events arrive from the fabric on a valid/ready stream. A spike event's
// ID_pre is translated through a host-written table into the row of its
// fanout header in the synaptic memory and forwarded as a fanout request
// {token=0, ts, row}; a source with no target on this core (table valid bit
// clear) is dropped. A sync event increments one of two counters selected by
// the parity of its timestep; when the counter of the core's current timestep
// reaches exp_sync (all senders, this core included) a request with token=1
// ("start workers" token) is forwarded behind every spike of that timestep
// and the counter is cleared. Two counters are needed because a faster core
// may already have sent its sync for t+1 while this core still waits for the
// last sync of t; no sender can run two steps ahead, since each step needs
// this core's own sync. The table index is {ID_core, ID_W, ID_n} cut to
// SRC_CB/SRC_WB/SRC_NB low bits. Host writes to region CFG_ADDRT: data bit
// ROW_AW is the valid bit, data[ROW_AW-1:0] the header row.
// Timing: combinational from in_* to out_* (table read is asynchronous), one
// event per cycle. The spike/sync split, the translation and the "last
// sync?" test follow the source's core diagram; the table organisation and
// the parity counters are this design's choices.
module event_decoder
  import aigor_pkg::*;
#(
  parameter int SRC_CB = 3,
  parameter int SRC_WB = 5,
  parameter int SRC_NB = 7,
  parameter int ROW_AW = 14
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic [CORE_W-1:0] exp_sync,
  input  logic [TIME_W-1:0] cur_ts,
  input  logic              in_valid,
  output logic              in_ready,
  input  event_t            in_event,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              out_token,
  output logic [TIME_W-1:0] out_ts,
  output logic [ROW_AW-1:0] out_row,
  output logic              dropped      // pulse: spike without local targets
);
  localparam int SRC_AW = SRC_CB + SRC_WB + SRC_NB;

  logic [ROW_AW-1:0] row_tbl [2**SRC_AW];
  logic [2**SRC_AW-1:0] row_vld;
  logic [CORE_W-1:0] sync_cnt [2];

  logic [SRC_AW-1:0] sidx;
  logic par, last_sync;

  assign sidx = {in_event.id.core[SRC_CB-1:0], in_event.id.w[SRC_WB-1:0], in_event.id.n[SRC_NB-1:0]};
  assign par  = in_event.ts[0];
  assign last_sync = in_event.sync && (par == cur_ts[0]) && (sync_cnt[par] + 1'b1 == exp_sync);

  always_comb begin
    out_token = 1'b0;
    out_ts    = in_event.ts;
    out_row   = row_tbl[sidx];
    out_valid = 1'b0;
    in_ready  = 1'b1;
    dropped   = 1'b0;
    if (in_valid) begin
      if (in_event.sync) begin
        if (last_sync) begin
          out_valid = 1'b1;
          out_token = 1'b1;
          in_ready  = out_ready;
        end
      end else if (row_vld[sidx]) begin
        out_valid = 1'b1;
        in_ready  = out_ready;
      end else begin
        dropped = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.region == CFG_ADDRT)
      row_tbl[cfg.addr[SRC_AW-1:0]] <= cfg.data[ROW_AW-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      row_vld     <= '0;
      sync_cnt[0] <= '0;
      sync_cnt[1] <= '0;
    end else begin
      if (cfg.we && cfg.region == CFG_ADDRT)
        row_vld[cfg.addr[SRC_AW-1:0]] <= cfg.data[ROW_AW];
      if (in_valid && in_ready && in_event.sync)
        sync_cnt[par] <= last_sync ? '0 : sync_cnt[par] + 1'b1;
    end
  end

  // a sync for a timestep other than t or t+1 breaks the barrier protocol
  assert property (@(posedge clk) disable iff (rst)
    (in_valid && in_event.sync) |-> (in_event.ts == cur_ts || in_event.ts == cur_ts + 1'b1));
endmodule
