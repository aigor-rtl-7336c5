// spike_arbiter -- merges the workers' spikes into the core's outgoing
// event stream and sends the core's sync event.
//
// Each worker offers the local index of a fired neuron on a valid/ready
// stream. A round-robin arbiter picks one worker per cycle; its spike is
// re-encoded into the global identifier ID_pre = <core_id, worker, neuron>
// and sent as a spike event (sync bit 0) tagged with the current timestep.
// When no worker offers a spike and sync_req is high, the sync event
// {1, ts, core_id} is sent instead and sync_ack pulses. The controller raises
// sync_req only after every worker has finished, so the sync is the last
// event of the timestep from this core.
// Timing: combinational from worker/sync requests to out_*, one event per
// cycle. Re-encoding and round-robin merging follow the source; the sync
// priority rule is this design's choice.
module spike_arbiter
  import aigor_pkg::*;
#(
  parameter int W = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [CORE_W-1:0]        core_id,
  input  logic [TIME_W-1:0]        ts,
  input  logic [W-1:0]             sp_valid,
  output logic [W-1:0]             sp_ready,
  input  logic [W-1:0][NID_W-1:0]  sp_n,
  input  logic                     sync_req,
  output logic                     sync_ack,
  output logic                     out_valid,
  input  logic                     out_ready,
  output event_t                   out_event
);
  localparam int GW = (W > 1) ? $clog2(W) : 1;
  logic [W-1:0]  gnt;
  logic [GW-1:0] gi;
  logic          any;

  rr_arbiter #(.N(W)) u_rr (.clk, .rst, .req(sp_valid), .accept(out_ready), .gnt, .gnt_idx(gi), .any);

  always_comb begin
    out_event       = '0;
    out_event.ts    = ts;
    out_event.id.core = core_id;
    sync_ack        = 1'b0;
    sp_ready        = gnt & {W{out_ready}};
    if (any) begin
      out_valid       = 1'b1;
      out_event.sync  = 1'b0;
      out_event.id.w  = WID_W'(gi);
      out_event.id.n  = sp_n[gi];
    end else begin
      out_valid       = sync_req;
      out_event.sync  = 1'b1;
      sync_ack        = sync_req && out_ready;
    end
  end

  assert property (@(posedge clk) disable iff (rst) (out_valid && !out_ready) |=> out_valid);
endmodule
