// bcast_switch_model -- behavioural stand-in for the routing fabric, used by
// testbenches only. Every event accepted from any port is delivered to every
// port (broadcast, the recurrent operating mode), in order per sender and
// receiver. One event is accepted per cycle, round robin over the senders,
// and only when every receive queue has room. Each receiver drains its queue
// at its own random pace (JITTER = 1) so that cores see each other's events
// at different times, as on a real fabric.
module bcast_switch_model
  import aigor_pkg::*;
#(
  parameter int N      = 2,
  parameter int QDEPTH = 64,
  parameter bit JITTER = 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic   [N-1:0]  tx_valid,
  output logic   [N-1:0]  tx_ready,
  input  event_t [N-1:0]  tx_event,
  output logic   [N-1:0]  rx_valid,
  input  logic   [N-1:0]  rx_ready,
  output event_t [N-1:0]  rx_event
);
  event_t q [N][$];
  int     ptr = 0;
  logic [N-1:0] hold;
  int     sel;
  bit     room;
  int     delivered = 0;

  always_comb begin
    room = 1;
    for (int d = 0; d < N; d++) if (q[d].size() >= QDEPTH) room = 0;
    sel = -1;
    for (int k = 0; k < N; k++) if (sel < 0 && tx_valid[(ptr + k) % N]) sel = (ptr + k) % N;
    tx_ready = '0;
    if (room && sel >= 0) tx_ready[sel] = 1'b1;
    for (int d = 0; d < N; d++) begin
      rx_valid[d] = (q[d].size() > 0) && !hold[d];
      rx_event[d] = (q[d].size() > 0) ? q[d][0] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int d = 0; d < N; d++) q[d].delete();
      ptr  <= 0;
      hold <= '0;
    end else begin
      for (int d = 0; d < N; d++) if (rx_valid[d] && rx_ready[d]) begin
        void'(q[d].pop_front());
        delivered <= delivered + 1;
      end
      if (room && sel >= 0) begin
        for (int d = 0; d < N; d++) q[d].push_back(tx_event[sel]);
        ptr <= (sel + 1) % N;
      end
      for (int d = 0; d < N; d++) hold[d] <= JITTER ? ($urandom_range(0, 3) == 0) : 1'b0;
    end
  end
endmodule
