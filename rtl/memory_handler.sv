// memory_handler -- streams the fanout of each incoming spike out of the
// synaptic memory onto P synapse lanes.
//
// Fanout requests {token, ts, row} from the event decoder are queued in a
// QDEPTH-entry FIFO. For a spike request the handler reads the header row
// (slot 0 holds the fanout count), then reads the ceil(fanout/P) rows that
// follow it and presents each as P lane words with a lane-valid mask (the
// last row may be partial) and the spike's timestep, on a valid/ready stream
// to the synapse router. A token request marks the end of a timestep's
// traffic: when it is dequeued, every row of that timestep has been issued,
// and the handler pulses `barrier` for one cycle.
// Timing: a spike costs 1 cycle for the header read, 1 cycle to decode it,
// then one row per cycle while the router accepts; a held (not accepted) row
// keeps the memory read enable low, so its data stays on the read port.
// Streaming one fanout per spike over P lanes follows the source; the queue,
// the row layout and the barrier pulse are this design's choices.
module memory_handler
  import aigor_pkg::*;
#(
  parameter int P      = 8,
  parameter int ROW_AW = 14,
  parameter int QDEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst,
  // fanout requests
  input  logic                      req_valid,
  output logic                      req_ready,
  input  logic                      req_token,
  input  logic [TIME_W-1:0]         req_ts,
  input  logic [ROW_AW-1:0]         req_row,
  // synaptic memory read port
  output logic                      mem_re,
  output logic [ROW_AW-1:0]         mem_raddr,
  input  logic [P-1:0][SLOT_W-1:0]  mem_rdata,
  // synapse lanes
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [P-1:0]              out_mask,
  output syn_word_t [P-1:0]         out_words,
  output logic [TIME_W-1:0]         out_ts,
  // status
  output logic                      barrier,
  output logic                      idle
);
  localparam int QW = 1 + TIME_W + ROW_AW;

  logic              q_valid, q_ready, q_empty;
  logic [QW-1:0]     q_data;
  logic              q_token;
  logic [TIME_W-1:0] q_ts;
  logic [ROW_AW-1:0] q_row;

  sync_fifo #(.WIDTH(QW), .DEPTH(QDEPTH)) u_q (
    .clk, .rst,
    .in_valid(req_valid), .in_ready(req_ready), .in_data({req_token, req_ts, req_row}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .empty(q_empty));
  assign {q_token, q_ts, q_row} = q_data;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_STREAM} state_e;
  state_e state;

  logic [ROW_AW-1:0]   next_row;
  logic [FANOUT_W-1:0] remaining;
  logic [TIME_W-1:0]   cur_ts;
  syn_hdr_t            hdr;
  logic                fire;

  assign hdr       = syn_hdr_t'(mem_rdata[0]);
  assign fire      = out_valid && out_ready;
  assign out_valid = (state == S_STREAM);
  assign out_ts    = cur_ts;
  assign idle      = (state == S_IDLE) && q_empty;

  always_comb begin
    for (int p = 0; p < P; p++) begin
      out_words[p] = syn_word_t'(mem_rdata[p]);
      out_mask[p]  = (FANOUT_W'(p) < remaining);
    end
  end

  always_comb begin
    q_ready   = 1'b0;
    mem_re    = 1'b0;
    mem_raddr = next_row;
    barrier   = 1'b0;
    case (state)
      S_IDLE: if (q_valid) begin
        q_ready = 1'b1;
        if (q_token) barrier = 1'b1;
        else begin
          mem_re    = 1'b1;
          mem_raddr = q_row;
        end
      end
      S_HDR: mem_re = (hdr.fanout != 0);
      S_STREAM: mem_re = fire && (remaining > FANOUT_W'(P));
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      next_row  <= '0;
      remaining <= '0;
      cur_ts    <= '0;
    end else begin
      case (state)
        S_IDLE: if (q_valid && !q_token) begin
          state    <= S_HDR;
          next_row <= q_row + 1'b1;
          cur_ts   <= q_ts;
        end
        S_HDR: begin
          remaining <= hdr.fanout;
          if (hdr.fanout != 0) begin
            state    <= S_STREAM;
            next_row <= next_row + 1'b1;
          end else state <= S_IDLE;
        end
        S_STREAM: if (fire) begin
          if (remaining > FANOUT_W'(P)) begin
            remaining <= remaining - FANOUT_W'(P);
            next_row  <= next_row + 1'b1;
          end else begin
            remaining <= '0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a presented row may not change until it is accepted
  assert property (@(posedge clk) disable iff (rst)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_mask) && $stable(out_words)));
endmodule
