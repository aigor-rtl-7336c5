// worker -- hosts NPW neurons of a core: accumulator, neuron-state memory,
// NPAR neuron datapaths and the spike re-encoder.
//
// Between timestep boundaries the worker accepts one synaptic contribution
// per cycle from the synapse router into its delay buffer. A `start` pulse
// with timestep ts opens the update: for DEPTH_B = NPW/NPAR cycles the NPAR
// datapaths each take one neuron (neuron i*NPAR+k in cycle i on datapath k),
// read its state and the head slot ts mod MAX_DELAY of its excitatory and
// inhibitory rings, clear that slot, and write back the new state. NPAR = NPW
// is the spatial organisation (all neurons in one cycle), NPAR = 1 the
// time-multiplexed one (one datapath folded over all neurons). Fired neurons
// set a flag; after the update the flags are emitted lowest index first, one
// local neuron index per cycle, on a valid/ready stream (the core turns them
// into ID_pre). `busy` stays high from `start` until the last spike has been
// taken. A `clear` pulse (sample boundary) zeroes the neuron states and the
// whole delay buffer in DEPTH_B*MAX_DELAY cycles. Accumulation is stalled
// during update and clear. Contributions whose spike timestep is older than
// sample_start (spikes of the previous sample) are accepted and discarded.
// Timing: update DEPTH_B cycles + one cycle per spike; clear DEPTH_B*MAX_DELAY.
// The worker's parts and the spatial/time-multiplexed folding follow the
// source; the phase order and the flag-based spike emission are this
// design's choices.
module worker
  import aigor_pkg::*;
#(
  parameter int NPW       = 32,
  parameter int NPAR      = 32,
  parameter int R         = 2,
  parameter int MAX_DELAY = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  nparams_t          prm,
  input  logic              acc_valid,
  output logic              acc_ready,
  input  acc_t              acc,
  input  logic              start,
  input  logic [TIME_W-1:0] ts,
  input  logic [TIME_W-1:0] sample_start,
  input  logic              clear,
  output logic              busy,
  output logic              sp_valid,
  input  logic              sp_ready,
  output logic [NID_W-1:0]  sp_n
);
  localparam int DEPTH_B = NPW / NPAR;
  localparam int IB      = (DEPTH_B > 1) ? $clog2(DEPTH_B) : 1;
  localparam int SLW     = $clog2(MAX_DELAY);
  localparam int BAW     = $clog2(DEPTH_B * MAX_DELAY);
  localparam int NB      = (NPW > 1) ? $clog2(NPW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_UPD, S_EMIT} state_e;
  state_e state;

  logic [IB-1:0]  idx;
  logic [BAW-1:0] caddr;
  logic [SLW-1:0] slot;
  logic [NPW-1:0] fired;
  fix_t [NPAR-1:0][R-1:0] head;

  // contributions of spikes from before the current sample are discarded
  logic acc_stale;
  assign acc_stale = (acc.ts < sample_start);

  logic acc_ready_buf;
  delay_buffer #(.NPW(NPW), .NPAR(NPAR), .R(R), .MAX_DELAY(MAX_DELAY)) u_buf (
    .clk,
    .acc_valid(acc_valid && !rst && !acc_stale && state != S_UPD), .acc_ready(acc_ready_buf), .acc,
    .rd_en(state == S_UPD), .rd_idx(idx), .rd_slot(slot), .rd_data(head),
    .clr_en(state == S_CLEAR), .clr_addr(caddr));
  assign acc_ready = acc_ready_buf && (state != S_UPD);

  // NPAR neuron datapaths
  nstate_t [NPAR-1:0] st_nx;
  logic    [NPAR-1:0] spk;
  for (genvar k = 0; k < NPAR; k++) begin : g_dp
    nstate_t st_mem [DEPTH_B];
    fix_t inh;
    if (R > 1) begin : g_inh
      assign inh = head[k][REC_INH];
    end else begin : g_noinh
      assign inh = '0;
    end
    neuron_dynamics u_nd (
      .prm, .st(st_mem[idx]), .in_exc(head[k][REC_EXC]), .in_inh(inh),
      .st_next(st_nx[k]), .spike(spk[k]));
    always_ff @(posedge clk) begin
      if (state == S_CLEAR && int'(caddr) < DEPTH_B)
        st_mem[IB'(caddr)] <= '0;
      else if (state == S_UPD)
        st_mem[idx] <= st_nx[k];
    end
  end

  // lowest fired neuron
  always_comb begin
    sp_n = '0;
    for (int n = NPW-1; n >= 0; n--) if (fired[n]) sp_n = NID_W'(n);
  end
  assign sp_valid = (state == S_EMIT) && (fired != 0);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      idx   <= '0;
      caddr <= '0;
      slot  <= '0;
      fired <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          idx   <= '0;
          caddr <= '0;
          if (clear) state <= S_CLEAR;
          else if (start) begin
            state <= S_UPD;
            slot  <= SLW'(ts);
            fired <= '0;
          end
        end
        S_CLEAR: begin
          caddr <= caddr + 1'b1;
          if (int'(caddr) == DEPTH_B*MAX_DELAY-1) state <= S_IDLE;
        end
        S_UPD: begin
          for (int k = 0; k < NPAR; k++)
            if (spk[k]) fired[int'(idx)*NPAR + k] <= 1'b1;
          idx <= idx + 1'b1;
          if (int'(idx) == DEPTH_B-1) state <= S_EMIT;
        end
        S_EMIT: begin
          if (sp_valid && sp_ready) fired[sp_n[NB-1:0]] <= 1'b0;
          if (fired == 0 || (sp_ready && $countones(fired) == 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(start && clear));
endmodule
