// delay_buffer -- a worker's synaptic accumulator: one MAX_DELAY-slot
// circular delay line per (neuron, receptor).
//
// A contribution {n, r, delay, weight, ts} is added (read-modify-write, one
// per cycle) into slot (ts + delay) mod MAX_DELAY of neuron n's ring for
// receptor r, so that it surfaces delay timesteps after the spike that caused
// it. At the timestep boundary the worker reads the head slot
// (slot = timestep mod MAX_DELAY) of NPAR neurons per cycle: rd_data is
// combinational and the same slots are cleared at the clock edge. clr_en
// zeroes address clr_addr of every ring (sample reset, DEPTH_B*MAX_DELAY
// cycles for the whole buffer). Storage is split into NPAR banks (neuron n in
// bank n mod NPAR, row n div NPAR) times R receptors, each with one write
// port, so readout and clear touch every bank at once and accumulation never
// competes with them: acc_ready is low while rd_en or clr_en is high.
// Timing: acc accepted in cycle c is visible to a read in c+1.
// Legal delays are 1 .. MAX_DELAY-1; MAX_DELAY must be a power of two.
// The per-(neuron, receptor) ring follows the source; indexing by the spike's
// own timestep (instead of by the current head) and the banking are this
// design's choices.
module delay_buffer
  import aigor_pkg::*;
#(
  parameter int NPW       = 32,
  parameter int NPAR      = 32,
  parameter int R         = 2,
  parameter int MAX_DELAY = 16,
  localparam int DEPTH_B  = NPW / NPAR,
  localparam int IB       = (DEPTH_B > 1) ? $clog2(DEPTH_B) : 1,
  localparam int SLW      = $clog2(MAX_DELAY),
  localparam int BAW      = $clog2(DEPTH_B * MAX_DELAY)
) (
  input  logic                        clk,
  input  logic                        acc_valid,
  output logic                        acc_ready,
  input  acc_t                        acc,
  input  logic                        rd_en,
  input  logic [IB-1:0]               rd_idx,
  input  logic [SLW-1:0]              rd_slot,
  output fix_t [NPAR-1:0][R-1:0]      rd_data,
  input  logic                        clr_en,
  input  logic [BAW-1:0]              clr_addr
);
  localparam int KB = (NPAR > 1) ? $clog2(NPAR) : 1;

  logic [KB-1:0]  a_bank;
  logic [BAW-1:0] a_addr, r_addr;
  logic [SLW-1:0] a_slot;
  logic           a_we;
  logic [31:0]    a_row;

  assign acc_ready = !rd_en && !clr_en;
  assign a_we      = acc_valid && acc_ready;
  assign a_slot    = SLW'(acc.ts) + SLW'(acc.delay);
  assign a_bank    = (NPAR > 1) ? KB'(acc.n % NPAR) : '0;
  assign a_row     = int'(acc.n) / NPAR;
  assign a_addr    = BAW'(a_row * MAX_DELAY) + BAW'(a_slot);
  assign r_addr    = BAW'(int'(rd_idx) * MAX_DELAY) + BAW'(rd_slot);

  for (genvar k = 0; k < NPAR; k++) begin : g_bank
    for (genvar r = 0; r < R; r++) begin : g_rec
      fix_t mem [DEPTH_B*MAX_DELAY];
      assign rd_data[k][r] = mem[r_addr];
      always_ff @(posedge clk) begin
        if (clr_en)
          mem[clr_addr] <= '0;
        else if (rd_en)
          mem[r_addr] <= '0;
        else if (a_we && a_bank == KB'(k) && acc.r == RID_W'(r))
          mem[a_addr] <= mem[a_addr] + acc.weight;
      end
    end
  end

  initial assert ((1 << SLW) == MAX_DELAY && DEPTH_B * NPAR == NPW)
    else $error("delay_buffer: MAX_DELAY must be a power of two and NPAR divide NPW");

  assert property (@(posedge clk) a_we |-> (acc.delay != 0 && int'(acc.delay) < MAX_DELAY));
endmodule
