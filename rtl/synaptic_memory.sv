// synaptic_memory -- per-core store of the mapped connectivity.
//
// ROWS rows of P slots, each slot one 67-bit synapse word (ID_post, delay,
// weight) or, in the first row of a source's list, its fanout header
// (fanout count, ID_pre). The host writes one slot per cycle through wr_*;
// slot address = row*P + slot. The read port returns a whole row so that the
// memory handler can feed all P synapse lanes at once. Read is synchronous:
// with re = 1 in cycle c, rdata holds row raddr from cycle c+1 on, and keeps
// it while re = 0. Contents are not reset. The source keeps this memory in
// on-chip URAM; it is written here as an array so synthesis maps it to
// block RAM. The row-of-P-slots layout is this design's choice.
module synaptic_memory
  import aigor_pkg::*;
#(
  parameter int P      = 8,
  parameter int ROWS   = 16384,
  parameter int ROW_AW = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [ROW_AW-1:0]         wr_row,
  input  logic [$clog2(P)-1:0]      wr_slot,
  input  logic [SLOT_W-1:0]         wr_data,
  input  logic                      re,
  input  logic [ROW_AW-1:0]         raddr,
  output logic [P-1:0][SLOT_W-1:0]  rdata
);
  for (genvar s = 0; s < P; s++) begin : g_bank
    logic [SLOT_W-1:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_slot == s) mem[wr_row] <= wr_data;
      if (re) rdata[s] <= mem[raddr];
    end
  end
endmodule
