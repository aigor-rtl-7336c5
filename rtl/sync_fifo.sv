// sync_fifo -- synchronous first-word-fall-through FIFO with valid/ready ports.
//
// Every buffer between the core's stages is one of these. A word is written
// when in_valid && in_ready and read when out_valid && out_ready; both can
// happen in the same cycle, also when full. The storage is a register array
// of DEPTH words addressed by wrapping read/write pointers plus an occupancy
// counter. Synchronous active-high reset empties it. Timing: a word written in
// cycle c is visible on out_data in cycle c+1. The FIFO structure is this
// design's choice; the source only states that stages are decoupled by
// buffers with valid/ready handshakes.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             empty
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign out_valid = (cnt != 0);
  assign empty     = (cnt == 0);
  assign in_ready  = (cnt < (AW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) begin
        mem[wp] <= in_data;
        wp      <= inc(wp);
      end
      if (do_rd) rp <= inc(rp);
      cnt <= cnt + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  assert property (@(posedge clk) disable iff (rst) cnt <= (AW+1)'(DEPTH));
endmodule
