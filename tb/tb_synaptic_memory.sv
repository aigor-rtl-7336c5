// tb_synaptic_memory -- writes random slots, reads rows back with the
// one-cycle read latency, and checks that rdata holds while re is low.
`include "tb_check.svh"
module tb_synaptic_memory;
  import aigor_pkg::*;
  localparam int P = 4, ROWS = 64, RAW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 20000)

  logic wr_en, re;
  logic [RAW-1:0] wr_row, raddr;
  logic [1:0] wr_slot;
  logic [SLOT_W-1:0] wr_data;
  logic [P-1:0][SLOT_W-1:0] rdata;
  synaptic_memory #(.P(P), .ROWS(ROWS)) dut (.*);

  logic [SLOT_W-1:0] model [ROWS][P];

  initial begin
    wr_en = 0; re = 0; raddr = 0; wr_row = 0; wr_slot = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < P; s++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RAW'(r); wr_slot = 2'(s);
      wr_data = {$urandom, $urandom, $urandom};
      model[r][s] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 500; k++) begin
      automatic int a = $urandom_range(0, ROWS-1);
      @(negedge clk); re = 1; raddr = RAW'(a);
      @(negedge clk); re = 0; raddr = RAW'($urandom);
      for (int s = 0; s < P; s++) `CHECK(rdata[s] == model[a][s], "row read after one cycle")
      @(negedge clk);
      `CHECK(rdata[0] == model[a][0], "read data held while re = 0")
    end
    `TB_END
  end
endmodule
