// tb_delay_buffer -- random contributions against an array model of the
// (neuron, receptor, slot) rings. Checks that a weight sent in timestep ts
// with delay d appears in the head-slot read of timestep ts+d (and nowhere
// else), that a read clears the slot, that accumulation is refused during a
// read, and that clear zeroes the whole buffer in NPW/NPAR*MAX_DELAY cycles.
`include "tb_check.svh"
module tb_delay_buffer;
  import aigor_pkg::*;
  localparam int NPW = 8, NPAR = 2, R = 2, MD = 8, DB = NPW/NPAR;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 100000)

  logic acc_valid, acc_ready, rd_en, clr_en;
  acc_t acc;
  logic [1:0] rd_idx;
  logic [2:0] rd_slot;
  fix_t [NPAR-1:0][R-1:0] rd_data;
  logic [4:0] clr_addr;
  delay_buffer #(.NPW(NPW), .NPAR(NPAR), .R(R), .MAX_DELAY(MD)) dut (.*);

  longint model [NPW][R][MD];

  task automatic clear_all();
    for (int a = 0; a < DB*MD; a++) begin
      @(negedge clk); clr_en = 1; clr_addr = 5'(a); acc_valid = 1;
      #1 `CHECK(!acc_ready, "no accumulation during clear")
    end
    @(negedge clk); clr_en = 0; acc_valid = 0;
    foreach (model[n, r, s]) model[n][r][s] = 0;
  endtask

  task automatic readout(int t);
    for (int i = 0; i < DB; i++) begin
      @(negedge clk); rd_en = 1; rd_idx = 2'(i); rd_slot = 3'(t % MD); acc_valid = 1;
      #1;
      `CHECK(!acc_ready, "no accumulation during readout")
      for (int k = 0; k < NPAR; k++) for (int r = 0; r < R; r++) begin
        `CHECK(rd_data[k][r] == fix_t'(model[i*NPAR+k][r][t % MD]), "head slot sum")
        model[i*NPAR+k][r][t % MD] = 0;
      end
    end
    @(negedge clk); rd_en = 0; acc_valid = 0;
  endtask

  initial begin
    acc_valid = 0; rd_en = 0; clr_en = 0; acc = '0; rd_idx = 0; rd_slot = 0; clr_addr = 0;
    clear_all();
    for (int t = 0; t < 40; t++) begin
      readout(t);
      // spikes of timestep t (some of t+1, as from a faster core)
      repeat ($urandom_range(5, 30)) begin
        @(negedge clk);
        acc = '0;
        acc.ts     = TIME_W'(t + ($urandom_range(0, 4) == 0));
        acc.n      = NID_W'($urandom_range(0, NPW-1));
        acc.r      = RID_W'($urandom_range(0, R-1));
        acc.delay  = DELAY_W'($urandom_range(1, MD-1));
        acc.weight = fix_t'($urandom_range(0, 2000)) - 1000;
        acc_valid  = 1;
        #1 `CHECK(acc_ready, "accumulation accepted between boundaries")
        model[acc.n][acc.r][(int'(acc.ts) + int'(acc.delay)) % MD] += longint'(acc.weight);
        // back-to-back hits on the same cell
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          model[acc.n][acc.r][(int'(acc.ts) + int'(acc.delay)) % MD] += longint'(acc.weight);
        end
      end
      @(negedge clk) acc_valid = 0;
    end
    clear_all();
    readout(3);
    `TB_END
  end
endmodule
