// tb_sync_fifo -- random push/pop against a queue model; checks order, the
// full/empty flags and that a full FIFO accepts a write only with a read.
`include "tb_check.svh"
module tb_sync_fifo;
  localparam int WIDTH = 12, DEPTH = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 20000)

  logic in_valid, in_ready, out_valid, out_ready, empty;
  logic [WIDTH-1:0] in_data, out_data;
  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  logic [WIDTH-1:0] q[$];
  int fulls = 0;
  bit rd, wr;

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = (i < 2500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      in_data   = WIDTH'($urandom);
      #1;
      `CHECK(empty == (q.size() == 0), "empty flag")
      `CHECK(out_valid == (q.size() != 0), "out_valid")
      `CHECK(in_ready == (q.size() < DEPTH || out_ready), "in_ready")
      if (q.size() == DEPTH) fulls++;
      if (out_valid) `CHECK(out_data == q[0], "data order")
      rd = out_valid && out_ready;
      wr = in_valid && in_ready;
      @(posedge clk);
      if (rd) void'(q.pop_front());
      if (wr) q.push_back(in_data);
    end
    `CHECK(fulls > 10, "FIFO was full at times")
    `TB_END
  end
endmodule
