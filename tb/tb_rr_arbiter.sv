// tb_rr_arbiter -- random requests against a rotating-pointer model; also
// checks that a requester held high waits at most N-1 other grants.
`include "tb_check.svh"
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 20000)

  logic [N-1:0] req, gnt;
  logic accept, any;
  logic [$clog2(N)-1:0] gnt_idx;
  rr_arbiter #(.N(N)) dut (.*);

  bit acc_s;
  int ptr = 0, exp_idx, wait_cnt[N];

  initial begin
    req = 0; accept = 0;
    foreach (wait_cnt[i]) wait_cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      req    = N'($urandom) | N'(1);   // requester 0 always asks
      accept = ($urandom_range(0, 4) != 0);
      #1;
      exp_idx = -1;
      for (int k = 0; k < N; k++) if (exp_idx < 0 && req[(ptr + k) % N]) exp_idx = (ptr + k) % N;
      `CHECK(any == (exp_idx >= 0), "any")
      `CHECK(gnt == N'(1) << exp_idx && int'(gnt_idx) == exp_idx, "grant = first requester from pointer")
      acc_s = accept;
      @(posedge clk);
      if (acc_s) begin
        ptr = (exp_idx + 1) % N;
        if (exp_idx == 0) wait_cnt[0] = 0; else wait_cnt[0]++;
        `CHECK(wait_cnt[0] < N, "bounded wait of requester 0")
      end
    end
    `TB_END
  end
endmodule
