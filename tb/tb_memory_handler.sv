// tb_memory_handler -- the handler reads fanout lists out of a synaptic
// memory preloaded by the testbench (header row then ceil(F/P) rows) and
// streams them under random back-pressure. Checks every lane word and mask
// against the list, the barrier pulse after the last row of all queued
// spikes, and the cycle count: with the router always ready a fanout of F
// takes 2 + ceil(F/P) cycles.
`include "tb_check.svh"
module tb_memory_handler;
  import aigor_pkg::*;
  localparam int P = 4, ROWS = 256, RAW = 8, NSRC = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `WATCHDOG(clk, 100000)

  logic req_valid, req_ready, req_token;
  logic [TIME_W-1:0] req_ts;
  logic [RAW-1:0] req_row;
  logic mem_re; logic [RAW-1:0] mem_raddr; logic [P-1:0][SLOT_W-1:0] mem_rdata;
  logic out_valid, out_ready, barrier, idle;
  logic [P-1:0] out_mask; syn_word_t [P-1:0] out_words; logic [TIME_W-1:0] out_ts;
  logic wr_en; logic [RAW-1:0] wr_row; logic [1:0] wr_slot; logic [SLOT_W-1:0] wr_data;

  synaptic_memory #(.P(P), .ROWS(ROWS)) u_mem (.clk, .wr_en, .wr_row, .wr_slot, .wr_data,
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  memory_handler #(.P(P), .ROW_AW(RAW), .QDEPTH(4)) dut (.*);

  int fan [NSRC];
  int base [NSRC];
  syn_word_t words [NSRC][$];
  syn_word_t expq [$];
  logic [TIME_W-1:0] tsq [$];   // expected timestep per word

  task automatic wr(int row, int slot, logic [SLOT_W-1:0] d);
    @(negedge clk); wr_en = 1; wr_row = RAW'(row); wr_slot = 2'(slot); wr_data = d;
  endtask

  int got = 0, barriers = 0, rows_seen = 0;
  bit ready_always = 0;
  // consumer
  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      rows_seen++;
      for (int p = 0; p < P; p++) if (out_mask[p]) begin
        `CHECK(expq.size() > 0 && out_words[p] == expq[0], "lane word in list order")
        `CHECK(tsq.size() > 0 && out_ts == tsq[0], "spike timestep on lanes")
        if (expq.size() > 0) void'(expq.pop_front());
        if (tsq.size() > 0) void'(tsq.pop_front());
        got++;
      end
    end
    if (barrier) begin
      barriers++;
      `CHECK(expq.size() == 0, "barrier only after every row of the timestep")
    end
  end
  always @(negedge clk) out_ready = ready_always ? 1'b1 : ($urandom_range(0, 2) != 0);

  task automatic push(bit tok, int ts, int row);
    @(negedge clk); req_valid = 1; req_token = tok; req_ts = TIME_W'(ts); req_row = RAW'(row);
    @(posedge clk); while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    int row = 0, t0, t1;
    req_valid = 0; req_token = 0; req_ts = 0; req_row = 0; wr_en = 0;
    // build lists; fanout 0 .. 19 incl. exact multiples of P
    for (int s = 0; s < NSRC; s++) begin
      syn_hdr_t h;
      fan[s] = (s == 0) ? 0 : (s == 1) ? P : (s == 2) ? 2*P : $urandom_range(1, 19);
      base[s] = row;
      h = '0; h.fanout = FANOUT_W'(fan[s]); h.id = idpre_t'(s);
      wr(row, 0, SLOT_W'(h));
      for (int k = 0; k < fan[s]; k++) begin
        syn_word_t sw;
        sw = syn_word_t'({$urandom, $urandom, $urandom});
        words[s].push_back(sw);
        wr(row + 1 + k / P, k % P, SLOT_W'(sw));
      end
      row += 1 + (fan[s] + P - 1) / P;
    end
    @(negedge clk) wr_en = 0;
    rst = 0;
    // random traffic, then a token
    for (int k = 0; k < 60; k++) begin
      automatic int s = $urandom_range(0, NSRC-1);
      foreach (words[s][j]) begin expq.push_back(words[s][j]); tsq.push_back(TIME_W'(k)); end
      push(0, k, base[s]);
    end
    push(1, 0, 0);
    wait (barriers == 1);
    @(posedge clk); #1;
    `CHECK(idle, "idle after the barrier")
    `CHECK(expq.size() == 0, "all words delivered")
    // timing: fanout 19-ish source with the consumer always ready
    ready_always = 1;
    begin
      automatic int s = 3, nrow = (fan[3] + P - 1) / P;
      foreach (words[s][j]) begin expq.push_back(words[s][j]); tsq.push_back(TIME_W'(99)); end
      @(negedge clk); req_valid = 1; req_token = 0; req_ts = 99; req_row = RAW'(base[s]);
      @(posedge clk); #1 req_valid = 0;
      t0 = rows_seen;
      // request enters the queue at cycle 0, header read cycle 1, decode 2, rows 3 ..
      repeat (2 + nrow + 1) @(posedge clk);
      `CHECK(rows_seen - t0 == nrow, "fanout streamed in 2 + ceil(F/P) cycles")
      `CHECK(expq.size() == 0, "timed list delivered")
    end
    $display("words streamed: %0d", got);
    `CHECK(got > 200, "enough words streamed")
    `TB_END
  end
endmodule
