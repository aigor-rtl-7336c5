// io_core -- boundary core between the spiking network and the host.
//
// Each timestep t it (1) generates input spikes, (2) sends its sync(t), and
// (3) waits, like every core, until exp_sync syncs of t have arrived before
// moving to t+1; after REG_NUM_STEPS timesteps it stops with done = 1.
// Input generation, chosen by REG_IO_MODE:
//   image   - the host writes a 28x28 8-bit image (CFG_IMAGE, addr = pixel);
//             it is downsampled to 16x16 by nearest neighbour (source row/col
//             = floor(i*28/16)) and rate-coded: pixel p spikes with
//             probability p/256 in every timestep;
//   Poisson - REG_IO_NSRC independent sources, each spiking with
//             probability REG_IO_PROB/65536 per timestep (800 Hz at a 0.1 ms
//             step is 0.08, i.e. 5243).
// Source i is sent as ID_pre = <core_id, i div 128, i mod 128>. One source
// is examined per cycle, driven by a 16-bit Galois LFSR (taps 0xB400) seeded
// by REG_IO_SEED. Received spikes of other cores are offered to the host on
// rec_valid/rec_event (no back-pressure) and counted in NCNT counters, per
// neuron index, for the cores/worker selected by REG_IO_CNTSRC
// ({core, worker}); `start` clears the counters.
// Timing: 256 (image) or NSRC (Poisson) cycles per timestep plus one cycle
// per spike sent and the barrier wait. The role of the I/O core
// (downsampling, rate coding, Poisson source, result collection) follows the
// source; the downsampling and coding methods are this design's choices.
module io_core
  import aigor_pkg::*;
#(
  parameter int IMG_W = 28,
  parameter int DS_W  = 16,
  parameter int NCNT  = 16
) (
  input  logic                    clk,
  input  logic                    rst,
  input  cfg_t                    cfg,
  input  logic                    start,
  output logic                    done,
  output logic [TIME_W-1:0]       cur_ts,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  event_t                  in_event,
  output logic                    out_valid,
  input  logic                    out_ready,
  output event_t                  out_event,
  output logic                    rec_valid,
  output event_t                  rec_event,
  output logic [NCNT-1:0][15:0]   cnt
);
  localparam int IO_NB = 7;
  localparam int NPIX  = IMG_W * IMG_W;

  // ---------------- registers ----------------
  logic [CORE_W-1:0]          exp_sync, core_id;
  logic [TIME_W-1:0]          num_steps;
  logic [1:0]                 mode;
  logic [15:0]                prob, nsrc, seed;
  logic [CORE_W+WID_W-1:0]    cntsrc;
  logic [7:0]                 img [NPIX];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.region == CFG_IMAGE) img[cfg.addr[$clog2(NPIX)-1:0]] <= cfg.data[7:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      exp_sync  <= CORE_W'(1);
      core_id   <= '0;
      num_steps <= '0;
      mode      <= '0;
      prob      <= '0;
      nsrc      <= '0;
      seed      <= 16'h1;
      cntsrc    <= '0;
    end else if (cfg.we && cfg.region == CFG_REGS) begin
      case (cfg.addr[3:0])
        REG_EXP_SYNC:  exp_sync  <= cfg.data[CORE_W-1:0];
        REG_NUM_STEPS: num_steps <= cfg.data[TIME_W-1:0];
        REG_CORE_ID:   core_id   <= cfg.data[CORE_W-1:0];
        REG_IO_MODE:   mode      <= cfg.data[1:0];
        REG_IO_PROB:   prob      <= cfg.data[15:0];
        REG_IO_NSRC:   nsrc      <= cfg.data[15:0];
        REG_IO_CNTSRC: cntsrc    <= cfg.data[CORE_W+WID_W-1:0];
        REG_IO_SEED:   seed      <= cfg.data[15:0];
        default: ;
      endcase
    end
  end

  // ---------------- source scan ----------------
  typedef enum logic [2:0] {I_IDLE, I_GEN, I_SYNC, I_WAIT, I_DONE} istate_e;
  istate_e st;
  logic [15:0] idx, lfsr, n_src;
  logic [7:0]  pix;
  logic        fire_src, last_src;
  logic [31:0] r_ds, c_ds;

  function automatic logic [15:0] lfsr_next(logic [15:0] x);
    return x[0] ? ((x >> 1) ^ 16'hB400) : (x >> 1);
  endfunction

  assign n_src = (mode == 2'd1) ? 16'(DS_W*DS_W) : (mode == 2'd2) ? nsrc : 16'd0;
  always_comb begin
    r_ds = 32'((int'(idx) / DS_W) * IMG_W / DS_W);
    c_ds = 32'((int'(idx) % DS_W) * IMG_W / DS_W);
    pix  = img[$clog2(NPIX)'(r_ds * IMG_W + c_ds)];
  end
  assign fire_src = (mode == 2'd1) ? (lfsr[7:0] < pix) : (lfsr < prob);
  assign last_src = (idx + 1'b1 >= n_src);

  always_comb begin
    out_event = '0;
    out_event.ts      = cur_ts;
    out_event.id.core = core_id;
    out_valid = 1'b0;
    if (st == I_GEN && n_src != 0 && fire_src) begin
      out_valid      = 1'b1;
      out_event.id.w = WID_W'(idx >> IO_NB);
      out_event.id.n = NID_W'(idx[IO_NB-1:0]);
    end else if (st == I_SYNC) begin
      out_valid      = 1'b1;
      out_event.sync = 1'b1;
    end
  end

  // ---------------- barrier ----------------
  logic [CORE_W-1:0] sync_cnt [2];
  logic par, last_sync;
  assign in_ready  = 1'b1;
  assign par       = in_event.ts[0];
  assign last_sync = in_valid && in_event.sync && (par == cur_ts[0]) &&
                     (sync_cnt[par] + 1'b1 == exp_sync);
  assign done      = (st == I_DONE);

  // ---------------- result collection ----------------
  assign rec_valid = in_valid && !in_event.sync && in_event.id.core != core_id;
  assign rec_event = in_event;

  always_ff @(posedge clk) begin
    if (rst) begin
      st          <= I_IDLE;
      idx         <= '0;
      lfsr        <= 16'h1;
      cur_ts      <= '0;
      sync_cnt[0] <= '0;
      sync_cnt[1] <= '0;
      cnt         <= '0;
    end else begin
      if (in_valid && in_event.sync)
        sync_cnt[par] <= last_sync ? '0 : sync_cnt[par] + 1'b1;
      if (rec_valid && {in_event.id.core, in_event.id.w} == cntsrc && int'(in_event.id.n) < NCNT)
        cnt[in_event.id.n[$clog2(NCNT)-1:0]] <= cnt[in_event.id.n[$clog2(NCNT)-1:0]] + 1'b1;
      case (st)
        I_IDLE, I_DONE: if (start) begin
          st     <= I_GEN;
          idx    <= '0;
          cur_ts <= '0;
          lfsr   <= (seed == 0) ? 16'h1 : seed;
          cnt    <= '0;
        end
        I_GEN: begin
          if (n_src == 0) st <= I_SYNC;
          else if (!out_valid || out_ready) begin
            lfsr <= lfsr_next(lfsr);
            idx  <= idx + 1'b1;
            if (last_src) st <= I_SYNC;
          end
        end
        I_SYNC: if (out_ready) st <= I_WAIT;
        I_WAIT: if (last_sync) begin
          cur_ts <= cur_ts + 1'b1;
          idx    <= '0;
          st     <= (cur_ts + 1'b1 == num_steps) ? I_DONE : I_GEN;
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule
