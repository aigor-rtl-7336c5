// aigor_pkg -- types and constants shared by every block of the SNN core.
//
// Fabric events follow the core's packet format: a leading sync bit, the
// timestep, and either the presynaptic identifier ID_pre = <ID_core, ID_W, ID_n>
// (spike) or only the originating core (sync). Synapse words carry the
// postsynaptic identifier ID_post = <ID_W, ID_n, ID_r, ID_comp>, a delay in
// timesteps and a weight. The field widths of ID_pre (32), fanout (14),
// weight (32), delay (7) and ID_post (28) follow the published format; the
// width of the time field and the split of the identifiers into their
// sub-fields are this design's choices. Arithmetic is 32-bit signed fixed
// point with 12 integer bits (20 fraction bits).
package aigor_pkg;

  // ---------------- numeric format ----------------
  localparam int DATA_W = 32;
  localparam int FRAC_W = 20;
  typedef logic signed [DATA_W-1:0] fix_t;

  // fixed-point multiply, truncating toward minus infinity
  function automatic fix_t fix_mul(fix_t a, fix_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fix_t'(p >>> FRAC_W);
  endfunction

  // ---------------- identifiers ----------------
  localparam int TIME_W   = 16;
  localparam int CORE_W   = 12;
  localparam int WID_W    = 10;
  localparam int NID_W    = 10;
  localparam int IDPRE_W  = CORE_W + WID_W + NID_W;   // 32
  localparam int RID_W    = 4;
  localparam int COMP_W   = 4;
  localparam int IDPOST_W = WID_W + NID_W + RID_W + COMP_W; // 28
  localparam int FANOUT_W = 14;
  localparam int WEIGHT_W = 32;
  localparam int DELAY_W  = 7;

  typedef struct packed {
    logic [CORE_W-1:0] core;
    logic [WID_W-1:0]  w;
    logic [NID_W-1:0]  n;
  } idpre_t;

  typedef struct packed {
    logic              sync;   // 1 = sync (barrier) event, 0 = spike
    logic [TIME_W-1:0] ts;     // timestep of the emitting core
    idpre_t            id;     // spike: source neuron; sync: only id.core is used
  } event_t;

  localparam int EVENT_W = $bits(event_t);

  typedef struct packed {
    logic [WID_W-1:0]  w;
    logic [NID_W-1:0]  n;
    logic [RID_W-1:0]  r;
    logic [COMP_W-1:0] comp;
  } idpost_t;

  typedef struct packed {
    idpost_t             post;
    logic [DELAY_W-1:0]  delay;
    logic [WEIGHT_W-1:0] weight;
  } syn_word_t;

  localparam int SLOT_W = $bits(syn_word_t);  // 67 bits per synaptic-memory slot

  // header slot of a fanout list: {padding, fanout, ID_pre}
  localparam int HDR_PAD_W = SLOT_W - FANOUT_W - IDPRE_W;
  typedef struct packed {
    logic [HDR_PAD_W-1:0] pad;
    logic [FANOUT_W-1:0]  fanout;
    idpre_t               id;
  } syn_hdr_t;

  // ---------------- host configuration bus ----------------
  typedef enum logic [2:0] {
    CFG_REGS   = 3'd0,   // core registers, see cfg_reg_e
    CFG_ADDRT  = 3'd1,   // ID_pre -> synaptic memory row table
    CFG_SYNMEM = 3'd2,   // synaptic memory slot, addr = row*P + slot
    CFG_NEURON = 3'd3,   // neuron parameters, see nparam_e
    CFG_IMAGE  = 3'd4    // I/O core image pixels
  } cfg_region_e;

  typedef enum logic [3:0] {
    REG_EXP_SYNC  = 4'd0,  // number of sync events that close a timestep
    REG_NUM_STEPS = 4'd1,  // timesteps to run after start
    REG_WINDOW    = 4'd2,  // sample window in timesteps, 0 = none
    REG_CORE_ID   = 4'd3,  // this core's ID_core
    REG_IO_MODE   = 4'd4,  // I/O core: 0 silent, 1 image, 2 Poisson
    REG_IO_PROB   = 4'd5,  // I/O core: Poisson probability, 16-bit fraction
    REG_IO_NSRC   = 4'd6,  // I/O core: number of Poisson sources
    REG_IO_CNTSRC = 4'd7,  // I/O core: {core, worker} whose spikes are counted
    REG_IO_SEED   = 4'd8   // I/O core: LFSR seed
  } cfg_reg_e;

  typedef enum logic [3:0] {
    NP_MODEL  = 4'd0,
    NP_DECAY  = 4'd1,
    NP_THR    = 4'd2,
    NP_VRESET = 4'd3,
    NP_TREF   = 4'd4,
    NP_IEXT   = 4'd5
  } nparam_e;

  localparam int CFG_AW = 20;
  typedef struct packed {
    logic              we;
    cfg_region_e       region;
    logic [CFG_AW-1:0] addr;
    logic [SLOT_W-1:0] data;
  } cfg_t;

  // ---------------- neuron model ----------------
  typedef enum logic [1:0] {
    NM_LIF_SUB   = 2'd0,   // leaky integrate-and-fire, reset by subtraction
    NM_IAF_DELTA = 2'd1    // leaky integrate-and-fire, delta synapses, reset + refractory
  } nmodel_e;

  typedef struct packed {
    nmodel_e    model;
    fix_t       decay;   // beta (LIF) or P22 = exp(-h/tau) (IAF), 1.0 = integrate-and-fire
    fix_t       thr;
    fix_t       vreset;
    logic [7:0] tref;    // refractory period in timesteps
    fix_t       iext;    // constant external input per timestep
  } nparams_t;

  typedef struct packed {
    fix_t       vm;      // membrane potential
    logic [7:0] tr;      // refractory counter
    fix_t       iexc;    // excitatory input of the last step
    fix_t       iinh;    // inhibitory input of the last step
  } nstate_t;

  // one synaptic contribution on its way into a worker's accumulator
  typedef struct packed {
    logic [NID_W-1:0]  n;       // neuron index inside the worker
    logic [RID_W-1:0]  r;       // receptor
    logic [DELAY_W-1:0] delay;  // timesteps, 1 .. MAX_DELAY-1
    fix_t              weight;
    logic [TIME_W-1:0] ts;      // timestep the presynaptic spike was emitted in
  } acc_t;

  // receptors: 0 excitatory, 1 inhibitory
  localparam int REC_EXC = 0;
  localparam int REC_INH = 1;

endpackage
