// odin_pkg: types and constants shared by the neuromorphic core.
//
// Sizes that follow the paper: N = 256 neurons, N*N = 64k synapses of
// 4 bits (3-bit weight + 1 mapping-table bit that enables learning), 8
// synapses per 32-bit synapse SRAM word (13-bit word address {pre, post/8}),
// a 126-bit neuron record (70-bit parameter field, 55-bit state, 1 model
// select bit) stored in a 128-bit neuron SRAM word, a 17-bit input AER
// address, 14-bit neuron event packets (8-bit address, 3-bit spike count
// minus one, 3-bit inter-spike interval).
//
// The positions of fields inside the 70-bit parameter field and the 55-bit
// state are this design's own choice: only the totals and the split of the
// phenomenological state (11-bit accumulator, 4-bit signed membrane, 36
// phenomenological bits, 3-bit Calcium, 1 burst bit) are given. The same
// holds for the AER input address encoding and the SPI frame format.
package odin_pkg;

  localparam int N          = 256;
  localparam int NW         = 8;             // log2 N
  localparam int SYN_PER_W  = 8;             // synapses per synapse-SRAM word
  localparam int SADDR_W    = 13;            // synapse SRAM word address
  localparam int NWORD_W    = 128;           // neuron SRAM word width
  localparam int PARAM_W    = 70;
  localparam int STATE_W    = 55;
  localparam int AER_IN_W   = 1 + 2*NW;      // 17
  localparam int PKT_W      = 14;

  // Bit positions inside a neuron SRAM word.
  localparam int PARAM_LSB  = 0;
  localparam int STATE_LSB  = 70;
  localparam int MODEL_BIT  = 125;           // 0: LIF, 1: phenomenological

  // Event packet sent by a firing neuron to the scheduler.
  typedef struct packed {
    logic [NW-1:0] addr;   // source neuron
    logic [2:0]    num;    // number of spikes minus one
    logic [2:0]    isi;    // inter-spike interval, in burst timesteps minus one
  } pkt_t;

  // Input AER event kinds.
  typedef enum logic [2:0] {
    EV_NONE    = 3'd0,
    EV_SPIKE   = 3'd1,     // neuron spike event: source i -> all neurons
    EV_SINGLE  = 3'd2,     // single-synapse event: source i -> neuron j
    EV_VIRTUAL = 3'd3,     // virtual synapse event: fixed weight -> neuron j
    EV_TREF    = 3'd4,     // neuron time reference event
    EV_BISTAB  = 3'd5      // bistability time reference event
  } ev_kind_e;

  typedef struct packed {
    ev_kind_e      kind;
    logic [NW-1:0] pre;    // source neuron i
    logic [NW-1:0] post;   // destination neuron j
    logic [2:0]    weight; // virtual synapse weight
    logic          sign;   // virtual synapse sign (1: inhibitory)
  } aer_ev_t;

  // ---- LIF neuron record -------------------------------------------------
  typedef struct packed {
    logic [34:0] rsvd;
    logic [7:0]  thr_mem;  // SDSP membrane threshold theta_m
    logic [2:0]  ca_leak;  // time references per Calcium decrement (0: none)
    logic [2:0]  ca_th3;
    logic [2:0]  ca_th2;
    logic [2:0]  ca_th1;
    logic [6:0]  leak;     // membrane leak per time reference
    logic [7:0]  thr;      // firing threshold
  } lif_param_t;           // 70 bits

  typedef struct packed {
    logic [40:0] rsvd;
    logic [2:0]  ca_cnt;   // Calcium leak counter
    logic [2:0]  ca;       // Calcium concentration
    logic [7:0]  vmem;     // membrane potential
  } lif_state_t;           // 55 bits

  // ---- Phenomenological (Izhikevich-behaviour) neuron record -------------
  typedef struct packed {
    logic [13:0] rsvd;
    logic [2:0]  burst_isi;  // output stage: ISI of emitted bursts
    logic [2:0]  burst_num;  // output stage: spikes per burst minus one
    logic [2:0]  rot_per;    // block 4: time refs between sign rotations (0: off)
    logic [2:0]  refrac;     // block 3: refractory period in time refs
    logic [2:0]  dap;        // block 3: depolarising after-potential length
    logic [2:0]  latency;    // block 3: spike latency in time refs
    logic        thr_var;    // block 2: inhibitory input lowers threshold
    logic [1:0]  thr_adapt;  // block 2: threshold increase per spike
    logic        rebound;    // block 1: spike at the end of an inhibition
    logic [2:0]  str_min;    // block 1: events per time ref needed to integrate
    logic        phasic;     // block 1: one spike per stimulation episode
    logic [2:0]  mem_leak;   // time refs per membrane leak step (0: none)
    logic [2:0]  thr;        // base firing threshold of the 4-bit membrane
    logic [3:0]  acc_leak;   // input accumulator leak per time reference
    logic [3:0]  acc_depth;  // accumulator overflow at +/- 2^acc_depth
    logic [2:0]  ca_leak;
    logic [2:0]  ca_th3;
    logic [2:0]  ca_th2;
    logic [2:0]  ca_th1;
    logic signed [3:0] thr_mem; // SDSP membrane threshold theta_m
  } izh_param_t;             // 70 bits

  typedef struct packed {
    logic [11:0] rsvd;
    logic [2:0]  ca_cnt;     // Calcium leak counter
    logic [2:0]  leak_cnt;   // membrane leak counter
    logic [2:0]  rot_cnt;    // block 4 counter
    logic [1:0]  tw_mode;    // block 3: 0 idle, 1 latency, 2 after-potential, 3 refractory
    logic [2:0]  tw_cnt;     // block 3 counter
    logic signed [3:0] thr_off; // block 2 threshold offset
    logic        phasic_done;// block 1
    logic        stim_on;    // block 1: stimulation seen in the last time step
    logic [3:0]  stim_cnt;   // block 1: accumulated events in this time step
  } izh_phen_t;              // 36 bits

  typedef struct packed {
    logic               lock;  // burst in progress
    logic [2:0]         ca;
    izh_phen_t          phen;
    logic signed [3:0]  vmem;
    logic signed [10:0] acc;
  } izh_state_t;             // 55 bits

  // SPI targets.
  typedef enum logic [1:0] {
    SPI_REG = 2'd0,
    SPI_NEUR = 2'd1,
    SPI_SYN = 2'd2,
    SPI_NONE = 2'd3
  } spi_tgt_e;

  typedef struct packed {
    logic        write;
    spi_tgt_e    target;
    logic [15:0] addr;
    logic [7:0]  wdata;
  } spi_req_t;

  // Global parameter register addresses (byte addressed).
  localparam logic [15:0] REG_CTRL      = 16'd0;  // [0] gate activity, [1] monitor mode
  localparam logic [15:0] REG_MON_NEUR  = 16'd1;
  localparam logic [15:0] REG_MON_PRE   = 16'd2;
  localparam logic [15:0] REG_ISI_0     = 16'd3;  // burst ISI period, 24 bits, LSB first
  localparam logic [15:0] REG_SIGN_0    = 16'd32; // 32 bytes: 1 = inhibitory source

endpackage
