// wienna_pkg: constants and types shared by the wireless-NoP 2.5D DNN accelerator.
//
// The system is one memory chiplet (global SRAM, distribution scheduler and a single wireless
// transmitter) and an array of accelerator chiplets, each with a wireless receiver, a local
// memory, 64 processing elements and a router of the wired mesh that collects outputs.
// Numbers that follow the paper: 256 chiplets, 64 PEs per chiplet (16384 MACs), 13 MiB global
// SRAM, 16-32 bytes/cycle wireless bandwidth (32 used, the aggressive point), 8-16
// bytes/cycle/link wired bandwidth (16 used), one-byte operands (64 B/cycle = 64 operands).
// Field widths of frames and configuration words, the int8/int32 arithmetic and the local
// memory depth are this design's own choices.
package wienna_pkg;

  localparam int unsigned NUM_CHIPLETS = 256; // accelerator chiplets
  localparam int unsigned MESH_COLS = 16;  // collection mesh columns (16 x 16 = 256)
  localparam int unsigned PES_PER_CHIPLET = 64;  // PEs per chiplet
  localparam int unsigned DATA_W     = 8;    // operand width (one byte per input/weight)
  localparam int unsigned ACC_W      = 32;   // partial-sum width
  localparam int unsigned WL_BYTES   = 32;   // wireless payload bytes per cycle
  localparam int unsigned NOP_BYTES  = 16;   // wired collection link bytes per cycle
  localparam int unsigned GSRAM_BYTES = 13 * 1024 * 1024;  // global SRAM capacity
  localparam int unsigned LMEM_ROWS  = 256;  // local memory rows of PES bytes, per bank

  // Partitioning strategy of a layer across chiplets (first letter pair) and PEs (second).
  typedef enum logic [1:0] {
    KP_CP = 2'd0,   // filters split over chiplets, channels over PEs: filters unicast, inputs broadcast
    NP_CP = 2'd1,   // batch split over chiplets, channels over PEs: inputs unicast, filters broadcast
    YP_XP = 2'd2    // rows split over chiplets, columns over PEs: inputs unicast, filters broadcast
  } strategy_e;

  // What a wireless frame carries.
  typedef enum logic [1:0] {
    FR_WEIGHT = 2'd0,  // payload written to the weight bank at addr
    FR_INPUT  = 2'd1,  // payload written to the input bank at addr
    FR_CONFIG = 2'd2,  // payload holds a chip_cfg_t for the next layer
    FR_START  = 2'd3   // start computing one round
  } frame_kind_e;

  // Header that travels with every wireless payload word.
  typedef struct packed {
    frame_kind_e kind;
    logic        bcast;   // 1: multicast to receivers 0..dst; 0: unicast to receiver dst
    logic [9:0]  dst;     // unicast: chiplet id; multicast: id of the last receiver of the set
    logic [15:0] addr;    // local memory address in WL_BYTES words
  } wl_hdr_t;

  // Layer configuration broadcast to all chiplets before a layer.
  typedef struct packed {
    logic        xp_mode;   // 1: output-stationary (YP-XP), 0: channel-parallel (KP-CP, NP-CP)
    logic [10:0] n_active;  // chiplets taking part; ids at or above it stay idle
    logic [15:0] n_filt;    // filters per chiplet in one round
    logic [15:0] n_vec;     // input vectors per chiplet in one round
    logic [15:0] red_len;   // reduction length: rows of PES bytes (CP) or elements (XP)
    logic [4:0]  shift;     // right shift applied before saturation to 8 bits
    logic [23:0] out_base;  // first global SRAM address of this layer's outputs, NOP_BYTES words
  } chip_cfg_t;

  localparam int unsigned CFG_W  = $bits(chip_cfg_t);
  localparam int unsigned FLIT_A = 24;  // address bits of a collection flit

  // One flit of the wired collection mesh: a NOP_BYTES word and where it goes in the SRAM.
  typedef struct packed {
    logic [FLIT_A-1:0]      addr;  // global SRAM address in NOP_BYTES words
    logic [NOP_BYTES*8-1:0] data;
  } flit_t;

  // One layer (or layer tile) as the host hands it to the distribution scheduler.
  typedef struct packed {
    strategy_e   strategy;
    logic [10:0] n_active;  // chiplets used
    logic [15:0] n_filt;    // filters per chiplet per round
    logic [15:0] n_vec;     // input vectors per chiplet per round
    logic [15:0] red_len;   // rows of PES bytes (CP) or elements (XP) per dot product
    logic [15:0] rounds;    // input rounds (t0.1..t0.3 repeated)
    logic [4:0]  shift;     // output requantisation shift
    logic [23:0] w_base;    // weights in the global SRAM, WL_BYTES words
    logic [23:0] i_base;    // inputs in the global SRAM, WL_BYTES words
    logic [23:0] o_base;    // outputs in the global SRAM, NOP_BYTES words
  } layer_desc_t;

endpackage
