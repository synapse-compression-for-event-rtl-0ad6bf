// Shared types and constants of the neuron core.
//
// The synapse-compression scheme keeps three kinds of 64-bit descriptor words in the
// unified core memory next to the weights and neuron states:
//   * population descriptor: shape (D, W, H) of a neuron population, neuron type,
//     activation, axon count, start address of its axon+state block and the base
//     address of its kernel-descriptor table;
//   * axon: one per (source population, destination fragment) pair, the instruction
//     the synapse computation unit (SCU) executes for every firing neuron;
//   * kernel descriptor: one per (destination population, source channel), giving the
//     transposed kernel shape, the stride field SL and the weight pointer.
// Field widths that follow the paper: 64-bit words and 15-bit word addresses, 8-bit
// population width/height, 10-bit depth, 4-bit kernel width/height, 9-bit signed X/Y
// offsets, 3-bit upsample field, 1-bit stride field, 8-bit relative core address
// (4-bit X, 4-bit Y), 16-bit neuron states and 8-bit weights. Bit positions inside the
// words, the population-ID width, the event-value width, the axon-count width and the
// coarse (multiple-of-8) width/height kept in an axon are this design's own choices.
package scp_pkg;

  localparam int unsigned WORD_W   = 64;
  localparam int unsigned ADDR_W   = 15;     // 32768 words = 256 kB
  localparam int unsigned XY_W     = 8;      // population width/height, neuron X/Y
  localparam int unsigned CH_W     = 10;     // population depth, channel index
  localparam int unsigned K_W      = 4;      // kernel width/height field (value - 1)
  localparam int unsigned OFF_W    = 9;      // signed X/Y offset in an axon
  localparam int unsigned US_W     = 3;      // log2 of the source upsampling factor
  localparam int unsigned AD_W     = 8;      // relative core address {dx[3:0], dy[3:0]}
  localparam int unsigned PID_W    = 5;      // population identifier inside a core
  localparam int unsigned AXC_W    = 4;      // axon count of a population
  localparam int unsigned QWH_W    = 6;      // axon copy of W/H in units of 8 neurons
  localparam int unsigned EXY_W    = 10;     // signed x_min/y_min carried by an event
  localparam int unsigned VAL_W    = 8;      // signed firing value
  localparam int unsigned WGT_W    = 8;      // signed weight
  localparam int unsigned ST_W     = 16;     // neuron state: signed integer or half precision

  // Population descriptor table occupies words 0 .. 2**PID_W - 1.
  localparam logic [ADDR_W-1:0] POP_TABLE_BASE = '0;

  typedef enum logic [1:0] {
    NT_ACCUMULATE = 2'd0,  // state += w * v (convolution, average pooling, dense)
    NT_MAX        = 2'd1,  // state = max(state, w * v) (max pooling)
    NT_ACC_FP16   = 2'd2   // half-precision state += w * v, rounded to nearest even
  } ntype_e;

  typedef struct packed {
    logic [ADDR_W-1:0] kd_base;  // first kernel descriptor; + c_src selects one
    logic [ADDR_W-1:0] start;    // axons at start.., states at start+axon_cnt..
    logic [AXC_W-1:0]  axon_cnt;
    logic [1:0]        act;      // activation function code, carried only
    ntype_e            ntype;
    logic [CH_W-1:0]   d;
    logic [XY_W-1:0]   h;        // stored as true height << SL
    logic [XY_W-1:0]   w;        // stored as true width  << SL
  } pop_desc_t;

  typedef struct packed {
    logic [PID_W-1:0]  idp;      // destination population in the destination core
    logic [AD_W-1:0]   ad;       // relative destination core, 0 = this core
    logic [US_W-1:0]   us;       // log2 upsampling of the source
    logic [K_W-1:0]    kh_m1;    // KH - 1
    logic [K_W-1:0]    kw_m1;    // KW - 1
    logic [QWH_W-1:0]  hq;       // ceil(H / 8) of the destination fragment
    logic [QWH_W-1:0]  wq;       // ceil(W / 8) of the destination fragment
    logic [CH_W-1:0]   c_off;
    logic signed [OFF_W-1:0] y_off;
    logic signed [OFF_W-1:0] x_off;
  } axon_t;

  typedef struct packed {
    logic [29:0]       rsvd;
    logic              sl;       // log2 of the kernel stride (0: 1, 1: 2)
    logic [ADDR_W-1:0] wptr;     // first word of W[c, dx, dy] for this c_src
    logic [CH_W-1:0]   kd;       // kernel depth = destination channels
    logic [K_W-1:0]    kh_m1;
    logic [K_W-1:0]    kw_m1;
  } kdesc_t;

  // Firing neuron handed to the SCU.
  typedef struct packed {
    logic [PID_W-1:0]  idp;      // source population
    logic [XY_W-1:0]   x;
    logic [XY_W-1:0]   y;
    logic [CH_W-1:0]   c;
    logic signed [VAL_W-1:0] v;
  } fire_t;

  // Event exchanged between cores (and looped back locally).
  typedef struct packed {
    logic [AD_W-1:0]   ad;
    logic [PID_W-1:0]  idp;
    logic signed [EXY_W-1:0] xmin;
    logic signed [EXY_W-1:0] ymin;
    logic [CH_W-1:0]   csrc;
    logic signed [VAL_W-1:0] v;
  } event_t;

  // One weighted synapse for the neuron-update unit.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;     // state word
    logic [1:0]        lane;     // 16-bit state within the word
    logic signed [WGT_W-1:0] w;
    logic signed [VAL_W-1:0] v;
    ntype_e            ntype;
  } syn_t;

  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic              gnt;      // request accepted this cycle
    logic              rvalid;   // read data of the request granted last cycle
    logic [WORD_W-1:0] rdata;
  } mem_rsp_t;

endpackage
