// speck_pkg: types and constants shared by the Speck event-vision SoC RTL.
//
// Events move between blocks as packed structs on valid/ready channels.
// A sensor event carries a pixel address and a polarity; a network event
// carries a feature channel c (up to 1024 channels) and an x/y address of
// at most 128x128; a routed event adds the destination id that the network
// on chip reads and strips. The field widths follow the sizes named for the
// chip (128x128 sensor, 1024 features per layer, 16x16 kernels, signed 8-bit
// weights, signed 16-bit neuron states and biases); how the fields are
// packed, the id numbering and the per-core memory split are this design's
// own choices.
package speck_pkg;

  // ---- global sizes ---------------------------------------------------------
  localparam int unsigned SENSOR_DIM = 128;  // pixels per side
  localparam int unsigned XW         = 7;    // x/y coordinate width (0..127)
  localparam int unsigned CW         = 10;   // channel/feature width (0..1023)
  localparam int unsigned DIMW       = 8;    // size field width (1..128)
  localparam int unsigned CNTW       = 11;   // channel count field (1..1024)
  localparam int unsigned KW         = 5;    // kernel size field (1..16)
  localparam int unsigned WEIGHTW    = 8;    // signed synaptic weight
  localparam int unsigned STATEW     = 16;   // signed neuron state / bias
  localparam int unsigned NUM_CORES  = 9;    // sCNN cores
  localparam int unsigned DESTW      = 4;    // NoC destination id width
  localparam int unsigned READOUT_ID = 9;    // NoC id of the readout core
  localparam int unsigned NOC_PORTS  = 10;   // sources: preproc + 9 cores; sinks: 9 cores + readout
  localparam int unsigned NUM_CLASSES = 16;  // readout class units

  // Per-core memory sizes (words). The chip totals are 327,680 neurons
  // (320 Ki) and 272 KiB of 8-bit kernel memory, with cores of 64 Ki,
  // 32 Ki and 16 Ki synapses; the split over the nine cores is assumed.
  localparam int unsigned CORE_NEURON_WORDS [NUM_CORES] =
    '{65536, 65536, 65536, 32768, 32768, 16384, 16384, 16384, 16384};
  localparam int unsigned CORE_KERNEL_WORDS [NUM_CORES] =
    '{16384, 32768, 65536, 32768, 65536, 16384, 16384, 16384, 16384};
  localparam int unsigned BIAS_WORDS = 1024;  // one bias per output feature map

  // ---- event types ----------------------------------------------------------
  typedef struct packed {
    logic          p;   // polarity: 1 = ON (brighter), 0 = OFF
    logic [XW-1:0] x;
    logic [XW-1:0] y;
  } dvs_event_t;

  typedef struct packed {
    logic [CW-1:0] c;   // channel / feature
    logic [XW-1:0] x;
    logic [XW-1:0] y;
  } event_t;

  typedef struct packed {
    logic [DESTW-1:0] dest;
    event_t           ev;
  } routed_event_t;

  // ---- sensor pre-processing configuration ---------------------------------
  typedef enum logic [1:0] {
    POL_SEPARATE = 2'd0,  // ON -> channel 1, OFF -> channel 0
    POL_ONLY_OFF = 2'd1,  // keep OFF events only, channel 0
    POL_ONLY_ON  = 2'd2,  // keep ON events only, channel 0
    POL_MERGE    = 2'd3   // both polarities on channel 0
  } pol_mode_e;

  typedef struct packed {
    logic [1:0]    pool_x_log2;   // 0,1,2 -> 1:1, 1:2, 1:4
    logic [1:0]    pool_y_log2;
    logic [XW-1:0] roi_x0, roi_x1;  // inclusive ROI after pooling
    logic [XW-1:0] roi_y0, roi_y1;
    logic          flip_x, flip_y, swap_xy;
    pol_mode_e     pol_mode;
    logic [1:0]          dest_en;
    logic [1:0][DESTW-1:0] dest_id;
  } preproc_cfg_t;

  // ---- sCNN core configuration ----------------------------------------------
  typedef struct packed {
    logic [DIMW-1:0] in_w, in_h;        // input feature map size 1..128
    logic [CNTW-1:0] in_c;              // input channels 1..1024
    logic [CNTW-1:0] out_f;             // output features 1..1024
    logic [KW-1:0]   k_w, k_h;          // kernel size 1..16
    logic [1:0]      stride_x_log2, stride_y_log2;  // stride 1,2,4,8
    logic [3:0]      pad_x, pad_y;      // zero padding 0..15
    logic signed [STATEW-1:0] threshold;    // spike when state >= threshold
    logic signed [STATEW-1:0] lower_bound;  // state clamp floor
    logic            reset_to_value;    // 0: subtract threshold, 1: reset
    logic signed [STATEW-1:0] reset_value;
    logic            leak_en;           // apply bias/leak on each tick
    logic [1:0]      pool_x_log2, pool_y_log2;  // output sum pooling 1,2,4
    logic [1:0]              dest_en;
    logic [1:0][DESTW-1:0]   dest_id;
    logic [1:0][CW-1:0]      chan_shift;  // added to feature index per destination
  } cnn_cfg_t;

  // Output feature map size of a core: (in + 2*pad - k) / stride + 1.
  function automatic logic [DIMW-1:0] cnn_out_w(cnn_cfg_t cfg);
    int unsigned span;
    span = int'(cfg.in_w) + 2 * int'(cfg.pad_x) - int'(cfg.k_w);
    return DIMW'((span >> cfg.stride_x_log2) + 1);
  endfunction

  function automatic logic [DIMW-1:0] cnn_out_h(cnn_cfg_t cfg);
    int unsigned span;
    span = int'(cfg.in_h) + 2 * int'(cfg.pad_y) - int'(cfg.k_h);
    return DIMW'((span >> cfg.stride_y_log2) + 1);
  endfunction

  // Memory configuration write: which memory of which core.
  typedef enum logic [1:0] {
    MEM_KERNEL = 2'd0,
    MEM_NEURON = 2'd1,
    MEM_BIAS   = 2'd2
  } mem_sel_e;

  typedef struct packed {
    logic                 en;
    logic [3:0]           core;
    mem_sel_e             sel;
    logic [15:0]          addr;
    logic                 kill;   // blacklist this word
    logic [STATEW-1:0]    data;   // weight in [7:0] for the kernel memory
  } mem_wr_t;

  // ---- readout configuration ------------------------------------------------
  typedef struct packed {
    logic [2:0]  avg_log2;            // window 1,2,4,8,16 ticks (0 = plain count)
    logic [15:0] threshold;           // per-class comparison threshold
  } readout_cfg_t;

endpackage
