// mnf_pkg: types and constants shared by the Multiply-and-Fire accelerator.
//
// The accelerator computes a neural-network layer one non-zero activation at
// a time. Each non-zero activation travels as an "event"; a processing
// element (PE) multiplies it with every weight it touches, accumulates the
// products into output neurons, and once an end-of-data event arrives it
// quantizes the sums, applies ReLU (and optional 2x2 max-pooling) and fires a
// new event for every output above the threshold.
//
// Sizes that follow the published specification: 11 PEs, 9 MAC modules of 3
// multipliers each (27 MACs per PE), 8-bit weights and activations, 32-bit
// partial sums, a 691.2 KB weight SRAM (25600 words of 27 weights) and a
// 67.5 KB partial-sum store per PE. Field widths of events, the layer
// configuration record and the flit format are this design's own choices.
package mnf_pkg;

  // ---- datapath sizes ------------------------------------------------------
  localparam int DATA_W   = 8;    // weights and activations
  localparam int PSUM_W   = 32;   // partial sums
  localparam int NUM_MAC  = 9;    // MAC modules per PE (MAC cluster size)
  localparam int MULTS    = 3;    // multipliers per MAC module
  localparam int LANES    = NUM_MAC * MULTS;  // weights per weight-SRAM word
  localparam int KWIN     = 3;    // side of the output window one event touches

  // ---- memories ------------------------------------------------------------
  localparam int WDEPTH   = 25600;            // 691.2 KB / 27 B
  localparam int WADDR_W  = $clog2(WDEPTH);
  localparam int WWORD_W  = LANES * DATA_W;   // 216 bits
  localparam int ADEPTH   = 625;              // 67.5 KB / (27 banks * 4 B)
  localparam int AADDR_W  = $clog2(ADEPTH);

  // ---- system --------------------------------------------------------------
  localparam int NUM_PE   = 11;
  localparam int NODES    = NUM_PE + 1;       // + storage PE

  // ---- event fields --------------------------------------------------------
  localparam int CH_W     = 10;   // channel id
  localparam int SW_W     = 4;    // start weight (filter tap 0..8)
  localparam int NADDR_W  = 16;   // start neuron / FC neuron address
  localparam int POS_W    = 8;    // row / column of a feature map (<=255)
  localparam int GRP_W    = 8;    // output-channel group or FC word index

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [DATA_W-1:0] wgt_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  typedef enum logic [1:0] {
    EV_NONE = 2'd0,
    EV_CONV = 2'd1,   // conv-layer input event
    EV_FC   = 2'd2,   // fully-connected input event
    EV_EOD  = 2'd3    // end-of-data
  } ev_kind_e;

  // One input event. For EV_FC only data and start_neuron (the input
  // neuron's address) are meaningful.
  typedef struct packed {
    ev_kind_e             kind;
    act_t                 data;
    logic [CH_W-1:0]      ch_id;
    logic [SW_W-1:0]      start_weight;
    logic [NADDR_W-1:0]   start_neuron;
    logic [1:0]           x_jump;
    logic [1:0]           y_jump;
  } event_t;

  // Network flit: multicast destination mask plus the event.
  typedef struct packed {
    logic [NODES-1:0] dst;
    event_t           ev;
  } flit_t;

  typedef enum logic {MODE_CONV = 1'b0, MODE_FC = 1'b1} mode_e;

  // Per-PE layer configuration, written by the host between layers.
  typedef struct packed {
    // multiply phase
    mode_e               mode;
    logic [3:0]          k;          // nc_filter: filter columns (3)
    logic [2:0]          stride;
    logic [POS_W-1:0]    ofm_w;      // nc_output
    logic [POS_W-1:0]    ofm_h;
    logic [GRP_W-1:0]    n_og;       // groups of 3 output channels held here
    logic [WADDR_W-1:0]  w_base;     // first weight word of this layer
    logic [NADDR_W-1:0]  fc_n;       // num_neurons of the FC output layer
    logic [3:0]          n_eod;      // end-of-data events to wait for
    // fire phase
    logic [CH_W-1:0]     n_out_ch;   // output channels held here (conv)
    logic [CH_W-1:0]     ch_base;    // global index of the first of them
    logic signed [15:0]  qmul;       // quantization multiplier
    logic [5:0]          qshift;     // quantization right shift
    act_t                threshold;  // ReLU threshold
    logic                pool;       // 2x2 max-pool before firing
    // next layer (for building the fired events)
    mode_e               nxt_mode;
    logic [3:0]          nxt_k;
    logic [2:0]          nxt_stride;
    logic [1:0]          nxt_pad;
    logic [POS_W-1:0]    nxt_ofm_w;
    logic [POS_W-1:0]    nxt_ofm_h;
    logic [NADDR_W-1:0]  nxt_fc_base;
    // routing
    logic [NODES-1:0]    dst;        // where fired events go
    logic [NODES-1:0]    fwd;        // where received events are forwarded
  } cfg_t;

  // Load module -> dispatcher: one weight-word worth of work.
  typedef struct packed {
    logic                        eod;
    mode_e                       mode;
    act_t                        data;
    logic [GRP_W-1:0]            grp;    // conv: output-channel group, FC: word
    logic [NUM_MAC-1:0]          ent_v;  // conv: which (tap, neuron) pairs are used
    logic [NUM_MAC-1:0][SW_W-1:0]  tap;
    logic [NUM_MAC-1:0][POS_W-1:0] row;
    logic [NUM_MAC-1:0][POS_W-1:0] col;
  } ld_item_t;

  // Dispatcher -> one MAC module.
  typedef struct packed {
    logic                        valid;
    act_t                        data;
    logic [MULTS-1:0]            lv;     // lane valid
    logic [MULTS-1:0][DATA_W-1:0] w;
    logic [AADDR_W-1:0]          local_addr;
  } mac_item_t;

  // ---- helpers ----------------------------------------------------------
  function automatic logic [POS_W-1:0] div3(input logic [POS_W-1:0] v);
    return POS_W'(v / 3);
  endfunction

  function automatic logic [1:0] mod3(input logic [POS_W-1:0] v);
    return 2'(v % 3);
  endfunction

  // MAC module that owns conv output neuron (row, col).
  function automatic logic [3:0] conv_module(input logic [POS_W-1:0] row,
                                             input logic [POS_W-1:0] col);
    return 4'(3 * mod3(row) + mod3(col));
  endfunction

  // Words one output channel occupies in each partial-sum bank.
  function automatic logic [AADDR_W-1:0] bank_words(input cfg_t c);
    return AADDR_W'(((int'(c.ofm_h) + 2) / 3) * ((int'(c.ofm_w) + 2) / 3));
  endfunction

  // Local partial-sum address of conv output neuron (row, col) of group og.
  function automatic logic [AADDR_W-1:0] conv_local(input cfg_t c,
                                                    input logic [GRP_W-1:0] og,
                                                    input logic [POS_W-1:0] row,
                                                    input logic [POS_W-1:0] col);
    return AADDR_W'(int'(og) * int'(bank_words(c)) + int'(div3(row)) * ((int'(c.ofm_w) + 2) / 3)
                    + int'(div3(col)));
  endfunction

  // Weight words per FC input neuron: ceil(fc_n / 27).
  function automatic logic [GRP_W-1:0] fc_words(input cfg_t c);
    return GRP_W'((int'(c.fc_n) + LANES - 1) / LANES);
  endfunction

endpackage
