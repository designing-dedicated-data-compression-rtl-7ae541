// daq_pkg: constants and types shared by the event compressor.
//
// The field widths of a TDC measurement follow the data format of the time
// measurement device (10 bit fine time in 10 ps units, 11 bit coarse time in
// 5 ns units, 28 bit epoch counter, 7 bit channel number). Times relative to
// the event reference are held in 32 bits. Everything else here (the item
// structs and the value-type encoding) is this design's own choice.
package daq_pkg;

  localparam int unsigned FINE_W    = 10;
  localparam int unsigned COARSE_W  = 11;
  localparam int unsigned EPOCH_W   = 28;
  localparam int unsigned CH_W      = 7;
  localparam int unsigned TIME_W    = 32;   // relative time and all coded values
  localparam int unsigned ABS_W     = 48;   // absolute time in 10 ps units
  localparam int unsigned NTYPES    = 4;    // pulses, start, width, distance
  localparam int unsigned TYPE_W    = 2;
  localparam int unsigned SYM_W     = 8;    // entropy-coder alphabet up to 256
  localparam int unsigned BW_W      = 6;    // binWidth 0..32

  // The four kinds of value written per channel.
  typedef enum logic [TYPE_W-1:0] {
    VT_PULSES   = 2'd0,
    VT_START    = 2'd1,
    VT_WIDTH    = 2'd2,
    VT_DISTANCE = 2'd3
  } val_type_e;

  // One TDC measurement as delivered, time sorted, by the front end.
  typedef struct packed {
    logic [CH_W-1:0]     channel;
    logic                rising;    // 1: rising edge, 0: falling edge
    logic [FINE_W-1:0]   fine;
    logic [COARSE_W-1:0] coarse;
    logic [EPOCH_W-1:0]  epoch;
  } hit_t;

  // Input stream item: a hit, or the end-of-event marker (eoe=1, hit ignored).
  typedef struct packed {
    logic eoe;
    hit_t hit;
  } in_item_t;

  // A hit converted to absolute time.
  typedef struct packed {
    logic              eoe;
    logic [CH_W-1:0]   channel;
    logic              rising;
    logic [ABS_W-1:0]  t;
  } timed_item_t;

  // One accepted pulse: for the channel's first pulse val_a is start,
  // otherwise the distance from the previous falling edge.
  typedef struct packed {
    logic              eoe;       // end-of-event marker, other fields ignored
    logic [CH_W-1:0]   channel;
    logic [TIME_W-1:0] val_a;
    logic [TIME_W-1:0] width;
  } pulse_t;

  // One value to code.
  typedef struct packed {
    val_type_e         vtype;
    logic [TIME_W-1:0] value;
    logic              last;      // last value of the frame
  } value_t;

  // One value after binning.
  typedef struct packed {
    val_type_e         vtype;
    logic [SYM_W-1:0]  bin;
    logic [TIME_W-1:0] low;       // value - binStart[bin]
    logic [BW_W-1:0]   nlow;      // binWidth[bin]
    logic              last;
  } binned_t;

  // Table selectors of the configuration port.
  typedef enum logic [1:0] {
    CFG_BIN_START = 2'd0,
    CFG_BIN_WIDTH = 2'd1,
    CFG_NBINS     = 2'd2,
    CFG_LS        = 2'd3
  } cfg_sel_e;

  // Kinds of encoder table written by the table builder.
  typedef enum logic [1:0] {
    TW_ENC   = 2'd0,   // encodingTable[addr] = data
    TW_NB    = 2'd1,   // nb[s]
    TW_START = 2'd2    // start[s]
  } tw_kind_e;

  // One variable-length bit field for the packer: the len low bits of data,
  // written most significant bit first.
  localparam int unsigned FIELD_W = 64;
  localparam int unsigned FLEN_W  = 7;
  typedef struct packed {
    logic [FIELD_W-1:0] data;
    logic [FLEN_W-1:0]  len;
    logic               last;     // last field of the frame
  } field_t;

  function automatic int unsigned clog2u(input int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
