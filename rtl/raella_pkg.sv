// raella_pkg: constants and types shared by the RAELLA analog PIM datapath.
//
// The numbers below follow the architecture: 8b unsigned inputs and weights,
// 512x512 2T2R crossbars, 4b pulse-train DACs, signed 7b ADCs with a unit step
// (range [-64,63]), 16b partial sums, up to eight weight slices per weight.
// Dynamic input slicing speculates with three slices (bits 3..0, 5..4, 7..6)
// and recovers each with 1b slices, eleven crossbar cycles in all.
// The order of the eleven slices follows the speculation pipeline figure
// (speculate 3..0, recover 0..3, speculate 5..4, recover 4..5, ...).
package raella_pkg;

  localparam int unsigned IN_W      = 8;    // input activation bits
  localparam int unsigned W_W       = 8;    // weight bits
  localparam int unsigned DEV_W     = 4;    // bits per ReRAM device / DAC
  localparam int unsigned ADC_W     = 7;    // ADC output bits (signed)
  localparam int signed   ADC_MIN   = -64;
  localparam int signed   ADC_MAX   = 63;
  localparam int unsigned MAX_WSL   = 8;    // max weight slices per weight
  localparam int unsigned N_SLOTS   = 11;   // 3 speculation + 8 recovery slices
  localparam int unsigned DAC_TICKS = 30;   // 15 pulses, 1 tick on + 1 tick off

  typedef logic signed [ADC_W-1:0] adc_code_t;
  typedef logic [DEV_W-1:0]        dev_t;   // one ReRAM conductance level
  typedef logic [IN_W-1:0]         act_t;

  // One input slice of the crossbar sequence.
  typedef struct packed {
    logic       spec;    // 1: speculative slice, 0: 1b recovery slice
    logic [2:0] lsb;     // least significant input bit of the slice
    logic [2:0] width;   // number of input bits (1..4)
  } in_slice_t;

  // Weight slicing of one layer: number of slices and the LSB of each slice
  // (index 0 is the most significant slice, as in "4b-2b-2b").
  typedef struct packed {
    logic [3:0]               n_slices;      // 2..8
    logic [MAX_WSL-1:0][2:0]  lsb;           // lsb[k] of weight slice k
  } wslicing_t;

  // The fixed eleven-slot dynamic input slicing schedule.
  function automatic in_slice_t slot_slice(input int unsigned slot);
    in_slice_t s;
    case (slot)
      0:  s = '{spec:1'b1, lsb:3'd0, width:3'd4};
      1:  s = '{spec:1'b0, lsb:3'd0, width:3'd1};
      2:  s = '{spec:1'b0, lsb:3'd1, width:3'd1};
      3:  s = '{spec:1'b0, lsb:3'd2, width:3'd1};
      4:  s = '{spec:1'b0, lsb:3'd3, width:3'd1};
      5:  s = '{spec:1'b1, lsb:3'd4, width:3'd2};
      6:  s = '{spec:1'b0, lsb:3'd4, width:3'd1};
      7:  s = '{spec:1'b0, lsb:3'd5, width:3'd1};
      8:  s = '{spec:1'b1, lsb:3'd6, width:3'd2};
      9:  s = '{spec:1'b0, lsb:3'd6, width:3'd1};
      default: s = '{spec:1'b0, lsb:3'd7, width:3'd1};
    endcase
    return s;
  endfunction

  // Extract an input slice (at most DEV_W bits) from an 8b activation.
  function automatic dev_t take_slice(input act_t a, input logic [2:0] lsb,
                                      input logic [2:0] width);
    logic [IN_W-1:0] sh;
    logic [IN_W-1:0] mask;
    sh   = a >> lsb;
    mask = (IN_W'(1) << width) - IN_W'(1);
    return dev_t'(sh & mask);
  endfunction

  // Saturating 7b ADC transfer function with a unit step.
  function automatic adc_code_t adc_clamp(input int signed v);
    if (v > ADC_MAX) return adc_code_t'(ADC_MAX);
    if (v < ADC_MIN) return adc_code_t'(ADC_MIN);
    return adc_code_t'(v);
  endfunction

  // Tile commands (see raella_tile).
  typedef enum logic [2:0] {
    OP_LOAD_IB = 3'd0,   // eDRAM lines -> input buffers of the IMAs in ima_mask
    OP_FEED    = 3'd1,   // input buffer -> crossbar rows (xbar_mask), input sums
    OP_RUN     = 3'd2,   // run speculation + recovery on the selected crossbars
    OP_DRAIN   = 3'd3,   // psums -> center correction -> quantize -> eDRAM bytes
    OP_POOL    = 3'd4,   // max-pool eDRAM bytes into eDRAM bytes
    OP_SEND    = 3'd5    // eDRAM lines -> on-chip network
  } tile_op_t;

  typedef struct packed {
    tile_op_t    op;
    logic [7:0]  ima_mask;
    logic [3:0]  xbar_mask;
    logic [2:0]  ima;        // DRAIN: source IMA
    logic [1:0]  xbar;       // DRAIN: source crossbar
    logic [15:0] src;        // line or byte address, by op
    logic [15:0] dst;        // line, row or byte address, by op
    logic [15:0] count;      // lines, filters or pooled outputs
    logic [15:0] stride;     // POOL: byte distance between window elements
    logic [3:0]  win;        // POOL: window length
    logic [12:0] channel;    // DRAIN: first output channel
    logic        relu;       // DRAIN: fuse ReLU
  } tile_cmd_t;

endpackage
