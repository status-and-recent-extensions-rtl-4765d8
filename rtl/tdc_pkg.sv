`timescale 1ps/1fs
// tdc_pkg: sizes and the output word format shared by the TDC blocks.
//
// The tapped delay line has 126 CARRY4 elements of 4 taps each (504 taps).
// The taps are summed in groups of 7, giving 72 three-bit sums (216 bits).
// Each conversion is one 256-bit word; the 40 bits above the fine part hold
// the coarse counter, the channel number and status flags. Those sizes are
// the paper's. How the 40 bits are split is this design's choice:
//
//   [215:0]   fine    72 group sums, sum k in bits [3k+2:3k], k = 0 next to the input
//   [247:216] coarse  TDC clock cycle in which the taps were sampled
//   [250:248] channel channel number 0..7
//   [251]     hit     the sample holds at least one signal edge
//   [252]     ovf     the coarse counter wrapped to 0 in this sample's cycle
//   [253]     lost    words of this channel were dropped before this one
//   [255:254] zero
package tdc_pkg;

  localparam int unsigned N_CHANNELS      = 8;
  localparam int unsigned N_CARRY4        = 126;
  localparam int unsigned TAPS_PER_CARRY4 = 4;
  localparam int unsigned N_TAPS          = N_CARRY4 * TAPS_PER_CARRY4;   // 504
  localparam int unsigned GROUP_SIZE      = 7;
  localparam int unsigned N_GROUPS        = N_TAPS / GROUP_SIZE;           // 72
  localparam int unsigned SUM_W           = 3;                             // 0..7
  localparam int unsigned FINE_W          = N_GROUPS * SUM_W;              // 216
  localparam int unsigned WORD_W          = 256;
  localparam int unsigned COARSE_W        = 32;
  localparam int unsigned CH_W            = 3;

  typedef struct packed {
    logic [1:0]          zero;
    logic                lost;
    logic                ovf;
    logic                hit;
    logic [CH_W-1:0]     channel;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_word_t;

endpackage
