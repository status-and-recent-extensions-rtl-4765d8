`timescale 1ps/1fs
// tdc_sampler: the sampling registers of one TDC channel.
//
// One flip-flop per delay-line tap, all clocked by the TDC clock (311.1 MHz in
// the prototype), so every clock edge takes a snapshot of the whole line. In
// the FPGA each flip-flop sits in the same slice as the carry element it
// samples; that placement rule is the paper's, the lack of a reset is this
// design's (the first snapshot after start-up overwrites whatever was there).
//
// Interface: taps_i is asynchronous; sample_o holds the taps as they were at
// the last rising edge of clk (one cycle of latency).
module tdc_sampler #(
  parameter int unsigned N_TAPS = tdc_pkg::N_TAPS
) (
  input  logic              clk,
  input  logic [N_TAPS-1:0] taps_i,
  output logic [N_TAPS-1:0] sample_o
);
  always_ff @(posedge clk) sample_o <= taps_i;
endmodule
