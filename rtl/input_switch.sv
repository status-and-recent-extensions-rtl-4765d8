`timescale 1ps/1fs
// input_switch: routes the external signal inputs to the TDC channels.
//
// Each channel takes one of the N_INPUTS signal inputs, chosen by chan_sel_i,
// and the loopback output repeats the input chosen by loop_sel_i. With the
// loopback fed through a cable and back into another input, one source can
// reach some channels directly and others with a known cable delay, and one
// calibration source can be sent to all channels. The switch is plain
// combinational selection: the inputs are asynchronous and their timing is
// what is measured, so nothing here is clocked. That the switch exists, with
// four inputs and a loopback output, is from the block diagram; the
// per-channel select is this design's choice.
module input_switch #(
  parameter int unsigned N_INPUTS   = 4,
  parameter int unsigned N_CHANNELS = tdc_pkg::N_CHANNELS,
  parameter int unsigned SEL_W      = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1
) (
  input  logic [N_INPUTS-1:0]   sig_i,
  input  logic [SEL_W-1:0]      chan_sel_i [N_CHANNELS],
  input  logic [SEL_W-1:0]      loop_sel_i,
  output logic [N_CHANNELS-1:0] chan_o,
  output logic                  loopback_o
);
  always_comb begin
    for (int c = 0; c < N_CHANNELS; c++)
      chan_o[c] = (32'(chan_sel_i[c]) < N_INPUTS) ? sig_i[chan_sel_i[c]] : 1'b0;
    loopback_o = (32'(loop_sel_i) < N_INPUTS) ? sig_i[loop_sel_i] : 1'b0;
  end
endmodule
