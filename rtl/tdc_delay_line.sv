`timescale 1ps/1fs
// tdc_delay_line: the tapped delay line of one TDC channel.
//
// N_CARRY4 carry-chain elements (126 in the prototype) are chained through their
// carry ports, so the input signal ripples along 4*N_CARRY4 = 504 taps. Tap 0 is
// nearest the input: at any instant, tap i shows the input as it was roughly
// i tap delays earlier, so an edge appears as a step in the tap vector whose
// position measures the time since the edge entered the line.
//
// The chain structure and the tap count follow the paper. The delays are this
// design's simulation model: every element gets a small deterministic spread
// (+/-6 % in steps of 2 %, by element index) and the elements at CROSS_0..2
// get CROSS_EXTRA more, standing for the clock-region crossings that show as
// wider bins near bins 100, 300 and 500 of the prototype. With the defaults
// the line is about 4.9 ns (rising) and 5.2 ns (falling) long, longer than one
// 3.214 ns clock period, so every edge is caught by at least one sample.
//
// Interface: sig_i is the asynchronous input, taps_o[i] the value at tap i.
module tdc_delay_line #(
  parameter int unsigned N_CARRY4    = tdc_pkg::N_CARRY4,
  parameter realtime     CROSS_EXTRA = 25.0,
  parameter int unsigned CROSS_0     = 25,
  parameter int unsigned CROSS_1     = 75,
  parameter int unsigned CROSS_2     = 125
) (
  input  logic                    sig_i,
  output logic [4*N_CARRY4-1:0]   taps_o
);
  // carry_in[k] is the carry input of element k: the line input for k = 0
  // (through CYINIT), the last carry output of element k-1 otherwise.
  logic [N_CARRY4-1:0] carry_in;
  assign carry_in[0] = 1'b0;

  for (genvar k = 0; k < N_CARRY4; k++) begin : g_carry4
    localparam real SCALE = 1.0 + 0.02 * (real'((k * 37) % 7) - 3.0);
    localparam realtime EXTRA = (k == CROSS_0 || k == CROSS_1 || k == CROSS_2) ? CROSS_EXTRA : 0.0;
    logic [3:0] co;
    logic [3:0] o_unused;

    carry4 #(
      .RISE_0(13.0 * SCALE), .RISE_1(3.7 * SCALE), .RISE_2(12.0 * SCALE), .RISE_3(10.0 * SCALE),
      .FALL_0(14.0 * SCALE), .FALL_1(4.2 * SCALE), .FALL_2(12.6 * SCALE), .FALL_3(10.4 * SCALE),
      .EXTRA (EXTRA)
    ) u_carry4 (
      .CI     (carry_in[k]),
      .CYINIT ((k == 0) ? sig_i : 1'b0),
      .DI     (4'b0000),
      .S      (4'b1111),
      .O      (o_unused),
      .CO     (co)
    );

    if (k + 1 < N_CARRY4) begin : g_link
      assign carry_in[k+1] = co[3];
    end
    assign taps_o[4*k +: 4]    = co;
  end
endmodule
