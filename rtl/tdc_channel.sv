`timescale 1ps/1fs
// tdc_channel: one channel of the TDC (one of the eight stacked boxes of the
// block diagram).
//
// sig_i runs into a 504-tap carry-chain delay line. Every TDC clock edge the
// sampling registers take a snapshot of all taps together with the coarse
// counter; the next cycle the snapshot is reduced to 72 group sums; the cycle
// after, hit detection emits a 256-bit word if the snapshot holds an edge or
// the coarse counter wrapped. A word can leave every cycle, so the channel has
// no dead time, and several edges inside one snapshot all travel in one word.
//
// Reading a word: the sampling edge is at time coarse * T_clk (relative to the
// counter's zero). The step between tap values at fine position p (in taps,
// from the group sums) was caught p tap delays after it entered the line, so
// the edge entered at about coarse * T_clk - p * t_tap; a rising edge shows as
// ones on the input side of the step, a falling edge as zeros. Because the
// line is longer than a clock period an edge usually appears in two
// consecutive words; the readout keeps the first. Converting bins to time
// (code-density calibration) is done by the readout software.
//
// Timing: a snapshot taken at clock edge n appears as word_o at edge n+3
// (sampler, group sums, hit detection), carrying the coarse count present
// before edge n.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned CHANNEL = 0
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                sig_i,
  input  logic                coarse_load_i,
  input  logic [COARSE_W-1:0] coarse_load_value_i,
  output logic                word_valid_o,
  output tdc_word_t           word_o
);
  logic [N_TAPS-1:0]   taps, sample;
  logic [FINE_W-1:0]   sums;
  logic [COARSE_W-1:0] count, coarse_s1, coarse_s2;
  logic                ovf, ovf_s1, ovf_s2;

  tdc_delay_line u_line (.sig_i(sig_i), .taps_o(taps));

  tdc_sampler u_sampler (.clk(clk), .taps_i(taps), .sample_o(sample));

  coarse_counter u_coarse (
    .clk(clk), .rst(rst), .load_i(coarse_load_i), .load_value_i(coarse_load_value_i),
    .count_o(count), .ovf_o(ovf)
  );

  tap_group_sum u_sum (.clk(clk), .sample_i(sample), .sums_o(sums));

  // Coarse time travels beside the snapshot through the same two stages.
  always_ff @(posedge clk) begin
    if (rst) begin
      coarse_s1 <= '0; coarse_s2 <= '0;
      ovf_s1    <= 1'b0; ovf_s2  <= 1'b0;
    end else begin
      coarse_s1 <= count; coarse_s2 <= coarse_s1;
      ovf_s1    <= ovf;   ovf_s2    <= ovf_s1;
    end
  end

  hit_detection u_hit (
    .clk(clk), .rst(rst), .channel_i(CH_W'(CHANNEL)),
    .sums_i(sums), .coarse_i(coarse_s2), .ovf_i(ovf_s2),
    .word_valid_o(word_valid_o), .word_o(word_o)
  );
endmodule
