`timescale 1ps/1fs
// hit_detection: decides which samples of a channel are sent to the readout.
//
// A summed sample holds an edge when it is not uniform, that is when not every
// group sum is 0 (line all low) and not every group sum is GROUP_SIZE (line
// all high). Such a sample, and every sample taken in the cycle the coarse
// counter wrapped, is packed into one 256-bit word (format in tdc_pkg) and
// presented with word_valid_o for one cycle. The whole summed line is sent, so
// any number of edges inside one snapshot are recorded, and a word can be
// emitted every cycle: there is no dead time. Detecting edges and triggering
// on counter overflows are the paper's; the uniformity test is this design's
// simplest rule for "the data contains an edge".
//
// Timing: inputs belong to one sample; the word appears one cycle later.
module hit_detection
  import tdc_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [CH_W-1:0]     channel_i,
  input  logic [FINE_W-1:0]   sums_i,
  input  logic [COARSE_W-1:0] coarse_i,
  input  logic                ovf_i,
  output logic                word_valid_o,
  output tdc_word_t           word_o
);
  logic all_low, all_high, hit;

  always_comb begin
    all_low  = 1'b1;
    all_high = 1'b1;
    for (int g = 0; g < N_GROUPS; g++) begin
      if (sums_i[g*SUM_W +: SUM_W] != '0)                 all_low  = 1'b0;
      if (sums_i[g*SUM_W +: SUM_W] != SUM_W'(GROUP_SIZE)) all_high = 1'b0;
    end
    hit = !all_low && !all_high;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      word_valid_o <= 1'b0;
      word_o       <= '0;
    end else begin
      word_valid_o   <= hit || ovf_i;
      word_o.zero    <= '0;
      word_o.lost    <= 1'b0;
      word_o.ovf     <= ovf_i;
      word_o.hit     <= hit;
      word_o.channel <= channel_i;
      word_o.coarse  <= coarse_i;
      word_o.fine    <= sums_i;
    end
  end
endmodule
