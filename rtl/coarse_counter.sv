`timescale 1ps/1fs
// coarse_counter: the free-running coarse time stamp of a TDC channel.
//
// Counts TDC clock cycles. When it wraps from all ones to zero it raises ovf_o
// for the one cycle in which it reads zero; the hit detection turns that into
// a data word, so the readout can extend the time range beyond the counter.
// Counting cycles and reporting overflows follow the paper. The width (32 of
// the 40 spare bits of a word), the synchronous reset and the load input
// (to align the counters of several channels or devices at a common T0) are
// this design's choices.
//
// Timing: count_o is the number of rising clk edges since reset or since a
// load, plus the loaded value. A load takes effect at the next edge.
module coarse_counter #(
  parameter int unsigned W = tdc_pkg::COARSE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load_i,
  input  logic [W-1:0] load_value_i,
  output logic [W-1:0] count_o,
  output logic         ovf_o
);
  always_ff @(posedge clk) begin
    if (rst) begin
      count_o <= '0;
      ovf_o   <= 1'b0;
    end else if (load_i) begin
      count_o <= load_value_i;
      ovf_o   <= 1'b0;
    end else begin
      count_o <= count_o + 1'b1;
      ovf_o   <= &count_o;
    end
  end
endmodule
