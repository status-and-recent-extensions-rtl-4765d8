`timescale 1ps/1fs
// sync_fifo: single-clock first-in first-out buffer, used by the stream merger
// to hold each channel's words while the merged output serves other channels.
//
// DEPTH entries of W bits in a register array, read and write pointers one bit
// wider than the address so full and empty are told apart. Writing when full
// and reading when empty are ignored (the caller checks full_o / empty_o).
// rd_data_o shows the oldest entry whenever empty_o is low (first-word
// fall-through); a write becomes visible the cycle after it.
module sync_fifo #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en_i,
  input  logic [W-1:0] wr_data_i,
  input  logic         rd_en_i,
  output logic [W-1:0] rd_data_o,
  output logic         full_o,
  output logic         empty_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;

  assign empty_o   = (wr_ptr == rd_ptr);
  assign full_o    = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign rd_data_o = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (wr_en_i && !full_o) wr_ptr <= wr_ptr + 1'b1;
      if (rd_en_i && !empty_o) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en_i && !full_o) mem[wr_ptr[AW-1:0]] <= wr_data_i;
  end

  initial assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
