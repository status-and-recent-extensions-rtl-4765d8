`timescale 1ps/1fs
// dma_engine: writes the merged TDC word stream into a circular buffer in
// system memory, from where the readout software collects it.
//
// The software sets a buffer (base word address and length in words) and
// enables the engine. Each accepted word is written to the next slot,
// base + slot, the slot index wrapping at the buffer end. wr_ptr_o is the
// slot after the last word the memory has accepted, so every slot before it
// (back to rd_ptr_i) holds valid data when the software looks. The software reports how far it
// has read through rd_ptr_i; the engine keeps one slot free and stops
// accepting words (s_ready_o low) while the buffer is full, so data are never
// overwritten before they are read: the back-pressure then fills the channel
// FIFOs of the merger. Moving the data by DMA to memory is the paper's; the
// circular buffer, its pointers and the simple one-word write port are this
// design's (a real system puts an AXI master here).
//
// Memory port: mem_valid_o, mem_addr_o (word address) and mem_data_o hold
// until mem_ready_i is high at a clock edge. Throughput: one word per cycle
// while the memory is ready and the buffer has room.
module dma_engine
  import tdc_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst,
  // configuration from the readout software
  input  logic              enable_i,
  input  logic [ADDR_W-1:0] base_addr_i,
  input  logic [ADDR_W-1:0] buf_words_i,
  input  logic [ADDR_W-1:0] rd_ptr_i,
  output logic [ADDR_W-1:0] wr_ptr_o,
  output logic [31:0]       words_written_o,
  output logic              full_o,
  // merged word stream
  input  logic              s_valid_i,
  input  tdc_word_t         s_word_i,
  output logic              s_ready_o,
  // memory write port
  output logic              mem_valid_o,
  output logic [ADDR_W-1:0] mem_addr_o,
  output logic [WORD_W-1:0] mem_data_o,
  input  logic              mem_ready_i
);
  logic [ADDR_W-1:0] issue_ptr;   // slot of the next word to be accepted
  logic [ADDR_W-1:0] next_ptr;

  function automatic logic [ADDR_W-1:0] advance(logic [ADDR_W-1:0] p);
    return (p + 1'b1 == buf_words_i) ? '0 : p + 1'b1;
  endfunction

  assign next_ptr  = advance(issue_ptr);
  assign full_o    = (next_ptr == rd_ptr_i);
  // The single output register takes a new word when it is empty or draining.
  assign s_ready_o = enable_i && !full_o && (!mem_valid_o || mem_ready_i);

  always_ff @(posedge clk) begin
    if (rst) begin
      mem_valid_o     <= 1'b0;
      mem_addr_o      <= '0;
      mem_data_o      <= '0;
      issue_ptr       <= '0;
      wr_ptr_o        <= '0;
      words_written_o <= '0;
    end else begin
      if (mem_valid_o && mem_ready_i) begin
        mem_valid_o     <= 1'b0;
        wr_ptr_o        <= advance(wr_ptr_o);
        words_written_o <= words_written_o + 1'b1;
      end
      if (s_valid_i && s_ready_o) begin
        mem_valid_o <= 1'b1;
        mem_addr_o  <= base_addr_i + issue_ptr;
        mem_data_o  <= s_word_i;
        issue_ptr   <= next_ptr;
      end
    end
  end

  property p_mem_hold;
    @(posedge clk) disable iff (rst)
      (mem_valid_o && !mem_ready_i) |=> (mem_valid_o && $stable(mem_addr_o) && $stable(mem_data_o));
  endproperty
  assert property (p_mem_hold);
endmodule
