`timescale 1ps/1fs
// tdc_top: eight-channel tapped-delay-line TDC with readout to memory.
//
// Signal path: the input switch routes the N_INPUTS external inputs to the
// eight channels (and one of them to a loopback output). Each channel runs its
// input along a 504-tap carry-chain delay line, samples all taps every clock,
// sums them in 72 groups of 7 and emits a 256-bit word whenever the snapshot
// contains an edge or its coarse counter wrapped. The stream merger buffers
// the eight word streams and interleaves them; the DMA engine writes the
// merged stream into a circular buffer in memory.
//
// Clock: clk is the TDC clock, 311.1111 MHz in the prototype, supplied by an
// external jitter-cleaning clock generator (optionally locked to a trigger
// logic unit); all logic here runs on it. rst is synchronous, active high.
// coarse_load_i sets all coarse counters to coarse_load_value_i at once.
//
// Memory: the write port (valid/ready, word address, 256-bit data) stands for
// the system memory interface; the memory itself is outside this design.
//
// Latency from a sampling edge to the word at the merger output: 3 cycles in
// the channel plus at least one in the merger FIFO; one more into the DMA
// output register.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned N_INPUTS   = 4,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned ADDR_W     = 32,
  parameter int unsigned SEL_W      = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1
) (
  input  logic                clk,
  input  logic                rst,
  // analog-timing side
  input  logic [N_INPUTS-1:0] sig_i,
  output logic                loopback_o,
  input  logic [SEL_W-1:0]    chan_sel_i [N_CHANNELS],
  input  logic [SEL_W-1:0]    loop_sel_i,
  // coarse time synchronisation
  input  logic                coarse_load_i,
  input  logic [COARSE_W-1:0] coarse_load_value_i,
  // readout software registers
  input  logic                dma_enable_i,
  input  logic [ADDR_W-1:0]   dma_base_addr_i,
  input  logic [ADDR_W-1:0]   dma_buf_words_i,
  input  logic [ADDR_W-1:0]   dma_rd_ptr_i,
  output logic [ADDR_W-1:0]   dma_wr_ptr_o,
  output logic [31:0]         dma_words_written_o,
  output logic                dma_full_o,
  output logic [31:0]         dropped_o [N_CHANNELS],
  // memory write port
  output logic                mem_valid_o,
  output logic [ADDR_W-1:0]   mem_addr_o,
  output logic [WORD_W-1:0]   mem_data_o,
  input  logic                mem_ready_i
);
  logic [N_CHANNELS-1:0] chan_sig;
  logic [N_CHANNELS-1:0] word_valid;
  tdc_word_t             word [N_CHANNELS];
  logic                  m_valid, m_ready;
  tdc_word_t             m_word;

  input_switch #(.N_INPUTS(N_INPUTS), .N_CHANNELS(N_CHANNELS)) u_switch (
    .sig_i(sig_i), .chan_sel_i(chan_sel_i), .loop_sel_i(loop_sel_i),
    .chan_o(chan_sig), .loopback_o(loopback_o)
  );

  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_channel
    tdc_channel #(.CHANNEL(c)) u_channel (
      .clk(clk), .rst(rst), .sig_i(chan_sig[c]),
      .coarse_load_i(coarse_load_i), .coarse_load_value_i(coarse_load_value_i),
      .word_valid_o(word_valid[c]), .word_o(word[c])
    );
  end

  stream_merger #(.N_CH(N_CHANNELS), .FIFO_DEPTH(FIFO_DEPTH)) u_merge (
    .clk(clk), .rst(rst),
    .s_valid_i(word_valid), .s_word_i(word),
    .m_valid_o(m_valid), .m_word_o(m_word), .m_ready_i(m_ready),
    .dropped_o(dropped_o)
  );

  dma_engine #(.ADDR_W(ADDR_W)) u_dma (
    .clk(clk), .rst(rst),
    .enable_i(dma_enable_i), .base_addr_i(dma_base_addr_i), .buf_words_i(dma_buf_words_i),
    .rd_ptr_i(dma_rd_ptr_i), .wr_ptr_o(dma_wr_ptr_o), .words_written_o(dma_words_written_o),
    .full_o(dma_full_o),
    .s_valid_i(m_valid), .s_word_i(m_word), .s_ready_o(m_ready),
    .mem_valid_o(mem_valid_o), .mem_addr_o(mem_addr_o), .mem_data_o(mem_data_o),
    .mem_ready_i(mem_ready_i)
  );
endmodule
