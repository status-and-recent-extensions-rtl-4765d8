`timescale 1ps/1fs
// stream_merger: merges the word streams of all TDC channels into one.
//
// Each channel may emit a word in any cycle and cannot be stalled (the TDC has
// no dead time), so every channel writes into its own FIFO. A round-robin
// arbiter picks the next non-empty FIFO after the one served last and offers
// its oldest word on a valid/ready output; one word leaves per cycle at most.
// If a channel's FIFO is full its new word is dropped and counted, and the
// next word of that channel that is stored carries the "lost" flag so the
// readout knows the record has a gap. Merging is the paper's; the FIFOs, the
// round-robin order and the drop policy are this design's.
//
// Handshake: m_valid_o / m_word_o hold until m_ready_i is high at a
// clock edge; a word moves on every edge where both are high.
module stream_merger
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH       = N_CHANNELS,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [N_CH-1:0]  s_valid_i,
  input  tdc_word_t        s_word_i [N_CH],
  output logic             m_valid_o,
  output tdc_word_t        m_word_o,
  input  logic             m_ready_i,
  output logic [31:0]      dropped_o [N_CH]
);
  localparam int unsigned IW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [N_CH-1:0] full, empty, rd_en, pending_lost;
  tdc_word_t       head [N_CH];
  tdc_word_t       wr_word [N_CH];
  logic [IW-1:0]   last, sel;
  logic            any;
  logic            locked;      // a word was offered and not taken: keep offering it
  logic [IW-1:0]   locked_sel;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    always_comb begin
      wr_word[c]      = s_word_i[c];
      wr_word[c].lost = pending_lost[c];
    end

    sync_fifo #(.W(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk(clk), .rst(rst),
      .wr_en_i(s_valid_i[c]), .wr_data_i(wr_word[c]),
      .rd_en_i(rd_en[c]), .rd_data_o(head[c]),
      .full_o(full[c]), .empty_o(empty[c])
    );

    always_ff @(posedge clk) begin
      if (rst) begin
        pending_lost[c] <= 1'b0;
        dropped_o[c]    <= '0;
      end else if (s_valid_i[c]) begin
        if (full[c]) begin
          pending_lost[c] <= 1'b1;
          dropped_o[c]    <= dropped_o[c] + 1'b1;
        end else begin
          pending_lost[c] <= 1'b0;
        end
      end
    end
  end

  // Round robin: the first non-empty channel after the one served last.
  always_comb begin
    any = 1'b0;
    sel = last;
    if (locked) begin
      any = 1'b1;
      sel = locked_sel;
    end
    for (int k = 1; k <= N_CH; k++) begin
      logic [IW-1:0] c;
      c = IW'((int'(last) + k) % N_CH);
      if (!any && !empty[c]) begin
        any = 1'b1;
        sel = c;
      end
    end
  end

  assign m_valid_o = any;
  assign m_word_o  = head[sel];

  always_comb begin
    rd_en = '0;
    if (any && m_ready_i) rd_en[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last       <= IW'(N_CH - 1);
      locked     <= 1'b0;
      locked_sel <= '0;
    end else begin
      if (any && m_ready_i) last <= sel;
      locked     <= any && !m_ready_i;
      locked_sel <= sel;
    end
  end

  // A word offered and not taken stays the same until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst) (m_valid_o && !m_ready_i) |=> (m_valid_o && $stable(m_word_o));
  endproperty
  assert property (p_hold);
endmodule
