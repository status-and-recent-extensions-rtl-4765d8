`timescale 1ps/1fs
// stream_merger_tb: eight channel streams into the merger (FIFO depth 4 to
// reach the full case quickly). Each channel numbers its words in the coarse
// field. Checked: per-channel order; every word either arrives or is counted
// as dropped; the lost flag is set exactly on the first word after a gap;
// one word per cycle from a single busy channel; round-robin order when all
// channels are waiting; the output holds while not ready (assertion in the
// merger).
module stream_merger_tb;
  import tdc_pkg::*;
  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst;
  logic [N-1:0] s_valid;
  tdc_word_t s_word [N];
  logic m_valid, m_ready;
  tdc_word_t m_word;
  logic [31:0] dropped [N];

  int sent [N], received [N], next_seq [N];
  int lost_seen = 0, out_count = 0;
  int last_ch = -1, rr_checks_on = 0;

  stream_merger #(.N_CH(N), .FIFO_DEPTH(4)) dut (
    .clk(clk), .rst(rst), .s_valid_i(s_valid), .s_word_i(s_word),
    .m_valid_o(m_valid), .m_word_o(m_word), .m_ready_i(m_ready), .dropped_o(dropped));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(posedge clk) begin
    if (!rst && m_valid && m_ready) begin
      int c, seq;
      c   = int'(m_word.channel);
      seq = int'(m_word.coarse);
      checks++;
      if (seq < next_seq[c] || m_word.lost !== (seq != next_seq[c])) begin
        failures++;
        $display("FAIL ch %0d seq %0d expected from %0d lost %b", c, seq, next_seq[c], m_word.lost);
      end
      if (m_word.lost) lost_seen++;
      if (rr_checks_on != 0 && last_ch >= 0) begin
        checks++;
        if (c != (last_ch + 1) % N) begin
          failures++;
          $display("FAIL round robin: %0d after %0d", c, last_ch);
        end
      end
      last_ch = c;
      next_seq[c] = seq + 1;
      received[c]++;
      out_count++;
    end
  end

  task automatic push_cycle(logic [N-1:0] v);
    @(negedge clk);
    s_valid = v;
    for (int c = 0; c < N; c++) begin
      s_word[c]         = '0;
      s_word[c].channel = 3'(c);
      s_word[c].coarse  = 32'(sent[c]);
      s_word[c].hit     = 1'b1;
      s_word[c].fine    = {7{32'($urandom)}};
      if (v[c]) sent[c]++;
    end
  endtask

  initial begin
    int start;
    rst = 1; s_valid = '0; m_ready = 0;
    for (int c = 0; c < N; c++) begin
      sent[c] = 0; received[c] = 0; next_seq[c] = 0;
      s_word[c] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // 1. One channel at full rate: one word out per cycle.
    m_ready = 1;
    start = out_count;
    repeat (100) push_cycle(8'b0000_0100);
    push_cycle('0);
    repeat (3) @(posedge clk);
    checks++;
    if (out_count - start != 100) begin failures++; $display("FAIL throughput %0d", out_count - start); end

    // 2. All channels waiting: served in round-robin order.
    m_ready = 0;
    repeat (3) push_cycle('1);
    push_cycle('0);
    last_ch = -1; rr_checks_on = 1;
    @(negedge clk) m_ready = 1;
    repeat (30) @(posedge clk);
    rr_checks_on = 0;

    // 3. Random traffic and random back-pressure.
    for (int n = 0; n < 3000; n++) begin
      push_cycle(8'($urandom) & 8'($urandom));
      m_ready = ($urandom_range(0, 99) < 70);
    end

    // 4. Stalled output: every FIFO overflows.
    m_ready = 0;
    repeat (40) push_cycle('1);
    push_cycle('0);
    @(negedge clk) m_ready = 1;
    repeat (5) push_cycle(8'hFF);
    push_cycle('0);
    repeat (100) @(posedge clk);

    for (int c = 0; c < N; c++) begin
      checks++;
      if (received[c] + int'(dropped[c]) != sent[c]) begin
        failures++;
        $display("FAIL ch %0d: sent %0d received %0d dropped %0d", c, sent[c], received[c], dropped[c]);
      end
    end
    checks++;
    if (lost_seen < N) begin failures++; $display("FAIL lost flags %0d", lost_seen); end
    $display("words out %0d, lost flags %0d, dropped on ch0 %0d", out_count, lost_seen, dropped[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
