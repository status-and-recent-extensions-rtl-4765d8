`timescale 1ps/1fs
// tdc_channel_tb: one full channel against the reference model.
//
// Pulses of random width (150 ps to 2 ns) at random femtosecond times go into
// the channel. At every clock edge the testbench computes, from the reference
// tap delays, the snapshot the channel must take and the word it must emit
// (an edge in the snapshot, or a coarse overflow). Every emitted word must
// match in fine data, coarse time and flags, in order, three cycles after its
// sampling edge, and no expected word may be missing. The coarse counter is
// loaded close to its end once so that an overflow word is produced.
module tdc_channel_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;

  int checks = 0, failures = 0;
  int multi_edge_words = 0, ovf_words = 0, hit_words = 0;
  logic clk = 0, rst, sig, load, valid;
  logic [31:0] load_value;
  tdc_word_t word;
  edge_t ev [$];

  typedef struct { logic [215:0] fine; logic [31:0] coarse; bit ovf; int edge_no; } exp_t;
  exp_t expq [$];

  tdc_channel #(.CHANNEL(3)) dut (.clk(clk), .rst(rst), .sig_i(sig), .coarse_load_i(load),
                                  .coarse_load_value_i(load_value), .word_valid_o(valid), .word_o(word));

  always #(HALF_FS * 1fs) clk = ~clk;

  function automatic longint now_fs();
    return longint'($realtime * 1000.0 + 0.5);
  endfunction

  // Reference: coarse value seen by the next sampling edge, and its overflow flag.
  logic [31:0] ref_count;
  bit          ref_ovf;
  int          edge_no = 0;

  always @(posedge clk) begin
    longint ts;
    exp_t   e;
    ts = now_fs();
    edge_no++;
    if (rst) begin
      ref_count <= 0; ref_ovf <= 0;
    end else begin
      logic [215:0] s;
      s = sums_of(taps_at(ev, ts));
      if (!uniform(s) || ref_ovf) expq.push_back('{s, ref_count, ref_ovf, edge_no});
      if (load) begin ref_count <= load_value; ref_ovf <= 0; end
      else begin ref_count <= ref_count + 1; ref_ovf <= (ref_count == 32'hFFFF_FFFF); end
    end
    // Output check (word of an earlier edge).
    if (valid && !rst) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        if (failures < 6) $display("FAIL unexpected word coarse %0d at %0t fine %h ev %0d", word.coarse, $realtime, word.fine, ev.size());
      end else begin
        e = expq.pop_front();
        if (word.fine !== e.fine || word.coarse !== e.coarse || word.ovf !== e.ovf ||
            word.hit !== !uniform(e.fine) || word.channel !== 3'd3 || edge_no - e.edge_no != 3) begin
          failures++;
          if (failures < 6)
            $display("FAIL word coarse %0d (exp %0d) ovf %b (exp %b) latency %0d fine ok %b",
                     word.coarse, e.coarse, word.ovf, e.ovf, edge_no - e.edge_no, word.fine === e.fine);
        end
        if (word.hit && count_edges(word.fine) >= 2) multi_edge_words++;
        if (word.ovf) ovf_words++;
        if (word.hit) hit_words++;
      end
    end
  end

  initial begin
    #(3000 * PERIOD_FS * 1fs);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; sig = 0; load = 0; load_value = 0;
    repeat (4) @(posedge clk);
    #100 rst = 0;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 120; n++) begin
      real gap, width;
      gap   = 200.0 + $urandom_range(0, 4000) + $urandom_range(0, 999) / 1000.0;
      width = 150.0 + $urandom_range(0, 1850) + $urandom_range(0, 999) / 1000.0;
      #(gap * 1ps);
      sig = 1; ev.push_back('{now_fs(), 1'b1});
      #(width * 1ps);
      sig = 0; ev.push_back('{now_fs(), 1'b0});
      if (n == 60) begin
        @(negedge clk) begin load = 1; load_value = 32'hFFFF_FFF0; end
        @(negedge clk) load = 0;
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d words missing", expq.size()); end
    checks++;
    if (multi_edge_words == 0 || ovf_words == 0 || hit_words < 100) begin
      failures++;
      $display("FAIL coverage: multi-edge %0d overflow %0d hit %0d", multi_edge_words, ovf_words, hit_words);
    end
    $display("words: hit %0d, with several edges %0d, overflow %0d", hit_words, multi_edge_words, ovf_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
