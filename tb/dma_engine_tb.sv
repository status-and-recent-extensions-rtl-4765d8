`timescale 1ps/1fs
// dma_engine_tb: numbered words are streamed into the DMA engine, which
// writes a 40-word circular buffer at word address 1000 in a memory model that
// is randomly not ready. A software model reads the buffer behind the
// writer, sometimes pausing so that the buffer fills and the engine must
// stall. Checked: every word lands at base + (n mod 40) with its contents,
// in order; nothing is overwritten before it is read; the engine stalls when
// full and wraps; one word per cycle when nothing stalls.
module dma_engine_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst, enable;
  logic [31:0] base, buf_words, rd_ptr, wr_ptr, words_written;
  logic full, s_valid, s_ready, mem_valid, mem_ready;
  tdc_word_t s_word;
  logic [31:0] mem_addr;
  logic [255:0] mem_data;
  int sent = 0, read_count = 0, full_cycles = 0, wraps = 0;
  int ram_pct = 100;

  dma_engine dut (
    .clk(clk), .rst(rst), .enable_i(enable), .base_addr_i(base), .buf_words_i(buf_words),
    .rd_ptr_i(rd_ptr), .wr_ptr_o(wr_ptr), .words_written_o(words_written), .full_o(full),
    .s_valid_i(s_valid), .s_word_i(s_word), .s_ready_o(s_ready),
    .mem_valid_o(mem_valid), .mem_addr_o(mem_addr), .mem_data_o(mem_data), .mem_ready_i(mem_ready));

  // Memory: an array written on accepted transfers; ready random at ram_pct.
  logic [255:0] mem [0:2047];
  always @(posedge clk) begin
    if (mem_valid && mem_ready) mem[mem_addr[10:0]] <= mem_data;
    mem_ready <= ($urandom_range(0, 99) < ram_pct);
  end

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tdc_word_t make_word(int n);
    tdc_word_t w;
    w = '0;
    w.coarse = 32'(n);
    w.fine   = {27{8'(n * 7 + 3)}};
    return w;
  endfunction

  // Source: offers word number `sent` whenever allowed.
  bit source_on = 0;
  always @(posedge clk) begin
    if (!rst && s_valid && s_ready) sent++;
    if (full) full_cycles++;
  end
  always @(negedge clk) begin
    s_valid = source_on && ($urandom_range(0, 99) < 90);
    s_word  = make_word(sent);
  end

  // Software reader: reads words between rd_ptr and wr_ptr when not paused.
  bit pause = 0;
  always @(posedge clk) begin
    if (!rst && !pause && rd_ptr != wr_ptr) begin
      tdc_word_t exp, got;
      exp = make_word(read_count);
      got = mem[11'(1000 + rd_ptr)];
      checks++;
      if (got !== exp) begin
        failures++;
        if (failures < 5) $display("FAIL word %0d at slot %0d: coarse %0d", read_count, rd_ptr, got.coarse);
      end
      read_count++;
      if (rd_ptr == buf_words - 1) begin rd_ptr <= 0; wraps++; end
      else rd_ptr <= rd_ptr + 1;
    end
  end

  initial begin
    int t0;
    rst = 1; enable = 0; base = 1000; buf_words = 40; rd_ptr = 0; s_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0; enable = 1;
    // Throughput: memory always ready, reader keeps up.
    source_on = 1;
    repeat (500) @(posedge clk);
    // Random memory stalls.
    ram_pct = 60;
    repeat (2000) @(posedge clk);
    // Reader pauses: the buffer fills and the engine must stop.
    pause = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (!full || words_written - read_count != 39) begin
      failures++;
      $display("FAIL full=%b written %0d read %0d", full, words_written, read_count);
    end
    pause = 0;
    repeat (1000) @(posedge clk);
    source_on = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (int'(words_written) != sent || read_count != sent) begin
      failures++;
      $display("FAIL sent %0d written %0d read %0d", sent, words_written, read_count);
    end
    checks++;
    if (wraps < 5 || full_cycles < 100) begin failures++; $display("FAIL wraps %0d full %0d", wraps, full_cycles); end
    $display("words %0d, buffer wraps %0d, full cycles %0d", sent, wraps, full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
