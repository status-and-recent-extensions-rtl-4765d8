`timescale 1ps/1fs
// tdc_top_tb: the whole TDC, at its default sizes, end to end.
//
// The testbench plays the laboratory set-up and the readout software:
//  * a clock of 311.1111 MHz;
//  * phase 1, resolution set-up: input 0 carries random edges, the loopback
//    output repeats input 0 and returns through a cable of 3, 12, 15 or 24 ns
//    into input 1; channels 0-3 see input 0, channels 4-7 input 1. Each edge
//    is timed on all channels from the memory data, and the time difference
//    between the two groups must equal the cable delay within 30 ps;
//  * phase 2, detector read-out: the switch is changed so that channels 0-3
//    see input 2 and 4-7 input 3, which carry DPTS-style hits (two pulse
//    pairs; column and row delays between the edges, time-over-threshold
//    between the groups, 20-200 ns and once 10 us). Column, row and ToT are
//    decoded from memory and must match what was sent within 30 ps;
//  * the coarse counters are loaded just below their end once, so overflow
//    words appear;
//  * phase 3: the software stops reading, the memory buffer fills, the
//    channel FIFOs overflow and words are dropped; the dropped counts and the
//    lost flags must agree.
// Every word read from memory is compared with a reference model of the
// channel (tap delays, sums, coarse time, flags). Each mechanism is counted
// and must have occurred at least once.
module tdc_top_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;

  localparam int BUF_WORDS = 256;
  localparam int BASE      = 4096;

  int checks = 0, failures = 0;

  logic        clk = 0, rst;
  logic [3:0]  sig;
  logic        loopback;
  logic [1:0]  chan_sel [8];
  logic [1:0]  loop_sel;
  logic        coarse_load;
  logic [31:0] coarse_load_value;
  logic        dma_enable;
  logic [31:0] rd_ptr, wr_ptr, words_written;
  logic        dma_full;
  logic [31:0] dropped [8];
  logic        mem_valid, mem_ready;
  logic [31:0] mem_addr;
  logic [255:0] mem_data;

  tdc_top dut (
    .clk(clk), .rst(rst), .sig_i(sig), .loopback_o(loopback),
    .chan_sel_i(chan_sel), .loop_sel_i(loop_sel),
    .coarse_load_i(coarse_load), .coarse_load_value_i(coarse_load_value),
    .dma_enable_i(dma_enable), .dma_base_addr_i(32'(BASE)), .dma_buf_words_i(32'(BUF_WORDS)),
    .dma_rd_ptr_i(rd_ptr), .dma_wr_ptr_o(wr_ptr), .dma_words_written_o(words_written),
    .dma_full_o(dma_full), .dropped_o(dropped),
    .mem_valid_o(mem_valid), .mem_addr_o(mem_addr), .mem_data_o(mem_data), .mem_ready_i(mem_ready));

  ram_model #(.READY_PCT(85)) u_ram (.clk(clk), .valid_i(mem_valid), .addr_i(mem_addr),
                                      .data_i(mem_data), .ready_o(mem_ready));

  always #(HALF_FS * 1fs) clk = ~clk;

  function automatic longint now_fs();
    return longint'($realtime * 1000.0 + 0.5);
  endfunction

  // ---------------- mechanism counters ----------------
  int n_hit = 0, n_multi = 0, n_ovf = 0, n_lost = 0, n_full = 0, n_wrap = 0;
  int n_switch = 0, n_cable = 0, n_dpts = 0;
  longint worst_cable = 0, worst_dpts = 0;   // largest timing errors seen, fs
  function automatic longint absl(longint x);
    return (x < 0) ? -x : x;
  endfunction

  // ---------------- cable from loopback to input 1 ----------------
  realtime cable_delay = 3000.0;
  logic    cable_out = 0;
  always begin
    @(loopback);
    fork
      begin
        automatic logic v = loopback;
        #(cable_delay * 1ps) cable_out = v;
      end
    join_none
  end
  always @(cable_out) sig[1] = cable_out;

  // ---------------- reference: what each channel sees ----------------
  edge_t chev [8][$];
  logic  chlev [8];
  always @(sig[0], sig[1], sig[2], sig[3], chan_sel[0], chan_sel[1], chan_sel[2], chan_sel[3],
           chan_sel[4], chan_sel[5], chan_sel[6], chan_sel[7]) begin
    for (int c = 0; c < 8; c++) begin
      logic v;
      v = sig[chan_sel[c]];
      if (v !== chlev[c]) begin
        chlev[c] = v;
        chev[c].push_back('{now_fs(), v});
      end
    end
  end

  typedef struct { logic [215:0] fine; logic [31:0] coarse; bit ovf; } exp_t;
  exp_t   expq [8][$];
  longint ts_of [logic [31:0]];
  logic [31:0] ref_count;
  bit     ref_ovf;

  always @(posedge clk) begin
    longint ts;
    ts = now_fs();
    if (rst) begin
      ref_count <= 0; ref_ovf <= 0;
    end else begin
      ts_of[ref_count] = ts;
      for (int c = 0; c < 8; c++) begin
        logic [215:0] s;
        // forget edges that have left the line (keep the newest old one)
        while (chev[c].size() > 1 && chev[c][1].t_fs < ts - 64'd7000000) void'(chev[c].pop_front());
        s = sums_of(taps_at(chev[c], ts));
        if (!uniform(s) || ref_ovf) begin
          expq[c].push_back('{s, ref_count, ref_ovf});
          pushed[c]++;
        end
      end
      if (coarse_load) begin ref_count <= coarse_load_value; ref_ovf <= 0; end
      else begin ref_count <= ref_count + 1; ref_ovf <= (ref_count == 32'hFFFF_FFFF); end
    end
  end

  // ---------------- readout software ----------------
  typedef struct { longint t; bit rising; } tedge_t;
  tedge_t found [8][$];       // edges decoded from memory, per channel
  bit     reader_on = 1;
  int     words_read = 0;
  int     pushed [8] = '{default: 0};
  int     read_ch [8] = '{default: 0};

  // All edges in one word, with their entry times. The scan runs from the
  // input side, i.e. from the newest edge to the oldest; edges already found
  // in the previous word (same polarity, within 200 ps) are not added again.
  task automatic extract(int c, logic [215:0] s, longint ts);
    bit     level;
    tedge_t here [$];
    level = (s[2:0] == 3'd7) || (s[2:0] != 3'd0 && s[5:3] < 3'd4);   // value at tap 0
    for (int g = 0; g < 72; g++) begin
      int v, p;
      bit newer;
      v = s[3*g +: 3];
      p = -1;
      newer = level;
      if (v == 0 && level)       begin p = 7 * g;     level = 0; end
      else if (v == 7 && !level) begin p = 7 * g;     level = 1; end
      else if (v != 0 && v != 7) begin p = level ? 7 * g + v : 7 * g + (7 - v); level = !level; end
      if (p >= 0) begin
        longint t;
        if (p == 0) p = 1;
        t = ts - (newer ? (arr_rise[p-1] + arr_rise[p]) / 2 : (arr_fall[p-1] + arr_fall[p]) / 2);
        here.push_front('{t, newer});
      end
    end
    foreach (here[i]) begin
      bit dup;
      dup = 0;
      for (int j = found[c].size() - 1; j >= 0 && j >= found[c].size() - 16; j--)
        if (found[c][j].rising == here[i].rising &&
            found[c][j].t - here[i].t < 200000 && here[i].t - found[c][j].t < 200000) dup = 1;
      if (!dup) found[c].push_back(here[i]);
    end
  endtask

  always @(posedge clk) begin
    if (rst) begin
      rd_ptr <= 0;
    end else begin
      if (dma_full) n_full++;
      if (reader_on && rd_ptr != wr_ptr) begin
        tdc_word_t w;
        int c;
        exp_t e;
        w = u_ram.read(32'(BASE) + rd_ptr);
        c = int'(w.channel);
        words_read++;
        read_ch[c]++;
        if (w.lost) begin
          n_lost++;
          while (expq[c].size() > 0 && expq[c][0].coarse != w.coarse) void'(expq[c].pop_front());
        end
        checks++;
        if (expq[c].size() == 0) begin
          failures++;
          if (failures < 8) $display("FAIL ch %0d: unexpected word coarse %0d", c, w.coarse);
        end else begin
          e = expq[c].pop_front();
          if (w.fine !== e.fine || w.coarse !== e.coarse || w.ovf !== e.ovf || w.hit !== !uniform(e.fine)) begin
            failures++;
            if (failures < 8) $display("FAIL ch %0d word coarse %0d (exp %0d) ovf %b/%b fine %s",
                                       c, w.coarse, e.coarse, w.ovf, e.ovf, (w.fine === e.fine) ? "ok" : "differs");
          end
        end
        if (w.hit) begin
          n_hit++;
          if (count_edges(w.fine) >= 2) n_multi++;
          extract(c, w.fine, ts_of[w.coarse]);
        end
        if (w.ovf) n_ovf++;
        if (rd_ptr == BUF_WORDS - 1) begin rd_ptr <= 0; n_wrap++; end
        else rd_ptr <= rd_ptr + 1;
      end
    end
  end

  task automatic idle(int cycles);
    repeat (cycles) @(posedge clk);
  endtask

  task automatic clear_found();
    for (int c = 0; c < 8; c++) found[c].delete();
  endtask

  // ---------------- watchdog ----------------
  initial begin
    #(40000 * PERIOD_FS * 1fs);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  realtime cables [4] = '{3000.0, 12000.0, 15000.0, 24000.0};

  initial begin
    build_cache();
    rst = 1; sig = '0; loop_sel = 2'd0; coarse_load = 0; coarse_load_value = 0; dma_enable = 0;
    for (int c = 0; c < 8; c++) begin chan_sel[c] = (c < 4) ? 2'd0 : 2'd1; chlev[c] = 0; end
    idle(4);
    #100 rst = 0; dma_enable = 1;
    idle(5);

    // ---- phase 1: cable-delay measurement ----
    for (int k = 0; k < 4; k++) begin
      cable_delay = cables[k];
      idle(12);
      clear_found();
      for (int n = 0; n < 10; n++) begin
        #((90000.0 + $urandom_range(0, 3213) + $urandom_range(0, 999) / 1000.0) * 1ps);
        sig[0] = ~sig[0];
      end
      idle(40);
      // compare channel c with c+4: the same edges, later by the cable delay
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (found[c].size() != 10 || found[c + 4].size() != 10) begin
          failures++;
          $display("FAIL cable %0.0f ps: ch %0d saw %0d edges, ch %0d saw %0d", cable_delay,
                   c, found[c].size(), c + 4, found[c + 4].size());
        end else begin
          for (int n = 0; n < 10; n++) begin
            longint d;
            d = found[c + 4][n].t - found[c][n].t - longint'(cable_delay * 1000.0);
            if (absl(d) > worst_cable) worst_cable = absl(d);
            checks++;
            if (d > 30000 || d < -30000 || found[c][n].rising != found[c + 4][n].rising) begin
              failures++;
              $display("FAIL cable %0.0f ps ch %0d edge %0d: error %0d fs", cable_delay, c, n, d);
            end
            n_cable++;
          end
        end
      end
    end

    // ---- coarse counter overflow ----
    @(negedge clk) begin coarse_load = 1; coarse_load_value = 32'hFFFF_FF00; end
    @(negedge clk) coarse_load = 0;
    idle(300);

    // ---- phase 2: switch to the detector inputs, DPTS-style hits ----
    @(negedge clk);
    for (int c = 0; c < 8; c++) chan_sel[c] = (c < 4) ? 2'd2 : 2'd3;
    n_switch++;
    idle(12);
    for (int h = 0; h < 7; h++) begin
      realtime col, row, tot, width;
      col   = 600.0 + 100.0 * $urandom_range(0, 15);    // column spacing ~100 ps
      row   = 500.0 + 100.0 * $urandom_range(0, 31);
      tot   = 1000.0 * $urandom_range(20, 200) + $urandom_range(0, 999);  // 20 ns .. 200 ns
      if (h == 6) tot = 10000000.0 + 0.456;                               // 10 us, the longest
      width = 300.0;
      clear_found();
      #(($urandom_range(0, 3213) + 0.123) * 1ps);
      // group 1 and, tot later, group 2; input 3 carries the same hit 1.5 ns later
      fork
        begin
          sig[2] = 1; #(width * 1ps) sig[2] = 0; #((col - width) * 1ps) sig[2] = 1; #(row * 1ps) sig[2] = 0;
          #((tot - col - row) * 1ps);
          sig[2] = 1; #(width * 1ps) sig[2] = 0; #((col - width) * 1ps) sig[2] = 1; #(row * 1ps) sig[2] = 0;
        end
        begin
          #1500;
          sig[3] = 1; #(width * 1ps) sig[3] = 0; #((col - width) * 1ps) sig[3] = 1; #(row * 1ps) sig[3] = 0;
          #((tot - col - row) * 1ps);
          sig[3] = 1; #(width * 1ps) sig[3] = 0; #((col - width) * 1ps) sig[3] = 1; #(row * 1ps) sig[3] = 0;
        end
      join
      idle(150);   // lets the memory port drain this hit before it is checked
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (found[c].size() != 8) begin
          failures++;
          $display("FAIL DPTS hit %0d ch %0d: %0d edges decoded", h, c, found[c].size());
          foreach (found[c][i]) $display("   edge %0d at %0d fs rising %b", i, found[c][i].t, found[c][i].rising);
        end else begin
          longint mc, mr, mt;
          mc = found[c][2].t - found[c][0].t;      // column: first to second rising edge
          mr = found[c][3].t - found[c][2].t;      // row: second rising to second falling edge
          mt = found[c][4].t - found[c][0].t;      // ToT: first rising edges of the two groups
          if (absl(mc - longint'(col * 1000.0)) > worst_dpts) worst_dpts = absl(mc - longint'(col * 1000.0));
          if (absl(mr - longint'(row * 1000.0)) > worst_dpts) worst_dpts = absl(mr - longint'(row * 1000.0));
          if (absl(mt - longint'(tot * 1000.0)) > worst_dpts) worst_dpts = absl(mt - longint'(tot * 1000.0));
          checks++;
          if (mc - longint'(col * 1000.0) > 30000 || longint'(col * 1000.0) - mc > 30000 ||
              mr - longint'(row * 1000.0) > 30000 || longint'(row * 1000.0) - mr > 30000 ||
              mt - longint'(tot * 1000.0) > 30000 || longint'(tot * 1000.0) - mt > 30000) begin
            failures++;
            $display("FAIL DPTS hit %0d ch %0d: col %0d/%0.0f row %0d/%0.0f tot %0d/%0.0f", h, c,
                     mc / 1000, col, mr / 1000, row, mt / 1000, tot);
          end
          n_dpts++;
        end
      end
    end

    // ---- phase 3: software stalls, buffer fills, FIFOs overflow ----
    reader_on = 0;
    for (int n = 0; n < 600; n++) begin
      #((900.0 + $urandom_range(0, 2000) + 0.37) * 1ps);
      sig[2] = ~sig[2];
    end
    idle(300);
    reader_on = 1;
    idle(400);

    // ---- end: everything read, counts agree ----
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (read_ch[c] + int'(dropped[c]) != pushed[c]) begin
        failures++;
        $display("FAIL ch %0d: %0d words produced, %0d read, %0d dropped", c, pushed[c], read_ch[c], dropped[c]);
      end
    end
    begin
      int drops;
      drops = 0;
      for (int c = 0; c < 8; c++) drops += int'(dropped[c]);
      checks++;
      if (int'(words_written) != words_read) begin
        failures++;
        $display("FAIL written %0d read %0d", words_written, words_read);
      end
    end
    $display("words %0d: hit %0d, several edges %0d, overflow %0d, lost flag %0d; buffer full %0d cycles, wraps %0d",
             words_read, n_hit, n_multi, n_ovf, n_lost, n_full, n_wrap);
    $display("cable edges matched %0d, DPTS hits decoded %0d, switch changes %0d", n_cable, n_dpts, n_switch);
    $display("largest error: cable delay %0.1f ps, DPTS column/row/ToT %0.1f ps", worst_cable / 1000.0, worst_dpts / 1000.0);
    checks++;
    if (n_hit == 0 || n_multi == 0 || n_ovf == 0 || n_lost == 0 || n_full == 0 || n_wrap == 0 ||
        n_switch == 0 || n_cable == 0 || n_dpts == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
