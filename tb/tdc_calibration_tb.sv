`timescale 1ps/1fs
// tdc_calibration_tb: code-density calibration of one channel, as done with
// the real TDC.
//
// A clock unrelated to the TDC clock (about 40.5 MHz) drives the channel, so
// its edges fall at evenly spread phases of the sampling clock. For each
// edge, the first snapshot that shows it gives the step position p (in taps).
// Over many edges, the number of edges with step at tap p is proportional to
// the delay of tap p. The testbench builds that histogram from the channel's
// words, separately for rising and falling edges. Summing the bin widths gives
// the tap delay curve A(p), which is checked against the true delays of the
// line. It also reports the number of bins per clock period, the mean LSB,
// the smallest and widest bin and the DNL and INL of the uncalibrated line.
// Checks: curve error at most 25 ps, 290-345 bins per period, and the widest
// bin at a clock-region crossing.
module tdc_calibration_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;

  localparam int N_EDGES = 5000;     // per polarity

  int checks = 0, failures = 0;
  logic clk = 0, rst, sig, valid;
  tdc_word_t word;

  tdc_channel dut (.clk(clk), .rst(rst), .sig_i(sig), .coarse_load_i(1'b0),
                   .coarse_load_value_i('0), .word_valid_o(valid), .word_o(word));

  always #(HALF_FS * 1fs) clk = ~clk;

  int hist_r [N_TAPS], hist_f [N_TAPS];
  int n_r = 0, n_f = 0;
  int last_coarse = -10;

  // Step position of the newest edge in a snapshot (from the input side).
  function automatic int step_pos(logic [FINE_W-1:0] s, output bit rising);
    int g0;
    g0 = int'(s[2:0]);
    rising = (g0 == 7) || (g0 != 0 && s[5:3] < 3'd4);
    for (int g = 0; g < N_GROUPS; g++) begin
      int v;
      v = int'(s[3*g +: 3]);
      if (rising && v != 7)  return g * GROUP_SIZE + v;
      if (!rising && v != 0) return g * GROUP_SIZE + (GROUP_SIZE - v);
    end
    return N_TAPS - 1;
  endfunction

  // First sighting of each edge: the word after a cycle without a word.
  always @(posedge clk) begin
    if (!rst && valid) begin
      if (int'(word.coarse) != last_coarse + 1) begin
        bit r;
        int p;
        p = step_pos(word.fine, r);
        if (r) begin hist_r[p]++; n_r++; end
        else   begin hist_f[p]++; n_f++; end
      end
      last_coarse = int'(word.coarse);
    end
  end

  initial begin
    repeat (N_EDGES * 9) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check the calibrated curve against the true arrival times.
  task automatic evaluate(input string name, input int hist [N_TAPS], input int n, input bit rising);
    real  lsb, acc, worst, est, truth;
    int   used;
    used = 0;
    for (int p = 0; p < N_TAPS; p++) if (hist[p] > 0) used = p + 1;
    // The first sightings cover exactly one clock period of the line.
    lsb = real'(PERIOD_FS) / 1000.0 / real'(used);
    $display("%s edges: %0d, bins per clock period %0d, mean LSB %0.2f ps", name, n, used, lsb);
    acc = 0.0; worst = 0.0;
    for (int p = 0; p + 1 < used; p++) begin
      acc += real'(hist[p]) / real'(n) * real'(PERIOD_FS) / 1000.0;
      est   = acc;                                       // calibrated A(p)
      truth = real'(rising ? arr_rise[p] : arr_fall[p]) / 1000.0;
      if (est - truth > worst) worst = est - truth;
      if (truth - est > worst) worst = truth - est;
    end
    $display("%s calibration: largest error of the delay curve %0.1f ps", name, worst);
    checks++;
    if (worst > 25.0) begin failures++; $display("FAIL %s calibration error %0.1f ps", name, worst); end
    checks++;
    if (used < 290 || used > 345) begin failures++; $display("FAIL %s bins per period %0d", name, used); end
    // Bin widths, DNL and INL in units of the mean bin (LSB), before calibration.
    begin
      real w, wmin, wmax, dnl_lo, dnl_hi, inl, inl_lo, inl_hi;
      int  pmax;
      wmin = 1.0e9; wmax = 0.0; pmax = 0;
      dnl_lo = 0.0; dnl_hi = 0.0; inl = 0.0; inl_lo = 0.0; inl_hi = 0.0;
      for (int p = 1; p + 1 < used; p++) begin
        w = real'(hist[p]) / real'(n) * real'(PERIOD_FS) / 1000.0;
        if (w < wmin) wmin = w;
        if (w > wmax) begin wmax = w; pmax = p; end
        if (w / lsb - 1.0 < dnl_lo) dnl_lo = w / lsb - 1.0;
        if (w / lsb - 1.0 > dnl_hi) dnl_hi = w / lsb - 1.0;
        inl += w / lsb - 1.0;
        if (inl < inl_lo) inl_lo = inl;
        if (inl > inl_hi) inl_hi = inl;
      end
      $display("%s bins: %0.1f to %0.1f ps (widest at tap %0d), DNL [%0.1f; %0.1f] LSB, INL [%0.1f; %0.1f] LSB",
               name, wmin, wmax, pmax, dnl_lo, dnl_hi, inl_lo, inl_hi);
      // The widest bin must be the one at a clock-region crossing (taps 100, 300).
      checks++;
      if (!((pmax >= 98 && pmax <= 102) || (pmax >= 298 && pmax <= 302))) begin
        failures++;
        $display("FAIL %s widest bin at tap %0d, not at a crossing", name, pmax);
      end
    end
  endtask

  initial begin
    build_cache();
    for (int p = 0; p < N_TAPS; p++) begin hist_r[p] = 0; hist_f[p] = 0; end
    rst = 1; sig = 0;
    repeat (4) @(posedge clk);
    #100 rst = 0;
    repeat (4) @(posedge clk);
    // Calibration clock: 24.69 ns period (about 40.5 MHz) with a small random
    // wander, so that its phase against the TDC clock sweeps evenly. Edges are
    // further apart than the line is long, so each first sighting is clean.
    for (int n = 0; n < 2 * N_EDGES; n++) begin
      #((12345.678 + $urandom_range(0, 999) / 1000.0) * 1ps);
      sig = ~sig;
    end
    repeat (10) @(posedge clk);
    evaluate("rising", hist_r, n_r, 1'b1);
    evaluate("falling", hist_f, n_f, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
