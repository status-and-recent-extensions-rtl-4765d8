`timescale 1ps/1fs
// tdc_tb_pkg: reference model used by the TDC testbenches.
//
// It recomputes, from the same delay formula the delay-line model documents,
// when an edge entering the line reaches each tap, and from a list of input
// transitions what the 504 taps and the 72 group sums show at any sampling
// instant. All times are integer femtoseconds. The tap delays are:
//   element k (0..125) scale s_k = 1 + 0.02 * ((37k mod 7) - 3)
//   rising stages  13.0, 3.7, 12.0, 10.0 ps times s_k
//   falling stages 14.0, 4.2, 12.6, 10.4 ps times s_k
//   plus 25 ps on stage 0 of elements 25, 75 and 125
package tdc_tb_pkg;

  localparam int N_TAPS    = 504;
  localparam int N_GROUPS  = 72;
  localparam int GROUP     = 7;
  // 311.1111 MHz: half period 1607.143 ps
  localparam longint HALF_FS   = 1607143;
  localparam longint PERIOD_FS = 2 * HALF_FS;

  typedef struct {
    longint t_fs;
    bit     v;
  } edge_t;

  function automatic longint stage_fs(int k, int s, bit rising);
    real rise [4] = '{13.0, 3.7, 12.0, 10.0};
    real fall [4] = '{14.0, 4.2, 12.6, 10.4};
    real scale, extra, d;
    scale = 1.0 + 0.02 * (real'((k * 37) % 7) - 3.0);
    extra = (s == 0 && (k == 25 || k == 75 || k == 125)) ? 25.0 : 0.0;
    d = (rising ? rise[s] : fall[s]) * scale + extra;
    return longint'($rtoi(d * 1000.0 + 0.5));
  endfunction

  // Arrival time of an edge at tap i, measured from its entry into the line.
  function automatic longint arrival_fs(int i, bit rising);
    longint acc = 0;
    for (int j = 0; j <= i; j++) acc += stage_fs(j / 4, j % 4, rising);
    return acc;
  endfunction

  // Cached cumulative delays.
  longint arr_rise [N_TAPS];
  longint arr_fall [N_TAPS];
  bit     cached = 0;

  function automatic void build_cache();
    longint ar = 0, af = 0;
    for (int j = 0; j < N_TAPS; j++) begin
      ar += stage_fs(j / 4, j % 4, 1'b1);
      af += stage_fs(j / 4, j % 4, 1'b0);
      arr_rise[j] = ar;
      arr_fall[j] = af;
    end
    cached = 1;
  endfunction

  // Tap i at time ts_fs shows the value of the latest transition to have
  // arrived there (0 before any).
  function automatic logic [N_TAPS-1:0] taps_at(input edge_t ev [$], longint ts_fs);
    logic [N_TAPS-1:0] t;
    if (!cached) build_cache();
    for (int i = 0; i < N_TAPS; i++) begin
      bit     v = 0;
      longint best = -1;
      foreach (ev[n]) begin
        longint a = ev[n].t_fs + (ev[n].v ? arr_rise[i] : arr_fall[i]);
        if (a <= ts_fs && a > best) begin
          best = a;
          v    = ev[n].v;
        end
      end
      t[i] = v;
    end
    return t;
  endfunction

  function automatic logic [3*N_GROUPS-1:0] sums_of(logic [N_TAPS-1:0] t);
    logic [3*N_GROUPS-1:0] s;
    for (int g = 0; g < N_GROUPS; g++) begin
      int n = 0;
      for (int j = 0; j < GROUP; j++) n += int'(t[g*GROUP + j]);
      s[3*g +: 3] = 3'(n);
    end
    return s;
  endfunction

  function automatic bit uniform(logic [3*N_GROUPS-1:0] s);
    bit lo = 1, hi = 1;
    for (int g = 0; g < N_GROUPS; g++) begin
      if (s[3*g +: 3] != 3'd0) lo = 0;
      if (s[3*g +: 3] != 3'd7) hi = 0;
    end
    return lo || hi;
  endfunction

  // Number of signal edges in a summed snapshot: each change of level between
  // full and empty groups, and each partly filled group, is one edge.
  function automatic int count_edges(logic [3*N_GROUPS-1:0] s);
    int  n = 0;
    bit  level = (s[2:0] == 3'd7) || (s[2:0] != 3'd0 && s[5:3] < 3'd4);   // value at tap 0
    for (int g = 0; g < N_GROUPS; g++) begin
      int v = s[3*g +: 3];
      if (v == 0)      begin if (level)  n++; level = 0; end
      else if (v == 7) begin if (!level) n++; level = 1; end
      else             begin n++; level = !level; end
    end
    return n;
  endfunction

  // Decoding as the readout software would: the first group (from the input
  // side) whose sum differs from that of group 0, refined inside the group by
  // its sum, gives the step position p in taps; the edge entered the line
  // about arrival(p) before the sampling edge. Returns the entry time in fs
  // using the calibration (cumulative tap delays) of the right polarity.
  function automatic longint decode_first_edge(logic [3*N_GROUPS-1:0] s, longint ts_fs,
                                               output bit rising);
    int g0 = s[2:0];
    int p  = -1;
    if (!cached) build_cache();
    rising = (g0 != 0);   // ones next to the input: the line saw a rise most recently
    for (int g = 0; g < N_GROUPS && p < 0; g++) begin
      int v = s[3*g +: 3];
      if (rising && v != 7)  p = g * GROUP + v;
      if (!rising && v != 0) p = g * GROUP + (GROUP - v);
    end
    if (p <= 0) p = 1;
    // The edge has passed tap p-1 but not tap p: take the middle of that bin.
    return ts_fs - ((rising ? arr_rise[p-1] + arr_rise[p] : arr_fall[p-1] + arr_fall[p]) / 2);
  endfunction

endpackage
