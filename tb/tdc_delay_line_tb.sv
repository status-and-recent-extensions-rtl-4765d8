`timescale 1ps/1fs
// tdc_delay_line_tb: checks the 504-tap line against the reference delays.
// A rising edge, a falling edge and a 300 ps pulse are sent in; at many
// instants the whole tap vector is compared with the reference model, and
// the line length for rising and falling edges must lie in the 4-7 ns range.
module tdc_delay_line_tb;
  import tdc_tb_pkg::*;
  int checks = 0, failures = 0;
  logic sig;
  logic [503:0] taps;
  edge_t ev [$];

  tdc_delay_line dut (.sig_i(sig), .taps_o(taps));

  function automatic longint now_fs();
    return longint'($realtime * 1000.0 + 0.5);
  endfunction

  task automatic drive(bit v);
    sig = v;
    ev.push_back('{now_fs(), v});
  endtask

  task automatic compare(string what);
    logic [503:0] exp;
    exp = taps_at(ev, now_fs());
    checks++;
    if (taps !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %h", what, $realtime, taps);
      $display("                  exp %h", exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sig = 0;
    build_cache();
    checks++;
    if (arr_rise[503] < 4000000 || arr_rise[503] > 7000000 ||
        arr_fall[503] < 4000000 || arr_fall[503] > 7000000) begin
      failures++;
      $display("FAIL line length %0d / %0d fs", arr_rise[503], arr_fall[503]);
    end
    $display("line length rising %0.3f ns, falling %0.3f ns", arr_rise[503] / 1.0e6, arr_fall[503] / 1.0e6);
    #1000;
    drive(1);
    repeat (60) begin #97.3; compare("rise"); end
    #2000;
    drive(0);
    repeat (60) begin #101.7; compare("fall"); end
    #2000;
    drive(1); #300; drive(0);
    repeat (60) begin #93.1; compare("pulse"); end
    // The step moves one tap at a time: a rising edge has reached exactly the
    // taps whose arrival time has passed.
    #3000;
    drive(1);
    #2500.0;
    checks++;
    if ($countones(taps) != $countones(taps_at(ev, now_fs()))) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
