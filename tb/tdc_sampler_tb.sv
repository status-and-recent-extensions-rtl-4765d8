`timescale 1ps/1fs
// tdc_sampler_tb: the sampling registers must hold, after each clock edge,
// exactly the tap vector present at that edge, whatever changes later, and
// must not change between rising edges.
module tdc_sampler_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [503:0] taps, sample, expected;

  tdc_sampler dut (.clk(clk), .taps_i(taps), .sample_o(sample));

  always #1607.143 clk = ~clk;

  function automatic logic [503:0] rnd504();
    logic [503:0] r;
    for (int i = 0; i < 504; i += 32) r[i +: 32] = 32'($urandom);
    return r;
  endfunction

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    taps = '0;
    @(posedge clk);
    repeat (200) begin
      #400;                       // new value well inside the cycle
      taps = rnd504();
      expected = taps;
      #1700;                      // just before the next rising edge
      checks++;
      if (sample === expected) begin
        failures++;
        $display("FAIL sample changed before the clock edge at %0t", $realtime);
      end
      @(posedge clk);
      #1;
      taps = ~taps;               // change after the edge: must not be seen
      #1000;
      checks++;
      if (sample !== expected) begin
        failures++;
        $display("FAIL sample mismatch at %0t", $realtime);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
