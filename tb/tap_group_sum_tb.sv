`timescale 1ps/1fs
// tap_group_sum_tb: random and thermometer-like samples; every group sum is
// compared with a popcount computed here, one cycle after the sample.
module tap_group_sum_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [503:0] sample;
  logic [215:0] sums;

  tap_group_sum dut (.clk(clk), .sample_i(sample), .sums_o(sums));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [503:0] s;
    for (int n = 0; n < 600; n++) begin
      if (n % 3 == 0) begin
        for (int i = 0; i < 504; i += 32) s[i +: 32] = 32'($urandom);
      end else begin
        int p;
        p = $urandom_range(0, 504);
        for (int i = 0; i < 504; i++) s[i] = (i < p) ^ (n % 3 == 2);
      end
      @(negedge clk) sample = s;
      @(posedge clk);
      #1;
      for (int g = 0; g < 72; g++) begin
        int cnt;
        cnt = 0;
        for (int j = 0; j < 7; j++) cnt += int'(s[7*g + j]);
        checks++;
        if (int'(sums[3*g +: 3]) != cnt) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d: %0d expected %0d", g, sums[3*g +: 3], cnt);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
