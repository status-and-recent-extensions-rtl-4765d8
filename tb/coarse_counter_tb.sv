`timescale 1ps/1fs
// coarse_counter_tb: an 8-bit counter is reset, counts, wraps with a
// one-cycle overflow flag exactly when it reads zero, and can be loaded.
module coarse_counter_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst, load;
  logic [7:0] load_value, count;
  logic ovf;
  int ovf_seen = 0;

  coarse_counter #(.W(8)) dut (.clk(clk), .rst(rst), .load_i(load), .load_value_i(load_value),
                               .count_o(count), .ovf_o(ovf));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    rst = 1; load = 0; load_value = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    exp = 0;
    for (int n = 0; n < 600; n++) begin
      @(posedge clk);
      #1;
      if (n == 300) begin
        load = 1; load_value = 8'd250;
      end else load = 0;
      if (n == 301) exp = 250;
      else exp = (exp + 1) % 256;
      checks++;
      if (int'(count) != exp || ovf != (exp == 0 && n != 301)) begin
        failures++;
        $display("FAIL cycle %0d: count %0d ovf %b, expected %0d", n, count, ovf, exp);
      end
      if (ovf) ovf_seen++;
    end
    checks++;
    if (ovf_seen != 3) begin failures++; $display("FAIL %0d overflows", ovf_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
