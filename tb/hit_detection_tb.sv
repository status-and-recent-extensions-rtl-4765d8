`timescale 1ps/1fs
// hit_detection_tb: uniform samples (all groups 0 or all 7) give no word,
// any step gives a word with the hit flag, an overflow alone gives a word
// with only the overflow flag, and every field is placed as the format says.
module hit_detection_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst, ovf, valid;
  logic [215:0] sums;
  logic [31:0] coarse;
  tdc_word_t word;

  hit_detection dut (.clk(clk), .rst(rst), .channel_i(3'd5), .sums_i(sums), .coarse_i(coarse),
                     .ovf_i(ovf), .word_valid_o(valid), .word_o(word));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [215:0] fill(int v);
    logic [215:0] s;
    for (int g = 0; g < 72; g++) s[3*g +: 3] = 3'(v);
    return s;
  endfunction

  task automatic apply_and_check(logic [215:0] s, bit o, bit exp_hit);
    logic [31:0] c;
    c = $urandom;
    @(negedge clk);
    sums = s; ovf = o; coarse = c;
    @(posedge clk);
    #1;
    checks++;
    if (valid !== (exp_hit || o)) begin
      failures++;
      $display("FAIL valid=%b expected %b", valid, exp_hit || o);
    end else if (valid) begin
      checks++;
      if (word.fine !== s || word.coarse !== c || word.channel !== 3'd5 || word.hit !== exp_hit ||
          word.ovf !== o || word.lost !== 1'b0 || word.zero !== 2'b00 ||
          word[215:0] !== s || word[247:216] !== c || word[250:248] !== 3'd5) begin
        failures++;
        $display("FAIL word fields %h", word);
      end
    end
  endtask

  initial begin
    rst = 1; sums = '0; ovf = 0; coarse = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    apply_and_check(fill(0), 0, 0);
    apply_and_check(fill(7), 0, 0);
    apply_and_check(fill(0), 1, 0);
    apply_and_check(fill(7), 1, 0);
    for (int n = 0; n < 400; n++) begin
      logic [215:0] s;
      int g, v;
      bit rising;
      g = $urandom_range(0, 71);
      v = $urandom_range(0, 7);
      rising = $urandom_range(0, 1);
      // Thermometer step at group g with partial sum v.
      for (int k = 0; k < 72; k++)
        s[3*k +: 3] = (k < g) ? (rising ? 3'd7 : 3'd0) : (k == g) ? 3'(v) : (rising ? 3'd0 : 3'd7);
      apply_and_check(s, n % 17 == 0, !(s == fill(0) || s == fill(7)));
    end
    // A single odd group anywhere is a hit.
    for (int g = 0; g < 72; g++) begin
      logic [215:0] s;
      s = fill(0);
      s[3*g +: 3] = 3'd1;
      apply_and_check(s, 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
