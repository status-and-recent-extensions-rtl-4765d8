`timescale 1ps/1fs
// input_switch_tb: random selections and input patterns; every channel output
// and the loopback must equal the selected input.
module input_switch_tb;
  int checks = 0, failures = 0;
  logic [3:0] sig;
  logic [1:0] chan_sel [8];
  logic [1:0] loop_sel;
  logic [7:0] chan;
  logic loopback;

  input_switch dut (.sig_i(sig), .chan_sel_i(chan_sel), .loop_sel_i(loop_sel),
                    .chan_o(chan), .loopback_o(loopback));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      sig = 4'($urandom);
      for (int c = 0; c < 8; c++) chan_sel[c] = 2'($urandom);
      loop_sel = 2'($urandom);
      #10;
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (chan[c] !== sig[chan_sel[c]]) begin
          failures++;
          $display("FAIL channel %0d sel %0d", c, chan_sel[c]);
        end
      end
      checks++;
      if (loopback !== sig[loop_sel]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
