`timescale 1ps/1fs
// carry4_tb: checks the carry-chain element model.
// With S = 1111 / DI = 0000 a rising and a falling edge must reach CO[0..3]
// after the cumulative rise or fall delays, a pulse narrower than one stage
// must still travel the whole element, and with S = 0000 the outputs must
// follow DI and O = S ^ carry-in (carry-in of bit i is CO[i-1], of bit 0 CI).
module carry4_tb;
  int checks = 0, failures = 0;
  logic ci, cyinit;
  logic [3:0] di, s, o, co;

  carry4 #(.EXTRA(5.0)) dut (.CI(ci), .CYINIT(cyinit), .DI(di), .S(s), .O(o), .CO(co));

  task automatic expect_co(logic [3:0] exp, string what);
    checks++;
    if (co !== exp) begin
      failures++;
      $display("FAIL %s: CO=%b expected %b at %0t", what, co, exp, $realtime);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Rise delays 13+5, 3.7, 12, 10 ps; fall 14+5, 4.2, 12.6, 10.4 ps.
    ci = 0; cyinit = 0; di = 4'b0000; s = 4'b1111;
    #200;
    ci = 1;                      // t = 200
    #17.9  expect_co(4'b0000, "rise before stage 0");
    #0.2   expect_co(4'b0001, "rise stage 0 (18.0)");
    #3.5   expect_co(4'b0001, "rise before stage 1");
    #0.2   expect_co(4'b0011, "rise stage 1 (21.7)");
    #11.8  expect_co(4'b0011, "rise before stage 2");
    #0.2   expect_co(4'b0111, "rise stage 2 (33.7)");
    #9.8   expect_co(4'b0111, "rise before stage 3");
    #0.2   expect_co(4'b1111, "rise stage 3 (43.7)");
    #200;
    ci = 0;                      // falling edge
    #18.9  expect_co(4'b1111, "fall before stage 0");
    #0.2   expect_co(4'b1110, "fall stage 0 (19.0)");
    #4.2   expect_co(4'b1100, "fall stage 1 (23.2)");
    #12.6  expect_co(4'b1000, "fall stage 2 (35.8)");
    #10.4  expect_co(4'b0000, "fall stage 3 (46.2)");
    // CYINIT drives the chain as well (first element of a TDC line).
    #100;
    cyinit = 1;
    #50    expect_co(4'b1111, "CYINIT rise");
    // A 2 ps pulse, shorter than every stage, still reaches CO[3].
    cyinit = 0;
    #100;
    cyinit = 1; #2 cyinit = 0;
    #44.0  expect_co(4'b1000, "narrow pulse at stage 3");
    #100   expect_co(4'b0000, "narrow pulse gone");
    // Select off: CO follows DI, O = S ^ carry-in.
    s = 4'b0000; di = 4'b1010;
    #0.1;  // combinational parts
    ci = 1;
    #100   expect_co(4'b1010, "S=0 passes DI");
    checks++;
    if (o !== 4'b0101) begin failures++; $display("FAIL O=%b expected 0101", o); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
