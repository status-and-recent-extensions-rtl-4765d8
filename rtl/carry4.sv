`timescale 1ps/1fs
// carry4: behavioural model of the FPGA's 4-bit carry-chain element (CARRY4),
// used as four consecutive taps of a delay line. Not synthesizable as written;
// in the FPGA the element is the vendor primitive, which the synthesis tool
// places directly.
//
// Function (the vendor's documented carry logic): for bit i,
//   CO[i] = S[i] ? carry_in_i : DI[i]     O[i] = S[i] ^ carry_in_i
// where carry_in_0 = CI | CYINIT and carry_in_i = CO[i-1]. With S = 4'b1111 and
// DI = 4'b0000, as in a TDC, the carry input simply ripples through and CO[i]
// is the input delayed by i+1 tap delays.
//
// Timing: each carry stage has its own rise and fall delay (parameters, in ps).
// Delays are transport delays: every input change travels down the four
// stages on its own, so pulses narrower than a stage still propagate (a
// low pulse shrinks by the rise/fall difference per stage). The default
// stage delays are this design's choice: they average 9.675 ps (rising) and
// 10.3 ps (falling), which reproduces the roughly 332 and 312 bins per
// 3.214 ns clock cycle reported for the prototype, and are deliberately
// unequal within the element to give the uneven bin widths a carry chain shows.
module carry4 #(
  parameter realtime RISE_0 = 13.0, parameter realtime RISE_1 = 3.7,
  parameter realtime RISE_2 = 12.0, parameter realtime RISE_3 = 10.0,
  parameter realtime FALL_0 = 14.0, parameter realtime FALL_1 = 4.2,
  parameter realtime FALL_2 = 12.6, parameter realtime FALL_3 = 10.4,
  parameter realtime EXTRA  = 0.0   // added to stage 0, e.g. a clock-region crossing
) (
  input  logic       CI,
  input  logic       CYINIT,
  input  logic [3:0] DI,
  input  logic [3:0] S,
  output logic [3:0] O,
  output logic [3:0] CO
);
  // Output value of each carry stage.
  logic c0, c1, c2, c3;
  logic cin;

  assign cin = CI | CYINIT;

  initial begin
    c0 = 1'b0; c1 = 1'b0; c2 = 1'b0; c3 = 1'b0;
  end

  // Stage values the carry logic settles to for the current carry input.
  logic [3:0] cin_next;
  always_comb begin
    cin_next[0] = S[0] ? cin         : DI[0];
    cin_next[1] = S[1] ? cin_next[0] : DI[1];
    cin_next[2] = S[2] ? cin_next[1] : DI[2];
    cin_next[3] = S[3] ? cin_next[2] : DI[3];
  end

  // Every change of the carry input launches one thread that carries the new
  // value through the four stages, each after its own rise or fall delay. The
  // thread keeps its own copy of the value, so edges closer together than the
  // element's delay travel independently. S and DI are taken as static
  // configuration (a TDC ties them to constants).
  always begin
    @(cin_next);
    fork
      begin : ripple
        automatic logic v0 = cin_next[0];
        automatic logic v1 = cin_next[1];
        automatic logic v2 = cin_next[2];
        automatic logic v3 = cin_next[3];
        #(v0 ? RISE_0 + EXTRA : FALL_0 + EXTRA) c0 = v0;
        #(v1 ? RISE_1 : FALL_1) c1 = v1;
        #(v2 ? RISE_2 : FALL_2) c2 = v2;
        #(v3 ? RISE_3 : FALL_3) c3 = v3;
      end
    join_none
  end

  assign CO = {c3, c2, c1, c0};
  assign O  = S ^ {c2, c1, c0, cin};
endmodule
