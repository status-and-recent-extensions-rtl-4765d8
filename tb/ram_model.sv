`timescale 1ps/1fs
// ram_model: behavioural stand-in for the system memory behind the TDC's
// write port. Stores 256-bit words by word address in a sparse array, and
// refuses writes at random (ready high in READY_PCT percent of cycles) to
// exercise the back-pressure of the writer. Testbench use only.
module ram_model #(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned READY_PCT = 100
) (
  input  logic              clk,
  input  logic              valid_i,
  input  logic [ADDR_W-1:0] addr_i,
  input  logic [255:0]      data_i,
  output logic              ready_o
);
  logic [255:0] mem [logic [ADDR_W-1:0]];
  int unsigned  writes = 0;

  initial ready_o = 1'b1;

  always @(posedge clk) begin
    if (valid_i && ready_o) begin
      mem[addr_i] = data_i;
      writes++;
    end
    ready_o <= ($urandom_range(0, 99) < READY_PCT);
  end

  function automatic logic [255:0] read(logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
endmodule
