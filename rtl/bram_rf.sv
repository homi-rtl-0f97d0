// bram_rf: single-port, read-first block RAM with one cycle of read latency.
//
// Used for the four 16384x16 representation memories and the 16384x24
// timestamp memory. On every clock edge the word at addr is registered onto
// dout (the value held before any write of that same edge: read-first), and
// din is stored at addr when wea is high. The pre-processing logic relies on
// read-first behaviour twice: a read-modify-write sends the address in one
// cycle and writes the updated value in the next, and the transfer path reads
// a location and writes 0 into it with a single access.
// The contents start at zero, as an FPGA BRAM does after configuration; there
// is no reset of the array. The paper's BRAM has two ports, but only one is
// used by the pre-processing datapath, so one is built.
module bram_rf #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned WIDTH = 16
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         din,
  input  logic                     wea,
  output logic [WIDTH-1:0]         dout
);
  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    dout <= mem[addr];
    if (wea) mem[addr] <= din;
  end
endmodule
