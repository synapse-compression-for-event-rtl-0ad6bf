// Unified local memory of a neuron core.
//
// Every core owns one single-port memory of WORDS words of WIDTH bits (default
// 32768 x 64 bit = 256 kB, 15-bit word address, as in the paper). Population
// descriptors, axons, kernel descriptors, weights and neuron states all live in it
// and the compiler/mapper may divide it between them freely. It is written here as a
// plain array; a real chip maps it onto SRAM macros.
//
// Interface: one port. With en=1 and we=1 the word at addr is written at the clock
// edge; with en=1 and we=0 the word at addr appears on rdata after the clock edge
// (one cycle read latency) and stays there until the next read. The memory has no
// reset: its contents are whatever was last written.
module core_mem #(
  parameter int unsigned WORDS  = 32768,
  parameter int unsigned WIDTH  = 64,
  parameter int unsigned ADDR_W = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
