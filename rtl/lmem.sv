// lmem: one 32 kB local memory of the accelerator (the design has two, used
// in ping-pong as input and output map storage between layers).
//
// Single-port synchronous SRAM model of WORDS x WIDTH bits, matching the
// 128b I/O bandwidth of the datapath. A read (en=1, we=0) returns the word on
// rdata in the following cycle; rdata then holds its value until the next
// read, like an SRAM output latch, which lets the fetch pipeline stall without
// re-reading. A write (en=1, we=1) updates the word at the clock edge and
// leaves rdata unchanged. The 2048 x 128b organisation follows the published
// 32 kB size and 128b bandwidth; the single port and the hold behaviour are
// this implementation's choices.
//
// From the published design: 32 kB, 128b words, two memories swapped between
// layers. Own choice: a single synchronous port whose read data holds until
// the next read.
module lmem #(
  parameter int unsigned WORDS = 2048,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
