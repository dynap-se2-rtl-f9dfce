// sram_1r1w: simple dual-port memory, one write and one read port.
//
// Stands for the SRAM arrays of the chip: the four 23-bit source-mapping
// words of every neuron and the 64 x 64 entry sensor source-mapping table.
// A write takes effect at the clock edge; a read returns the addressed word
// in `rdata` one clock after `re`, and `rdata` holds its value until the
// next read. The contents are not reset, as in a real SRAM.
module sram_1r1w #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 23,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
