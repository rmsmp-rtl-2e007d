// sram_1r1w: simple dual-port memory, one write port and one read port,
// registered read (data appears the cycle after the address). Used for the
// activation and output buffers and as one bank of row_bank_ram. The memory
// is written as an array so that synthesis maps it to block RAM; it has no
// reset. Buffer organisation is this design's own; the paper does not
// describe on-chip buffers.
module sram_1r1w #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
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
