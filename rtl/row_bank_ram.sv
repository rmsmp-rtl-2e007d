// row_bank_ram: a buffer with one bank per PE row. The host writes one row
// word (row, addr) at a time; the array reads the word at the same address
// from every bank in one cycle, so all PE rows of a GEMM core get their
// weights (or their requantization scales) together. Registered read.
// A bank-per-row organisation is this design's own choice.
module row_bank_ram #(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [RW-1:0]               wrow,
  input  logic [AW-1:0]               waddr,
  input  logic [WIDTH-1:0]            wdata,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [ROWS-1:0][WIDTH-1:0]  rdata
);
  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    sram_1r1w #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .we    (we && (wrow == RW'(r))),
      .waddr (waddr),
      .wdata (wdata),
      .re    (re),
      .raddr (raddr),
      .rdata (rdata[r])
    );
  end
endmodule
