// scheme_unit: everything that serves one quantization scheme/precision:
// the scheme's weight buffer, its GEMM core, its per-row scale table and one
// requantizer per PE row.
// sat_any flags that a row in use was clipped at the top of the 4-bit range.
//
// Weight buffer: row_bank_ram with one bank per PE row; word = LANES
// weights of WB bits; read at wbuf_addr when rd_en, data to the core one
// cycle later (core_valid). Scale table: row_bank_ram, one 16-bit scale per
// (tile, row), read with core_tile so that it is valid together with the
// final accumulators (wr_tile). Requantization is combinational; q is
// sampled by the output buffer on the controller's wr_en. Row slot r of tile
// t is in use iff t*ROWS + r < cfg_rows; unused slots give 0.
// The grouping per scheme follows the paper's heterogeneous cores; the
// buffers and masking are this design's own.
module scheme_unit
  import rmsmp_pkg::*;
#(
  parameter scheme_e     SCHEME     = SCH_POT4,
  parameter int unsigned ROWS       = 65,
  parameter int unsigned LANES      = 32,
  parameter int unsigned RW         = 7,
  parameter int unsigned TW         = 3,
  parameter int unsigned WBUF_DEPTH = 864,
  parameter int unsigned T_MAX      = 6,
  parameter int unsigned CNTW       = 10,
  localparam int unsigned WB        = w_bits(SCHEME),
  localparam int unsigned WAW       = $clog2(WBUF_DEPTH),
  localparam int unsigned TAW       = (T_MAX > 1) ? $clog2(T_MAX) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_we,
  input  logic [RW-1:0]               w_row,
  input  logic [WAW-1:0]              w_addr,
  input  logic [LANES*WB-1:0]         w_data,
  input  logic                        s_we,
  input  logic [RW-1:0]               s_row,
  input  logic [TAW-1:0]              s_tile,
  input  logic [SCALE_W-1:0]          s_data,
  input  logic                        rd_en,
  input  logic [WAW-1:0]              wbuf_addr,
  input  logic                        core_valid,
  input  logic                        core_first,
  input  logic [TW-1:0]               core_tile,
  input  logic [LANES*A_BITS-1:0]     act_chunk,
  input  logic [TW-1:0]               wr_tile,
  input  logic [CNTW-1:0]             cfg_rows,
  input  logic [SHIFT_W-1:0]          cfg_shift,
  output logic [ROWS-1:0][A_BITS-1:0] q,
  output logic                        sat_any
);
  localparam int unsigned BRW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [ROWS-1:0][LANES*WB-1:0] w_rd;
  logic [ROWS-1:0][SCALE_W-1:0]  scale;
  logic signed [ACC_W-1:0]       acc [ROWS];
  logic [ROWS-1:0][A_BITS-1:0]   q_raw;
  logic [ROWS-1:0]               sat, sat_in;

  row_bank_ram #(.ROWS(ROWS), .WIDTH(LANES*WB), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk, .we(w_we && 32'(w_row) < ROWS), .wrow(BRW'(w_row)), .waddr(w_addr), .wdata(w_data),
    .re(rd_en), .raddr(wbuf_addr), .rdata(w_rd)
  );

  row_bank_ram #(.ROWS(ROWS), .WIDTH(SCALE_W), .DEPTH(T_MAX)) u_scale (
    .clk, .we(s_we && 32'(s_row) < ROWS), .wrow(BRW'(s_row)), .waddr(s_tile), .wdata(s_data),
    .re(core_valid), .raddr(TAW'(core_tile)), .rdata(scale)
  );

  gemm_core #(.SCHEME(SCHEME), .ROWS(ROWS), .LANES(LANES)) u_core (
    .clk, .rst_n, .in_valid(core_valid), .in_first(core_first),
    .w(w_rd), .a(act_chunk), .out_valid(), .acc(acc)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_rq
    logic in_use;
    assign in_use = (32'(wr_tile) * ROWS + r) < 32'(cfg_rows);

    act_quantizer u_q (
      .acc(acc[r]), .scale(scale[r]), .shift(cfg_shift), .q(q_raw[r]), .sat(sat[r])
    );
    assign q[r]      = in_use ? q_raw[r] : '0;
    assign sat_in[r] = in_use && sat[r];
  end
  assign sat_any = |sat_in;
endmodule
