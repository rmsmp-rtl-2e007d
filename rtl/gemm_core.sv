// gemm_core: one of the three heterogeneous GEMM cores (GEMM_PoT-4,
// GEMM_Fixed-4, GEMM_Fixed-8), selected by SCHEME.
//
// The core is an output-stationary array of ROWS x LANES processing elements.
// PE row r holds the dot product of weight-matrix row r of the current tile
// with one activation column. Each cycle with in_valid high, every PE row
// multiplies a LANES-wide chunk of its weights by the same LANES-wide chunk
// of activations, sums the LANES products and adds the sum to its
// accumulator; in_first restarts the accumulators with the new sum. Results
// appear in acc one cycle after the chunk is presented (out_valid).
//
// PoT rows use pot4_pe (shift), Fixed rows use fixed_pe (multiply). That the
// cores are separate per scheme/precision and that their sizes follow the
// row ratio of the layer is the paper's; the array shape, the single
// accumulate stage and the widths are this design's own.
module gemm_core
  import rmsmp_pkg::*;
#(
  parameter scheme_e     SCHEME = SCH_POT4,
  parameter int unsigned ROWS   = 65,
  parameter int unsigned LANES  = 32,
  parameter int unsigned ACCW   = ACC_W,
  localparam int unsigned WB    = w_bits(SCHEME),
  localparam int unsigned PB    = p_bits(SCHEME)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic                                in_first,
  input  logic [ROWS-1:0][LANES-1:0][WB-1:0]  w,
  input  logic [LANES-1:0][A_BITS-1:0]        a,
  output logic                                out_valid,
  output logic signed [ACCW-1:0]              acc [ROWS]
);
  logic signed [PB-1:0]   prod [ROWS][LANES];
  logic signed [ACCW-1:0] row_sum [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      if (SCHEME == SCH_POT4) begin : g_pot
        pot4_pe #(.A_BITS(A_BITS)) u_pe (.w(w[r][l]), .a(a[l]), .p(prod[r][l]));
      end else begin : g_fix
        fixed_pe #(.W_BITS(WB), .A_BITS(A_BITS)) u_pe (.w(w[r][l]), .a(a[l]), .p(prod[r][l]));
      end
    end

    // Adder tree of the row, written as a sum; synthesis balances it.
    always_comb begin
      row_sum[r] = '0;
      for (int l = 0; l < LANES; l++) row_sum[r] += ACCW'(prod[r][l]);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        acc[r] <= '0;
      else if (in_valid) acc[r] <= (in_first ? '0 : acc[r]) + row_sum[r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
