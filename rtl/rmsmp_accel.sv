// rmsmp_accel: row-wise mixed-scheme, multi-precision GEMM accelerator.
//
// A layer's weight matrix has its rows (filters) split into three groups,
// each quantized differently: PoT-W4A4, Fixed-W4A4 and Fixed-W8A4. The same
// split ratio is used in every layer, so the hardware has three GEMM cores
// whose PE-row counts follow that ratio (POT_ROWS : FIX4_ROWS : FIX8_ROWS,
// by default 65:30:5) and which all finish a layer at the same time:
//   GEMM_PoT-4   : shift-based PEs  (no multipliers)
//   GEMM_Fixed-4 : 4b x 4b multipliers
//   GEMM_Fixed-8 : 8b x 4b multipliers
// One row tile is POT_ROWS + FIX4_ROWS + FIX8_ROWS filters. For each tile
// and each activation column the layer controller streams the K dimension
// through all three cores in LANES-wide chunks; after the last chunk every
// row accumulator is requantized to a 4-bit activation (act_quantizer with
// the row's scale) and the whole tile column is written as one output word.
//
// Buffers (all loaded and read by the host through plain ports):
//   weight buffer per core : one bank per PE row, word = LANES weights,
//                            address = tile*cfg_kc + kc
//   scale table per core   : one bank per PE row, word = 16-bit multiplier,
//                            address = tile
//   activation buffer      : word = LANES activations, address = col*cfg_kc + kc
//   output buffer          : word = one 4-bit result per PE row of all cores,
//                            PoT rows in the low bits, then Fixed-4, then
//                            Fixed-8; address = tile*cfg_n + col
// Rows of a core beyond cfg_rows_* (the core's share of the layer) are
// written as zero. The output keeps rows grouped by scheme; restoring the
// original filter order is left to the next layer's weight layout.
//
// Timing: a layer of L = cfg_t*cfg_n*cfg_kc chunks issues one chunk per
// cycle; done pulses L + 4 cycles after the edge that samples start.
// Loads must not overlap a run. sat_flag tells that a result of the last
// layer was clipped at 15.
//
// The three cores, their scheme/precision pairs, the ratio 65:30:5 and the
// lockstep layer-by-layer execution follow the paper. LANES, buffer sizes,
// data layouts, requantization and the host interface are this design's own.
module rmsmp_accel
  import rmsmp_pkg::*;
#(
  parameter int unsigned POT_ROWS   = 65,
  parameter int unsigned FIX4_ROWS  = 30,
  parameter int unsigned FIX8_ROWS  = 5,
  parameter int unsigned LANES      = 32,
  parameter int unsigned KC_MAX     = 144,
  parameter int unsigned N_MAX      = 1024,
  parameter int unsigned T_MAX      = 6,
  parameter int unsigned ABUF_DEPTH = 8192,
  localparam int unsigned WBUF_DEPTH = T_MAX * KC_MAX,
  localparam int unsigned OBUF_DEPTH = T_MAX * N_MAX,
  localparam int unsigned TOT_ROWS   = POT_ROWS + FIX4_ROWS + FIX8_ROWS,
  localparam int unsigned RW   = $clog2(POT_ROWS > FIX4_ROWS ? (POT_ROWS > FIX8_ROWS ? POT_ROWS : FIX8_ROWS)
                                                             : (FIX4_ROWS > FIX8_ROWS ? FIX4_ROWS : FIX8_ROWS)),
  localparam int unsigned KCW  = $clog2(KC_MAX + 1),
  localparam int unsigned NW   = $clog2(N_MAX + 1),
  localparam int unsigned TW   = $clog2(T_MAX + 1),
  localparam int unsigned TAW  = (T_MAX > 1) ? $clog2(T_MAX) : 1,
  localparam int unsigned WAW  = $clog2(WBUF_DEPTH),
  localparam int unsigned AAW  = $clog2(ABUF_DEPTH),
  localparam int unsigned OAW  = $clog2(OBUF_DEPTH),
  localparam int unsigned CNTW = $clog2(T_MAX * TOT_ROWS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight load: one PE row's LANES weights of one core (4-bit cores use
  // the low LANES*4 bits)
  input  logic                          w_we,
  input  scheme_e                       w_core,
  input  logic [RW-1:0]                 w_row,
  input  logic [WAW-1:0]                w_addr,
  input  logic [LANES*8-1:0]            w_data,
  // per-row requantization scale load
  input  logic                          s_we,
  input  scheme_e                       s_core,
  input  logic [RW-1:0]                 s_row,
  input  logic [TAW-1:0]                s_tile,
  input  logic [SCALE_W-1:0]            s_data,
  // activation load
  input  logic                          a_we,
  input  logic [AAW-1:0]                a_addr,
  input  logic [LANES*A_BITS-1:0]       a_data,
  // layer configuration and control
  input  logic                          start,
  input  logic [KCW-1:0]                cfg_kc,
  input  logic [NW-1:0]                 cfg_n,
  input  logic [TW-1:0]                 cfg_t,
  input  logic [CNTW-1:0]               cfg_rows_pot,
  input  logic [CNTW-1:0]               cfg_rows_f4,
  input  logic [CNTW-1:0]               cfg_rows_f8,
  input  logic [SHIFT_W-1:0]            cfg_shift,
  output logic                          busy,
  output logic                          done,
  output logic                          sat_flag,
  // output read (registered: data the cycle after o_re)
  input  logic                          o_re,
  input  logic [OAW-1:0]                o_addr,
  output logic [TOT_ROWS*A_BITS-1:0]    o_data
);
  // ---------------------------------------------------------------- control
  logic           rd_en, core_valid, core_first, wr_en;
  logic [WAW-1:0] wbuf_addr;
  logic [AAW-1:0] abuf_addr;
  logic [TW-1:0]  core_tile, wr_tile;
  logic [OAW-1:0] wr_addr;

  layer_controller #(
    .KC_MAX(KC_MAX), .N_MAX(N_MAX), .T_MAX(T_MAX),
    .WBUF_DEPTH(WBUF_DEPTH), .ABUF_DEPTH(ABUF_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_kc, .cfg_n, .cfg_t, .busy, .done,
    .rd_en, .wbuf_addr, .abuf_addr, .rd_tile(),
    .core_valid, .core_first, .core_last(), .core_tile,
    .wr_en, .wr_addr, .wr_tile
  );

  // ------------------------------------------------------ activation buffer
  logic [LANES*A_BITS-1:0] act_chunk;

  sram_1r1w #(.WIDTH(LANES*A_BITS), .DEPTH(ABUF_DEPTH)) u_abuf (
    .clk, .we(a_we), .waddr(a_addr), .wdata(a_data),
    .re(rd_en), .raddr(abuf_addr), .rdata(act_chunk)
  );

  // ------------------------------------------------------------- GEMM cores
  logic [TOT_ROWS-1:0][A_BITS-1:0] q_word;
  logic [2:0]                      sat_v;

  scheme_unit #(
    .SCHEME(SCH_POT4), .ROWS(POT_ROWS), .LANES(LANES), .RW(RW), .TW(TW),
    .WBUF_DEPTH(WBUF_DEPTH), .T_MAX(T_MAX), .CNTW(CNTW)
  ) u_pot4 (
    .clk, .rst_n,
    .w_we(w_we && w_core == SCH_POT4), .w_row, .w_addr, .w_data(w_data[LANES*4-1:0]),
    .s_we(s_we && s_core == SCH_POT4), .s_row, .s_tile, .s_data,
    .rd_en, .wbuf_addr, .core_valid, .core_first, .core_tile, .act_chunk,
    .wr_tile, .cfg_rows(cfg_rows_pot), .cfg_shift,
    .q(q_word[POT_ROWS-1:0]), .sat_any(sat_v[0])
  );

  scheme_unit #(
    .SCHEME(SCH_FIX4), .ROWS(FIX4_ROWS), .LANES(LANES), .RW(RW), .TW(TW),
    .WBUF_DEPTH(WBUF_DEPTH), .T_MAX(T_MAX), .CNTW(CNTW)
  ) u_fix4 (
    .clk, .rst_n,
    .w_we(w_we && w_core == SCH_FIX4), .w_row, .w_addr, .w_data(w_data[LANES*4-1:0]),
    .s_we(s_we && s_core == SCH_FIX4), .s_row, .s_tile, .s_data,
    .rd_en, .wbuf_addr, .core_valid, .core_first, .core_tile, .act_chunk,
    .wr_tile, .cfg_rows(cfg_rows_f4), .cfg_shift,
    .q(q_word[POT_ROWS+FIX4_ROWS-1:POT_ROWS]), .sat_any(sat_v[1])
  );

  scheme_unit #(
    .SCHEME(SCH_FIX8), .ROWS(FIX8_ROWS), .LANES(LANES), .RW(RW), .TW(TW),
    .WBUF_DEPTH(WBUF_DEPTH), .T_MAX(T_MAX), .CNTW(CNTW)
  ) u_fix8 (
    .clk, .rst_n,
    .w_we(w_we && w_core == SCH_FIX8), .w_row, .w_addr, .w_data(w_data),
    .s_we(s_we && s_core == SCH_FIX8), .s_row, .s_tile, .s_data,
    .rd_en, .wbuf_addr, .core_valid, .core_first, .core_tile, .act_chunk,
    .wr_tile, .cfg_rows(cfg_rows_f8), .cfg_shift,
    .q(q_word[TOT_ROWS-1:POT_ROWS+FIX4_ROWS]), .sat_any(sat_v[2])
  );

  // ---------------------------------------------------------- output buffer
  sram_1r1w #(.WIDTH(TOT_ROWS*A_BITS), .DEPTH(OBUF_DEPTH)) u_obuf (
    .clk, .we(wr_en), .waddr(wr_addr), .wdata(q_word),
    .re(o_re), .raddr(o_addr), .rdata(o_data)
  );

  // Sticky flag: some row of the current layer was clipped at the top of
  // the activation range (a hint that cfg_shift is too small).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                sat_flag <= 1'b0;
    else if (start && !busy)   sat_flag <= 1'b0;
    else if (wr_en && |sat_v)  sat_flag <= 1'b1;
  end

  // Host loads must not collide with a running layer.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         busy |-> !(w_we || s_we || a_we));
endmodule
