// layer_controller: runs one layer of row-wise mixed-scheme GEMM on the
// three GEMM cores, which all advance in lockstep.
//
// A layer is cfg_t row tiles x cfg_n activation columns x cfg_kc K chunks
// (a K chunk is LANES input elements). Loop order: tile (outer), column,
// K chunk (inner). Every cycle of the run one chunk is issued:
//   cycle i   : wbuf_addr = tile*cfg_kc + kc, abuf_addr = col*cfg_kc + kc
//   cycle i+1 : buffer data valid -> core_valid / core_first / core_last,
//               core_tile (to read the tile's scales)
//   cycle i+2 : core accumulators final after the last chunk -> wr_en,
//               wr_addr = tile*cfg_n + col (sequential), wr_tile
// done pulses one cycle after the last write: for a layer of L = cfg_t*
// cfg_n*cfg_kc chunks, chunks are issued in the L cycles after the edge that
// samples start, and done is high in the cycle that follows the (L+4)-th
// edge after that one. start is ignored
// while busy. Addresses are built with running sums, not multipliers.
// That the layer runs on all cores at once is the paper's; the loop order
// and pipeline are this design's own.
module layer_controller #(
  parameter int unsigned KC_MAX     = 144,
  parameter int unsigned N_MAX      = 1024,
  parameter int unsigned T_MAX      = 6,
  parameter int unsigned WBUF_DEPTH = 864,
  parameter int unsigned ABUF_DEPTH = 8192,
  parameter int unsigned OBUF_DEPTH = 6144,
  localparam int unsigned KCW = $clog2(KC_MAX + 1),
  localparam int unsigned NW  = $clog2(N_MAX + 1),
  localparam int unsigned TW  = $clog2(T_MAX + 1),
  localparam int unsigned WAW = $clog2(WBUF_DEPTH),
  localparam int unsigned AAW = $clog2(ABUF_DEPTH),
  localparam int unsigned OAW = $clog2(OBUF_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [KCW-1:0] cfg_kc,
  input  logic [NW-1:0]  cfg_n,
  input  logic [TW-1:0]  cfg_t,
  output logic           busy,
  output logic           done,
  // issue stage: buffer read addresses
  output logic           rd_en,
  output logic [WAW-1:0] wbuf_addr,
  output logic [AAW-1:0] abuf_addr,
  output logic [TW-1:0]  rd_tile,
  // compute stage: aligned with buffer read data
  output logic           core_valid,
  output logic           core_first,
  output logic           core_last,
  output logic [TW-1:0]  core_tile,
  // write stage: aligned with final core accumulators
  output logic           wr_en,
  output logic [OAW-1:0] wr_addr,
  output logic [TW-1:0]  wr_tile
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [KCW-1:0] kc;
  logic [NW-1:0]  col;
  logic [TW-1:0]  tile;
  logic [WAW-1:0] wbase;
  logic [AAW-1:0] abase;
  logic           s1_last;
  logic [TW-1:0]  s1_tile;
  logic           last_kc, last_col, last_tile;

  assign last_kc   = (kc   == cfg_kc - 1'b1);
  assign last_col  = (col  == cfg_n  - 1'b1);
  assign last_tile = (tile == cfg_t  - 1'b1);

  assign rd_en     = (state == S_RUN);
  assign wbuf_addr = wbase + WAW'(kc);
  assign abuf_addr = abase + AAW'(kc);
  assign rd_tile   = tile;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      kc    <= '0;
      col   <= '0;
      tile  <= '0;
      wbase <= '0;
      abase <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          kc    <= '0;
          col   <= '0;
          tile  <= '0;
          wbase <= '0;
          abase <= '0;
        end
        S_RUN: begin
          if (!last_kc) begin
            kc <= kc + 1'b1;
          end else begin
            kc <= '0;
            if (!last_col) begin
              col   <= col + 1'b1;
              abase <= abase + AAW'(cfg_kc);
            end else begin
              col   <= '0;
              abase <= '0;
              if (!last_tile) begin
                tile  <= tile + 1'b1;
                wbase <= wbase + WAW'(cfg_kc);
              end else begin
                state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: if (!core_valid && !wr_en) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Pipeline alignment with the registered buffers and the core accumulators.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_valid <= 1'b0;
      core_first <= 1'b0;
      s1_last    <= 1'b0;
      s1_tile    <= '0;
      wr_en      <= 1'b0;
      wr_tile    <= '0;
      wr_addr    <= '0;
    end else begin
      core_valid <= rd_en;
      core_first <= rd_en && (kc == '0);
      s1_last    <= rd_en && last_kc;
      s1_tile    <= tile;
      wr_en      <= core_valid && s1_last;
      wr_tile    <= s1_tile;
      if (state == S_IDLE && start) wr_addr <= '0;
      else if (wr_en)               wr_addr <= wr_addr + 1'b1;
    end
  end
  assign core_last = s1_last;
  assign core_tile = s1_tile;

  // A layer must have at least one chunk, column and tile, and fit the buffers.
  property p_cfg_legal;
    @(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && start) |-> (cfg_kc != 0 && cfg_n != 0 && cfg_t != 0 &&
                                      32'(cfg_kc) <= KC_MAX && 32'(cfg_n) <= N_MAX &&
                                      32'(cfg_t) <= T_MAX);
  endproperty
  a_cfg_legal: assert property (p_cfg_legal);
endmodule
