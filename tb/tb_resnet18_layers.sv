// tb_resnet18_layers: end-to-end test of the accelerator at its default size on two
// layers of ResNet-18: (1) the largest one, a 3x3 convolution from 512 to 512
// channels on a 7x7 map (K = 4608 = 144 chunks, 512 filters split
// 333/154/25 over the cores = 6 row tiles, 49 columns); (2) a slice of the
// first layer, a 7x7 convolution of 3 channels (K = 147, padded to 160 =
// 5 chunks) with 64 filters (42/19/3), 1024 of its output pixels.
// Layer shapes are those of the standard network; the weights are
// pseudo-random, not trained ones.
//
// The testbench loads weights, per-row scales and activations through the
// host ports, runs two layer(s) back to back and reads every output word.
// All data come from a hash of their indices, so nothing is stored in the
// testbench; the expected 4-bit result of every row is computed here from
// the real quantization levels (PoT: +-2^(e-7) * 64, Fixed: the integer
// level), the row scale and the layer shift. Checked per layer: every output
// word, sat_flag, and the start-to-done time L + 4 for L = tiles x columns
// x chunks. Mechanisms counted (each must occur at least once):
// accumulation over several K chunks, several row tiles, unused row slots
// written as zero, results clipped at 0 (ReLU), results clipped at 15
// (saturation), and layers run back to back on the same cores.
module tb_resnet18_layers;
  import rmsmp_pkg::*;
  localparam int unsigned POT_ROWS   = 65;
  localparam int unsigned FIX4_ROWS  = 30;
  localparam int unsigned FIX8_ROWS  = 5;
  localparam int unsigned LANES      = 32;
  localparam int unsigned KC_MAX     = 144;
  localparam int unsigned N_MAX      = 1024;
  localparam int unsigned T_MAX      = 6;
  localparam int unsigned ABUF_DEPTH = 8192;
  localparam int unsigned TOT_ROWS   = POT_ROWS + FIX4_ROWS + FIX8_ROWS;
  localparam int unsigned ROWS_C [3] = '{POT_ROWS, FIX4_ROWS, FIX8_ROWS};
  localparam int unsigned BASE_C [3] = '{0, POT_ROWS, POT_ROWS + FIX4_ROWS};

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0, s_we = 1'b0, a_we = 1'b0, start = 1'b0, o_re = 1'b0;
  scheme_e w_core = SCH_POT4, s_core = SCH_POT4;
  logic [31:0] w_row = '0, s_row = '0, s_tile = '0, w_addr = '0, a_addr = '0, o_addr = '0;
  logic [LANES*8-1:0]            w_data = '0;
  logic [SCALE_W-1:0]            s_data = '0;
  logic [LANES*A_BITS-1:0]       a_data = '0;
  logic [31:0] cfg_kc = 1, cfg_n = 1, cfg_t = 1;
  logic [31:0] cfg_rows [3] = '{1, 1, 1};
  logic [SHIFT_W-1:0]            cfg_shift = '0;
  logic busy, done, sat_flag;
  logic [TOT_ROWS*A_BITS-1:0]    o_data;

  int checks = 0, failures = 0;
  int n_multichunk = 0, n_multitile = 0, n_masked = 0, n_relu = 0, n_sat = 0, n_layers = 0;

  rmsmp_accel dut (
    .clk, .rst_n,
    .w_we, .w_core, .w_row(w_row[$bits(dut.w_row)-1:0]), .w_addr(w_addr[$bits(dut.w_addr)-1:0]), .w_data,
    .s_we, .s_core, .s_row(s_row[$bits(dut.s_row)-1:0]), .s_tile(s_tile[$bits(dut.s_tile)-1:0]), .s_data,
    .a_we, .a_addr(a_addr[$bits(dut.a_addr)-1:0]), .a_data,
    .start, .cfg_kc(cfg_kc[$bits(dut.cfg_kc)-1:0]), .cfg_n(cfg_n[$bits(dut.cfg_n)-1:0]),
    .cfg_t(cfg_t[$bits(dut.cfg_t)-1:0]),
    .cfg_rows_pot(cfg_rows[0][$bits(dut.cfg_rows_pot)-1:0]),
    .cfg_rows_f4(cfg_rows[1][$bits(dut.cfg_rows_f4)-1:0]),
    .cfg_rows_f8(cfg_rows[2][$bits(dut.cfg_rows_f8)-1:0]),
    .cfg_shift, .busy, .done, .sat_flag,
    .o_re, .o_addr(o_addr[$bits(dut.o_addr)-1:0]), .o_data
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- deterministic data from a hash of the indices
  function automatic int unsigned hash(input int unsigned a, b, c, d, e);
    int unsigned h;
    h = 32'h9E3779B9 ^ a;
    h = (h ^ (h >> 15)) * 32'h2C1B3C6D + b;
    h = (h ^ (h >> 12)) * 32'h297A2D39 + c;
    h = (h ^ (h >> 15)) * 32'h2C1B3C6D + d;
    h = (h ^ (h >> 12)) * 32'h297A2D39 + e;
    return h ^ (h >> 16);
  endfunction

  // weight code of core c, layer ly, tile t, row r, input index k
  function automatic int unsigned wcode(int c, int ly, int t, int r, int k);
    int unsigned h;
    h = hash(1 + c, ly, t, r, k);
    case (c)
      0:       return h % 16;                       // PoT: any {sign, e}
      1:       return 32'((int'(h % 15) - 7) & 4'hF);   // Fixed-4: -7..7
      default: return 32'((int'(h % 255) - 127) & 8'hFF); // Fixed-8: -127..127
    endcase
  endfunction

  function automatic longint wlevel(int c, int unsigned code);
    real r;
    if (c == 0) begin
      r = (code[2:0] == 0) ? 0.0 : 2.0 ** (real'(code[2:0]) - 7.0);
      if (code[3]) r = -r;
      return longint'($rtoi(r * 64.0));
    end
    if (c == 1) return longint'($signed(code[3:0]));
    return longint'($signed(code[7:0]));
  endfunction

  function automatic int unsigned act(int ly, int n, int k);
    return hash(7, ly, n, k, 0) % 16;
  endfunction

  function automatic int unsigned rscale(int c, int ly, int t, int r);
    return 1 + hash(9, c, ly, t, r) % 96;
  endfunction

  // ---- host port helpers
  int kreal = 1 << 30;  // inputs at or beyond kreal are padding: weight code 0

  function automatic int unsigned wcode_p(int c, int ly, int t, int r, int k);
    return (k >= kreal) ? 0 : wcode(c, ly, t, r, k);
  endfunction

  task automatic load_layer(int ly, int kc, int n, int t);
    for (int c = 0; c < 3; c++)
      for (int tt = 0; tt < t; tt++)
        for (int r = 0; r < int'(ROWS_C[c]); r++) begin
          for (int k = 0; k < kc; k++) begin
            @(negedge clk);
            w_we = 1'b1; w_core = scheme_e'(c); w_row = r; w_addr = tt * kc + k;
            w_data = '0;
            for (int l = 0; l < int'(LANES); l++)
              if (c == 2) w_data[l*8 +: 8] = 8'(wcode_p(c, ly, tt, r, k * LANES + l));
              else        w_data[l*4 +: 4] = 4'(wcode_p(c, ly, tt, r, k * LANES + l));
          end
          @(negedge clk);
          w_we = 1'b0;
          s_we = 1'b1; s_core = scheme_e'(c); s_row = r; s_tile = tt; s_data = SCALE_W'(rscale(c, ly, tt, r));
          @(negedge clk);
          s_we = 1'b0;
        end
    for (int nn = 0; nn < n; nn++)
      for (int k = 0; k < kc; k++) begin
        @(negedge clk);
        a_we = 1'b1; a_addr = nn * kc + k;
        for (int l = 0; l < int'(LANES); l++) a_data[l*4 +: 4] = 4'(act(ly, nn, k * LANES + l));
      end
    @(negedge clk);
    a_we = 1'b0;
  endtask

  task automatic run_layer(int ly, int kc, int n, int t, int rp, int r4, int r8, int sh);
    int L, cyc, exp_sat;
    longint lv[], acts[];
    int klen, idx;
    longint lvl;
    int unsigned av, wc;
    load_layer(ly, kc, n, t);
    cfg_kc = kc; cfg_n = n; cfg_t = t;
    cfg_rows[0] = rp; cfg_rows[1] = r4; cfg_rows[2] = r8;
    cfg_shift = SHIFT_W'(sh);
    L = kc * n * t;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < L + 100) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != L + 4) begin
      failures++;
      $display("FAIL layer %0d: done after %0d cycles, expected %0d", ly, cyc, L + 4);
    end
    if (kc > 1) n_multichunk++;
    if (t > 1)  n_multitile++;
    n_layers++;
    // read back and compare; the model first decodes every weight of the
    // tile and every activation of the layer to its real level
    exp_sat = 0;
    acts = new[n * kc * int'(LANES)];
    klen = kc * int'(LANES);
    for (int nn = 0; nn < n; nn++)
      for (int k = 0; k < klen; k++) begin
        av  = act(ly, nn, k);
        idx = nn * klen + k;
        acts[idx] = longint'(av);
      end
    for (int tt = 0; tt < t; tt++) begin
      lv = new[TOT_ROWS * kc * int'(LANES)];
      for (int c = 0; c < 3; c++)
        for (int r = 0; r < int'(ROWS_C[c]); r++)
          for (int k = 0; k < klen; k++) begin
            wc = wcode_p(c, ly, tt, r, k);
            lvl = wlevel(c, wc);
            idx = (int'(BASE_C[c]) + r) * klen + k;
            lv[idx] = lvl;
          end
      for (int nn = 0; nn < n; nn++) begin
        @(negedge clk);
        o_re = 1'b1; o_addr = tt * n + nn;
        @(negedge clk);
        o_re = 1'b0;
        for (int c = 0; c < 3; c++)
          for (int r = 0; r < int'(ROWS_C[c]); r++) begin
            int exp_q, got_q, rows_used;
            rows_used = (c == 0) ? rp : (c == 1) ? r4 : r8;
            if (tt * int'(ROWS_C[c]) + r >= rows_used) begin
              exp_q = 0;
              n_masked++;
            end else begin
              longint accv, v;
              int wb, ab;
              accv = 0;
              wb = (BASE_C[c] + r) * kc * int'(LANES);
              ab = nn * kc * int'(LANES);
              for (int k = 0; k < kc * int'(LANES); k++) accv += lv[wb + k] * acts[ab + k];
              v = accv * longint'(rscale(c, ly, tt, r));
              if (sh > 0) v += longint'(1) << (sh - 1);
              v = v >>> sh;
              if (v < 0)       begin exp_q = 0;  n_relu++; end
              else if (v > 15) begin exp_q = 15; n_sat++; exp_sat = 1; end
              else             exp_q = int'(v);
            end
            got_q = int'(o_data[(BASE_C[c] + r) * 4 +: 4]);
            checks++;
            if (got_q != exp_q) begin
              failures++;
              if (failures < 20)
                $display("FAIL layer %0d tile %0d col %0d core %0d row %0d: got %0d expected %0d",
                         ly, tt, nn, c, r, got_q, exp_q);
            end
          end
      end
    end
    checks++;
    if (int'(sat_flag) != exp_sat) begin
      failures++;
      $display("FAIL layer %0d: sat_flag=%0b expected %0d", ly, sat_flag, exp_sat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // layer, chunks, columns, tiles, rows PoT / Fixed-4 / Fixed-8, shift
    kreal = 4608;
    run_layer(0, 144, 49, 6, 333, 154, 25, 16);
    kreal = 147;
    run_layer(1, 5, 1024, 1, 42, 19, 3, 11);
    if (n_multichunk == 0) begin failures++; $display("FAIL never accumulated over several chunks"); end
    if (n_multitile == 0)  begin failures++; $display("FAIL never ran several row tiles"); end
    if (n_masked == 0)     begin failures++; $display("FAIL never had an unused row slot"); end
    if (n_relu == 0)       begin failures++; $display("FAIL never clipped at zero"); end
    if (n_sat == 0)        begin failures++; $display("FAIL never saturated"); end
    if (n_layers < 2)      begin failures++; $display("FAIL never ran layers back to back"); end
    $display("mechanisms: multichunk=%0d multitile=%0d masked=%0d relu=%0d sat=%0d layers=%0d",
             n_multichunk, n_multitile, n_masked, n_relu, n_sat, n_layers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
