// tb_layer_controller: runs the controller through random layer shapes and
// checks, cycle by cycle, the issued buffer addresses (tile*kc + k for the
// weights, col*kc + k for the activations), the first/last flags one cycle
// later, the sequential write addresses two cycles later, the number of
// writes (tiles x columns) and the start-to-done time of L + 4 cycles for
// L = tiles x columns x chunks. A start while busy must be ignored.
module tb_layer_controller;
  localparam int unsigned KC_MAX = 6, N_MAX = 5, T_MAX = 4;
  localparam int unsigned WBUF_DEPTH = T_MAX * KC_MAX, ABUF_DEPTH = 32, OBUF_DEPTH = T_MAX * N_MAX;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [2:0] cfg_kc;
  logic [2:0] cfg_n;
  logic [2:0] cfg_t;
  logic busy, done, rd_en, core_valid, core_first, core_last, wr_en;
  logic [$clog2(WBUF_DEPTH)-1:0] wbuf_addr;
  logic [$clog2(ABUF_DEPTH)-1:0] abuf_addr;
  logic [2:0] rd_tile, core_tile, wr_tile;
  logic [$clog2(OBUF_DEPTH)-1:0] wr_addr;
  int checks = 0, failures = 0;

  layer_controller #(
    .KC_MAX(KC_MAX), .N_MAX(N_MAX), .T_MAX(T_MAX),
    .WBUF_DEPTH(WBUF_DEPTH), .ABUF_DEPTH(ABUF_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    cfg_kc = 1; cfg_n = 1; cfg_t = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int layer = 0; layer < 60; layer++) begin
      int kc, n, t, L, cyc, issued, writes, firsts, lasts, done_at;
      kc = $urandom_range(1, KC_MAX);
      n  = $urandom_range(1, N_MAX);
      t  = $urandom_range(1, T_MAX);
      if (layer == 0) begin kc = 1; n = 1; t = 1; end
      if (layer == 1) begin kc = KC_MAX; n = N_MAX; t = T_MAX; end
      L = kc * n * t;
      @(negedge clk);
      cfg_kc = 3'(kc); cfg_n = 3'(n); cfg_t = 3'(t);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      issued = 0; writes = 0; firsts = 0; lasts = 0; done_at = -1;
      for (cyc = 1; cyc < L + 10; cyc++) begin
        // a start pulse in the middle of the run must change nothing
        if (cyc == 2) start = 1'b1;
        else          start = 1'b0;
        #1;
        if (rd_en) begin
          int k, c, tt;
          k  = issued % kc;
          c  = (issued / kc) % n;
          tt = issued / (kc * n);
          expect_eq("wbuf_addr", int'(wbuf_addr), tt * kc + k);
          expect_eq("abuf_addr", int'(abuf_addr), c * kc + k);
          expect_eq("rd_tile", int'(rd_tile), tt);
          issued++;
        end
        if (core_valid) begin
          if (core_first) firsts++;
          if (core_last)  lasts++;
        end
        if (wr_en) begin
          expect_eq("wr_addr", int'(wr_addr), writes);
          expect_eq("wr_tile", int'(wr_tile), writes / n);
          writes++;
        end
        if (done && done_at < 0) done_at = cyc;
        @(negedge clk);
      end
      expect_eq("issued", issued, L);
      expect_eq("firsts", firsts, n * t);
      expect_eq("lasts", lasts, n * t);
      expect_eq("writes", writes, n * t);
      expect_eq("start-to-done cycles", done_at, L + 4);
      expect_eq("idle after done", int'(busy), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
