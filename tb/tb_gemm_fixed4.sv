// tb_gemm_fixed4: checks the Fixed-4 GEMM core at a reduced size
// (ROWS = 3, LANES = 4). Random dot products of 1 to 6 chunks are streamed
// through the core, with gaps where in_valid is low; after the last chunk of
// each, every row accumulator is compared with a sum computed in the
// testbench from the real quantization levels (decoded independently of the
// RTL), and out_valid must follow in_valid by exactly one cycle. A final
// K = 4608 dot product at full scale checks that the accumulator never wraps.
module tb_gemm_fixed4;
  import rmsmp_pkg::*;
  localparam scheme_e     S     = SCH_FIX4;
  localparam int unsigned ROWS  = 3;
  localparam int unsigned LANES = 4;
  localparam int unsigned WB    = w_bits(S);

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, out_valid;
  logic [ROWS-1:0][LANES-1:0][WB-1:0] w;
  logic [LANES-1:0][A_BITS-1:0]       a;
  logic signed [ACC_W-1:0]            acc [ROWS];
  int checks = 0, failures = 0;
  longint ref_acc [ROWS];
  int n_multi = 0;

  gemm_core #(.SCHEME(S), .ROWS(ROWS), .LANES(LANES)) dut (
    .clk, .rst_n, .in_valid, .in_first, .w, .a, .out_valid, .acc
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Real weight level in the core's integer units: Fixed = the level itself,
  // PoT = sign * 2^(e-7) * 64.
  function automatic longint level(input logic [WB-1:0] code);
    real r;
    if (S == SCH_POT4) begin
      r = (code[2:0] == 0) ? 0.0 : 2.0 ** (real'(code[2:0]) - 7.0);
      if (code[3]) r = -r;
      return longint'($rtoi(r * 64.0));
    end
    return longint'($signed(code));
  endfunction

  function automatic logic [WB-1:0] rand_code();
    int v;
    if (S == SCH_POT4) return WB'($urandom_range(0, 15));
    v = $urandom_range(0, 2 * ((1 << (WB - 1)) - 1)) - ((1 << (WB - 1)) - 1);
    return WB'(v);
  endfunction

  initial begin
    w = '0;
    a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 300; d++) begin
      int nch;
      nch = $urandom_range(1, 6);
      if (nch > 1) n_multi++;
      foreach (ref_acc[r]) ref_acc[r] = 0;
      for (int c = 0; c < nch; c++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++)
          for (int l = 0; l < LANES; l++) w[r][l] = rand_code();
        for (int l = 0; l < LANES; l++) a[l] = A_BITS'($urandom_range(0, 15));
        for (int r = 0; r < ROWS; r++)
          for (int l = 0; l < LANES; l++) ref_acc[r] += level(w[r][l]) * longint'(a[l]);
        in_valid = 1'b1;
        in_first = (c == 0);
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid) begin
          failures++;
          $display("FAIL out_valid low one cycle after in_valid");
        end
        // idle cycle now and then: the accumulators must hold
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
          w = '1;
          @(posedge clk);
          #1;
          checks++;
          if (out_valid) begin
            failures++;
            $display("FAIL out_valid high without input");
          end
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (longint'(acc[r]) != ref_acc[r]) begin
          failures++;
          $display("FAIL dot %0d row %0d acc=%0d expected %0d", d, r, acc[r], ref_acc[r]);
        end
      end
    end
    // Worst case of the largest layer: K = 4608 inputs, every weight at its
    // largest magnitude (positive for row 0, negative for the others) and
    // every activation 15; the accumulator must not wrap.
    foreach (ref_acc[r]) ref_acc[r] = 0;
    for (int c = 0; c < 4608 / LANES; c++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++)
          if (S == SCH_POT4) w[r][l] = WB'((r == 0) ? 4'h7 : 4'hF);
          else               w[r][l] = WB'((r == 0) ? ((1 << (WB - 1)) - 1) : -((1 << (WB - 1)) - 1));
      for (int l = 0; l < LANES; l++) a[l] = 4'hF;
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) ref_acc[r] += level(w[r][l]) * 15;
      in_valid = 1'b1;
      in_first = (c == 0);
    end
    @(negedge clk);
    in_valid = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (longint'(acc[r]) != ref_acc[r]) begin
        failures++;
        $display("FAIL worst case row %0d acc=%0d expected %0d", r, acc[r], ref_acc[r]);
      end
    end
    if (n_multi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
