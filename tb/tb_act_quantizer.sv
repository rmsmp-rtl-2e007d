// tb_act_quantizer: checks requantization of a row accumulator to a 4-bit
// activation: multiply by the row scale, round half up at the layer shift,
// clip to 0..15. Directed corner cases (negative, exact half, saturation,
// shift 0) are followed by random cases against a 64-bit integer model.
module tb_act_quantizer;
  logic signed [rmsmp_pkg::ACC_W-1:0] acc;
  logic [15:0]        scale;
  logic [5:0]         shift;
  logic [3:0]         q;
  logic               sat;
  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0, n_mid = 0;

  act_quantizer dut (.acc(acc), .scale(scale), .shift(shift), .q(q), .sat(sat));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint ac, input longint sc, input int sh);
    longint v;
    int     exp_q;
    bit     exp_sat;
    acc   = rmsmp_pkg::ACC_W'(ac);
    scale = 16'(sc);
    shift = 6'(sh);
    #1;
    // floor((ac*sc)/2^sh + 1/2)
    v = ac * sc;
    if (sh > 0) v = v + (longint'(1) << (sh - 1));
    v = v >>> sh;
    exp_sat = 0;
    if (v < 0)       begin exp_q = 0;  n_zero++; end
    else if (v > 15) begin exp_q = 15; exp_sat = 1; n_sat++; end
    else             begin exp_q = int'(v); n_mid++; end
    checks++;
    if (int'(q) != exp_q || sat != exp_sat) begin
      failures++;
      $display("FAIL acc=%0d scale=%0d shift=%0d q=%0d sat=%0b expected %0d %0b",
               ac, sc, sh, q, sat, exp_q, exp_sat);
    end
  endtask

  initial begin
    check(0, 100, 4);
    check(-1, 1, 0);
    check(24, 1, 4);     // 1.5 -> 2
    check(23, 1, 4);     // 1.4375 -> 1
    check(8, 1, 4);      // 0.5 -> 1
    check(7, 1, 4);      // 0.4375 -> 0
    check(15, 1, 0);
    check(16, 1, 0);     // saturates
    check(-16777216, 65535, 20);
    check(16777215, 65535, 40);
    check(1000, 300, 14);
    repeat (20000) begin
      longint ac;
      ac = longint'($signed(25'($urandom)));
      if ($urandom_range(0, 1) == 1) ac = ac >>> $urandom_range(0, 20);
      check(ac, longint'($urandom_range(0, 65535)), int'($urandom_range(0, 40)));
    end
    if (n_zero == 0 || n_sat == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL coverage zero=%0d sat=%0d mid=%0d", n_zero, n_sat, n_mid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
