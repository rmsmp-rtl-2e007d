// tb_pot4_pe: exhaustive check of the PoT shift PE. Every weight code
// (sign, exponent) is combined with every 4-bit activation and the product is
// compared with the real-valued PoT level times the activation, expressed in
// units of 2^-6 (computed in floating point, not with shifts).
module tb_pot4_pe;
  logic [3:0]        w;
  logic [3:0]        a;
  logic signed [10:0] p;
  int checks = 0, failures = 0;

  pot4_pe #(.A_BITS(4)) dut (.w(w), .a(a), .p(p));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wi = 0; wi < 16; wi++) begin
      for (int ai = 0; ai < 16; ai++) begin
        real lvl;
        int  exp_p;
        w = 4'(wi);
        a = 4'(ai);
        #1;
        lvl   = (wi[2:0] == 0) ? 0.0 : 2.0 ** (real'(wi[2:0]) - 7.0);
        if (wi[3]) lvl = -lvl;
        exp_p = $rtoi(lvl * real'(ai) * 64.0);
        checks++;
        if (int'(p) != exp_p) begin
          failures++;
          $display("FAIL w=%h a=%0d p=%0d expected %0d", w, a, p, exp_p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
