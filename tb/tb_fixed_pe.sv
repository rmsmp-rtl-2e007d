// tb_fixed_pe: exhaustive check of the fixed-point PE at both precisions the
// design uses: 4-bit weights (Fixed-W4A4) and 8-bit weights (Fixed-W8A4),
// each against every unsigned 4-bit activation, compared with an integer
// product computed in the testbench.
module tb_fixed_pe;
  logic signed [3:0]  w4;
  logic signed [7:0]  w8;
  logic [3:0]         a;
  logic signed [8:0]  p4;
  logic signed [12:0] p8;
  int checks = 0, failures = 0;

  fixed_pe #(.W_BITS(4), .A_BITS(4)) dut4 (.w(w4), .a(a), .p(p4));
  fixed_pe #(.W_BITS(8), .A_BITS(4)) dut8 (.w(w8), .a(a), .p(p8));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wi = -128; wi < 128; wi++) begin
      for (int ai = 0; ai < 16; ai++) begin
        w8 = 8'(wi);
        w4 = 4'(wi);
        a  = 4'(ai);
        #1;
        checks++;
        if (int'(p8) != wi * ai) begin
          failures++;
          $display("FAIL W8 w=%0d a=%0d p=%0d", wi, ai, p8);
        end
        if (wi >= -8 && wi < 8) begin
          checks++;
          if (int'(p4) != wi * ai) begin
            failures++;
            $display("FAIL W4 w=%0d a=%0d p=%0d", wi, ai, p4);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
