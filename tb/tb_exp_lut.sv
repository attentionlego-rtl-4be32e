// tb_exp_lut: exhaustive test of the e^x table. For all 256 inputs the
// output must equal round(16 * e^(x/16)) for signed x, computed here with the
// real-valued exponential.
module tb_exp_lut;
  import attn_pkg::*;

  data_t x;
  logic [15:0] y;
  int checks = 0, failures = 0;

  exp_lut dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -128; i < 128; i++) begin
      real e;
      int expv;
      x = data_t'(i);
      #1;
      e = $exp(i / 16.0) * 16.0;
      expv = int'($floor(e + 0.5));
      checks++;
      if (int'(y) != expv) begin
        failures++;
        $display("FAIL: x=%0d exp %0d got %0d", i, expv, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
