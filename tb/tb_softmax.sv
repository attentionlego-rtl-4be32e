// tb_softmax: self-checking test of the 32-input softmax.
// For random score vectors: raises we (load + exponent + sum), then cme
// (normalise), and compares each output with floor(e_i * 2^15 / sum e),
// where e_i = round(16 * e^(v_i/16)) is computed here with the real-valued
// exponential. Also checks the state sequence: out_valid exactly one cycle
// after cme, back to Reset when we and cme are low, and that the output sums
// to about 1.0.
module tb_softmax;
  import attn_pkg::*;

  localparam int N = 32;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic we = 0, cme = 0;
  logic [8*N-1:0] data_in = '0;
  logic [16*N-1:0] data_out;
  logic out_valid;

  softmax #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 50; n++) begin
      longint e [N];
      longint sum, tot;
      sum = 0;
      for (int i = 0; i < N; i++) begin
        int v;
        v = (n == 0) ? 127 : (n == 1) ? -128 : int'($urandom_range(0, 255)) - 128;
        data_in[8*i +: 8] = 8'(v);
        e[i] = longint'($floor($exp(v / 16.0) * 16.0 + 0.5));
        sum += e[i];
      end
      we <= 1;
      @(posedge clk);
      we <= 0;
      data_in <= '0;               // inputs are sampled on the we cycle only
      repeat (2) @(posedge clk);
      #1 check(!out_valid, "no output before cme");
      cme <= 1;
      @(posedge clk);
      cme <= 0;
      #1 check(out_valid, "out_valid one cycle after cme");
      tot = 0;
      for (int i = 0; i < N; i++) begin
        longint expv;
        expv = (sum == 0) ? 0 : (e[i] << 15) / sum;
        tot += longint'(data_out[16*i +: 16]);
        check(longint'(data_out[16*i +: 16]) == expv,
              $sformatf("vec %0d elem %0d exp %0d got %0d", n, i, expv, data_out[16*i +: 16]));
      end
      if (n != 1) check(tot <= 32768 && tot > 32768 - N, $sformatf("sum of outputs %0d", tot));
      @(posedge clk);
      #1 check(!out_valid, "back to Reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
