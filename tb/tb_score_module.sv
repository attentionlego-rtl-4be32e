// tb_score_module: self-checking test of the Score module at SEQ_LEN = 256
// (8 col_cims) with the paper's D_K = 128 and 32x32 macros.
// Stores a random key vector in every column through K_mode, then computes
// several query rows through Q_mode and compares every element of QK_output
// with (q.k_t >>> OUT_SHIFT) clamped to -128..127, computed here. Checks that
// K_mode takes 32 cycles and Q_mode 8 steps + 1 drain, the done flags, that
// nothing starts without cs, and that the state returns to Idle.
module tb_score_module;
  import attn_pkg::*;

  localparam int D_K = 128, SEQ_LEN = 256, SHIFT = 8;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic cs = 1, K_mode_enable = 0, Q_mode_enable = 0;
  logic [7:0] K_address = 0;
  logic [8*D_K-1:0] K_input = '0, Q_input = '0;
  logic input_done, output_done;
  logic [8*SEQ_LEN-1:0] QK_output;

  score_module #(.D_K(D_K), .SEQ_LEN(SEQ_LEN), .OUT_SHIFT(SHIFT)) dut (.*);

  int checks = 0, failures = 0;
  data_t K [SEQ_LEN][D_K];
  data_t q [D_K];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t ref_q(input int acc);
    int s;
    s = acc >>> SHIFT;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : data_t'(s);
  endfunction

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    // key columns, in a shuffled order
    for (int n = 0; n < SEQ_LEN; n++) begin
      int t;
      t = (n * 37) % SEQ_LEN;
      for (int i = 0; i < D_K; i++) begin
        K[t][i] = data_t'($urandom);
        K_input[8*i +: 8] = K[t][i];
      end
      K_mode_enable <= 1; K_address <= 8'(t);
      @(posedge clk);
      K_mode_enable <= 0;
      cyc = 0;
      do begin @(posedge clk); cyc++; #1; end while (!input_done && cyc < 100);
      if (n < 4) check(cyc == 32, $sformatf("K_mode took %0d cycles", cyc));
      check(input_done, "input_done");
    end
    // no start without cs
    cs <= 0; Q_mode_enable <= 1; @(posedge clk);
    Q_mode_enable <= 0; cs <= 1;
    repeat (3) @(posedge clk);
    #1 check(input_done && !output_done, "no Q_mode without cs");
    // query rows
    for (int n = 0; n < 6; n++) begin
      for (int i = 0; i < D_K; i++) begin
        q[i] = data_t'($urandom);
        Q_input[8*i +: 8] = q[i];
      end
      Q_mode_enable <= 1;
      @(posedge clk);
      Q_mode_enable <= 0;
      cyc = 0;
      do begin @(posedge clk); cyc++; #1; end while (!output_done && cyc < 100);
      check(cyc == 9, $sformatf("Q_mode took %0d cycles", cyc));
      for (int t = 0; t < SEQ_LEN; t++) begin
        int acc;
        acc = 0;
        for (int i = 0; i < D_K; i++) acc += int'(q[i]) * int'(K[t][i]);
        check(data_t'(QK_output[8*t +: 8]) == ref_q(acc),
              $sformatf("row %0d col %0d exp %0d got %0d", n, t, ref_q(acc), data_t'(QK_output[8*t +: 8])));
      end
      repeat (2) @(posedge clk);
      #1 check(output_done, "output_done held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
