// tb_input_process: self-checking test of the Input Process.
// Runs at D_MODEL = 1024 (8 macros per matrix) with the paper's D_K = 128 and
// 128x128 macros. Loads all columns of W_Q, W_K and W_V in WRITE mode, reads
// columns back in READ mode, and runs CIM with random tokens on all three
// matrices, comparing data_out with x*W rescaled ((acc >>> OUT_SHIFT) clamped
// to -128..127) computed here. Checks the cycle counts: 128 Busy cycles per
// WRITE column and 64 compute steps (+1 drain) per CIM, and that IDLE mode and
// cs = 0 start nothing.
module tb_input_process;
  import attn_pkg::*;

  localparam int D_MODEL = 1024, D_K = 128, SHIFT = 9;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cs = 0, web = 0, cimeb = 0;
  logic [2:0] weight_sel = 0;
  logic [6:0] col_sel = 0;
  logic [8*D_MODEL-1:0] data_in = '0;
  logic [8*D_K-1:0] data_out;
  logic [8*D_MODEL-1:0] mem_data_out;
  logic done;

  input_process #(.D_MODEL(D_MODEL), .D_K(D_K), .OUT_SHIFT(SHIFT)) dut (.*);

  int checks = 0, failures = 0;
  data_t W [3][D_MODEL][D_K];
  data_t x [D_MODEL];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // start an operation, return cycles until done
  task automatic op(input logic w, input logic c, input int sel, input int col, output int cycles);
    cs <= 1; web <= w; cimeb <= c; weight_sel <= 3'(sel); col_sel <= 7'(col);
    @(posedge clk);
    cs <= 0; web <= 0; cimeb <= 0;
    cycles = 0;
    do begin @(posedge clk); cycles++; #1; end while (!done && cycles < 1000);
  endtask

  function automatic data_t ref_q(input longint acc);
    longint s;
    s = acc >>> SHIFT;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : data_t'(s);
  endfunction

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // WRITE every column of the three matrices
    for (int m = 0; m < 3; m++)
      for (int c = 0; c < D_K; c++) begin
        for (int r = 0; r < D_MODEL; r++) begin
          W[m][r][c] = data_t'($urandom_range(0, 31) - 16);
          data_in[8*r +: 8] = W[m][r][c];
        end
        op(0, 1, m, c, cyc);
        if (c == 0) check(cyc == 128, $sformatf("WRITE took %0d cycles to done", cyc));
        @(posedge clk);
      end
    // READ back some columns
    for (int k = 0; k < 6; k++) begin
      int m, c;
      m = k % 3; c = $urandom_range(D_K-1);
      op(1, 1, m, c, cyc);
      for (int r = 0; r < D_MODEL; r++)
        check(data_t'(mem_data_out[8*r +: 8]) == W[m][r][c],
              $sformatf("READ m%0d r%0d c%0d", m, r, c));
      @(posedge clk);
    end
    // CIM on Q, K, V with random tokens
    for (int k = 0; k < 6; k++) begin
      int m;
      m = k % 3;
      for (int r = 0; r < D_MODEL; r++) begin
        x[r] = data_t'($urandom_range(0, 63) - 32);
        data_in[8*r +: 8] = x[r];
      end
      op(1, 0, m, 0, cyc);
      check(cyc == 64 + 1, $sformatf("CIM took %0d cycles to done, expected 64 steps + drain", cyc));
      for (int c = 0; c < D_K; c++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < D_MODEL; r++) acc += longint'(x[r]) * longint'(W[m][r][c]);
        check(data_t'(data_out[8*c +: 8]) == ref_q(acc),
              $sformatf("CIM m%0d col %0d exp %0d got %0d", m, c, ref_q(acc), data_t'(data_out[8*c +: 8])));
      end
      @(posedge clk);
    end
    // IDLE mode and cs = 0 do nothing
    cs <= 1; web <= 0; cimeb <= 0; @(posedge clk);
    cs <= 0; web <= 1; cimeb <= 0; @(posedge clk);
    web <= 0;
    repeat (80) begin @(posedge clk); #1; check(!done, "no operation without cs or in IDLE"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
