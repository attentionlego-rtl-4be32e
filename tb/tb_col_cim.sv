// tb_col_cim: self-checking test of one Score-module column (4 macros of
// 32x32 stacked into 128x32). Stores 32 random key vectors, then for several
// random queries runs the 8 output steps and compares each of the 4 sums per
// step with sum_r q[r]*K[r][j*8+ostep], computed here.
module tb_col_cim;
  import attn_pkg::*;

  localparam int D_K = 128, DIM = 32, OUT_PAR = 4, N_V = D_K / DIM, CPP = DIM / OUT_PAR;
  localparam int SUM_W = 2*DATA_WIDTH + $clog2(DIM) + $clog2(N_V) + 1;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic we = 0, cim_en = 0;
  logic [4:0] w_row = 0, w_col = 0;
  data_t w_data [N_V];
  logic [2:0] ostep = 0;
  data_t q_in [D_K];
  logic signed [SUM_W-1:0] sum_out [OUT_PAR];
  logic sum_valid;

  col_cim #(.D_K(D_K), .APIM_DIM(DIM), .OUT_PAR(OUT_PAR)) dut (.*);

  int checks = 0, failures = 0;
  data_t K [D_K][DIM];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (w_data[a]) w_data[a] = 0;
    foreach (q_in[i]) q_in[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < DIM; c++) begin
      for (int r = 0; r < D_K; r++) K[r][c] = data_t'($urandom);
      for (int rr = 0; rr < DIM; rr++) begin
        we <= 1; w_row <= 5'(rr); w_col <= 5'(c);
        for (int a = 0; a < N_V; a++) w_data[a] <= K[a*DIM + rr][c];
        @(posedge clk);
      end
    end
    we <= 0;
    for (int t = 0; t < 5; t++) begin
      for (int r = 0; r < D_K; r++) q_in[r] <= data_t'($urandom);
      @(posedge clk);
      for (int s = 0; s < CPP; s++) begin
        cim_en <= 1; ostep <= 3'(s);
        @(posedge clk);
        cim_en <= 0;
        #1;
        check(sum_valid, "sum_valid");
        for (int j = 0; j < OUT_PAR; j++) begin
          int e;
          e = 0;
          for (int r = 0; r < D_K; r++) e += int'(q_in[r]) * int'(K[r][j*CPP + s]);
          check(int'(sum_out[j]) == e, $sformatf("t%0d s%0d j%0d exp %0d got %0d", t, s, j, e, sum_out[j]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
