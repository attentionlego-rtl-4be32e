// tb_apim: self-checking test of the PIM macro at its default size
// (128x128, 16 input ports, 16 output ports).
// Writes a random weight matrix element by element, reads a sample back, then
// runs all 64 compute steps with a random input vector and compares every
// partial sum with sum_p x[p*8+rphase] * W[p*8+rphase][j*8+cphase] computed
// here from the testbench's own copy of the weights. Also checks the
// one-cycle output latency.
module tb_apim;
  import attn_pkg::*;

  localparam int ROWS = 128, COLS = 128, IN_PAR = 16, OUT_PAR = 16;
  localparam int RPP = ROWS / IN_PAR, CPP = COLS / OUT_PAR;
  localparam int PSUM_W = 2*DATA_WIDTH + $clog2(IN_PAR);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic we = 0, re = 0, cim_en = 0;
  logic [6:0] w_row = 0, w_col = 0, r_row = 0, r_col = 0;
  data_t w_data = 0, r_data;
  logic [2:0] rphase = 0, cphase = 0;
  data_t cim_in [IN_PAR];
  logic signed [PSUM_W-1:0] cim_out [OUT_PAR];
  logic cim_valid;

  apim #(.ROWS(ROWS), .COLS(COLS), .IN_PAR(IN_PAR), .OUT_PAR(OUT_PAR)) dut (.*);

  int checks = 0, failures = 0;
  data_t W [ROWS][COLS];
  data_t x [ROWS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cim_in[i]) cim_in[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // write every weight
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        W[r][c] = data_t'($urandom);
        we <= 1; w_row <= 7'(r); w_col <= 7'(c); w_data <= W[r][c];
        @(posedge clk);
      end
    we <= 0;
    // read back a sample
    for (int k = 0; k < 300; k++) begin
      int r, c;
      r = $urandom_range(ROWS-1); c = $urandom_range(COLS-1);
      re <= 1; r_row <= 7'(r); r_col <= 7'(c);
      @(posedge clk);
      re <= 0;
      #1 check(r_data == W[r][c], $sformatf("read W[%0d][%0d]=%0d got %0d", r, c, W[r][c], r_data));
    end
    // compute steps
    for (int i = 0; i < ROWS; i++) x[i] = data_t'($urandom);
    for (int cp = 0; cp < CPP; cp++)
      for (int rp = 0; rp < RPP; rp++) begin
        cim_en <= 1; rphase <= 3'(rp); cphase <= 3'(cp);
        for (int p = 0; p < IN_PAR; p++) cim_in[p] <= x[p*RPP + rp];
        @(posedge clk);
        cim_en <= 0;
        #1;
        check(cim_valid, "cim_valid one cycle after cim_en");
        for (int j = 0; j < OUT_PAR; j++) begin
          int exp_v;
          exp_v = 0;
          for (int p = 0; p < IN_PAR; p++)
            exp_v += int'(x[p*RPP + rp]) * int'(W[p*RPP + rp][j*CPP + cp]);
          check(int'(cim_out[j]) == exp_v,
                $sformatf("psum cp=%0d rp=%0d j=%0d exp %0d got %0d", cp, rp, j, exp_v, cim_out[j]));
        end
      end
    @(posedge clk); #1;
    check(!cim_valid, "cim_valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
