// tb_top_controller: self-checking test of the controller's sequence.
// The DMA, Input Process, Score module and softmax are replaced by simple
// responders that report done after random delays. Every request the
// controller makes is written to a trace as text; the trace must equal the
// sequence written out here from the description of the states (preparation
// 0.0-0.3, then per token: load q, score + softmax + next q together, move
// the scores to the softmax, and a final normalisation). Also checks that the
// softmax results are tagged with rows 0..SEQ_LEN-1 in order, the
// read-back request, and that finished is raised at the end.
module tb_top_controller;
  import attn_pkg::*;

  localparam int D_MODEL = 64, D_K = 4, SEQ_LEN = 8, BUS_W = 64;
  localparam int WPV = 8 * D_MODEL / BUS_W;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0, finished, rd_req = 0, rd_done;
  logic [2:0] rd_sel = 0;
  logic [1:0] rd_col = 0;
  logic dma_start, dma_done = 0;
  dma_cmd_e dma_cmd;
  logic [31:0] dma_addr;
  logic ip_cs, ip_web, ip_cimeb, ip_done = 0;
  logic [2:0] ip_weight_sel;
  logic [1:0] ip_col_sel;
  logic sc_cs, sc_K_mode_enable, sc_Q_mode_enable;
  logic [2:0] sc_K_address;
  logic sc_input_done = 0, sc_output_done = 0;
  logic sm_cme, sm_valid = 0;
  logic [2:0] sm_row;
  logic [2:0] outer_state;
  logic [1:0] inner_state;

  top_controller #(.D_MODEL(D_MODEL), .D_K(D_K), .SEQ_LEN(SEQ_LEN), .BUS_W(BUS_W)) dut (.*);

  int checks = 0, failures = 0;
  string trace [$];
  string expect_q [$];
  int rows [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- responders and trace ----------------
  int dma_cnt = 0, ip_cnt = 0, k_cnt = 0, q_cnt = 0;
  bit ip_busy = 0;
  always @(posedge clk) begin
    string ev;
    dma_done <= 0;
    ip_done  <= 0;
    sm_valid <= sm_cme;
    if (sm_valid) rows.push_back(int'(sm_row));
    if (dma_cnt > 0) begin dma_cnt--; if (dma_cnt == 0) dma_done <= 1; end
    if (ip_cnt > 0)  begin ip_cnt--;  if (ip_cnt == 0) begin ip_done <= 1; ip_busy = 0; end end
    if (k_cnt > 0)   begin k_cnt--;   if (k_cnt == 0) sc_input_done <= 1; end
    if (q_cnt > 0)   begin q_cnt--;   if (q_cnt == 0) sc_output_done <= 1; end
    ev = "";
    if (dma_start) begin
      if (dma_cmd == DMA_CMD_VEC) ev = {ev, $sformatf("DMA VEC %0d;", dma_addr)};
      else if (dma_cmd == DMA_CMD_K) ev = {ev, "DMA K;"};
      else if (dma_cmd == DMA_CMD_Q) ev = {ev, "DMA Q;"};
      else ev = {ev, "DMA SCORE;"};
      dma_cnt = $urandom_range(1, 6);
    end
    if (ip_cs && {ip_web, ip_cimeb} != 2'b00 && !ip_busy) begin
      ev = {ev, $sformatf("IP %0d%0d sel%0d col%0d;", ip_web, ip_cimeb, ip_weight_sel,
                          ({ip_web, ip_cimeb} == 2'b10) ? 0 : ip_col_sel)};
      ip_cnt = $urandom_range(1, 6);
      ip_busy = 1;
    end
    if (sc_cs && sc_K_mode_enable) begin
      ev = {ev, $sformatf("KMODE %0d;", sc_K_address)};
      sc_input_done <= 0;
      k_cnt = $urandom_range(1, 6);
    end
    if (sc_cs && sc_Q_mode_enable) begin
      ev = {ev, "QMODE;"};
      sc_output_done <= 0;
      q_cnt = $urandom_range(1, 6);
    end
    if (sm_cme) ev = {ev, "CME;"};
    if (ev != "") trace.push_back(ev);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tok_addr(input int t);
    return (3 * D_K + t) * WPV;
  endfunction

  initial begin
    // expected request sequence
    for (int m = 0; m < 3; m++)
      for (int c = 0; c < D_K; c++) begin
        expect_q.push_back($sformatf("DMA VEC %0d;", (m * D_K + c) * WPV));
        expect_q.push_back($sformatf("IP 01 sel%0d col%0d;", m, c));
      end
    for (int t = 0; t < SEQ_LEN; t++) begin
      expect_q.push_back($sformatf("DMA VEC %0d;", tok_addr(t)));
      expect_q.push_back("IP 10 sel1 col0;");
      expect_q.push_back("DMA K;");
      expect_q.push_back($sformatf("KMODE %0d;", t));
    end
    expect_q.push_back($sformatf("DMA VEC %0d;", tok_addr(0)));
    expect_q.push_back("IP 10 sel0 col0;");
    for (int t = 0; t < SEQ_LEN; t++) begin
      string ev;
      expect_q.push_back("DMA Q;");
      if (t < SEQ_LEN - 1) expect_q.push_back($sformatf("DMA VEC %0d;", tok_addr(t + 1)));
      ev = "";
      if (t < SEQ_LEN - 1) ev = {ev, "IP 10 sel0 col0;"};
      ev = {ev, "QMODE;"};
      if (t > 0) ev = {ev, "CME;"};
      expect_q.push_back(ev);
      expect_q.push_back("DMA SCORE;");
    end
    expect_q.push_back("CME;");

    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    while (!finished) @(posedge clk);
    repeat (2) @(posedge clk);
    check(trace.size() == expect_q.size(), $sformatf("trace has %0d events, expected %0d", trace.size(), expect_q.size()));
    for (int i = 0; i < expect_q.size() && i < trace.size(); i++)
      check(trace[i] == expect_q[i], $sformatf("event %0d: expected '%s' got '%s'", i, expect_q[i], trace[i]));
    check(rows.size() == SEQ_LEN, $sformatf("%0d softmax rows", rows.size()));
    for (int i = 0; i < rows.size(); i++) check(rows[i] == i, $sformatf("softmax row %0d tagged %0d", i, rows[i]));
    check(finished, "finished held");
    // read-back
    trace = {};
    rd_req <= 1; rd_sel <= 3'd2; rd_col <= 2'd3;
    @(posedge clk);
    rd_req <= 0;
    while (!rd_done) @(posedge clk);
    @(posedge clk);
    check(trace.size() == 1 && trace[0] == "IP 11 sel2 col3;", "read-back request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
