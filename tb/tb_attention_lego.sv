// tb_attention_lego: end-to-end test of the whole block at reduced sizes
// (D_MODEL = 128 in 2 macros of 64 rows, D_K = 32, SEQ_LEN = 64 tokens).
// A behavioural external memory holds the weights and tokens, each element a
// hash of its address, and answers bus reads in order after a short delay.
// The testbench computes Q = X W_Q and K = X W_K rescaled to 8 bits, the
// score rows Q K^T rescaled to 8 bits, and their softmax, all on its own, and
// compares every row the block delivers on sm_out. After the run it reads a
// W_V column back through the read-back port. It counts how often each
// mechanism happened (weight writes, CIM on W_K and W_Q, K_mode, Q_mode,
// softmax load and normalise, each DMA state, the state-2 overlap of Score,
// Softmax and Input Process, read-back, saturation of a rescaled value) and
// counts a failure for any that never happened.
module tb_attention_lego;
  import attn_pkg::*;

  localparam int D_MODEL = 128, D_K = 32, SEQ_LEN = 64, APIM_ROWS = 64;
  localparam int IP_SHIFT = 4, SC_SHIFT = 9, BUS_W = 64;
  localparam int WPV = 8 * D_MODEL / BUS_W;
  localparam int TW = $clog2(SEQ_LEN);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0, finished;
  logic mem_rd_en, mem_rvalid = 0;
  logic [31:0] mem_addr;
  logic [BUS_W-1:0] mem_rdata = '0;
  logic [16*SEQ_LEN-1:0] sm_out;
  logic sm_valid;
  logic [TW-1:0] sm_row;
  logic rd_req = 0;
  logic [2:0] rd_sel = 0;
  logic [4:0] rd_col = 0;
  logic [8*D_MODEL-1:0] rd_data;
  logic rd_done;
  logic [2:0] outer_state;
  logic [1:0] inner_state;
  dma_state_e dma_state;

  attention_lego #(
    .D_MODEL(D_MODEL), .D_K(D_K), .SEQ_LEN(SEQ_LEN), .APIM_ROWS(APIM_ROWS),
    .IP_SHIFT(IP_SHIFT), .SC_SHIFT(SC_SHIFT), .BUS_W(BUS_W)
  ) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- external memory model ----------------
  // element at element address e: a small signed value from a hash of e
  function automatic data_t elem(input int unsigned e);
    int unsigned h;
    h = e * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return data_t'(int'(h % 32) - 16);
  endfunction

  function automatic logic [BUS_W-1:0] word(input int unsigned w);
    logic [BUS_W-1:0] v;
    for (int b = 0; b < BUS_W / 8; b++) v[8*b +: 8] = elem(w * (BUS_W / 8) + b);
    return v;
  endfunction

  int unsigned pend [$];
  always @(posedge clk) begin
    mem_rvalid <= 0;
    if (pend.size() > 0 && ($urandom_range(0, 3) != 0)) begin
      mem_rvalid <= 1;
      mem_rdata  <= word(pend.pop_front());
    end
    if (mem_rd_en) pend.push_back(mem_addr);
  end

  // ---------------- reference model ----------------
  function automatic data_t wq(input int m, input int r, input int c);
    return elem((m * D_K + c) * D_MODEL + r);
  endfunction
  function automatic data_t xt(input int t, input int r);
    return elem((3 * D_K + t) * D_MODEL + r);
  endfunction

  int sat_events = 0;
  function automatic data_t rq(input longint acc, input int sh);
    longint s;
    s = acc >>> sh;
    if (s > 127 || s < -128) sat_events++;
    return (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : data_t'(s);
  endfunction

  data_t Qr [SEQ_LEN][D_K], Kr [SEQ_LEN][D_K], Sr [SEQ_LEN][SEQ_LEN];
  int unsigned Pr [SEQ_LEN][SEQ_LEN];

  task automatic build_reference();
    for (int t = 0; t < SEQ_LEN; t++)
      for (int c = 0; c < D_K; c++) begin
        longint aq, ak;
        aq = 0; ak = 0;
        for (int r = 0; r < D_MODEL; r++) begin
          aq += longint'(xt(t, r)) * longint'(wq(0, r, c));
          ak += longint'(xt(t, r)) * longint'(wq(1, r, c));
        end
        Qr[t][c] = rq(aq, IP_SHIFT);
        Kr[t][c] = rq(ak, IP_SHIFT);
      end
    for (int t = 0; t < SEQ_LEN; t++) begin
      longint e [SEQ_LEN];
      longint sum;
      sum = 0;
      for (int u = 0; u < SEQ_LEN; u++) begin
        longint a;
        a = 0;
        for (int c = 0; c < D_K; c++) a += longint'(Qr[t][c]) * longint'(Kr[u][c]);
        Sr[t][u] = rq(a, SC_SHIFT);
        e[u] = longint'($floor($exp(real'(Sr[t][u]) / 16.0) * 16.0 + 0.5));
        sum += e[u];
      end
      for (int u = 0; u < SEQ_LEN; u++) Pr[t][u] = (sum == 0) ? 0 : 32'((e[u] << 15) / sum);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_wr, n_cim_k, n_cim_q, n_kmode, n_qmode, n_smload, n_smnorm, n_overlap, n_rdbk;
  int n_dma [7];
  int rows_seen = 0;
  bit row_seen [SEQ_LEN];

  always @(posedge clk) if (!rst) begin
    if (int'(dut.u_ip.state) == 0 && dut.ip_cs) begin
      if (!dut.ip_web && dut.ip_cimeb) n_wr++;
      if (dut.ip_web && !dut.ip_cimeb && dut.ip_weight_sel == SEL_K) n_cim_k++;
      if (dut.ip_web && !dut.ip_cimeb && dut.ip_weight_sel == SEL_Q) n_cim_q++;
      if (dut.ip_web && dut.ip_cimeb) n_rdbk++;
    end
    if (dut.sc_K_mode_enable) n_kmode++;
    if (dut.sc_Q_mode_enable) n_qmode++;
    if (dut.sm_we)  n_smload++;
    if (dut.sm_cme) n_smnorm++;
    if (int'(dut.u_score.state) == 2 && int'(dut.u_ip.state) == 1 &&
        int'(dut.u_sm.state) == 2) n_overlap++;
    if (dut.dma_state != DMA_IDLE && (int'(dut.u_ip.state) == 1 ||
        int'(dut.u_score.state) != 0)) begin
      failures++;
      $display("FAIL: compute module busy during a DMA transfer");
    end
    n_dma[int'(dma_state)]++;
  end

  // ---------------- output checker ----------------
  always @(posedge clk) if (!rst && sm_valid) begin
    int t;
    int bad;
    t = int'(sm_row);
    bad = 0;
    check(!row_seen[t], $sformatf("row %0d delivered once", t));
    row_seen[t] = 1;
    rows_seen++;
    for (int u = 0; u < SEQ_LEN; u++) begin
      checks++;
      if (32'(sm_out[16*u +: 16]) != Pr[t][u]) begin
        failures++;
        bad++;
        if (bad < 3) $display("FAIL: row %0d col %0d exp %0d got %0d", t, u, Pr[t][u], sm_out[16*u +: 16]);
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    foreach (row_seen[i]) row_seen[i] = 0;
    build_reference();
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cyc = 0;
    while (!finished) begin @(posedge clk); cyc++; end
    $display("run took %0d cycles", cyc);
    check(rows_seen == SEQ_LEN, $sformatf("%0d rows delivered", rows_seen));
    // read a W_V column back
    @(posedge clk);
    rd_req <= 1; rd_sel <= SEL_V; rd_col <= 5'd7;
    @(posedge clk);
    rd_req <= 0;
    while (!rd_done) @(posedge clk);
    @(posedge clk);
    for (int r = 0; r < D_MODEL; r++)
      check(data_t'(rd_data[8*r +: 8]) == wq(2, r, 7), $sformatf("read-back row %0d", r));

    $display("mechanisms: write=%0d cimK=%0d cimQ=%0d Kmode=%0d Qmode=%0d smload=%0d smnorm=%0d overlap=%0d readback=%0d sat=%0d",
             n_wr, n_cim_k, n_cim_q, n_kmode, n_qmode, n_smload, n_smnorm, n_overlap, n_rdbk, sat_events);
    $display("DMA state cycles: IDLE=%0d MEM=%0d LD_WEIGHT=%0d LD_SCORE=%0d LD_K=%0d LD_Q=%0d DONE=%0d",
             n_dma[0], n_dma[1], n_dma[2], n_dma[3], n_dma[4], n_dma[5], n_dma[6]);
    check(n_wr == 3 * D_K, "weight column writes");
    check(n_cim_k == SEQ_LEN && n_cim_q == SEQ_LEN, "one K and one Q product per token");
    check(n_kmode == SEQ_LEN && n_qmode == SEQ_LEN, "one K_mode and one Q_mode per token");
    check(n_smload == SEQ_LEN && n_smnorm == SEQ_LEN, "one softmax load and normalise per token");
    check(n_overlap > 0, "state-2 overlap of Score, Softmax and Input Process");
    check(n_rdbk == 1, "read-back");
    check(sat_events > 0, "saturation of a rescaled value occurred");
    for (int s = 0; s < 7; s++) check(n_dma[s] > 0, $sformatf("DMA state %0d visited", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
