// tb_dma: self-checking test of the DMA's three channels.
// A memory model answers read requests in order after a random 1-4 cycle
// delay with a value computed from the address. The test checks the
// assembled vector of several vector loads, the number of bus requests, the
// state path IDLE-MEM-LD_WEIGHT-DONE-IDLE, the K and Q capture (LD_K, LD_Q),
// and the one-cycle softmax write strobe with the score row (LD_SCORE).
module tb_dma;
  import attn_pkg::*;

  localparam int D_MODEL = 128, D_K = 32, SEQ_LEN = 64, BUS_W = 64;
  localparam int BEATS = 8 * D_MODEL / BUS_W;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0;
  dma_cmd_e cmd = DMA_CMD_VEC;
  logic [31:0] base_addr = 0;
  logic done;
  dma_state_e state;
  logic mem_rd_en;
  logic [31:0] mem_addr;
  logic [BUS_W-1:0] mem_rdata = '0;
  logic mem_rvalid = 0;
  logic [8*D_MODEL-1:0] vec_out;
  logic [8*D_K-1:0] ip_data = '0, k_out, q_out;
  logic [8*SEQ_LEN-1:0] qk_in = '0, sm_data;
  logic sm_we;

  dma #(.D_MODEL(D_MODEL), .D_K(D_K), .SEQ_LEN(SEQ_LEN), .BUS_W(BUS_W)) dut (.*);

  int checks = 0, failures = 0;
  int reqs = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [BUS_W-1:0] mem_word(input logic [31:0] a);
    return {a * 32'h9E3779B9, ~a ^ 32'h1234_5678};
  endfunction

  // in-order memory with random latency
  logic [31:0] pend_addr [$];
  int          pend_due  [$];
  int          now = 0;
  always @(posedge clk) begin
    now <= now + 1;
    mem_rvalid <= 0;
    if (mem_rd_en) begin
      pend_addr.push_back(mem_addr);
      pend_due.push_back(now + $urandom_range(1, 4));
      reqs++;
    end
    if (pend_addr.size() > 0 && pend_due[0] <= now) begin
      mem_rvalid <= 1;
      mem_rdata  <= mem_word(pend_addr.pop_front());
      void'(pend_due.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input dma_cmd_e c, input logic [31:0] a, output dma_state_e path [$]);
    cmd <= c; base_addr <= a; start <= 1;
    @(posedge clk);
    start <= 0;
    base_addr <= 32'hDEAD_0000;   // only valid with start
    path = {};
    #1;
    while (state != DMA_IDLE) begin
      path.push_back(state);
      @(posedge clk);
      #1;
    end
  endtask

  initial begin
    dma_state_e path [$];
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < 5; n++) begin
      logic [31:0] a;
      int r0;
      a = $urandom_range(0, 1000);
      r0 = reqs;
      run(DMA_CMD_VEC, a, path);
      check(reqs - r0 == BEATS, $sformatf("%0d bus requests", reqs - r0));
      check(path[0] == DMA_MEM && path[path.size()-2] == DMA_LD_WEIGHT &&
            path[path.size()-1] == DMA_DONE, "path MEM..LD_WEIGHT, DONE");
      for (int w = 0; w < BEATS; w++)
        check(vec_out[BUS_W*w +: BUS_W] == mem_word(a + w), $sformatf("vector word %0d", w));
    end
    // channel 2
    for (int i = 0; i < D_K; i++) ip_data[8*i +: 8] = 8'($urandom);
    run(DMA_CMD_K, 0, path);
    check(k_out == ip_data, "LD_K captures the Input Process output");
    check(path.size() == 2 && path[0] == DMA_LD_K && path[1] == DMA_DONE, "path LD_K, DONE");
    begin
      logic [8*D_K-1:0] kk;
      kk = ip_data;
      for (int i = 0; i < D_K; i++) ip_data[8*i +: 8] = 8'($urandom);
      run(DMA_CMD_Q, 0, path);
      check(q_out == ip_data && k_out == kk, "LD_Q captures, K held");
      check(path[0] == DMA_LD_Q, "path LD_Q");
    end
    // channel 3
    for (int i = 0; i < SEQ_LEN; i++) qk_in[8*i +: 8] = 8'($urandom);
    fork
      run(DMA_CMD_SCORE, 0, path);
      begin
        int we_cycles;
        we_cycles = 0;
        repeat (4) begin
          @(negedge clk);
          if (sm_we) begin
            we_cycles++;
            check(sm_data == qk_in, "score row to softmax");
          end
        end
        check(we_cycles == 1, $sformatf("sm_we high %0d cycles", we_cycles));
      end
    join
    check(path[0] == DMA_LD_SCORE, "path LD_SCORE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
