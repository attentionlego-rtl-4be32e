// dma: moves data into, between and out of the compute modules.
//
// What it does: three channels, each started by the top controller with
// start and a command, each ending with a one-cycle done.
// 1. External memory -> Input Process (DMA_CMD_VEC). States MEM then
//    LD_WEIGHT: in MEM the DMA reads BEATS = 8*D_MODEL/BUS_W words of BUS_W
//    bits from the memory bus, one request per cycle from word address
//    base_addr (sampled with start) upwards, and assembles them into the D_MODEL-element buffer
//    vec_out (word w fills elements w*BUS_W/8 ..). In LD_WEIGHT the full
//    vector is handed to the Input Process, where it is a weight column or an
//    input token depending on the mode the controller then sets. vec_out is
//    held until the next DMA_CMD_VEC.
// 2. Input Process -> Score (DMA_CMD_K, DMA_CMD_Q). State LD_K / LD_Q: the
//    Input Process result is captured into k_out / q_out, which drive the
//    Score module's K_input / Q_input and are held, so the Input Process is free
//    to compute the next vector while the Score module still uses this one.
// 3. Score -> Softmax (DMA_CMD_SCORE). State LD_SCORE: the score row qk_in is
//    passed to sm_data and sm_we is raised for that cycle, so the softmax loads
//    it.
// Every branch then passes DONE (done = 1) and returns to IDLE.
//
// Memory bus: mem_rd_en with mem_addr asks for one word; the memory answers
// with mem_rvalid and mem_rdata any number of cycles later, in order. The bus
// must accept one request per cycle.
//
// Timing: a vector load takes BEATS request cycles plus the memory latency,
// then LD_WEIGHT and DONE (one cycle each); LD_K, LD_Q and LD_SCORE take one
// cycle each before DONE.
//
// From the paper: the three channels, serial-to-parallel conversion of the bus
// data, and the state names IDLE, MEM, LD_WEIGHT, LD_SCORE, LD_K, LD_Q, DONE
// with the branches IDLE-MEM-LD_WEIGHT-DONE and IDLE-LD_x-DONE. This design's
// own: the command set, the bus width and protocol, the K/Q holding buffers.
module dma
  import attn_pkg::*;
#(
  parameter int unsigned D_MODEL = 4096,
  parameter int unsigned D_K     = 128,
  parameter int unsigned SEQ_LEN = 2048,
  parameter int unsigned BUS_W   = 64,
  parameter int unsigned ADDR_W  = 32
) (
  input  logic                          clk,
  input  logic                          rst,
  // command from the top controller
  input  logic                          start,
  input  dma_cmd_e                      cmd,
  input  logic [ADDR_W-1:0]             base_addr,
  output logic                          done,
  output dma_state_e                    state,
  // external memory bus
  output logic                          mem_rd_en,
  output logic [ADDR_W-1:0]             mem_addr,
  input  logic [BUS_W-1:0]              mem_rdata,
  input  logic                          mem_rvalid,
  // channel 1
  output logic [DATA_WIDTH*D_MODEL-1:0] vec_out,
  // channel 2
  input  logic [DATA_WIDTH*D_K-1:0]     ip_data,
  output logic [DATA_WIDTH*D_K-1:0]     k_out,
  output logic [DATA_WIDTH*D_K-1:0]     q_out,
  // channel 3
  input  logic [DATA_WIDTH*SEQ_LEN-1:0] qk_in,
  output logic [DATA_WIDTH*SEQ_LEN-1:0] sm_data,
  output logic                          sm_we
);

  localparam int unsigned BEATS = DATA_WIDTH * D_MODEL / BUS_W;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  logic [BW-1:0]     issued, received;
  logic [ADDR_W-1:0] base_q;   // base address, sampled at start

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= DMA_IDLE;
      base_q   <= '0;
      issued   <= '0;
      received <= '0;
    end else begin
      unique case (state)
        DMA_IDLE: if (start) begin
          base_q   <= base_addr;
          issued   <= '0;
          received <= '0;
          unique case (cmd)
            DMA_CMD_VEC:   state <= DMA_MEM;
            DMA_CMD_SCORE: state <= DMA_LD_SCORE;
            DMA_CMD_K:     state <= DMA_LD_K;
            DMA_CMD_Q:     state <= DMA_LD_Q;
            default:       state <= DMA_IDLE;
          endcase
        end
        DMA_MEM: begin
          if (mem_rd_en)  issued   <= issued + 1'b1;
          if (mem_rvalid) received <= received + 1'b1;
          if (mem_rvalid && int'(received) == BEATS - 1) state <= DMA_LD_WEIGHT;
        end
        DMA_LD_WEIGHT, DMA_LD_SCORE, DMA_LD_K, DMA_LD_Q: state <= DMA_DONE;
        DMA_DONE: state <= DMA_IDLE;
        default:  state <= DMA_IDLE;
      endcase
    end
  end

  assign mem_rd_en = (state == DMA_MEM) && (int'(issued) < BEATS);
  assign mem_addr  = base_q + ADDR_W'(issued);
  assign done      = (state == DMA_DONE);

  // serial-to-parallel: word w fills bus-width slice w of the vector
  always_ff @(posedge clk) begin
    if (state == DMA_MEM && mem_rvalid)
      vec_out[BUS_W*int'(received) +: BUS_W] <= mem_rdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      k_out <= '0;
      q_out <= '0;
    end else begin
      if (state == DMA_LD_K) k_out <= ip_data;
      if (state == DMA_LD_Q) q_out <= ip_data;
    end
  end

  assign sm_data = qk_in;
  assign sm_we   = (state == DMA_LD_SCORE);

endmodule
