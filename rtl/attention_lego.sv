// attention_lego: self-attention building block, top level.
//
// What it does: computes, for a sequence of SEQ_LEN tokens of D_MODEL
// elements held in external memory, the attention probabilities
//   S = softmax(Q K^T / scale),  Q = X W_Q,  K = X W_K,
// one row per token, with the weights stationary in processing-in-memory
// macros. W_Q, W_K and W_V are loaded once from memory into the Input Process;
// every k_t is computed and stored column by column into the Score module's
// PIM array; then, token by token, q_t is multiplied by the stored K^T and the
// row of scores goes through the softmax. Rows of S leave on sm_out with
// sm_valid and their token index sm_row.
//
// Blocks: top_controller (sequencing), dma (memory bus to Input Process, Input
// Process to Score, Score to Softmax), input_process (3 x 32 macros of
// 128x128), score_module (64 col_cims of 4 macros of 32x32), softmax (N =
// SEQ_LEN inputs).
//
// Interface: pulse start to run; finished rises at the end and stays until the
// next start. The memory bus is the DMA's (one read request per cycle, in-order
// answers with mem_rvalid). rd_req/rd_sel/rd_col read one stored weight column
// back to rd_data (valid with rd_done) while the block is not running.
//
// From the paper: the five modules and their connections (the architecture
// figure), the sizes d_model = 32 x 128, d_k = 128, 2048 tokens. This design's
// own: the memory bus, the read-back port, and the softmax size equal to the
// score row length (the paper's example softmax has 32 inputs). W_V is stored
// and can be read back, but S V is not computed: the paper gives no module
// for it.
module attention_lego
  import attn_pkg::*;
#(
  parameter int unsigned D_MODEL      = 4096,
  parameter int unsigned D_K          = 128,
  parameter int unsigned SEQ_LEN      = 2048,
  parameter int unsigned APIM_ROWS    = 128,
  parameter int unsigned IN_PAR       = 16,
  parameter int unsigned OUT_PAR      = 16,
  parameter int unsigned SC_APIM_DIM  = 32,
  parameter int unsigned SC_OUT_PAR   = 4,
  parameter int unsigned IP_SHIFT     = 12,
  parameter int unsigned SC_SHIFT     = 8,
  parameter int unsigned BUS_W        = 64,
  parameter int unsigned ADDR_W       = 32,
  localparam int unsigned ACW         = $clog2(D_K),
  localparam int unsigned TW          = $clog2(SEQ_LEN)
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  output logic                          finished,
  // external memory
  output logic                          mem_rd_en,
  output logic [ADDR_W-1:0]             mem_addr,
  input  logic [BUS_W-1:0]              mem_rdata,
  input  logic                          mem_rvalid,
  // attention probabilities, one row per token
  output logic [EXP_WIDTH*SEQ_LEN-1:0]  sm_out,
  output logic                          sm_valid,
  output logic [TW-1:0]                 sm_row,
  // weight read-back
  input  logic                          rd_req,
  input  logic [2:0]                    rd_sel,
  input  logic [ACW-1:0]                rd_col,
  output logic [DATA_WIDTH*D_MODEL-1:0] rd_data,
  output logic                          rd_done,
  // status
  output logic [2:0]                    outer_state,
  output logic [1:0]                    inner_state,
  output dma_state_e                    dma_state
);

  // controller <-> modules
  logic              dma_start, dma_done;
  dma_cmd_e          dma_cmd;
  logic [ADDR_W-1:0] dma_addr;
  logic              ip_cs, ip_web, ip_cimeb, ip_done;
  logic [2:0]        ip_weight_sel;
  logic [ACW-1:0]    ip_col_sel;
  logic              sc_cs, sc_K_mode_enable, sc_Q_mode_enable;
  logic [TW-1:0]     sc_K_address;
  logic              sc_input_done, sc_output_done;
  logic              sm_cme, sm_we;

  // data paths
  logic [DATA_WIDTH*D_MODEL-1:0] vec;
  logic [DATA_WIDTH*D_K-1:0]     ip_out, k_vec, q_vec;
  logic [DATA_WIDTH*SEQ_LEN-1:0] qk_row, sm_in;

  top_controller #(
    .D_MODEL(D_MODEL), .D_K(D_K), .SEQ_LEN(SEQ_LEN), .BUS_W(BUS_W), .ADDR_W(ADDR_W)
  ) u_ctrl (
    .clk, .rst, .start, .finished,
    .rd_req, .rd_sel, .rd_col, .rd_done,
    .dma_start, .dma_cmd, .dma_addr, .dma_done,
    .ip_cs, .ip_web, .ip_cimeb, .ip_weight_sel, .ip_col_sel, .ip_done,
    .sc_cs, .sc_K_mode_enable, .sc_Q_mode_enable, .sc_K_address,
    .sc_input_done, .sc_output_done,
    .sm_cme, .sm_valid, .sm_row,
    .outer_state, .inner_state
  );

  dma #(
    .D_MODEL(D_MODEL), .D_K(D_K), .SEQ_LEN(SEQ_LEN), .BUS_W(BUS_W), .ADDR_W(ADDR_W)
  ) u_dma (
    .clk, .rst,
    .start    (dma_start),
    .cmd      (dma_cmd),
    .base_addr(dma_addr),
    .done     (dma_done),
    .state    (dma_state),
    .mem_rd_en, .mem_addr, .mem_rdata, .mem_rvalid,
    .vec_out  (vec),
    .ip_data  (ip_out),
    .k_out    (k_vec),
    .q_out    (q_vec),
    .qk_in    (qk_row),
    .sm_data  (sm_in),
    .sm_we    (sm_we)
  );

  input_process #(
    .D_MODEL(D_MODEL), .D_K(D_K), .APIM_ROWS(APIM_ROWS),
    .IN_PAR(IN_PAR), .OUT_PAR(OUT_PAR), .OUT_SHIFT(IP_SHIFT)
  ) u_ip (
    .clk, .rst,
    .cs          (ip_cs),
    .web         (ip_web),
    .cimeb       (ip_cimeb),
    .weight_sel  (ip_weight_sel),
    .col_sel     (ip_col_sel),
    .data_in     (vec),
    .data_out    (ip_out),
    .mem_data_out(rd_data),
    .done        (ip_done)
  );

  score_module #(
    .D_K(D_K), .SEQ_LEN(SEQ_LEN), .APIM_DIM(SC_APIM_DIM),
    .OUT_PAR(SC_OUT_PAR), .OUT_SHIFT(SC_SHIFT)
  ) u_score (
    .clk,
    .cs           (sc_cs),
    .reset        (rst),
    .K_mode_enable(sc_K_mode_enable),
    .Q_mode_enable(sc_Q_mode_enable),
    .K_address    (sc_K_address),
    .K_input      (k_vec),
    .Q_input      (q_vec),
    .input_done   (sc_input_done),
    .output_done  (sc_output_done),
    .QK_output    (qk_row)
  );

  softmax #(
    .N(SEQ_LEN)
  ) u_sm (
    .clk, .rst,
    .we       (sm_we),
    .cme      (sm_cme),
    .data_in  (sm_in),
    .data_out (sm_out),
    .out_valid(sm_valid)
  );

endmodule
