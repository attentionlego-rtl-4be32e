// attn_pkg: types and helpers shared by the self-attention building block.
//
// Data in the accelerator is 8-bit two's complement. Activations (X, Q, K
// and the scores fed to the softmax) are read as fixed point with
// FRAC_BITS fractional bits; this choice of format is the design's own, the
// paper only says "8-bit fixed-point". The Input Process mode encoding
// (web, cimeb) and the weight_sel codes are the paper's; the DMA command
// set is this design's own reading of the DMA state diagram.
package attn_pkg;

  localparam int unsigned DATA_WIDTH = 8;   // paper: 8-bit weights and data
  localparam int unsigned FRAC_BITS  = 4;   // assumed Q3.4 activations
  localparam int unsigned EXP_WIDTH  = 16;  // paper: 16-bit e^x
  localparam int unsigned EXP_FRAC   = 4;   // assumed UQ12.4 for e^x
  localparam int unsigned PROB_FRAC  = 15;  // assumed Q1.15 softmax output

  typedef logic signed [DATA_WIDTH-1:0] data_t;

  // Input Process operating mode, decoded from {web, cimeb} (paper Sec. 3.2):
  // READ (1,1), WRITE (0,1), IDLE (0,0), CIM (1,0).
  typedef enum logic [1:0] {
    IP_IDLE  = 2'b00,
    IP_WRITE = 2'b01,
    IP_CIM   = 2'b10,
    IP_READ  = 2'b11
  } ip_mode_e;

  // weight_sel codes (paper: Q=(0,0), K=(0,1), V=(1,0)); the port is [2:0].
  localparam logic [2:0] SEL_Q = 3'd0;
  localparam logic [2:0] SEL_K = 3'd1;
  localparam logic [2:0] SEL_V = 3'd2;

  // DMA state (Fig. 11 names: IDLE, MEM, LD_WEIGHT, LD_SCORE, LD_K, LD_Q, DONE)
  typedef enum logic [2:0] {
    DMA_IDLE      = 3'd0,
    DMA_MEM       = 3'd1,
    DMA_LD_WEIGHT = 3'd2,
    DMA_LD_SCORE  = 3'd3,
    DMA_LD_K      = 3'd4,
    DMA_LD_Q      = 3'd5,
    DMA_DONE      = 3'd6
  } dma_state_e;

  // Command the top controller gives the DMA: which branch of Fig. 11 to take.
  typedef enum logic [1:0] {
    DMA_CMD_VEC   = 2'd0,  // MEM -> LD_WEIGHT: gather one d_model vector
    DMA_CMD_SCORE = 2'd1,  // LD_SCORE: Score -> Softmax
    DMA_CMD_K     = 2'd2,  // LD_K: Input Process -> Score K input
    DMA_CMD_Q     = 2'd3   // LD_Q: Input Process -> Score Q input
  } dma_cmd_e;

  // Arithmetic shift right with saturation to a signed 8-bit value.
  function automatic data_t requant(input logic signed [47:0] acc, input int unsigned shift);
    logic signed [47:0] s;
    s = acc >>> shift;
    if (s > 48'sd127)       return data_t'(8'sd127);
    else if (s < -48'sd128) return data_t'(-8'sd128);
    else                    return data_t'(s[DATA_WIDTH-1:0]);
  endfunction

endpackage
