// top_controller: sequences the whole self-attention computation.
//
// What it does: a two-level nested state machine that starts each module with
// an enable and moves on when that module reports done. Batch size is 1; one
// run processes SEQ_LEN tokens.
//
// Outer state 0 (O_READY) is the preparation phase; it holds the inner states
//   0.0 I_WEIGHT: for W_Q, W_K, W_V and every column: DMA loads the column from
//                 memory, Input Process WRITE stores it;
//   0.1 I_INPUT:  DMA loads token x_t;
//   0.2 I_KCALC:  Input Process CIM computes k_t = x_t W_K;
//   0.3 I_KLOAD:  DMA moves k_t to the Score module, Score K_mode stores it as
//                 column t of K^T. 0.1-0.3 repeat for every token; after the
//                 last one, 0.3 also loads x_0 and computes q_0.
// Outer states 1-3 then loop once per token t:
//   1 O_LDQ:   DMA moves q_t to the Score module;
//   2 O_SCORE: DMA first loads x_{t+1} (not in the last loop); then, in
//              parallel, Score Q_mode computes row t of QK^T, the softmax
//              normalises row t-1 (not in the first loop) and the Input Process
//              computes q_{t+1} (not in the last loop); the state ends when all
//              started modules are done;
//   3 O_TOSM:  DMA moves row t of QK^T to the softmax.
// After the last loop, O_DRAIN normalises the last row, and O_DONE raises
// finished. While a DMA transfer runs, no compute module is working.
//
// Each step inside a state is an issue cycle (one-cycle request) followed by a
// wait for the module's done; phase counts these steps. sm_row tells which
// token the softmax result belongs to when sm_valid is high.
//
// A READ request (rd_req with rd_sel, rd_col) in O_IDLE or O_DONE reads one
// weight column back through the Input Process (O_RDBK), for checking.
//
// Memory map (word addresses, WPV = 8*D_MODEL/BUS_W words per vector): column
// c of matrix m (0 = W_Q, 1 = W_K, 2 = W_V) at (m*D_K + c)*WPV, token t at
// (3*D_K + t)*WPV.
//
// From the paper: the outer states 0-3 and inner states 0.0-0.3 with their
// contents, the enable/done handshakes, the overlap in state 2, and the pause
// of computing during DMA transfers. This design's own: the per-token loop of
// 0.1-0.3 (there is no storage for a whole K matrix outside the Score module),
// the final drain state, the read-back request, and the memory map.
module top_controller
  import attn_pkg::*;
#(
  parameter int unsigned D_MODEL = 4096,
  parameter int unsigned D_K     = 128,
  parameter int unsigned SEQ_LEN = 2048,
  parameter int unsigned BUS_W   = 64,
  parameter int unsigned ADDR_W  = 32,
  localparam int unsigned ACW    = $clog2(D_K),
  localparam int unsigned TW     = $clog2(SEQ_LEN)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  output logic               finished,
  input  logic               rd_req,
  input  logic [2:0]         rd_sel,
  input  logic [ACW-1:0]     rd_col,
  output logic               rd_done,
  // DMA
  output logic               dma_start,
  output dma_cmd_e           dma_cmd,
  output logic [ADDR_W-1:0]  dma_addr,
  input  logic               dma_done,
  // Input Process
  output logic               ip_cs,
  output logic               ip_web,
  output logic               ip_cimeb,
  output logic [2:0]         ip_weight_sel,
  output logic [ACW-1:0]     ip_col_sel,
  input  logic               ip_done,
  // Score
  output logic               sc_cs,
  output logic               sc_K_mode_enable,
  output logic               sc_Q_mode_enable,
  output logic [TW-1:0]      sc_K_address,
  input  logic               sc_input_done,
  input  logic               sc_output_done,
  // Softmax
  output logic               sm_cme,
  input  logic               sm_valid,
  output logic [TW-1:0]      sm_row,
  // status
  output logic [2:0]         outer_state,
  output logic [1:0]         inner_state
);

  localparam int unsigned WPV = DATA_WIDTH * D_MODEL / BUS_W;

  typedef enum logic [2:0] {
    O_READY = 3'd0, O_LDQ = 3'd1, O_SCORE = 3'd2, O_TOSM = 3'd3,
    O_DRAIN = 3'd4, O_DONE = 3'd5, O_IDLE = 3'd6, O_RDBK = 3'd7
  } outer_e;

  typedef enum logic [1:0] {
    I_WEIGHT = 2'd0, I_INPUT = 2'd1, I_KCALC = 2'd2, I_KLOAD = 2'd3
  } inner_e;

  outer_e          outer;
  inner_e          inner;
  logic [2:0]      phase;
  logic [1:0]      msel;
  logic [ACW-1:0]  col;
  logic [TW-1:0]   tok;
  logic            pend_sc, pend_ip, pend_sm;

  logic last_tok;
  assign last_tok = (int'(tok) == SEQ_LEN - 1);

  function automatic logic [ADDR_W-1:0] wcol_addr(input logic [1:0] m, input logic [ACW-1:0] c);
    return ADDR_W'((int'(m) * D_K + int'(c)) * WPV);
  endfunction
  function automatic logic [ADDR_W-1:0] tok_addr(input int unsigned t);
    return ADDR_W'((3 * D_K + t) * WPV);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      outer   <= O_IDLE;
      inner   <= I_WEIGHT;
      phase   <= '0;
      msel    <= '0;
      col     <= '0;
      tok     <= '0;
      pend_sc <= 1'b0;
      pend_ip <= 1'b0;
      pend_sm <= 1'b0;
      sm_row  <= '0;
    end else begin
      unique case (outer)
        O_IDLE, O_DONE: begin
          if (start) begin
            outer <= O_READY;
            inner <= I_WEIGHT;
            phase <= '0;
            msel  <= '0;
            col   <= '0;
            tok   <= '0;
          end else if (rd_req) begin
            outer <= O_RDBK;
            phase <= '0;
          end
        end

        O_RDBK: begin
          if (phase == 3'd0) phase <= 3'd1;
          else if (ip_done)  outer <= O_IDLE;
        end

        O_READY: begin
          unique case (inner)
            I_WEIGHT: begin
              unique case (phase)
                3'd0: phase <= 3'd1;
                3'd1: if (dma_done) phase <= 3'd2;
                3'd2: phase <= 3'd3;
                default: if (ip_done) begin
                  phase <= '0;
                  if (int'(col) == D_K - 1) begin
                    col <= '0;
                    if (msel == 2'd2) begin
                      inner <= I_INPUT;
                      tok   <= '0;
                    end else begin
                      msel <= msel + 1'b1;
                    end
                  end else begin
                    col <= col + 1'b1;
                  end
                end
              endcase
            end
            I_INPUT: begin
              if (phase == 3'd0) phase <= 3'd1;
              else if (dma_done) begin
                inner <= I_KCALC;
                phase <= '0;
              end
            end
            I_KCALC: begin
              if (phase == 3'd0) phase <= 3'd1;
              else if (ip_done) begin
                inner <= I_KLOAD;
                phase <= '0;
              end
            end
            default: begin  // I_KLOAD
              unique case (phase)
                3'd0: phase <= 3'd1;
                3'd1: if (dma_done) phase <= 3'd2;
                3'd2: phase <= 3'd3;
                3'd3: if (sc_input_done) begin
                  if (last_tok) begin
                    phase <= 3'd4;
                  end else begin
                    tok   <= tok + 1'b1;
                    inner <= I_INPUT;
                    phase <= '0;
                  end
                end
                3'd4: phase <= 3'd5;
                3'd5: if (dma_done) phase <= 3'd6;
                3'd6: phase <= 3'd7;
                default: if (ip_done) begin
                  outer <= O_LDQ;
                  phase <= '0;
                  tok   <= '0;
                end
              endcase
            end
          endcase
        end

        O_LDQ: begin
          if (phase == 3'd0) phase <= 3'd1;
          else if (dma_done) begin
            outer <= O_SCORE;
            phase <= '0;
          end
        end

        O_SCORE: begin
          unique case (phase)
            3'd0: phase <= last_tok ? 3'd2 : 3'd1;
            3'd1: if (dma_done) phase <= 3'd2;
            3'd2: begin
              pend_sc <= 1'b1;
              pend_ip <= !last_tok;
              pend_sm <= (tok != '0);
              sm_row  <= tok - 1'b1;
              phase   <= 3'd3;
            end
            default: begin
              if (sc_output_done) pend_sc <= 1'b0;
              if (ip_done)        pend_ip <= 1'b0;
              if (sm_valid)       pend_sm <= 1'b0;
              if (!(pend_sc && !sc_output_done) && !(pend_ip && !ip_done) &&
                  !(pend_sm && !sm_valid)) begin
                outer <= O_TOSM;
                phase <= '0;
              end
            end
          endcase
        end

        O_TOSM: begin
          if (phase == 3'd0) phase <= 3'd1;
          else if (dma_done) begin
            phase <= '0;
            if (last_tok) begin
              outer  <= O_DRAIN;
              sm_row <= tok;
            end else begin
              outer <= O_LDQ;
              tok   <= tok + 1'b1;
            end
          end
        end

        O_DRAIN: begin
          if (phase == 3'd0) phase <= 3'd1;
          else if (sm_valid) outer <= O_DONE;
        end

        default: outer <= O_IDLE;
      endcase
    end
  end

  // issue-cycle outputs
  always_comb begin
    dma_start        = 1'b0;
    dma_cmd          = DMA_CMD_VEC;
    dma_addr         = '0;
    ip_cs            = 1'b0;
    ip_web           = 1'b0;
    ip_cimeb         = 1'b0;
    ip_weight_sel    = SEL_Q;
    ip_col_sel       = col;
    sc_K_mode_enable = 1'b0;
    sc_Q_mode_enable = 1'b0;
    sm_cme           = 1'b0;
    unique case (outer)
      O_RDBK: if (phase == 3'd0) begin
        ip_cs = 1'b1; ip_web = 1'b1; ip_cimeb = 1'b1;   // READ
        ip_weight_sel = rd_sel; ip_col_sel = rd_col;
      end
      O_READY: unique case (inner)
        I_WEIGHT: begin
          if (phase == 3'd0) begin
            dma_start = 1'b1; dma_addr = wcol_addr(msel, col);
          end
          if (phase == 3'd2) begin
            ip_cs = 1'b1; ip_web = 1'b0; ip_cimeb = 1'b1;  // WRITE
            ip_weight_sel = {1'b0, msel};
          end
        end
        I_INPUT: if (phase == 3'd0) begin
          dma_start = 1'b1; dma_addr = tok_addr(int'(tok));
        end
        I_KCALC: if (phase == 3'd0) begin
          ip_cs = 1'b1; ip_web = 1'b1; ip_cimeb = 1'b0;    // CIM
          ip_weight_sel = SEL_K;
        end
        default: begin
          if (phase == 3'd0) begin dma_start = 1'b1; dma_cmd = DMA_CMD_K; end
          if (phase == 3'd2) sc_K_mode_enable = 1'b1;
          if (phase == 3'd4) begin dma_start = 1'b1; dma_addr = tok_addr(0); end
          if (phase == 3'd6) begin
            ip_cs = 1'b1; ip_web = 1'b1; ip_cimeb = 1'b0;
            ip_weight_sel = SEL_Q;
          end
        end
      endcase
      O_LDQ: if (phase == 3'd0) begin dma_start = 1'b1; dma_cmd = DMA_CMD_Q; end
      O_SCORE: begin
        if (phase == 3'd0 && !last_tok) begin
          dma_start = 1'b1; dma_addr = tok_addr(int'(tok) + 1);
        end
        if (phase == 3'd2) begin
          sc_Q_mode_enable = 1'b1;
          sm_cme           = (tok != '0);
          if (!last_tok) begin
            ip_cs = 1'b1; ip_web = 1'b1; ip_cimeb = 1'b0;
            ip_weight_sel = SEL_Q;
          end
        end
      end
      O_TOSM:  if (phase == 3'd0) begin dma_start = 1'b1; dma_cmd = DMA_CMD_SCORE; end
      O_DRAIN: if (phase == 3'd0) sm_cme = 1'b1;
      default: ;
    endcase
  end

  assign sc_cs        = 1'b1;
  assign sc_K_address = tok;
  assign finished     = (outer == O_DONE);
  assign rd_done      = (outer == O_RDBK) && ip_done;
  assign outer_state  = outer;
  assign inner_state  = inner;

endmodule
