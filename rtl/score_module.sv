// score_module: computes one row of Q K^T per query.
//
// What it does: holds K^T (D_K x SEQ_LEN, 128 x 2048 at the default sizes) in
// N_COL = SEQ_LEN/APIM_DIM = 64 col_cim columns, each 4 stacked 32x32 PIM
// macros, and multiplies a query vector q (D_K elements) by it, giving the
// SEQ_LEN scores q.k_t of one row of Q K^T.
//
// Three states: Idle, K_mode, Q_mode.
// * K_mode (entered on K_mode_enable with cs): writes the key vector K_input
//   into column K_address of the array. All 4 macros of the addressed col_cim
//   are written in parallel, one row per cycle, so it takes 2^5 = 32 cycles
//   (istep 0..31). Then input_done rises and the module is Idle again.
// * Q_mode (entered on Q_mode_enable with cs): all 64 col_cims compute at once,
//   OUT_PAR = 4 columns per macro per step, in 2^3 = 8 steps (ostep 0..7). The
//   score of column idx = c*32 + j*8 + ostep is rescaled to 8 bits and stored
//   in QK_output; the last step stores idx = 2047. One more cycle drains the
//   macro output registers, then output_done rises and the module is Idle.
//
// Interface: vectors are flat, element i at bits [8*i +: 8]. K_input and
// Q_input must stay stable while their mode runs. input_done / output_done
// stay high until the next K_mode / Q_mode starts. QK_output holds its value
// until the next Q_mode writes it. Scores are (q.k >>> OUT_SHIFT), saturated
// to signed 8 bits; the shift stands for the 1/sqrt(d_k) scaling and for the
// fixed-point format the softmax expects.
//
// Timing: K_mode lasts 32 cycles, Q_mode 9 cycles (8 steps + 1 drain).
//
// From the paper: ports, widths and names; the three states and their
// enables/done flags; the 32x32 macro, 4 per col_cim, 64 col_cims; the
// istep = 2^5-1 and ostep = 2^3-1 end conditions of the state diagram. This
// design's own: done flags held as levels, OUT_PAR = 4, column order, the
// rescaling, and the drain cycle.
module score_module
  import attn_pkg::*;
#(
  parameter int unsigned D_K       = 128,
  parameter int unsigned SEQ_LEN   = 2048,
  parameter int unsigned APIM_DIM  = 32,
  parameter int unsigned OUT_PAR   = 4,
  parameter int unsigned OUT_SHIFT = 8,
  localparam int unsigned ADDR_W   = $clog2(SEQ_LEN)
) (
  input  logic                           clk,
  input  logic                           cs,
  input  logic                           reset,
  input  logic                           K_mode_enable,
  input  logic                           Q_mode_enable,
  input  logic [ADDR_W-1:0]              K_address,
  input  logic [DATA_WIDTH*D_K-1:0]      K_input,
  input  logic [DATA_WIDTH*D_K-1:0]      Q_input,
  output logic                           input_done,
  output logic                           output_done,
  output logic [DATA_WIDTH*SEQ_LEN-1:0]  QK_output
);

  localparam int unsigned N_COL  = SEQ_LEN / APIM_DIM;
  localparam int unsigned N_V    = D_K / APIM_DIM;
  localparam int unsigned AWD    = $clog2(APIM_DIM);
  localparam int unsigned CPP    = APIM_DIM / OUT_PAR;
  localparam int unsigned CPW    = (CPP > 1) ? $clog2(CPP) : 1;
  localparam int unsigned PSUM_W = 2*DATA_WIDTH + $clog2(APIM_DIM);
  localparam int unsigned SUM_W  = PSUM_W + $clog2(N_V) + 1;
  localparam int unsigned COLW   = (N_COL > 1) ? $clog2(N_COL) : 1;

  typedef enum logic [1:0] {ST_IDLE, ST_K_MODE, ST_Q_MODE} state_e;

  state_e          state;
  logic [AWD-1:0]  istep;
  logic [CPW:0]    ostep;      // one extra bit for the drain cycle
  logic [ADDR_W-1:0] kaddr;

  always_ff @(posedge clk) begin
    if (reset) begin
      state       <= ST_IDLE;
      istep       <= '0;
      ostep       <= '0;
      kaddr       <= '0;
      input_done  <= 1'b0;
      output_done <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          if (cs && K_mode_enable) begin
            state      <= ST_K_MODE;
            kaddr      <= K_address;
            istep      <= '0;
            input_done <= 1'b0;
          end else if (cs && Q_mode_enable) begin
            state       <= ST_Q_MODE;
            ostep       <= '0;
            output_done <= 1'b0;
          end
        end
        ST_K_MODE: begin
          istep <= istep + 1'b1;
          if (int'(istep) == APIM_DIM - 1) begin
            state      <= ST_IDLE;
            input_done <= 1'b1;
          end
        end
        ST_Q_MODE: begin
          ostep <= ostep + 1'b1;
          if (int'(ostep) == CPP) begin
            state       <= ST_IDLE;
            output_done <= 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // key elements for the current row step, one per stacked macro
  data_t k_row [N_V];
  always_comb
    for (int a = 0; a < N_V; a++)
      k_row[a] = data_t'(K_input[DATA_WIDTH*(a*APIM_DIM + int'(istep)) +: DATA_WIDTH]);

  data_t q_vec [D_K];
  always_comb
    for (int i = 0; i < D_K; i++)
      q_vec[i] = data_t'(Q_input[DATA_WIDTH*i +: DATA_WIDTH]);

  logic                    cim_en;
  assign cim_en = (state == ST_Q_MODE) && (int'(ostep) < CPP);

  logic [COLW-1:0] kcol;
  assign kcol = COLW'(int'(kaddr) / APIM_DIM);

  logic signed [SUM_W-1:0] sums  [N_COL][OUT_PAR];
  logic                    svalid[N_COL];

  for (genvar c = 0; c < N_COL; c++) begin : g_col
    col_cim #(
      .D_K     (D_K),
      .APIM_DIM(APIM_DIM),
      .OUT_PAR (OUT_PAR)
    ) u_col (
      .clk      (clk),
      .rst      (reset),
      .we       (state == ST_K_MODE && int'(kcol) == c),
      .w_row    (istep),
      .w_col    (AWD'(int'(kaddr) % APIM_DIM)),
      .w_data   (k_row),
      .cim_en   (cim_en),
      .ostep    (CPW'(ostep)),
      .q_in     (q_vec),
      .sum_out  (sums[c]),
      .sum_valid(svalid[c])
    );
  end

  logic [CPW-1:0] ostep_d;
  always_ff @(posedge clk) ostep_d <= CPW'(ostep);

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int i = 0; i < SEQ_LEN; i++) QK_output[DATA_WIDTH*i +: DATA_WIDTH] <= '0;
    end else if (svalid[0]) begin
      for (int c = 0; c < N_COL; c++)
        for (int j = 0; j < OUT_PAR; j++)
          QK_output[DATA_WIDTH*(c*APIM_DIM + j*CPP + int'(ostep_d)) +: DATA_WIDTH]
            <= requant(48'(sums[c][j]), OUT_SHIFT);
    end
  end

endmodule
