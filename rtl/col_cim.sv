// col_cim: one column of the Score module's PIM array.
//
// What it does: stacks N_V = D_K/APIM_DIM macros of APIM_DIM x APIM_DIM
// (4 of 32x32 at the default sizes) vertically, making a D_K x APIM_DIM
// matrix-vector engine. Column k of the engine stores one key vector, row r
// of it lives in macro r/APIM_DIM, row r%APIM_DIM.
//
// Write: one row index w_row of every macro is written per cycle, at column
// w_col, with w_data[a] going to macro a; a full key vector of D_K elements
// therefore takes APIM_DIM cycles.
// Compute: every macro takes its APIM_DIM slice of the query q_in at once
// (input parallelism APIM_DIM, one row per input port) and gives OUT_PAR
// column sums per cycle; output port j, in step ostep, serves column
// j*(APIM_DIM/OUT_PAR) + ostep. The partial sums of the N_V macros are added
// here. sum_out is valid (sum_valid) the cycle after cim_en.
//
// From the paper: 32x32 macros, 4 stacked into a 128x32 engine, a full
// 32-element input vector per macro. This design's own: OUT_PAR = 4 output
// ports per macro, so that a row of scores takes the 2^3 output steps of the
// Score module's state diagram, and the column ordering above.
module col_cim
  import attn_pkg::*;
#(
  parameter int unsigned D_K      = 128,
  parameter int unsigned APIM_DIM = 32,
  parameter int unsigned OUT_PAR  = 4,
  localparam int unsigned N_V     = D_K / APIM_DIM,
  localparam int unsigned AWD     = $clog2(APIM_DIM),
  localparam int unsigned CPP     = APIM_DIM / OUT_PAR,
  localparam int unsigned CPW     = (CPP > 1) ? $clog2(CPP) : 1,
  localparam int unsigned PSUM_W  = 2*DATA_WIDTH + $clog2(APIM_DIM),
  localparam int unsigned SUM_W   = PSUM_W + $clog2(N_V) + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    we,
  input  logic [AWD-1:0]          w_row,
  input  logic [AWD-1:0]          w_col,
  input  data_t                   w_data [N_V],
  input  logic                    cim_en,
  input  logic [CPW-1:0]          ostep,
  input  data_t                   q_in   [D_K],
  output logic signed [SUM_W-1:0] sum_out [OUT_PAR],
  output logic                    sum_valid
);

  logic signed [PSUM_W-1:0] psum  [N_V][OUT_PAR];
  logic                     pvalid[N_V];
  data_t                    slice [N_V][APIM_DIM];
  data_t                    r_unused [N_V];

  always_comb
    for (int a = 0; a < N_V; a++)
      for (int r = 0; r < APIM_DIM; r++)
        slice[a][r] = q_in[a*APIM_DIM + r];

  for (genvar a = 0; a < N_V; a++) begin : g_apim
    apim #(
      .ROWS   (APIM_DIM),
      .COLS   (APIM_DIM),
      .IN_PAR (APIM_DIM),
      .OUT_PAR(OUT_PAR)
    ) u_apim (
      .clk      (clk),
      .rst      (rst),
      .we       (we),
      .w_row    (w_row),
      .w_col    (w_col),
      .w_data   (w_data[a]),
      .re       (1'b0),
      .r_row    ('0),
      .r_col    ('0),
      .r_data   (r_unused[a]),
      .cim_en   (cim_en),
      .rphase   (1'b0),
      .cphase   (ostep),
      .cim_in   (slice[a]),
      .cim_out  (psum[a]),
      .cim_valid(pvalid[a])
    );
  end

  always_comb begin
    for (int j = 0; j < OUT_PAR; j++) begin
      sum_out[j] = '0;
      for (int a = 0; a < N_V; a++)
        sum_out[j] = sum_out[j] + SUM_W'(psum[a][j]);
    end
  end

  assign sum_valid = pvalid[0];

endmodule
