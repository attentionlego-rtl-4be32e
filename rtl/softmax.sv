// softmax: vector softmax over N 8-bit scores in two clock cycles.
//
// What it does: a_i = e^(v_i) / sum_k e^(v_k) for all N inputs at once.
// Cycle 1 (on we): every input goes through its own exp_lut, the results are
// registered and their sum is formed and registered. Cycle 2 (on cme): every
// registered e^(v_i) is divided by the registered sum and the quotients are
// registered as the output.
//
// States (names from the state diagram): Reset -> Load Input when we = 1;
// Load Input -> Output when cme = 1; Output -> Reset when we = 0 and cme = 0.
// out_valid is high while in Output; data_out keeps its value afterwards.
//
// Interface: data_in is flat, element i at bits [8*i +: 8], signed Q3.4.
// data_out element i is at bits [16*i +: 16], unsigned Q1.15 (32768 = 1.0):
//   a_i = floor(e_i * 2^15 / sum),  with e_i = exp_lut(v_i) (UQ12.4).
// If every e_i rounds to 0 the outputs are 0.
//
// From the paper: LUT exponent, two-cycle sum-then-normalise, the three
// states and the we / cme conditions, N = 32 in the example code. This
// design's own: the Q1.15 output format, truncating division, and the
// all-zero guard.
module softmax
  import attn_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         we,
  input  logic                         cme,
  input  logic [DATA_WIDTH*N-1:0]      data_in,
  output logic [EXP_WIDTH*N-1:0]       data_out,
  output logic                         out_valid
);

  localparam int unsigned SUM_W = EXP_WIDTH + $clog2(N) + 1;
  localparam int unsigned NUM_W = EXP_WIDTH + PROB_FRAC;

  typedef enum logic [1:0] {ST_RESET, ST_LOAD, ST_OUTPUT} state_e;
  state_e state;

  logic [EXP_WIDTH-1:0] e_now [N];
  logic [EXP_WIDTH-1:0] e_reg [N];
  logic [SUM_W-1:0]     sum_now, sum_reg;

  for (genvar i = 0; i < N; i++) begin : g_exp
    exp_lut u_exp (
      .x(data_t'(data_in[DATA_WIDTH*i +: DATA_WIDTH])),
      .y(e_now[i])
    );
  end

  always_comb begin
    sum_now = '0;
    for (int i = 0; i < N; i++) sum_now = sum_now + SUM_W'(e_now[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ST_RESET;
    end else begin
      unique case (state)
        ST_RESET:  if (we)          state <= ST_LOAD;
        ST_LOAD:   if (cme)         state <= ST_OUTPUT;
        ST_OUTPUT: if (!we && !cme) state <= ST_RESET;
        default:   state <= ST_RESET;
      endcase
    end
  end

  // cycle 1: load inputs, exponentiate, sum
  always_ff @(posedge clk) begin
    if (rst) begin
      sum_reg <= '0;
      for (int i = 0; i < N; i++) e_reg[i] <= '0;
    end else if (state == ST_RESET && we) begin
      e_reg   <= e_now;
      sum_reg <= sum_now;
    end
  end

  // cycle 2: normalise
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) data_out[EXP_WIDTH*i +: EXP_WIDTH] <= '0;
    end else if (state == ST_LOAD && cme) begin
      for (int i = 0; i < N; i++)
        data_out[EXP_WIDTH*i +: EXP_WIDTH] <= (sum_reg == '0) ? '0 :
          EXP_WIDTH'(({e_reg[i], PROB_FRAC'(0)}) / NUM_W'(sum_reg));
    end
  end

  assign out_valid = (state == ST_OUTPUT);

endmodule
