// input_process: weight store and Q/K/V projection engine.
//
// What it does: keeps W_Q, W_K and W_V (each D_MODEL x D_K, signed 8-bit)
// in three groups of N_APIM = D_MODEL/APIM_ROWS PIM macros (32 macros of
// 128x128 per matrix at the default sizes), and multiplies one input token
// x (D_MODEL elements) by the matrix chosen with weight_sel.
//
// Modes, from {web, cimeb} when cs is high: WRITE (0,1) writes column col_sel
// of the selected matrix from data_in, one row of every macro per cycle, so a
// column takes APIM_ROWS = 128 cycles. READ (1,1) reads column col_sel back
// into mem_data_out the same way. CIM (1,0) computes data_out = x * W: the
// macro group runs RPP*CPP = 8*8 = 64 compute steps, the outer loop over the
// output column phase and the inner over the input row phase; the partial sums
// of all macros are added by an adder tree and accumulated per output column.
// IDLE (0,0) does nothing.
//
// Control is the three-state machine Idle -> Busy -> Done -> Idle: Idle leaves
// when cs is high and the mode is not IDLE; Busy repeats the row or compute
// step until the last one; Done raises done for one cycle and returns to Idle.
//
// Interface: vectors are flat, element i at bits [8*i +: 8]. Element
// a*APIM_ROWS + r of data_in goes to row r of macro a. The mode, weight_sel and
// col_sel are sampled when Idle is left; data_in must stay stable until done.
// data_out is the accumulated sum shifted right by OUT_SHIFT and saturated to
// 8 bits; it holds its value until the next CIM operation starts.
//
// Timing: after the cycle that leaves Idle, WRITE spends 128 cycles in Busy,
// READ 129 (one more for the macro's registered read port), CIM 65 (64 compute
// steps plus one to drain the macro output register), then one cycle in Done.
//
// From the paper: the port list and widths, the mode encoding, the weight_sel
// codes, the three states, 32 macros of 128x128 per matrix, 16 input ports of
// 8 rows each, 16 output ports of 8 columns each and the 64-cycle product.
// This design's own: the port-to-row/column mapping, the accumulator width and
// the OUT_SHIFT rescaling to 8 bits (the paper does not say how results are
// brought back to 8 bits), and the extra drain cycles.
module input_process
  import attn_pkg::*;
#(
  parameter int unsigned D_MODEL   = 4096,
  parameter int unsigned D_K       = 128,
  parameter int unsigned APIM_ROWS = 128,
  parameter int unsigned IN_PAR    = 16,
  parameter int unsigned OUT_PAR   = 16,
  parameter int unsigned OUT_SHIFT = 12,
  localparam int unsigned ADDR_COL_WIDTH = $clog2(D_K)
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           cs,
  input  logic                           web,
  input  logic                           cimeb,
  input  logic [2:0]                     weight_sel,
  input  logic [ADDR_COL_WIDTH-1:0]      col_sel,
  input  logic [DATA_WIDTH*D_MODEL-1:0]  data_in,
  output logic [DATA_WIDTH*D_K-1:0]      data_out,
  output logic [DATA_WIDTH*D_MODEL-1:0]  mem_data_out,
  output logic                           done
);

  localparam int unsigned N_APIM = D_MODEL / APIM_ROWS;
  localparam int unsigned RPP    = APIM_ROWS / IN_PAR;
  localparam int unsigned CPP    = D_K / OUT_PAR;
  localparam int unsigned STEPS  = RPP * CPP;
  localparam int unsigned RW     = $clog2(APIM_ROWS);
  localparam int unsigned RPW    = (RPP > 1) ? $clog2(RPP) : 1;
  localparam int unsigned CPW    = (CPP > 1) ? $clog2(CPP) : 1;
  localparam int unsigned PSUM_W = 2*DATA_WIDTH + $clog2(IN_PAR);
  localparam int unsigned ACC_W  = 48;
  localparam int unsigned CNT_W  = $clog2(APIM_ROWS + STEPS + 2);

  typedef enum logic [1:0] {ST_IDLE, ST_BUSY, ST_DONE} state_e;

  state_e             state;
  ip_mode_e           mode;
  logic [2:0]         sel;
  logic [ADDR_COL_WIDTH-1:0] col;
  logic [CNT_W-1:0]   cnt;
  logic               last;

  ip_mode_e req_mode;
  assign req_mode = ip_mode_e'({web, cimeb});

  // step decomposition for CIM: outer column phase, inner row phase
  logic [RPW-1:0] rphase;
  logic [CPW-1:0] cphase;
  assign rphase = RPW'(int'(cnt) % RPP);
  assign cphase = CPW'(int'(cnt) / RPP);

  always_comb begin
    unique case (mode)
      IP_WRITE: last = (int'(cnt) == APIM_ROWS - 1);
      IP_READ:  last = (int'(cnt) == APIM_ROWS);
      IP_CIM:   last = (int'(cnt) == STEPS);
      default:  last = 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ST_IDLE;
      mode  <= IP_IDLE;
      sel   <= '0;
      col   <= '0;
      cnt   <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (cs && req_mode != IP_IDLE) begin
          state <= ST_BUSY;
          mode  <= req_mode;
          sel   <= weight_sel;
          col   <= col_sel;
          cnt   <= '0;
        end
        ST_BUSY: begin
          cnt <= cnt + 1'b1;
          if (last) state <= ST_DONE;
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign done = (state == ST_DONE);

  logic busy;
  assign busy = (state == ST_BUSY);

  logic do_write, do_read, do_cim;
  assign do_write = busy && mode == IP_WRITE;
  assign do_read  = busy && mode == IP_READ && int'(cnt) < APIM_ROWS;
  assign do_cim   = busy && mode == IP_CIM  && int'(cnt) < STEPS;

  // macro inputs shared by the three matrices
  data_t cim_in [N_APIM][IN_PAR];
  data_t w_data [N_APIM];
  always_comb begin
    for (int a = 0; a < N_APIM; a++) begin
      w_data[a] = data_t'(data_in[DATA_WIDTH*(a*APIM_ROWS + int'(cnt[RW-1:0])) +: DATA_WIDTH]);
      for (int p = 0; p < IN_PAR; p++)
        cim_in[a][p] = data_t'(data_in[DATA_WIDTH*(a*APIM_ROWS + p*RPP + int'(rphase)) +: DATA_WIDTH]);
    end
  end

  logic signed [PSUM_W-1:0] psum   [3][N_APIM][OUT_PAR];
  data_t                    r_data [3][N_APIM];
  logic                     pvalid [3][N_APIM];

  for (genvar m = 0; m < 3; m++) begin : g_mat
    for (genvar a = 0; a < N_APIM; a++) begin : g_apim
      apim #(
        .ROWS   (APIM_ROWS),
        .COLS   (D_K),
        .IN_PAR (IN_PAR),
        .OUT_PAR(OUT_PAR)
      ) u_apim (
        .clk      (clk),
        .rst      (rst),
        .we       (do_write && sel == 3'(m)),
        .w_row    (cnt[RW-1:0]),
        .w_col    (col),
        .w_data   (w_data[a]),
        .re       (do_read && sel == 3'(m)),
        .r_row    (cnt[RW-1:0]),
        .r_col    (col),
        .r_data   (r_data[m][a]),
        .cim_en   (do_cim && sel == 3'(m)),
        .rphase   (rphase),
        .cphase   (cphase),
        .cim_in   (cim_in[a]),
        .cim_out  (psum[m][a]),
        .cim_valid(pvalid[m][a])
      );
    end
  end

  // read-back and accumulation lag the issuing step by one cycle
  logic                rd_v;
  logic [RW-1:0]       rd_row;
  logic [CPW-1:0]      cphase_d;
  logic [1:0]          sel_i;
  assign sel_i = (sel < 3'd3) ? sel[1:0] : 2'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_v <= 1'b0;
    end else begin
      rd_v <= do_read;
    end
    rd_row   <= cnt[RW-1:0];
    cphase_d <= cphase;
  end

  always_ff @(posedge clk) begin
    if (rd_v)
      for (int a = 0; a < N_APIM; a++)
        mem_data_out[DATA_WIDTH*(a*APIM_ROWS + int'(rd_row)) +: DATA_WIDTH] <= r_data[sel_i][a];
  end

  // adder tree over the macros, then per-column accumulation
  logic signed [ACC_W-1:0] acc     [D_K];
  logic signed [ACC_W-1:0] colsum  [OUT_PAR];
  always_comb begin
    for (int j = 0; j < OUT_PAR; j++) begin
      colsum[j] = '0;
      for (int a = 0; a < N_APIM; a++)
        colsum[j] = colsum[j] + ACC_W'(psum[sel_i][a][j]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < D_K; c++) acc[c] <= '0;
    end else if (state == ST_IDLE && cs && req_mode == IP_CIM) begin
      for (int c = 0; c < D_K; c++) acc[c] <= '0;
    end else if (pvalid[sel_i][0] && sel < 3'd3) begin
      for (int j = 0; j < OUT_PAR; j++)
        acc[j*CPP + int'(cphase_d)] <= acc[j*CPP + int'(cphase_d)] + colsum[j];
    end
  end

  always_comb begin
    for (int c = 0; c < D_K; c++)
      data_out[DATA_WIDTH*c +: DATA_WIDTH] = requant(acc[c], OUT_SHIFT);
  end

endmodule
