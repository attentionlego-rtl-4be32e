// apim: processing-in-memory macro, digital behavioural equivalent.
//
// What it does: holds a ROWS x COLS array of signed 8-bit weights and
// multiplies an input vector by it in place. A weight is written or read one
// element at a time at (row, col). In compute mode the macro takes IN_PAR
// inputs per cycle and produces OUT_PAR partial sums per cycle: input port p
// serves the RPP = ROWS/IN_PAR rows p*RPP .. p*RPP+RPP-1, chosen by rphase,
// and output port j serves the CPP = COLS/OUT_PAR columns
// j*CPP .. j*CPP+CPP-1, chosen by cphase. One cycle therefore computes
//   cim_out[j] = sum_p cim_in[p] * W[p*RPP + rphase][j*CPP + cphase]
// and a full matrix-vector product takes RPP*CPP cycles, the outer loop over
// cphase and the inner over rphase being the caller's job.
//
// Storage is banked the same way: one bank per input port, RPP*CPP words of
// OUT_PAR bytes, so a compute cycle reads exactly one word per bank.
//
// Timing: writes take effect at the clock edge; r_data and cim_out are
// registered and valid the cycle after re / cim_en (cim_valid marks them).
//
// Follows the paper: the array sizes and the input/output parallelism (128x128,
// 16 in, 16 out, 8 rows per input port, 8 columns per output port in the Input
// Process; 32x32 in the Score module). The paper takes the macro from an
// external PIM behavioural library and does not describe its insides; the
// analog array and its 6-bit ADC are replaced here by exact digital partial
// sums, because the bit-serial/ADC scheme that the 6 bits apply to is not given.
module apim
  import attn_pkg::*;
#(
  parameter int unsigned ROWS    = 128,
  parameter int unsigned COLS    = 128,
  parameter int unsigned IN_PAR  = 16,
  parameter int unsigned OUT_PAR = 16,
  parameter int unsigned PSUM_W  = 2*DATA_WIDTH + $clog2(IN_PAR),
  localparam int unsigned RPP    = ROWS / IN_PAR,
  localparam int unsigned CPP    = COLS / OUT_PAR,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned CW     = $clog2(COLS),
  localparam int unsigned RPW    = (RPP > 1) ? $clog2(RPP) : 1,
  localparam int unsigned CPW    = (CPP > 1) ? $clog2(CPP) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  // element write
  input  logic                     we,
  input  logic [RW-1:0]            w_row,
  input  logic [CW-1:0]            w_col,
  input  data_t                    w_data,
  // element read
  input  logic                     re,
  input  logic [RW-1:0]            r_row,
  input  logic [CW-1:0]            r_col,
  output data_t                    r_data,
  // in-memory matrix-vector step
  input  logic                     cim_en,
  input  logic [RPW-1:0]           rphase,
  input  logic [CPW-1:0]           cphase,
  input  data_t                    cim_in  [IN_PAR],
  output logic signed [PSUM_W-1:0] cim_out [OUT_PAR],
  output logic                     cim_valid
);

  localparam int unsigned WORDS = RPP * CPP;
  localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  // bank[p][addr][lane]: row p*RPP + addr/CPP, column lane*CPP + addr%CPP
  data_t mem [IN_PAR][WORDS][OUT_PAR];

  function automatic int unsigned bank_of(input logic [RW-1:0] row);
    return int'(row) / RPP;
  endfunction
  function automatic int unsigned addr_of(input logic [RW-1:0] row, input logic [CW-1:0] col);
    return (int'(row) % RPP) * CPP + (int'(col) % CPP);
  endfunction
  function automatic int unsigned lane_of(input logic [CW-1:0] col);
    return int'(col) / CPP;
  endfunction

  always_ff @(posedge clk) begin
    if (we) mem[bank_of(w_row)][addr_of(w_row, w_col)][lane_of(w_col)] <= w_data;
  end

  always_ff @(posedge clk) begin
    if (re) r_data <= mem[bank_of(r_row)][addr_of(r_row, r_col)][lane_of(r_col)];
  end

  logic [AW-1:0] cim_addr;
  assign cim_addr = AW'(int'(rphase) * CPP + int'(cphase));

  logic signed [PSUM_W-1:0] psum [OUT_PAR];
  always_comb begin
    for (int j = 0; j < OUT_PAR; j++) begin
      psum[j] = '0;
      for (int p = 0; p < IN_PAR; p++)
        psum[j] = psum[j] + PSUM_W'(cim_in[p] * mem[p][cim_addr][j]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) cim_valid <= 1'b0;
    else     cim_valid <= cim_en;
    if (cim_en) cim_out <= psum;
  end

endmodule
