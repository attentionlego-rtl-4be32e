// exp_lut: look-up table for e^x, the first step of the softmax.
//
// What it does: maps an 8-bit fixed-point x to a 16-bit fixed-point e^x
// through a 256-entry table, one entry per possible input. Purely
// combinational.
//
// Number formats (this design's choice; the paper gives only the widths):
// x is signed with FRAC_BITS = 4 fractional bits (Q3.4, -8.0 .. +7.9375), and
// the result is unsigned with EXP_FRAC = 4 fractional bits (UQ12.4), so
//   LUT[x] = round(16 * e^(x/16)),
// from 0 at x = -8.0 (e^-8 * 16 = 0.005) up to 44862 at x = +7.9375. The table
// is computed at elaboration from this formula.
//
// From the paper: LUT implementation, 8-bit input, 16-bit output, 256 cases.
module exp_lut
  import attn_pkg::*;
(
  input  data_t                 x,
  output logic [EXP_WIDTH-1:0]  y
);

  typedef logic [EXP_WIDTH-1:0] lut_t [256];

  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < 256; i++) begin
      real xr, v;
      xr = real'(i < 128 ? i : i - 256) / real'(2 ** FRAC_BITS);
      v  = $exp(xr) * real'(2 ** EXP_FRAC);
      t[i] = EXP_WIDTH'(longint'($floor(v + 0.5)));
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  assign y = LUT[x];

endmodule
