// atanh_lut -- "half atanh" lookup table of the probabilistic logic unit.
//
// Maps an AW-bit uniform random word k to the magnitude of a sample of the
// inverse hyperbolic tangent of a uniform variable on (0,1):
//     y(k) = round( atanh((k + 0.5) / 2**AW) * 2**FRAC ).
// Together with a random sign bit (applied in the PLU) this turns uniform
// random bits into samples of atanh(u), u uniform on (-1,1).
//
// The table is computed at elaboration from the formula above; no data file
// is read. With the defaults (AW = 15, FRAC = 7) the largest entry is 755, so
// the DW = 11 bit output is a non-negative two's-complement value. Purely
// combinational: y follows a in the same cycle.
//
// From the paper: a LUT addressed by 15 random bits with an 11-bit output.
// This design's own choice: the centred address (k + 0.5), rounding, and the
// Q3.7 output format.
module atanh_lut #(
  parameter int unsigned AW   = pim_pkg::LUT_AW,
  parameter int unsigned DW   = pim_pkg::LUT_DW,
  parameter int unsigned FRAC = pim_pkg::LUT_FRAC
) (
  input  logic [AW-1:0] addr,
  output logic [DW-1:0] data
);

  localparam int unsigned HI = AW / 2;
  localparam int unsigned LO = AW - HI;

  // One table row holds 2**LO consecutive entries, packed.
  typedef logic [(2**LO)*DW-1:0] row_t;

  function automatic row_t row(int unsigned h);
    row_t r;
    for (int unsigned l = 0; l < 2**LO; l++) begin
      real u, v;
      u = (real'(h * (2**LO) + l) + 0.5) / (2.0 ** AW);
      v = 0.5 * $ln((1.0 + u) / (1.0 - u)) * (2.0 ** FRAC);
      r[l*DW +: DW] = DW'($rtoi(v + 0.5));
    end
    return r;
  endfunction

  row_t rows [2**HI];

  for (genvar h = 0; h < 2**HI; h++) begin : g_row
    assign rows[h] = row(h);
  end

  assign data = rows[addr[AW-1:LO]][addr[LO-1:0]*DW +: DW];

endmodule
