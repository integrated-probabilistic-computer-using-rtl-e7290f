// plu -- probabilistic logic unit: turns random bits into a temperature-scaled
// sample of the atanh distribution, shared by every p-bit.
//
// rng[14:0] addresses the half-atanh table; rng[15] picks the sign: 1 passes
// the table value, 0 passes its negation. The signed sample s (Q3.7) is
// multiplied by the temperature T (unsigned Q8.8) and the product is reduced
// to a WRNG_W-bit signed integer, wrng = floor(s * T), saturated to the
// 7-bit range. wrng is registered, so it is valid one clock after rng and T
// are presented.
//
// A p-bit that compares its integer input I against wrng (I > wrng) takes the
// value +1 with probability (1 + tanh(I/T)) / 2, which is the p-bit update
// rule. Flooring is exact for this compare: for integer I, I > floor(x) holds
// exactly when I > x.
//
// From the paper: the table, the sign multiplexer on rng[15], the multiplier
// by T and the output register, with the widths 15/11/16/7. This design's own
// choice: the fixed-point formats, flooring and saturation.
module plu
  import pim_pkg::*;
#(
  parameter int unsigned AW     = LUT_AW,
  parameter int unsigned DW     = LUT_DW,
  parameter int unsigned FRAC   = LUT_FRAC,
  parameter int unsigned TW     = T_W,
  parameter int unsigned TFRAC  = T_FRAC,
  parameter int unsigned OW     = WRNG_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [AW:0]          rng,    // AW table bits + sign bit on top
  input  logic [TW-1:0]        temp,   // temperature T
  output logic signed [OW-1:0] wrng
);

  localparam int unsigned PW    = DW + TW + 1;
  localparam int unsigned SHIFT = FRAC + TFRAC;

  logic [DW-1:0]        mag;
  logic signed [DW-1:0] samp;
  logic signed [PW-1:0] prod;
  logic signed [PW-1:0] scaled;
  logic signed [OW-1:0] sat;

  atanh_lut #(.AW(AW), .DW(DW), .FRAC(FRAC)) u_lut (
    .addr (rng[AW-1:0]),
    .data (mag)
  );

  always_comb begin
    samp   = rng[AW] ? signed'(mag) : -signed'(mag);
    prod   = PW'(samp) * signed'({1'b0, temp});
    scaled = prod >>> SHIFT;
    if (scaled > PW'((2**(OW-1)) - 1))
      sat = OW'((2**(OW-1)) - 1);
    else if (scaled < -PW'(2**(OW-1)))
      sat = OW'(-(2**(OW-1)));
    else
      sat = OW'(scaled);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wrng <= '0;
    else        wrng <= sat;
  end

endmodule
