// update_select -- picks the one p-bit updated in an iteration.
//
// The area's p-bits are numbered design after design (pim_pkg::des_base).
// With step high, the low idx_bits(P) bits of the random index rnd are taken,
// where P is the p-bit count of the chosen design; if that local index is
// below P and the p-bit is not marked fixed, its select line is raised in the
// next cycle, in step with the PLU's registered sample. Otherwise no p-bit is
// selected for that iteration (skip_range or skip_fixed reports why).
// Fixed p-bits keep the value loaded with init: this is how the product (or
// the factors) of the invertible multiplier are clamped.
//
// From the paper: up to 11 random bits, as many as the chosen factorizer size
// needs, pick one p-bit per iteration. This design's own choice: masking to
// the design's index width, skipping out-of-range indices, the fixed mask and
// the one-cycle register.
module update_select
  import pim_pkg::*;
#(
  parameter int unsigned NPT = total_pbits()
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  input  logic [DES_W-1:0] des_sel,
  input  logic [IDX_W-1:0] rnd,
  input  logic [NPT-1:0]   fixed,
  output logic [NPT-1:0]   select,
  output logic             skip_range,
  output logic             skip_fixed
);

  logic [IDX_W-1:0] base, size, mask, local_idx, gidx;
  logic             in_range;

  always_comb begin
    base = '0;
    size = '0;
    mask = '0;
    for (int unsigned d = 0; d < NDES; d++) begin
      if (des_sel == DES_W'(d)) begin
        base = IDX_W'(des_base(d));
        size = IDX_W'(mult_pbits(DES_N[d]));
        mask = IDX_W'((1 << idx_bits(mult_pbits(DES_N[d]))) - 1);
      end
    end
    local_idx = rnd & mask;
    in_range  = (size != '0) && (local_idx < size);
    gidx      = base + local_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      select     <= '0;
      skip_range <= 1'b0;
      skip_fixed <= 1'b0;
    end else begin
      select     <= '0;
      skip_range <= step && !in_range;
      skip_fixed <= step && in_range && fixed[gidx];
      if (step && in_range && !fixed[gidx]) select[gidx] <= 1'b1;
    end
  end

endmodule
