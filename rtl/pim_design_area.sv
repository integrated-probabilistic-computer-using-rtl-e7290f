// pim_design_area -- the probabilistic Ising machine (PIM) area of the chip.
//
// Holds every factorizer design (pim_pkg::DES_N: a 1 x 1 AND gate and the
// 3 x 3 .. 10 x 10 invertible multipliers, 1143 p-bits in all), one shared
// probabilistic logic unit (PLU), the annealing temperature and the p-bit
// selection. A host supplies setup values, random bits and a read index.
//
// Operation:
//   * init (one cycle) loads every p-bit from set and the temperature from
//     t_start.
//   * Each iteration is one cycle with step high and 27 fresh random bits on
//     rng: rng[15:0] go to the PLU, rng[26:16] choose the p-bit. One cycle
//     later the chosen p-bit of the chosen design compares its input
//     I = h + sum J m with the PLU sample T*atanh(u) and takes the result.
//     Iterations may be issued back to back, one per clock.
//   * At the end of every iteration T is lowered by t_step, down to t_end.
//   * rd_state is the state of p-bit rd_index (combinational read).
// Designs not chosen keep their states. Fixed p-bits are never updated.
//
// From the paper: the p-bit area made of factorizer designs with static J
// and h, one PLU shared by all p-bits, one p-bit updated per clock, the linear
// temperature sweep, init/set loading and indexed read-out. This design's
// own choice: the port list, the fixed mask, the index masking and timing.
module pim_design_area
  import pim_pkg::*;
#(
  parameter int unsigned NPT = total_pbits()
) (
  input  logic               clk,
  input  logic               rst_n,
  // setup
  input  logic [DES_W-1:0]   des_sel,
  input  logic [T_W-1:0]     t_start,
  input  logic [T_W-1:0]     t_end,
  input  logic [T_W+T_EXTRA-1:0] t_step,
  input  logic               init,
  input  logic [NPT-1:0]     set,
  input  logic [NPT-1:0]     fixed,
  // iterations
  input  logic               step,
  input  logic [RNG_W-1:0]   rng,
  // read-out
  input  logic [IDX_W-1:0]   rd_index,
  output logic               rd_state,
  // status
  output logic [T_W-1:0]     temp,
  output logic               at_end,
  output logic               skip_range,
  output logic               skip_fixed
);

  logic signed [WRNG_W-1:0] wrng;
  logic [NPT-1:0]           select;
  logic [NPT-1:0]           state;

  anneal u_anneal (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (init),
    .step    (step),
    .t_start (t_start),
    .t_end   (t_end),
    .t_step  (t_step),
    .temp    (temp),
    .at_end  (at_end)
  );

  plu u_plu (
    .clk   (clk),
    .rst_n (rst_n),
    .rng   (rng[PLU_RNG_W-1:0]),
    .temp  (temp),
    .wrng  (wrng)
  );

  update_select #(.NPT(NPT)) u_sel (
    .clk        (clk),
    .rst_n      (rst_n),
    .step       (step),
    .des_sel    (des_sel),
    .rnd        (rng[RNG_W-1:PLU_RNG_W]),
    .fixed      (fixed),
    .select     (select),
    .skip_range (skip_range),
    .skip_fixed (skip_fixed)
  );

  for (genvar d = 0; d < NDES; d++) begin : g_des
    localparam int unsigned B = des_base(d);
    localparam int unsigned P = mult_pbits(DES_N[d]);
    factorizer #(.N(DES_N[d])) u_fact (
      .clk    (clk),
      .rst_n  (rst_n),
      .wrng   (wrng),
      .select (select[B +: P]),
      .init   (init),
      .set    (set[B +: P]),
      .out    (state[B +: P])
    );
  end

  assign rd_state = (rd_index < IDX_W'(NPT)) ? state[rd_index] : 1'b0;

endmodule
