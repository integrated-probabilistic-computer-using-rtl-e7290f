// anneal -- linear simulated-annealing temperature schedule.
//
// Holds the temperature T in an accumulator with T_EXTRA more fraction bits
// than the TW-bit word handed to the PLU, so that steps far below one LSB of
// T (for example 1.375 -> 0.8 over 8192 iterations) can be taken. load sets
// the accumulator to t_start; every cycle with step high (the end of one
// iteration) lowers it by t_step, never below t_end. The new value is visible
// on temp in the cycle after load or step. at_end is high once T = t_end.
//
// From the paper: the temperature is changed linearly at the end of every
// iteration. This design's own choice: the start/end/step interface, the
// accumulator width and the clamp at t_end.
module anneal
  import pim_pkg::*;
#(
  parameter int unsigned TW = T_W,
  parameter int unsigned XW = T_EXTRA
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic             step,
  input  logic [TW-1:0]    t_start,
  input  logic [TW-1:0]    t_end,
  input  logic [TW+XW-1:0] t_step,   // same format as the accumulator
  output logic [TW-1:0]    temp,
  output logic             at_end
);

  logic [TW+XW-1:0] acc;
  logic [TW+XW-1:0] floor_v;
  logic [TW+XW:0]   diff;

  assign floor_v = {t_end, XW'(0)};
  assign diff    = {1'b0, acc} - {1'b0, t_step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= '0;
    else if (load)
      acc <= {t_start, XW'(0)};
    else if (step) begin
      if (diff[TW+XW] || diff[TW+XW-1:0] < floor_v) acc <= floor_v;
      else                                          acc <= diff[TW+XW-1:0];
    end
  end

  assign temp   = acc[TW+XW-1:XW];
  assign at_end = (acc <= floor_v);

endmodule
