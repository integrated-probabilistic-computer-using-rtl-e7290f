// pbit -- one probabilistic bit.
//
// Holds a binary spin state (1 = +1, 0 = -1). On a clock edge where
// select or init is high the state is written: with init high it takes the
// externally supplied value set; otherwise it takes (I > wrng), the signed
// compare of its input against the shared PLU sample. With neither high the
// state holds. One update per clock, no other latency.
//
// From the paper: the A>B comparator (6-bit I against 7-bit wrng), the
// init-controlled multiplexer between compare result and set, and the enable
// formed from select and init. This design's own choice: an asynchronous
// active-low reset to 0.
module pbit
  import pim_pkg::*;
#(
  parameter int unsigned IW = I_W,
  parameter int unsigned RW = WRNG_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [IW-1:0] in_i,    // I = h + sum J m
  input  logic signed [RW-1:0] wrng,    // scaled random sample from the PLU
  input  logic                 select,  // update this p-bit now
  input  logic                 init,    // load set
  input  logic                 set,     // initial state
  output logic                 out
);

  localparam int unsigned CW = (IW > RW) ? IW : RW;

  logic gt, d, en;

  assign gt = CW'(in_i) > CW'(wrng);
  assign d  = init ? set : gt;
  assign en = select | init;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out <= 1'b0;
    else if (en) out <= d;
  end

endmodule
