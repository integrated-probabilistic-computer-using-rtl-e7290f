// factorizer -- invertible N x N array multiplier built from p-bits.
//
// The circuit has 3*N*N p-bits: the factors A and B (N bits each), the N*N
// partial products A[k]&B[r], and a sum and a carry for each of the N*(N-1)
// adders of a standard array multiplier (numbering in pim_pkg). Every AND gate
// and adder is an invertible gate: it adds its couplings to the inputs of its
// terminals' p-bits, so that each p-bit i sees
//     I_i = h_i + sum_j J_ij m_j
// with the J matrix and h vector of the whole multiplier. The multiplier is
// therefore bidirectional: fixing the product p-bits and updating the rest lets
// the factors appear on A and B; fixing A and B gives the product.
// Adders with three inputs are full adders; column-0 adders and the last adder
// of row 1 have two inputs and are half adders. N = 1 degenerates to a single
// invertible AND gate (3 p-bits).
//
// I_i is saturated to the I_W-bit signed range before the p-bit compare.
// Interface: wrng from the PLU, a one-hot (or empty) select vector, init with
// the set vector, and the p-bit states out. The p-bit updates on the clock
// edge after select, so an update takes one cycle.
//
// From the paper: the p-bit network with a static J and h per design, the
// array-multiplier structure, and the 3N*N p-bit count (27 for the 6-bit
// design). This design's own choice: p-bit numbering, saturation of I, and
// summing the couplings gate by gate.
module factorizer
  import pim_pkg::*;
#(
  parameter int unsigned N  = 3,
  parameter int unsigned NP = 3 * N * N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [WRNG_W-1:0] wrng,
  input  logic [NP-1:0]            select,
  input  logic                     init,
  input  logic [NP-1:0]            set,
  output logic [NP-1:0]            out
);

  localparam int unsigned NAD = N * (N - 1);
  localparam int unsigned NG  = N * N + NAD;  // gates: ANDs then adders

  // Contributions of each gate terminal and the p-bit each one belongs to.
  contrib_t gc [NG][5];
  int       gn [NG][5];

  // ---- AND gates ----------------------------------------------------------
  for (genvar r = 0; r < N; r++) begin : g_and_r
    for (genvar k = 0; k < N; k++) begin : g_and_k
      localparam int G  = r * N + k;
      localparam int NA = node_a(k);
      localparam int NB = node_b(N, r);
      localparam int NC = node_pp(N, r, k);
      contrib_t c [3];
      inv_and u_and (.m({out[NC], out[NB], out[NA]}), .c(c));
      assign gc[G][0] = c[0];  assign gn[G][0] = NA;
      assign gc[G][1] = c[1];  assign gn[G][1] = NB;
      assign gc[G][2] = c[2];  assign gn[G][2] = NC;
      assign gc[G][3] = '0;    assign gn[G][3] = -1;
      assign gc[G][4] = '0;    assign gn[G][4] = -1;
    end
  end

  // ---- adders -------------------------------------------------------------
  for (genvar r = 1; r < N; r++) begin : g_add_r
    for (genvar k = 0; k < N; k++) begin : g_add_k
      localparam int G  = N * N + (r - 1) * N + k;
      localparam int NX = node_pp(N, r, k);
      localparam int NY = node_y(N, r, k);
      localparam int NI = node_cin(N, r, k);
      localparam int NS = node_sum(N, r, k);
      localparam int NO = node_carry(N, r, k);
      if (NY >= 0 && NI >= 0) begin : g_fa
        contrib_t c [5];
        inv_full_adder u_fa (.m({out[NO], out[NS], out[NI], out[NY], out[NX]}), .c(c));
        assign gc[G][0] = c[0];  assign gn[G][0] = NX;
        assign gc[G][1] = c[1];  assign gn[G][1] = NY;
        assign gc[G][2] = c[2];  assign gn[G][2] = NI;
        assign gc[G][3] = c[3];  assign gn[G][3] = NS;
        assign gc[G][4] = c[4];  assign gn[G][4] = NO;
      end else begin : g_ha
        localparam int NB2 = (NY >= 0) ? NY : NI;
        contrib_t c [4];
        inv_half_adder u_ha (.m({out[NO], out[NS], out[NB2], out[NX]}), .c(c));
        assign gc[G][0] = c[0];  assign gn[G][0] = NX;
        assign gc[G][1] = c[1];  assign gn[G][1] = NB2;
        assign gc[G][2] = c[2];  assign gn[G][2] = NS;
        assign gc[G][3] = c[3];  assign gn[G][3] = NO;
        assign gc[G][4] = '0;    assign gn[G][4] = -1;
      end
    end
  end

  // ---- p-bit inputs: sum of all gate shares, saturated --------------------
  logic signed [I_W-1:0] pin [NP];

  always_comb begin
    int acc [NP];
    for (int i = 0; i < NP; i++) acc[i] = 0;
    for (int g = 0; g < NG; g++)
      for (int t = 0; t < 5; t++)
        if (gn[g][t] >= 0) acc[gn[g][t]] += int'(gc[g][t]);
    for (int i = 0; i < NP; i++) begin
      if (acc[i] > (2**(I_W-1)) - 1)   pin[i] = I_W'((2**(I_W-1)) - 1);
      else if (acc[i] < -(2**(I_W-1))) pin[i] = I_W'(-(2**(I_W-1)));
      else                             pin[i] = I_W'(acc[i]);
    end
  end

  // ---- p-bits -------------------------------------------------------------
  for (genvar i = 0; i < NP; i++) begin : g_pbit
    pbit u_pbit (
      .clk    (clk),
      .rst_n  (rst_n),
      .in_i   (pin[i]),
      .wrng   (wrng),
      .select (select[i]),
      .init   (init),
      .set    (set[i]),
      .out    (out[i])
    );
  end

endmodule
