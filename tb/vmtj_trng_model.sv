// vmtj_trng_model -- behavioural model (not synthesizable logic) of the
// voltage-controlled MTJ together with its access board.
//
// The real part is a magnetic tunnel junction whose energy barrier collapses
// during a ~10 ns, ~1.8 V pulse let through while WRITE is high; when the
// pulse ends the free layer relaxes at random to the parallel (read as 0) or
// antiparallel (read as 1) state. With READ high a resistor divider and a
// comparator put the state on OUT. Here the state is drawn from $urandom at
// the falling edge of write, 1 with probability P_ONE_PERMIL/1000, and out
// shows it while read is high (0 otherwise). No timing is modelled.
module vmtj_trng_model #(
  parameter int unsigned P_ONE_PERMIL = 500
) (
  input  logic write,
  input  logic read,
  output logic out
);
  logic state = 1'b0;

  always @(negedge write) state <= (($urandom % 1000) < P_ONE_PERMIL);

  assign out = read ? state : 1'b0;
endmodule
