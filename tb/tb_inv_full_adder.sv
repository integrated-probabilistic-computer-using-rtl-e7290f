// tb_inv_full_adder -- checks the invertible gate over all 2**5 terminal states.
// (1) Each output share equals h_t + sum_u J_tu m_u for the gate's coupling
//     table, written out here again.
// (2) The states of lowest energy E = -(sum h m + sum_{t<u} J m m) are exactly
//     the rows of the gate's truth table.
// (3) In every truth-table row no terminal's share opposes its own spin, and a
//     zero share only occurs where flipping that terminal gives another valid
//     row: a zero-temperature update never leaves the truth table.
module tb_inv_full_adder;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5-1:0] m;
  contrib_t c [5];
  int checks = 0, failures = 0;
  localparam int TJ [5][5] = '{'{0,-1,-1,1,2},'{-1,0,-1,1,2},'{-1,-1,0,1,2},'{1,1,1,0,-2},'{2,2,2,-2,0}};
  localparam int TH [5] = '{0,0,0,0,0};

  inv_full_adder dut (.m(m), .c(c));

  function automatic bit is_valid(logic [5-1:0] s);
    bit v;
    v = (s[3] == (s[0] ^ s[1] ^ s[2])) && (s[4] == ((s[0] & s[1]) | (s[0] & s[2]) | (s[1] & s[2])));
    return v;
  endfunction

  function automatic int sp(logic b);
    return b ? 1 : -1;
  endfunction

  initial begin
    int e [2**5];
    int emin;
    emin = 1000;
    for (int s = 0; s < 2**5; s++) begin
      m = 5'(s);
      #1;
      e[s] = 0;
      for (int t = 0; t < 5; t++) begin
        int exp_c;
        exp_c = TH[t];
        for (int u = 0; u < 5; u++) exp_c += TJ[t][u] * sp(m[u]);
        checks++;
        if (int'(c[t]) != exp_c) begin
          failures++;
          $display("FAIL state=%b t=%0d c=%0d exp=%0d", m, t, c[t], exp_c);
        end
        e[s] -= TH[t] * sp(m[t]);
        for (int u = t + 1; u < 5; u++) e[s] -= TJ[t][u] * sp(m[t]) * sp(m[u]);
        if (is_valid(m)) begin
          checks++;
          if (int'(c[t]) * sp(m[t]) < 0 ||
              (int'(c[t]) == 0 && !is_valid(m ^ (1 << t)))) failures++;
        end
      end
      if (e[s] < emin) emin = e[s];
    end
    for (int s = 0; s < 2**5; s++) begin
      checks++;
      if ((e[s] == emin) != is_valid(5'(s))) begin
        failures++;
        $display("FAIL ground state mismatch at %b (E=%0d, min %0d)", 5'(s), e[s], emin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
