// tb_factor20 -- the 20-bit factorization workload on the full PIM area:
// the product p-bits of the 10 x 10 design are fixed to 894,479 (= 883 x
// 1013) and the rest start at random; the temperature is swept linearly from
// 20 to 4 over 2**18 iterations, the length of the run used for this problem
// in the chip's evaluation (there with a revised, smaller p-bit mapping that
// also stops as soon as a forward multiplier confirms a solution; that
// mapping is not part of this design, so here every run goes to the end).
//
// Checks: the fixed product p-bits still read 894,479 after the run, the
// temperature reached its end value, and annealing lowered the number of
// invertible gates whose terminals violate their truth table (read out
// through rd_index) compared with the random start, in every trial. The
// factor pairs found are printed; finding 883 x 1013 is reported, not
// required.
module tb_factor20;
  import pim_pkg::*;
  localparam int NT = 1143;
  localparam int D = 8;
  localparam int N = 10;
  localparam int TARGET = 894479;
  localparam int TRIALS = 3;
  localparam int ITERS = 1 << 18;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, init, step, rd_state, at_end, skip_range, skip_fixed;
  logic [DES_W-1:0] des_sel;
  logic [T_W-1:0] t_start, t_end, temp;
  logic [T_W+T_EXTRA-1:0] t_step;
  logic [NT-1:0] set, fixed;
  logic [RNG_W-1:0] rng;
  logic [IDX_W-1:0] rd_index;
  int checks = 0, failures = 0, solved = 0;

  pim_design_area dut (
    .clk(clk), .rst_n(rst_n), .des_sel(des_sel), .t_start(t_start), .t_end(t_end),
    .t_step(t_step), .init(init), .set(set), .fixed(fixed), .step(step), .rng(rng),
    .rd_index(rd_index), .rd_state(rd_state), .temp(temp), .at_end(at_end),
    .skip_range(skip_range), .skip_fixed(skip_fixed)
  );

  localparam int BASE = 843;  // first p-bit of the 10 x 10 design

  task automatic read_design(output logic [299:0] s);
    for (int i = 0; i < 300; i++) begin
      rd_index = IDX_W'(BASE + i);
      #1 s[i] = rd_state;
    end
  endtask

  // number of AND gates and adders whose terminal bits break the truth table
  function automatic int violations(logic [299:0] s);
    int v;
    v = 0;
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++)
        if (s[node_pp(N, r, k)] != (s[node_a(k)] & s[node_b(N, r)])) v++;
    for (int r = 1; r < N; r++)
      for (int k = 0; k < N; k++) begin
        logic x, y, c;
        x = s[node_pp(N, r, k)];
        y = (node_y(N, r, k) >= 0) ? s[node_y(N, r, k)] : 1'b0;
        c = (node_cin(N, r, k) >= 0) ? s[node_cin(N, r, k)] : 1'b0;
        if (s[node_sum(N, r, k)] != (x ^ y ^ c) ||
            s[node_carry(N, r, k)] != ((x & y) | (x & c) | (y & c))) v++;
      end
    return v;
  endfunction

  function automatic longint word(logic [299:0] s, int which);
    longint w;
    w = 0;
    for (int i = 0; i < ((which == 2) ? 2 * N : N); i++) begin
      int node;
      node = (which == 0) ? node_a(i) : (which == 1) ? node_b(N, i) : node_prod(N, i);
      w |= longint'(s[node]) << i;
    end
    return w;
  endfunction

  initial begin
    rst_n = 0; init = 0; step = 0; des_sel = DES_W'(D); rng = '0; rd_index = '0;
    set = '0; fixed = '0;
    t_start = 16'h1400;  // 20.0
    t_end   = 16'h0400;  // 4.0
    t_step  = 32'((longint'(16'h1400 - 16'h0400) << 16) / ITERS);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < TRIALS; t++) begin
      logic [299:0] s0, s1;
      int v0, v1;
      longint a, b;
      for (int i = 0; i < NT; i += 32) set[i +: 32] = 32'($urandom);
      fixed = '0;
      for (int p = 0; p < 2 * N; p++) begin
        set[BASE + node_prod(N, p)]   = 1'(TARGET >> p);
        fixed[BASE + node_prod(N, p)] = 1'b1;
      end
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      read_design(s0);
      v0 = violations(s0);
      for (int i = 0; i < ITERS; i++) begin
        rng = RNG_W'({$urandom, $urandom});
        step = 1;
        @(negedge clk);
      end
      step = 0;
      @(negedge clk);
      read_design(s1);
      v1 = violations(s1);
      a = word(s1, 0);
      b = word(s1, 1);
      $display("trial %0d: violated gates %0d -> %0d, factors %0d x %0d = %0d",
               t, v0, v1, a, b, a * b);
      if (a * b == TARGET && a > 1 && b > 1) solved++;
      checks++; if (word(s1, 2) != TARGET) failures++;
      checks++; if (!at_end) failures++;
      checks++; if (v1 >= v0) failures++;
    end
    $display("20-bit factorization of %0d: %0d of %0d trials found a factor pair", TARGET, solved, TRIALS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TRIALS * (ITERS + 400) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
