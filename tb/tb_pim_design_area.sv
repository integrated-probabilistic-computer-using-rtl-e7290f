// tb_pim_design_area -- end-to-end run of the whole PIM area at its default
// size (1143 p-bits, all designs), with the testbench in the role of the host
// processor. Every random bit is produced by the V-MTJ model: pulse WRITE,
// raise READ, sample OUT; 27 bits make up one iteration's rng word.
//
// Experiments, all with the temperature swept linearly 1.375 -> 0.8 over 8192
// iterations on the 6-bit (3 x 3) factorizer:
//   * factorization: product fixed to 35, the factors must come out as
//     (5,7) or (7,5) in a good share of the trials;
//   * multiplication: inputs fixed to 7 and 5, the product must read 35;
//   * division: product fixed to 35 and one input to 5, the other must read 7.
// Then the single AND gate (design 0) is run with its output fixed to 1 and
// must settle on inputs 1,1; the 20-bit design (design 8) is run briefly and
// must change while the 6-bit design keeps its state.
// Mechanisms counted (each must occur): init loads, iterations that update a
// p-bit, iterations skipped for an out-of-range index, iterations skipped for
// a fixed p-bit, the temperature reaching its end value, a design switch and
// p-bit read-out. The iteration rate (one per clock) is checked as well.
module tb_pim_design_area;
  import pim_pkg::*;
  localparam int NT = 1143;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, init, step, rd_state, at_end, skip_range, skip_fixed;
  logic [DES_W-1:0] des_sel;
  logic [T_W-1:0] t_start, t_end, temp;
  logic [T_W+T_EXTRA-1:0] t_step;
  logic [NT-1:0] set, fixed;
  logic [RNG_W-1:0] rng;
  logic [IDX_W-1:0] rd_index;
  logic mtj_write, mtj_read, mtj_out;

  int checks = 0, failures = 0;
  int n_init = 0, n_update = 0, n_skip_range = 0, n_skip_fixed = 0, n_at_end = 0;
  int n_switch = 0, n_read = 0;

  pim_design_area dut (
    .clk(clk), .rst_n(rst_n), .des_sel(des_sel), .t_start(t_start), .t_end(t_end),
    .t_step(t_step), .init(init), .set(set), .fixed(fixed), .step(step), .rng(rng),
    .rd_index(rd_index), .rd_state(rd_state), .temp(temp), .at_end(at_end),
    .skip_range(skip_range), .skip_fixed(skip_fixed)
  );

  vmtj_trng_model mtj (.write(mtj_write), .read(mtj_read), .out(mtj_out));

  // ---- host routines ------------------------------------------------------
  function automatic int base_of(int d);
    int b;
    b = 0;
    for (int e = 0; e < d; e++) b += 3 * DES_N[e] * DES_N[e];
    return b;
  endfunction

  task automatic get_bit(output logic b);
    mtj_write = 1; #0.01; mtj_write = 0; #0.01;
    mtj_read = 1;  #0.01; b = mtj_out;   mtj_read = 0;
  endtask

  task automatic get_rng(output logic [RNG_W-1:0] r);
    for (int i = 0; i < RNG_W; i++) begin
      logic b;
      get_bit(b);
      r[i] = b;
    end
  endtask


  task automatic read_pbit(int g, output logic v);
    rd_index = IDX_W'(g);
    #1;
    v = rd_state;
    n_read++;
  endtask

  task automatic read_word(int d, int n, int which, output int val);
    // which: 0 = factor A, 1 = factor B, 2 = product
    int b, w;
    logic v;
    b = base_of(d);
    val = 0;
    w = (which == 2) ? 2 * DES_N[d] : DES_N[d];
    for (int i = 0; i < w; i++) begin
      int node;
      node = (which == 0) ? node_a(i) : (which == 1) ? node_b(n, i) : node_prod(n, i);
      if (node >= 0) begin
        read_pbit(b + node, v);
        val |= int'(v) << i;
      end
    end
  endtask

  task automatic run(int d, int iters, logic [15:0] ts, logic [15:0] te);
    int start_cycle, cycles;
    @(negedge clk);
    if (des_sel != DES_W'(d)) n_switch++;
    des_sel = DES_W'(d);
    t_start = ts; t_end = te;
    t_step = 32'((longint'(ts - te) << 16) / iters);
    init = 1;
    @(negedge clk);
    init = 0;
    n_init++;
    cycles = 0;
    for (int i = 0; i < iters; i++) begin
      logic [RNG_W-1:0] r;
      get_rng(r);
      rng = r;
      step = 1;
      @(negedge clk);
      cycles++;
      if (skip_range) n_skip_range++;
      else if (skip_fixed) n_skip_fixed++;
      else if (i > 0) n_update++;
    end
    step = 0;
    @(negedge clk);
    // one iteration per clock
    checks++; if (cycles != iters) failures++;
    if (at_end) n_at_end++;
  endtask

  // fix or set one p-bit of design d
  task automatic put(int d, int node, logic v, logic fx);
    set[base_of(d) + node] = v;
    fixed[base_of(d) + node] = fx;
  endtask

  task automatic prepare(int d);
    int n;
    n = DES_N[d];
    for (int i = 0; i < NT; i += 32) set[i +: 32] = 32'($urandom);
    fixed = '0;
  endtask

  localparam logic [15:0] T_HI = 16'h0160;  // 1.375 in Q8.8
  localparam logic [15:0] T_LO = 16'h00CD;  // 0.8

  int hist_fact, hist_mul, hist_div;

  initial begin
    rst_n = 0; init = 0; step = 0; des_sel = '0; t_start = '0; t_end = '0; t_step = '0;
    set = '0; fixed = '0; rng = '0; rd_index = '0; mtj_write = 0; mtj_read = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- factorization of 35 on the 6-bit design ---------------------------
    hist_fact = 0;
    for (int t = 0; t < 12; t++) begin
      int a, b;
      prepare(1);
      for (int p = 0; p < 6; p++) put(1, node_prod(3, p), 1'(35 >> p), 1'b1);
      run(1, 8192, T_HI, T_LO);
      read_word(1, 3, 0, a);
      read_word(1, 3, 1, b);
      $display("factor trial %0d: %0d x %0d", t, a, b);
      if ((a == 5 && b == 7) || (a == 7 && b == 5)) hist_fact++;
    end
    $display("factorization of 35: %0d of 12 trials valid", hist_fact);
    checks++; if (hist_fact < 3) failures++;

    // ---- multiplication 7 x 5 ---------------------------------------------
    hist_mul = 0;
    for (int t = 0; t < 6; t++) begin
      int p;
      prepare(1);
      for (int k = 0; k < 3; k++) begin
        put(1, node_a(k), 1'(7 >> k), 1'b1);
        put(1, node_b(3, k), 1'(5 >> k), 1'b1);
      end
      run(1, 8192, T_HI, T_LO);
      read_word(1, 3, 2, p);
      $display("multiply trial %0d: product %0d", t, p);
      if (p == 35) hist_mul++;
    end
    checks++; if (hist_mul < 2) failures++;

    // ---- division 35 / 5 ----------------------------------------------------
    hist_div = 0;
    for (int t = 0; t < 6; t++) begin
      int a;
      prepare(1);
      for (int p = 0; p < 6; p++) put(1, node_prod(3, p), 1'(35 >> p), 1'b1);
      for (int k = 0; k < 3; k++) put(1, node_b(3, k), 1'(5 >> k), 1'b1);
      run(1, 8192, T_HI, T_LO);
      read_word(1, 3, 0, a);
      $display("divide trial %0d: quotient %0d", t, a);
      if (a == 7) hist_div++;
    end
    checks++; if (hist_div < 2) failures++;

    // ---- AND gate design with its output fixed to 1 --------------------------
    begin
      logic va, vb;
      prepare(0);
      put(0, 2, 1'b1, 1'b1);
      put(0, 0, 1'b0, 1'b0);
      put(0, 1, 1'b0, 1'b0);
      run(0, 400, 16'h0100, 16'h0040);
      read_pbit(base_of(0) + 0, va);
      read_pbit(base_of(0) + 1, vb);
      checks++; if (!(va && vb)) failures++;
    end

    // ---- 20-bit design runs, 6-bit design keeps its state ----------------------
    begin
      logic [299:0] before_20, after_20;
      logic [26:0] before_6, after_6;
      logic v;
      for (int i = 0; i < 27; i++) begin read_pbit(base_of(1) + i, v); before_6[i] = v; end
      // no init here: keep every design's state; drive iterations directly
      @(negedge clk);
      des_sel = DES_W'(8);
      n_switch++;
      for (int i = 0; i < 300; i++) begin read_pbit(base_of(8) + i, v); before_20[i] = v; end
      for (int i = 0; i < 2000; i++) begin
        logic [RNG_W-1:0] r;
        get_rng(r);
        rng = r; step = 1;
        @(negedge clk);
      end
      step = 0;
      @(negedge clk);
      for (int i = 0; i < 300; i++) begin read_pbit(base_of(8) + i, v); after_20[i] = v; end
      for (int i = 0; i < 27; i++) begin read_pbit(base_of(1) + i, v); after_6[i] = v; end
      checks++; if (after_20 == before_20) failures++;
      checks++; if (after_6 != before_6) failures++;
    end

    // ---- read-out past the last p-bit returns 0 ----------------------------------
    begin
      logic v;
      read_pbit(NT, v);
      checks++; if (v !== 1'b0) failures++;
    end

    $display("mechanisms: init=%0d update=%0d skip_range=%0d skip_fixed=%0d at_end=%0d switch=%0d read=%0d",
             n_init, n_update, n_skip_range, n_skip_fixed, n_at_end, n_switch, n_read);
    checks++; if (n_init == 0) failures++;
    checks++; if (n_update == 0) failures++;
    checks++; if (n_skip_range == 0) failures++;
    checks++; if (n_skip_fixed == 0) failures++;
    checks++; if (n_at_end == 0) failures++;
    checks++; if (n_switch == 0) failures++;
    checks++; if (n_read == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
