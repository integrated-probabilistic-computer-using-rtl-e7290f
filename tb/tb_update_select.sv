// tb_update_select -- checks p-bit selection for every design.
// Reference numbers written out independently: design sizes 3, 27, 48, 75,
// 108, 147, 192, 243, 300 p-bits, first p-bits 0, 3, 30, 78, 153, 261, 408,
// 600, 843, index widths 2, 5, 6, 7, 7, 8, 8, 8, 9. One cycle after a step,
// select must be one-hot at base + (rnd mod 2**width) when that local index
// is in range and not fixed, and all-zero otherwise, with the matching skip
// flag raised.
module tb_update_select;
  import pim_pkg::*;
  localparam int NT = 1143;
  localparam int SIZE [9] = '{3, 27, 48, 75, 108, 147, 192, 243, 300};
  localparam int BASE [9] = '{0, 3, 30, 78, 153, 261, 408, 600, 843};
  localparam int BITS [9] = '{2, 5, 6, 7, 7, 8, 8, 8, 9};
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, step, skip_range, skip_fixed;
  logic [DES_W-1:0] des_sel;
  logic [IDX_W-1:0] rnd;
  logic [NT-1:0] fixed, select;
  int checks = 0, failures = 0, n_range = 0, n_fixed = 0, n_sel = 0;

  update_select dut (.clk(clk), .rst_n(rst_n), .step(step), .des_sel(des_sel), .rnd(rnd),
                     .fixed(fixed), .select(select), .skip_range(skip_range), .skip_fixed(skip_fixed));

  initial begin
    rst_n = 0; step = 0; des_sel = '0; rnd = '0; fixed = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      int d, loc, g;
      bit exp_range, exp_fixed;
      logic [NT-1:0] exp_sel;
      @(negedge clk);
      d = $urandom % 9;
      des_sel = DES_W'(d);
      rnd = IDX_W'($urandom);
      step = ($urandom % 8) != 0;
      for (int w = 0; w < NT; w += 32) fixed[w +: 32] = ($urandom % 4 == 0) ? 32'($urandom) : 32'h0;
      loc = int'(rnd) % (1 << BITS[d]);
      g = BASE[d] + loc;
      exp_range = step && (loc >= SIZE[d]);
      exp_fixed = step && (loc < SIZE[d]) && fixed[g];
      exp_sel = '0;
      if (step && loc < SIZE[d] && !fixed[g]) exp_sel[g] = 1'b1;
      @(posedge clk); #1;
      checks++;
      if (select !== exp_sel || skip_range !== exp_range || skip_fixed !== exp_fixed) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d rnd=%0d", d, rnd);
      end
      if (skip_range) n_range++;
      if (skip_fixed) n_fixed++;
      if (|select) n_sel++;
    end
    checks++;
    if (n_range == 0 || n_fixed == 0 || n_sel == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
