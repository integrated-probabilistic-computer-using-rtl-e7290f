// tb_atanh_lut -- checks the half-atanh table against the tanh function.
// For each tested address k the entry y must satisfy
//     tanh((y - 0.5)/128) <= (k + 0.5)/2**15 <= tanh((y + 0.5)/128),
// i.e. y is atanh of the centred address rounded to 7 fraction bits. Tests the
// first and last 64 addresses and 3000 random ones.
module tb_atanh_lut;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [LUT_AW-1:0] addr;
  logic [LUT_DW-1:0] data;
  int checks = 0, failures = 0;

  atanh_lut dut (.addr(addr), .data(data));

  task automatic check_addr(int unsigned k);
    real u, lo, hi;
    addr = LUT_AW'(k);
    #1;
    u  = (real'(k) + 0.5) / 32768.0;
    lo = $tanh((real'(data) - 0.5) / 128.0);
    hi = $tanh((real'(data) + 0.5) / 128.0);
    checks++;
    if (!(lo <= u + 1e-12 && u <= hi + 1e-12) || data[LUT_DW-1]) begin
      failures++;
      if (failures < 10) $display("FAIL addr=%0d data=%0d", k, data);
    end
  endtask

  initial begin
    for (int unsigned k = 0; k < 64; k++) check_addr(k);
    for (int unsigned k = 32768 - 64; k < 32768; k++) check_addr(k);
    for (int i = 0; i < 3000; i++) check_addr($urandom % 32768);
    // monotonic over a random stretch
    begin
      logic [LUT_DW-1:0] prev;
      int unsigned s;
      s = $urandom % 30000;
      addr = LUT_AW'(s); #1; prev = data;
      for (int unsigned k = s + 1; k < s + 500; k++) begin
        addr = LUT_AW'(k); #1;
        checks++;
        if (data < prev) failures++;
        prev = data;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
