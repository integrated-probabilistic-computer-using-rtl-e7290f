// tb_plu -- checks the probabilistic logic unit.
// The expected sample is computed from real arithmetic: the table value
// round(atanh((k+0.5)/2**15)*128), negated when rng[15] is 0, times T/256,
// floored and saturated to [-64, 63]. wrng must show it exactly one clock
// after rng and T are applied. Also checks the sign symmetry of the output.
module tb_plu;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [PLU_RNG_W-1:0] rng;
  logic [T_W-1:0] temp;
  logic signed [WRNG_W-1:0] wrng;
  int checks = 0, failures = 0;
  int npos = 0, nneg = 0;

  plu dut (.clk(clk), .rst_n(rst_n), .rng(rng), .temp(temp), .wrng(wrng));

  function automatic int expected(logic [15:0] r, logic [15:0] t);
    real u, a, v;
    int mag, s;
    u   = (real'(r[14:0]) + 0.5) / 32768.0;
    a   = 0.5 * $ln((1.0 + u) / (1.0 - u));
    mag = $rtoi(a * 128.0 + 0.5);
    s   = r[15] ? mag : -mag;
    v   = real'(s) * real'(t) / 32768.0;
    s   = $rtoi($floor(v));
    if (s > 63) s = 63;
    if (s < -64) s = -64;
    return s;
  endfunction

  initial begin
    rst_n = 0; rng = '0; temp = '0;
    repeat (2) @(posedge clk);
    #1 checks++; if (wrng !== 0) failures++;
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int exp_v;
      @(negedge clk);
      rng  = 16'($urandom);
      case (i % 4)
        0: temp = 16'h0160;             // 1.375
        1: temp = 16'h00CD;             // 0.8
        2: temp = 16'($urandom % 16'h1400);
        default: temp = 16'($urandom);  // also exercises saturation
      endcase
      exp_v = expected(rng, temp);
      @(posedge clk); #1;
      checks++;
      if (int'(wrng) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL rng=%h T=%h wrng=%0d exp=%0d", rng, temp, wrng, exp_v);
      end
      if (wrng > 0) npos++;
      if (wrng < 0) nneg++;
    end
    // output held until the next clock: latency one cycle
    @(negedge clk);
    begin
      int exp_v;
      logic signed [WRNG_W-1:0] prev_w;
      prev_w = wrng;
      rng = 16'h8000 | 16'h7FFF; temp = 16'h0400;   // large positive sample
      exp_v = expected(rng, temp);
      #1 checks++; if (wrng !== prev_w) failures++;
      @(posedge clk); #1 checks++; if (int'(wrng) != exp_v) failures++;
    end
    checks++;
    if (npos < 1000 || nneg < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
