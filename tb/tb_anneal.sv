// tb_anneal -- checks the linear temperature sweep: after load the
// temperature is t_start; each step lowers the 32-bit accumulator by t_step
// (reference model below) until it would pass t_end, where it stays;
// at_end rises exactly when the accumulator reaches t_end. Uses the paper's
// sweep 1.375 -> 0.8 over 8192 iterations and a coarse sweep.
module tb_anneal;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, load, step, at_end;
  logic [T_W-1:0] t_start, t_end, temp;
  logic [T_W+T_EXTRA-1:0] t_step;
  longint model;
  int checks = 0, failures = 0;
  int end_seen = 0;

  anneal dut (.clk(clk), .rst_n(rst_n), .load(load), .step(step), .t_start(t_start),
              .t_end(t_end), .t_step(t_step), .temp(temp), .at_end(at_end));

  task automatic sweep(logic [15:0] ts, logic [15:0] te, logic [31:0] st, int n);
    @(negedge clk);
    t_start = ts; t_end = te; t_step = st; load = 1; step = 0;
    @(negedge clk);
    load = 0;
    model = longint'(ts) << 16;
    checks++; if (temp !== ts) failures++;
    for (int i = 0; i < n; i++) begin
      step = ($urandom % 4) != 0;
      if (step) begin
        model = model - longint'(st);
        if (model < (longint'(te) << 16)) model = longint'(te) << 16;
      end
      @(negedge clk);
      checks++;
      if (temp !== 16'(model >> 16) || at_end !== (model == (longint'(te) << 16))) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d temp=%h exp=%h", i, temp, 16'(model >> 16));
      end
      if (at_end) end_seen++;
    end
    step = 0;
  endtask

  initial begin
    rst_n = 0; load = 0; step = 0; t_start = '0; t_end = '0; t_step = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1.375 -> 0.8 in 8192 steps: step = 0.575/8192 in Q8.24
    sweep(16'h0160, 16'h00CD, 32'((longint'(16'h0160 - 16'h00CD) << 16) / 8192), 12000);
    // 20 -> 4, coarse steps, runs into the clamp
    sweep(16'h1400, 16'h0400, 32'h0003_0000, 2000);
    checks++; if (end_seen == 0) failures++;
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
