// tb_pbit -- checks one p-bit against a reference model: on a clock edge with
// init it loads set, with select (and no init) it takes I > wrng (signed),
// otherwise it holds.
module tb_pbit;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, select, init, set, out;
  logic signed [I_W-1:0] in_i;
  logic signed [WRNG_W-1:0] wrng;
  logic model;
  int checks = 0, failures = 0;

  pbit dut (.clk(clk), .rst_n(rst_n), .in_i(in_i), .wrng(wrng), .select(select),
            .init(init), .set(set), .out(out));

  initial begin
    rst_n = 0; select = 0; init = 0; set = 0; in_i = '0; wrng = '0;
    repeat (2) @(posedge clk);
    #1 checks++; if (out !== 1'b0) failures++;
    model = 0;
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_i   = I_W'($urandom);
      wrng   = WRNG_W'($urandom);
      if (i % 7 == 0) wrng = WRNG_W'(in_i);          // tie: I > wrng is false
      if (i % 11 == 0) wrng = WRNG_W'(in_i) - 1;     // just below
      select = ($urandom % 3) != 0;
      init   = ($urandom % 5) == 0;
      set    = 1'($urandom);
      if (init)        model = set;
      else if (select) model = (int'(in_i) > int'(wrng));
      @(posedge clk); #1;
      checks++;
      if (out !== model) begin
        failures++;
        if (failures < 10) $display("FAIL I=%0d wrng=%0d sel=%b init=%b out=%b exp=%b", in_i, wrng, select, init, out, model);
      end
    end
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
