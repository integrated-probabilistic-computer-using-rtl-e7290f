// tb_factorizer -- checks the 3 x 3 invertible multiplier (27 p-bits).
// The testbench computes the node values of a correct multiplication a*b by
// running the ripple array multiplier itself, and checks that the product
// p-bits hold a*b. Then, at zero temperature (wrng = 0):
//   * every p-bit of a correct state keeps its value when selected;
//   * a correct state with one p-bit flipped returns to the correct value
//     when that p-bit is selected (its input does not depend on itself);
//   * unselected p-bits never change.
// Finally wrng = +63 forces a selected p-bit to 0 and wrng = -64 to 1.
module tb_factorizer;
  import pim_pkg::*;
  localparam int N = 3;
  localparam int NP = 3 * N * N;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, init;
  logic signed [WRNG_W-1:0] wrng;
  logic [NP-1:0] select, set, out;
  int checks = 0, failures = 0;

  factorizer #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .wrng(wrng), .select(select),
                           .init(init), .set(set), .out(out));

  function automatic logic [NP-1:0] mult_state(int a, int b);
    logic [NP-1:0] s;
    s = '0;
    for (int k = 0; k < N; k++) s[node_a(k)] = 1'(a >> k);
    for (int r = 0; r < N; r++) s[node_b(N, r)] = 1'(b >> r);
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++) s[node_pp(N, r, k)] = 1'(a >> k) & 1'(b >> r);
    for (int r = 1; r < N; r++)
      for (int k = 0; k < N; k++) begin
        logic x, y, c;
        x = s[node_pp(N, r, k)];
        y = (node_y(N, r, k) >= 0) ? s[node_y(N, r, k)] : 1'b0;
        c = (node_cin(N, r, k) >= 0) ? s[node_cin(N, r, k)] : 1'b0;
        s[node_sum(N, r, k)]   = x ^ y ^ c;
        s[node_carry(N, r, k)] = (x & y) | (x & c) | (y & c);
      end
    return s;
  endfunction

  task automatic load(logic [NP-1:0] v);
    @(negedge clk); set = v; init = 1; select = '0;
    @(negedge clk); init = 0;
    checks++; if (out !== v) failures++;
  endtask

  task automatic update(int i);
    @(negedge clk); select = '0; select[i] = 1'b1;
    @(negedge clk); select = '0;
  endtask

  initial begin
    rst_n = 0; init = 0; select = '0; set = '0; wrng = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 1; a < 8; a++)
      for (int b = 1; b < 8; b++) begin
        logic [NP-1:0] good;
        int prod;
        good = mult_state(a, b);
        prod = 0;
        for (int p = 0; p < 2*N; p++) prod |= int'(good[node_prod(N, p)]) << p;
        checks++; if (prod != a * b) failures++;
        // correct state is stable bit by bit
        load(good);
        for (int i = 0; i < NP; i++) begin
          update(i);
          checks++;
          if (out !== good) begin
            failures++;
            if (failures < 10) $display("FAIL stable a=%0d b=%0d i=%0d", a, b, i);
          end
        end
        // one flipped p-bit is restored; the others hold
        for (int i = 0; i < NP; i++) begin
          logic [NP-1:0] bad;
          bad = good; bad[i] = ~bad[i];
          load(bad);
          update(i);
          checks++;
          if (out !== good) begin
            failures++;
            if (failures < 10) $display("FAIL restore a=%0d b=%0d i=%0d", a, b, i);
          end
        end
      end
    // saturating samples override the input
    load('1);
    wrng = 7'sd63;
    for (int i = 0; i < NP; i += 4) begin
      update(i);
      checks++; if (out[i] !== 1'b0) failures++;
    end
    load('0);
    wrng = -7'sd64;
    for (int i = 1; i < NP; i += 4) begin
      update(i);
      checks++; if (out[i] !== 1'b1) failures++;
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
