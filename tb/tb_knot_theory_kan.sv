// tb_knot_theory_kan: the 17x1x14 two-layer KAN shape of the knot-theory
// benchmark, run for the grid sizes the evaluation uses: G = 5 (the worked
// example, K = 3), G = 7, 15, 30 and 60 (the array-size study), and
// G = 68 (the larger network size, 2232 parameters = 31 edges x (G+K+1)).
// Each size is built with its own LD = max{LD : G*2^LD <= 256}.
module tb_knot_theory_kan;
  logic clk = 0, rst_n = 0;
  localparam int NG = 6;
  localparam int GS [NG] = '{5, 7, 15, 30, 60, 68};
  logic fin [NG];
  int   chk [NG];
  int   fl  [NG];
  int checks, failures;

  always #5 clk = ~clk;

  for (genvar n = 0; n < NG; n++) begin : g_run
    kan_net_runner #(.G(GS[n])) u_run (
      .clk, .rst_n, .finished(fin[n]), .checks(chk[n]), .failures(fl[n]));
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int n = 0; n < NG; n++) all &= fin[n];
    end while (!all);
    checks = 0; failures = 0;
    for (int n = 0; n < NG; n++) begin
      checks += chk[n];
      failures += fl[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
