// tb_tmdvig_modes: the input generator built for N = 2, 3 and 4 (4-, 6-
// and 8-bit words in 5, 9 and 17 unit times), the speed/accuracy choice of
// N. Each build must reproduce every word exactly as charge.
module tb_tmdvig_modes;
  logic clk = 0, rst_n = 0;
  localparam int NM = 3;
  localparam int NS [NM] = '{2, 3, 4};
  logic fin [NM];
  int   chk [NM];
  int   fl  [NM];

  always #5 clk = ~clk;

  for (genvar n = 0; n < NM; n++) begin : g_mode
    tmdvig_mode_check #(.N(NS[n])) u_chk (
      .clk, .rst_n, .finished(fin[n]), .checks(chk[n]), .failures(fl[n]));
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    bit all;
    int checks, failures;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int n = 0; n < NM; n++) all &= fin[n];
    end while (!all);
    checks = 0; failures = 0;
    for (int n = 0; n < NM; n++) begin
      checks += chk[n];
      failures += fl[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
