// tb_tg_mux: with distinct levels on the 8 DAC lines, the output must be
// level a during W_P1, level b during W_PN and 0 V otherwise, for all a, b.
module tb_tg_mux;
  localparam int N = 3;
  real v_level [2**N];
  logic [N-1:0] a, b;
  logic p1, pn;
  real v_out;
  int checks = 0, failures = 0;

  tg_mux #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**N; i++) v_level[i] = 0.1 * real'(i) + 0.05;
    for (int ia = 0; ia < 2**N; ia++)
      for (int ib = 0; ib < 2**N; ib++)
        for (int ph = 0; ph < 3; ph++) begin
          real e;
          a = N'(ia); b = N'(ib);
          p1 = (ph == 1); pn = (ph == 2);
          #1;
          e = (ph == 1) ? 0.1 * real'(ia) + 0.05 : (ph == 2) ? 0.1 * real'(ib) + 0.05 : 0.0;
          checks++;
          if (v_out != e) begin
            failures++;
            $display("a=%0d b=%0d phase=%0d out=%f expected %f", ia, ib, ph, v_out, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
