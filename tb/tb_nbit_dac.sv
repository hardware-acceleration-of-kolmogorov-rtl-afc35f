// tb_nbit_dac: the DAC levels must make a cell's current linear in the
// code: feeding V[x] through the square-law Id-Vg curve must give x unit
// currents, V[0] must be 0 V, and the levels must rise with x.
module tb_nbit_dac;
  localparam int N = 3;
  localparam real VTH = 0.35, KN = 40.0, I_UNIT = 1.0;
  real v_level [2**N];
  int checks = 0, failures = 0;

  nbit_dac #(.N(N), .VTH(VTH), .KN(KN), .I_UNIT(I_UNIT)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    checks++;
    if (v_level[0] != 0.0) failures++;
    for (int x = 1; x < 2**N; x++) begin
      real i_cell;
      i_cell = (v_level[x] > VTH) ? KN * (v_level[x] - VTH) ** 2 : 0.0;
      checks++;
      if (i_cell < real'(x) * I_UNIT - 1e-9 || i_cell > real'(x) * I_UNIT + 1e-9) begin
        failures++;
        $display("code %0d: V=%f gives I=%f", x, v_level[x], i_cell);
      end
      checks++;
      if (!(v_level[x] > v_level[x-1])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
