// tb_buffer_array: each word line follows its own supply while W_P(N+1)
// is high and is 0 V while it is low.
module tb_buffer_array;
  localparam int ROWS = 6;
  real  v_supply [ROWS];
  logic p_n1;
  real  wl [ROWS];
  int checks = 0, failures = 0;

  buffer_array #(.ROWS(ROWS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int r = 0; r < ROWS; r++) v_supply[r] = real'($urandom_range(1000)) / 1000.0;
      p_n1 = 1'(t % 2);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (wl[r] != (p_n1 ? v_supply[r] : 0.0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
