// tb_tmdvig: the whole input generator, N = 3, 8 rows. Each word line's
// voltage is turned into current through the square-law cell model and
// summed per clock; the total for every row must equal its 6-bit word
// (a + 8*b unit charges), the pulse must last 2^N+1 = 9 cycles and done
// must come 10 cycles after the start edge. All 64 word values are covered.
module tb_tmdvig;
  localparam int ROWS = 8, N = 3;
  localparam real VTH = 0.35, KN = 40.0;
  logic clk = 0, rst_n = 0, en = 1, start = 0;
  logic [2*N-1:0] data [ROWS];
  real  wl [ROWS];
  logic p_n1, busy, done;
  real  q [ROWS];
  int   pulse_cycles;
  int checks = 0, failures = 0;

  tmdvig #(.ROWS(ROWS), .N(N)) dut (.*);

  always #5 clk = ~clk;

  // charge integration, one unit time per clock
  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      q[r] += (wl[r] > VTH) ? KN * (wl[r] - VTH) ** 2 : 0.0;
    if (p_n1) pulse_cycles++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (data[r]) data[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 12; op++) begin
      int lat;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        data[r] = (op < 8) ? (2*N)'(op * ROWS + r) : (2*N)'($urandom);
        q[r] = 0.0;
      end
      pulse_cycles = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 2**N + 2) begin
        failures++;
        $display("done after %0d cycles", lat);
      end
      @(negedge clk);
      checks++;
      if (pulse_cycles != 2**N + 1) begin
        failures++;
        $display("pulse lasted %0d cycles", pulse_cycles);
      end
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (q[r] < real'(data[r]) - 1e-6 || q[r] > real'(data[r]) + 1e-6) begin
          failures++;
          $display("row %0d word %0d charge %f", r, data[r], q[r]);
        end
      end
      while (busy) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
