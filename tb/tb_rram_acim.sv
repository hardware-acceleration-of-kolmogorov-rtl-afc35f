// tb_rram_acim: 6 x 3 array with random signed coefficients. Word lines
// are driven with DAC-style levels (V[x] = VTH + sqrt(x/KN)) for a number
// of cycles; after `sample` each column output must equal
// sum_r c[r][col] * (sum over cycles of the row's code). `clear` must
// empty the charge. A second instance with IR_ALPHA > 0 must show a
// smaller magnitude for a row far from the clamp than for row 0.
module tb_rram_acim;
  localparam int ROWS = 6, COLS = 3, CW = 8, OUTW = 24;
  localparam real VTH = 0.35, KN = 40.0;
  logic clk = 0, rst_n = 0, w_we = 0, clear = 0, sample = 0;
  logic [2:0] w_row;
  logic [1:0] w_col;
  logic signed [CW-1:0] w_data;
  real wl [ROWS];
  logic signed [OUTW-1:0] y [COLS];
  logic signed [OUTW-1:0] y_ir [COLS];
  int c [ROWS][COLS];
  int acc [COLS];
  int checks = 0, failures = 0;

  rram_acim #(.ROWS(ROWS), .COLS(COLS), .CW(CW), .OUTW(OUTW)) dut (.*);
  rram_acim #(.ROWS(ROWS), .COLS(COLS), .CW(CW), .OUTW(OUTW), .IR_ALPHA(0.1)) dut_ir (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data, .wl, .clear, .sample, .y(y_ir));

  always #5 clk = ~clk;

  function automatic real lvl(input int x);
    return (x == 0) ? 0.0 : VTH + $sqrt(real'(x) / KN);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wl[r]) wl[r] = 0.0;
    w_row = '0; w_col = '0; w_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < COLS; k++) begin
        @(negedge clk);
        c[r][k] = int'($urandom_range(255)) - 128;
        w_we = 1; w_row = 3'(r); w_col = 2'(k); w_data = CW'(c[r][k]);
      end
    @(negedge clk);
    w_we = 0;
    for (int op = 0; op < 20; op++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (acc[k]) acc[k] = 0;
      for (int t = 0; t < 9; t++) begin
        for (int r = 0; r < ROWS; r++) begin
          int x;
          x = $urandom_range(7);
          wl[r] = lvl(x);
          for (int k = 0; k < COLS; k++) acc[k] += c[r][k] * x;
        end
        @(negedge clk);
      end
      foreach (wl[r]) wl[r] = 0.0;
      sample = 1;
      @(negedge clk);
      sample = 0;
      for (int k = 0; k < COLS; k++) begin
        checks++;
        if (int'(y[k]) != acc[k]) begin
          failures++;
          $display("op %0d col %0d y=%0d expected %0d", op, k, y[k], acc[k]);
        end
      end
    end
    // IR drop: the same unit input on row 0 versus row 5
    for (int far = 0; far < 2; far++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (wl[r]) wl[r] = 0.0;
      wl[far ? 5 : 0] = lvl(7);
      @(negedge clk);
      wl[far ? 5 : 0] = 0.0;
      sample = 1;
      @(negedge clk);
      sample = 0;
      checks++;
      if (int'(y_ir[0]) != $rtoi(real'(c[far ? 5 : 0][0]) * 7.0 * (far ? 0.5 : 1.0)
                              + ((c[far ? 5 : 0][0] < 0) ? -0.5 : 0.5))) begin
        failures++;
        $display("IR row %0d y=%0d c=%0d", far ? 5 : 0, y_ir[0], c[far ? 5 : 0][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
