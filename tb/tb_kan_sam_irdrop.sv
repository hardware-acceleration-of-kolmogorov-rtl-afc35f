// tb_kan_sam_irdrop: sparsity-aware row placement under IR drop.
//
// A default-size layer (17 inputs, 136 word lines, 14 columns) is built
// with a linear IR-drop loss of IR_ALPHA per row of distance from the clamp.
// Inputs follow a bell-shaped distribution centred mid-range (mean of four
// uniform draws over 0..159). For every inference the testbench checks that
// each column equals the IR-attenuated sum for the sparsity-aware rows
// rank(i)*17 + m (within rounding), and computes what the same array
// would return with coefficients placed input-major (row m*8 + i, no regard
// for activation probability). Over all inferences the mean absolute error
// against the ideal sum must be smaller with the sparsity-aware placement.
module tb_kan_sam_irdrop;
  import kan_ref_pkg::*;
  localparam int M = 17, COLS = 14, G = 5, K = 3, LD = 5, N = 3, NB = 8, BW = 6;
  localparam int DEPTH = 64, OUTW = 24, RUNS = 60;
  localparam real ALPHA = 0.002;

  logic clk = 0, rst_n = 0, lut_we = 0, w_we = 0, en = 1, start = 0;
  logic [5:0] lut_waddr;
  logic [BW-1:0] lut_wdata;
  logic [4:0] w_m;
  logic [2:0] w_i;
  logic [3:0] w_col;
  logic signed [7:0] w_data;
  logic [7:0] x [M];
  logic [M-1:0] clipped;
  logic busy, done;
  logic signed [OUTW-1:0] y [COLS];
  int c [M][NB][COLS];
  int checks = 0, failures = 0;
  real err_sam = 0.0, err_conv = 0.0;

  kan_layer_top #(.IR_ALPHA(ALPHA)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rank of basis function i: centre first, alternating outwards
  function automatic int rank(input int i);
    int ctr;
    ctr = (NB - 1) / 2;
    return (i <= ctr) ? 2 * (ctr - i) : 2 * (i - ctr) - 1;
  endfunction

  initial begin
    lut_waddr = '0; lut_wdata = '0; w_m = '0; w_i = '0; w_col = '0; w_data = '0;
    foreach (x[m]) x[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 6'(a); lut_wdata = BW'(lut_entry(a, LD, BW));
    end
    @(negedge clk);
    lut_we = 0;
    for (int m = 0; m < M; m++)
      for (int i = 0; i < NB; i++)
        for (int k = 0; k < COLS; k++) begin
          @(negedge clk);
          c[m][i][k] = int'($urandom_range(255)) - 128;
          w_we = 1; w_m = 5'(m); w_i = 3'(i); w_col = 4'(k); w_data = 8'(c[m][i][k]);
        end
    @(negedge clk);
    w_we = 0;
    for (int run = 0; run < RUNS; run++) begin
      for (int m = 0; m < M; m++)
        x[m] = 8'(($urandom_range(159) + $urandom_range(159) + $urandom_range(159) + $urandom_range(159)) / 4);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int k = 0; k < COLS; k++) begin
        real ideal, sam, conv;
        ideal = 0.0; sam = 0.0; conv = 0.0;
        for (int m = 0; m < M; m++)
          for (int i = 0; i < NB; i++) begin
            real p;
            p = real'(c[m][i][k] * b_ref(i, int'(x[m]), G, K, LD, BW));
            ideal += p;
            sam   += p * (1.0 - ALPHA * real'(rank(i) * M + m));
            conv  += p * (1.0 - ALPHA * real'(m * NB + i));
          end
        checks++;
        if (real'(y[k]) < sam - 1.0 || real'(y[k]) > sam + 1.0) begin
          failures++;
          $display("run %0d col %0d y=%0d model %f", run, k, y[k], sam);
        end
        err_sam  += (real'(y[k]) > ideal) ? real'(y[k]) - ideal : ideal - real'(y[k]);
        err_conv += (conv > ideal) ? conv - ideal : ideal - conv;
      end
      while (busy) @(negedge clk);
    end
    $display("mean |error|: sparsity-aware %f, input-major %f (ratio %f)",
             err_sam / real'(RUNS * COLS), err_conv / real'(RUNS * COLS), err_conv / err_sam);
    checks++;
    if (!(err_sam < err_conv)) begin
      failures++;
      $display("sparsity-aware placement did not reduce the IR-drop error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
