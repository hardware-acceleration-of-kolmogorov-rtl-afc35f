// tb_kan_layer_top: end-to-end test of one KAN layer at the default size
// (17 inputs, G = 5, K = 3, 136 word lines, 14 columns, N = 3).
//
// The SH-LUT is loaded with the sampled cubic B-spline and all 1904
// coefficients with random signed values through logical addresses. Each
// inference must return, in every column, sum_m sum_i c'[m][i][col] *
// B_i(X_m), with B_i evaluated directly from the spline (kan_ref_pkg), and
// done must come 2^N+2 cycles after start. Mechanisms counted and required
// at least once: inputs in every knot interval, clipped inputs, a start
// ignored while busy, a start ignored with en low, and a LUT rewrite to a
// lower B(X) precision (3 bits) followed by correct results.
module tb_kan_layer_top;
  import kan_ref_pkg::*;
  localparam int M = kan_pkg::M_IN, COLS = kan_pkg::COLS, G = kan_pkg::G, K = kan_pkg::K;
  localparam int LD = kan_pkg::LD, N = kan_pkg::N, NB = G + K, BW = 2 * N;
  localparam int DEPTH = ((K + 1) / 2) * (2**LD), OUTW = 24;

  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [$clog2(DEPTH)-1:0] lut_waddr;
  logic [BW-1:0] lut_wdata;
  logic w_we = 0;
  logic [$clog2(M)-1:0] w_m;
  logic [$clog2(NB)-1:0] w_i;
  logic [$clog2(COLS)-1:0] w_col;
  logic signed [7:0] w_data;
  logic en = 0, start = 0;
  logic [7:0] x [M];
  logic [M-1:0] clipped;
  logic busy, done;
  logic signed [OUTW-1:0] y [COLS];

  int c [M][NB][COLS];
  int checks = 0, failures = 0;
  int n_interval [G];
  int n_clipped = 0, n_busy_ignored = 0, n_en_ignored = 0, n_lut_rewrite = 0;

  kan_layer_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic program_lut(input int shift);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = $clog2(DEPTH)'(a);
      lut_wdata = BW'(lut_entry(a, LD, BW - shift) << shift);
    end
    @(negedge clk);
    lut_we = 0;
  endtask

  task automatic infer(input int shift, input bit poke_busy);
    int lat;
    longint e;
    for (int m = 0; m < M; m++) begin
      x[m] = 8'($urandom_range(175));
      if (x[m] >= 160) n_clipped++;
      else n_interval[x[m] / (2**LD)]++;
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin
      if (poke_busy && lat == 4) begin
        start = 1;                 // must be ignored: generator busy
        n_busy_ignored++;
      end else start = 0;
      @(negedge clk);
      lat++;
    end
    start = 0;
    check(lat == 2**N + 2, $sformatf("latency %0d", lat));
    @(negedge clk);
    for (int k = 0; k < COLS; k++) begin
      e = 0;
      for (int m = 0; m < M; m++)
        for (int i = 0; i < NB; i++)
          e += c[m][i][k] * (b_ref(i, int'(x[m]), G, K, LD, BW - shift) << shift);
      check(longint'(y[k]) == e, $sformatf("col %0d y=%0d expected %0d", k, y[k], e));
    end
    check(!done, "done is a single pulse");
    while (busy) @(negedge clk);
    if (poke_busy) begin
      @(negedge clk);
      check(!busy, "start during busy was not taken");
    end
  endtask

  initial begin
    lut_waddr = '0; lut_wdata = '0;
    w_m = '0; w_i = '0; w_col = '0; w_data = '0;
    foreach (x[m]) x[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_lut(0);
    for (int m = 0; m < M; m++)
      for (int i = 0; i < NB; i++)
        for (int k = 0; k < COLS; k++) begin
          @(negedge clk);
          c[m][i][k] = int'($urandom_range(255)) - 128;
          w_we = 1; w_m = $clog2(M)'(m); w_i = $clog2(NB)'(i); w_col = $clog2(COLS)'(k);
          w_data = 8'(c[m][i][k]);
        end
    @(negedge clk);
    w_we = 0;
    // en low: start ignored
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    check(!busy && !done, "start with en low was taken");
    n_en_ignored++;
    en = 1;
    for (int op = 0; op < 10; op++) infer(0, op == 3);
    program_lut(3);
    n_lut_rewrite++;
    for (int op = 0; op < 5; op++) infer(3, 1'b0);
    for (int g = 0; g < G; g++)
      check(n_interval[g] > 0, $sformatf("interval %0d never used", g));
    check(n_clipped > 0, "no clipped input");
    check(n_busy_ignored > 0, "no start while busy");
    check(n_en_ignored > 0, "no start with en low");
    check(n_lut_rewrite > 0, "no LUT rewrite");
    $display("mechanisms: intervals %0d %0d %0d %0d %0d, clipped %0d, busy-ignored %0d, en-ignored %0d, lut-rewrite %0d",
             n_interval[0], n_interval[1], n_interval[2], n_interval[3], n_interval[4],
             n_clipped, n_busy_ignored, n_en_ignored, n_lut_rewrite);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
