// kan_net_runner: testbench helper that runs a two-layer 17x1x14 KAN
// (the knot-theory network shape) for one grid size G on two instances of
// kan_layer_top: layer 1 has 17 inputs and one column, layer 2 one input
// and 14 columns. Coefficients are random signed 8-bit values (no trained
// model is used); the layer-1 column sum is requantised to the layer-2
// input range as x2 = clamp((y1 >>> 8) + G*2^LD/2, 0, G*2^LD-1). Every
// layer result is compared with the directly evaluated spline sums. When
// finished it raises `finished` with its check and failure counts.
module kan_net_runner #(
  parameter int unsigned G    = 5,
  parameter int unsigned RUNS = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  import kan_ref_pkg::*;
  localparam int M1 = 17, C2 = 14, K = 3, N = 3, BW = 2 * N;
  localparam int LD = int'(kan_pkg::calc_ld(G, 8));
  localparam int NB = G + K, DEPTH = ((K + 1) / 2) * (2**LD), OUTW = 24;
  localparam int XMAX = G * (2**LD) - 1;

  logic lut_we;
  logic [$clog2(DEPTH)-1:0] lut_waddr;
  logic [BW-1:0] lut_wdata;
  logic w_we1, w_we2;
  logic [$clog2(M1)-1:0] w_m;
  logic [$clog2(NB)-1:0] w_i;
  logic [$clog2(C2)-1:0] w_col;
  logic signed [7:0] w_data;
  logic start1, start2;
  logic [7:0] x1 [M1];
  logic [7:0] x2 [1];
  logic [M1-1:0] clipped1;
  logic [0:0] clipped2;
  logic busy1, busy2, done1, done2;
  logic signed [OUTW-1:0] y1 [1];
  logic signed [OUTW-1:0] y2 [C2];

  int c1 [M1][NB];
  int c2 [NB][C2];

  kan_layer_top #(.M(M1), .COLS(1), .G(G), .LD(LD)) u_l1 (
    .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
    .w_we(w_we1), .w_m, .w_i, .w_col(1'b0), .w_data,
    .en(1'b1), .start(start1), .x(x1), .clipped(clipped1), .busy(busy1), .done(done1), .y(y1));

  kan_layer_top #(.M(1), .COLS(C2), .G(G), .LD(LD)) u_l2 (
    .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
    .w_we(w_we2), .w_m(1'b0), .w_i, .w_col, .w_data,
    .en(1'b1), .start(start2), .x(x2), .clipped(clipped2), .busy(busy2), .done(done2), .y(y2));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("G=%0d FAIL %s", G, msg);
    end
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    lut_we = 0; w_we1 = 0; w_we2 = 0; start1 = 0; start2 = 0;
    lut_waddr = '0; lut_wdata = '0; w_m = '0; w_i = '0; w_col = '0; w_data = '0;
    foreach (x1[m]) x1[m] = '0;
    x2[0] = '0;
    @(posedge rst_n);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = $clog2(DEPTH)'(a); lut_wdata = BW'(lut_entry(a, LD, BW));
    end
    @(negedge clk);
    lut_we = 0;
    for (int m = 0; m < M1; m++)
      for (int i = 0; i < NB; i++) begin
        @(negedge clk);
        c1[m][i] = int'($urandom_range(255)) - 128;
        w_we1 = 1; w_m = $clog2(M1)'(m); w_i = $clog2(NB)'(i); w_data = 8'(c1[m][i]);
      end
    @(negedge clk);
    w_we1 = 0;
    for (int i = 0; i < NB; i++)
      for (int k = 0; k < C2; k++) begin
        @(negedge clk);
        c2[i][k] = int'($urandom_range(255)) - 128;
        w_we2 = 1; w_i = $clog2(NB)'(i); w_col = $clog2(C2)'(k); w_data = 8'(c2[i][k]);
      end
    @(negedge clk);
    w_we2 = 0;
    for (int run = 0; run < RUNS; run++) begin
      longint e1, e2;
      int xq;
      for (int m = 0; m < M1; m++) x1[m] = 8'($urandom_range(XMAX));
      @(negedge clk);
      start1 = 1;
      @(negedge clk);
      start1 = 0;
      while (!done1) @(negedge clk);
      @(negedge clk);
      e1 = 0;
      for (int m = 0; m < M1; m++)
        for (int i = 0; i < NB; i++) e1 += c1[m][i] * b_ref(i, int'(x1[m]), G, K, LD, BW);
      check(longint'(y1[0]) == e1, $sformatf("layer 1 y=%0d expected %0d", y1[0], e1));
      xq = int'(y1[0] >>> 8) + (XMAX + 1) / 2;
      xq = (xq < 0) ? 0 : (xq > XMAX) ? XMAX : xq;
      x2[0] = 8'(xq);
      while (busy1) @(negedge clk);
      start2 = 1;
      @(negedge clk);
      start2 = 0;
      while (!done2) @(negedge clk);
      @(negedge clk);
      for (int k = 0; k < C2; k++) begin
        e2 = 0;
        for (int i = 0; i < NB; i++) e2 += c2[i][k] * b_ref(i, xq, G, K, LD, BW);
        check(longint'(y2[k]) == e2, $sformatf("layer 2 col %0d y=%0d expected %0d", k, y2[k], e2));
      end
      while (busy2) @(negedge clk);
    end
    $display("G=%0d LD=%0d rows=%0d: %0d checks, %0d failures", G, LD, M1 * NB, checks, failures);
    finished = 1;
  end
endmodule
