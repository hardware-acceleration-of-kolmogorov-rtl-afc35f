// tb_spline_lookup: three inputs share one SH-LUT. The LUT is programmed
// through its write port with the sampled cubic B-spline; random and edge
// input codes (including ones above the aligned range) must give the
// directly evaluated B_i(X_m) on every output. The LUT is then rewritten
// with a lower-precision (3-bit, left-aligned) table and checked again.
module tb_spline_lookup;
  import kan_ref_pkg::*;
  localparam int M = 3, XW = 8, G = 5, K = 3, LD = 5, BW = 6, DEPTH = 64;
  logic clk = 0, rst_n = 0, lut_we = 0;
  logic [5:0]    lut_waddr;
  logic [BW-1:0] lut_wdata;
  logic [XW-1:0] x [M];
  logic [BW-1:0] b [M*(G+K)];
  logic [M-1:0]  clipped;
  int checks = 0, failures = 0, n_clipped = 0;

  spline_lookup #(.M(M), .XW(XW), .G(G), .K(K), .LD(LD), .BW(BW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_lut(input int shift);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 6'(a);
      lut_wdata = BW'((lut_entry(a, LD, BW - shift)) << shift);
    end
    @(negedge clk);
    lut_we = 0;
  endtask

  task automatic check_all(input int shift);
    for (int t = 0; t < 400; t++) begin
      for (int m = 0; m < M; m++)
        x[m] = (t < 256) ? XW'((t + 85 * m) % 256) : XW'($urandom);
      #1;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (clipped[m] !== (x[m] >= 160)) failures++;
        if (clipped[m]) n_clipped++;
        for (int i = 0; i < G + K; i++) begin
          int e;
          e = (b_ref(i, int'(x[m]), G, K, LD, BW - shift)) << shift;
          checks++;
          if (int'(b[m*(G+K)+i]) != e) begin
            failures++;
            $display("x[%0d]=%0d B%0d=%0d expected %0d", m, x[m], i, b[m*(G+K)+i], e);
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    lut_waddr = '0; lut_wdata = '0;
    foreach (x[m]) x[m] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    program_lut(0);
    check_all(0);
    program_lut(3);
    check_all(3);
    checks++;
    if (n_clipped == 0) begin
      failures++;
      $display("no input was clipped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
