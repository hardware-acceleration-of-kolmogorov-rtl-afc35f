// tb_kan_sam_map: for 17 inputs and 8 basis functions the map must be a
// permutation of the 136 rows, keep each basis function's rows together
// in one band of 17 (input order within the band), and order the bands so
// that a basis function nearer the centre of 0..7 is never further from
// the clamp than one nearer the edge.
module tb_kan_sam_map;
  localparam int M = 17, NB = 8;
  logic [4:0] m;
  logic [2:0] i;
  logic [7:0] row;
  bit   used [M*NB];
  int   band [NB];
  int checks = 0, failures = 0;

  kan_sam_map #(.M(M), .NB(NB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bi = 0; bi < NB; bi++)
      for (int mi = 0; mi < M; mi++) begin
        m = 5'(mi); i = 3'(bi);
        #1;
        checks++;
        if (int'(row) >= M * NB || used[row]) begin
          failures++;
          $display("m=%0d i=%0d row=%0d repeated or out of range", mi, bi, row);
        end else used[row] = 1'b1;
        if (mi == 0) band[bi] = int'(row) / M;
        checks++;
        if (int'(row) != band[bi] * M + mi) failures++;
      end
    for (int p = 0; p < NB; p++)
      for (int q = 0; q < NB; q++) begin
        // distance from the centre 3.5, doubled to stay integer
        int dp, dq;
        dp = (2 * p > 7) ? 2 * p - 7 : 7 - 2 * p;
        dq = (2 * q > 7) ? 2 * q - 7 : 7 - 2 * q;
        if (dp < dq) begin
          checks++;
          if (band[p] > band[q]) begin
            failures++;
            $display("B%0d (band %0d) further than B%0d (band %0d)", p, band[p], q, band[q]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
