// tb_l2g_mux_demux: with the half LUT holding the sampled cubic B-spline,
// the block must give, for every input code, the value of every basis
// function B_0..B_7 evaluated directly on the knot grid (kan_ref_pkg), and
// lane j must carry B_{g+j}. The decoder selects are formed here from x.
module tb_l2g_mux_demux;
  import kan_ref_pkg::*;
  localparam int LD = 5, G = 5, K = 3, BW = 6, P = 32, DEPTH = 64;
  logic [BW-1:0] lut_value [DEPTH];
  logic [P-1:0]  local_sel;
  logic [G-1:0]  global_sel;
  logic [BW-1:0] b_local  [K+1];
  logic [BW-1:0] b_global [G+K];
  int checks = 0, failures = 0;
  int lane_hits [K+1];

  l2g_mux_demux #(.LD(LD), .G(G), .K(K), .BW(BW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) lut_value[a] = BW'(lut_entry(a, LD, BW));
    for (int x = 0; x < G * P; x++) begin
      local_sel = '0; local_sel[x % P] = 1'b1;
      global_sel = '0; global_sel[x / P] = 1'b1;
      #1;
      for (int i = 0; i < G + K; i++) begin
        checks++;
        if (int'(b_global[i]) != b_ref(i, x, G, K, LD, BW)) begin
          failures++;
          $display("x=%0d B%0d=%0d expected %0d", x, i, b_global[i], b_ref(i, x, G, K, LD, BW));
        end
      end
      for (int j = 0; j <= K; j++) begin
        checks++;
        if (b_local[j] !== b_global[x / P + j]) begin
          failures++;
          $display("x=%0d lane %0d=%0d not on B%0d", x, j, b_local[j], x / P + j);
        end
        if (b_local[j] != 0) lane_hits[j]++;
      end
    end
    // no select: all outputs idle
    local_sel = '0; global_sel = '0;
    #1;
    for (int i = 0; i < G + K; i++) begin
      checks++;
      if (b_global[i] != 0) failures++;
    end
    for (int j = 0; j <= K; j++) begin
      checks++;
      if (lane_hits[j] == 0) begin
        failures++;
        $display("lane %0d never carried a value", j);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
