// tb_lg_decoder: exhaustive check of the local-global decoder at its
// default size (8-bit input, G = 5, LD = 5). For every code the local
// select must be one-hot at x mod 32, the global select one-hot at x / 32,
// and codes >= 160 must be flagged and treated as 159.
module tb_lg_decoder;
  localparam int XW = 8, G = 5, LD = 5;
  logic [XW-1:0]    x;
  logic [2**LD-1:0] local_sel;
  logic [G-1:0]     global_sel;
  logic             clipped;
  int checks = 0, failures = 0;

  lg_decoder #(.XW(XW), .G(G), .LD(LD)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int xs;
      logic [2**LD-1:0] el;
      logic [G-1:0]     eg;
      x = XW'(v);
      #1;
      xs = (v >= 160) ? 159 : v;
      el = '0; el[xs % 32] = 1'b1;
      eg = '0; eg[xs / 32] = 1'b1;
      checks++;
      if (local_sel !== el || global_sel !== eg || clipped !== (v >= 160)) begin
        failures++;
        $display("x=%0d local=%h global=%b clipped=%b", v, local_sel, global_sel, clipped);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
