// tb_delay_chain: random go patterns; tap1 must equal go one cycle
// earlier, tapn1 go 2^N+1 = 9 cycles earlier, and active must be high
// exactly when go was high in any of the last 9 cycles.
module tb_delay_chain;
  localparam int N = 3, D = 9;
  logic clk = 0, rst_n = 0, go = 0;
  logic tap1, tapn1, active;
  logic hist [$];
  int checks = 0, failures = 0;

  delay_chain #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < D; i++) hist.push_front(1'b0);
    for (int t = 0; t < 1000; t++) begin
      logic any;
      @(negedge clk);
      go = ((t / 13) % 2 == 0) ? 1'b1 : 1'($urandom_range(1));
      @(posedge clk);
      hist.push_front(go);   // hist[k] = go k cycles before the coming check
      #1;
      any = 1'b0;
      for (int k = 0; k < D; k++) any |= hist[k];
      checks++;
      if (tap1 !== hist[0] || tapn1 !== hist[D-1] || active !== any) begin
        failures++;
        $display("t=%0d tap1=%b tapn1=%b active=%b exp %b %b %b", t, tap1, tapn1, active, hist[0], hist[D-1], any);
      end
      void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
