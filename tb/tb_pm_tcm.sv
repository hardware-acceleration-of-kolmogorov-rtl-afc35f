// tb_pm_tcm: pulse logic together with its delay chain, N = 3, 4 rows.
// For each operation: a and b are the low/high halves of each word; W_P1
// is 1 cycle, W_PN 2^N = 8 cycles right after it, W_P(N+1) 9 cycles
// covering both; done comes in cycle 2^N+2 = 10 after the start edge;
// busy lasts 2*(2^N+1)+1 = 19 cycles (pulse plus chain drain); starts
// while busy or with en low are ignored.
module tb_pm_tcm;
  localparam int ROWS = 4, N = 3;
  logic clk = 0, rst_n = 0, en = 0, start = 0;
  logic [2*N-1:0] data [ROWS];
  logic go, tap1, tapn1, chain_active;
  logic [N-1:0] a [ROWS];
  logic [N-1:0] b [ROWS];
  logic p1, pn, p_n1, busy, done;
  int checks = 0, failures = 0, ignored_busy = 0, ignored_en = 0;

  delay_chain #(.N(N)) u_chain (.clk, .rst_n, .go, .tap1, .tapn1, .active(chain_active));
  pm_tcm #(.ROWS(ROWS), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  task automatic run_op(input bit expect_go);
    logic [2*N-1:0] d [ROWS];
    int p1_cnt, pn_cnt, pn1_cnt, done_at, first_pn, last_p1, busy_cnt;
    for (int r = 0; r < ROWS; r++) d[r] = (2*N)'($urandom);
    @(negedge clk);
    data = d; start = 1;
    @(negedge clk);
    start = 0;
    foreach (data[r]) data[r] = '1;   // must not leak after the latch
    if (!expect_go) begin
      check(!go && !busy, "start accepted while en low");
      return;
    end
    p1_cnt = 0; pn_cnt = 0; pn1_cnt = 0; busy_cnt = 0; done_at = -1; first_pn = -1; last_p1 = -1;
    for (int c = 1; c <= 2 * (2**N) + 6; c++) begin
      if (p1)  begin p1_cnt++; last_p1 = c; end
      if (pn)  begin pn_cnt++; if (first_pn < 0) first_pn = c; end
      if (p_n1) pn1_cnt++;
      if (done) done_at = c;
      if (busy) busy_cnt++;
      if (c == 3) begin
        // a start during the pulse is ignored
        start = 1; @(negedge clk); start = 0;
        if (p1) p1_cnt++;
        if (pn) pn_cnt++;
        if (p_n1) pn1_cnt++;
        if (done) done_at = c + 1;
        if (busy) busy_cnt++;
        c++;
        ignored_busy++;
      end
      for (int r = 0; r < ROWS; r++)
        check(a[r] == d[r][N-1:0] && b[r] == d[r][2*N-1:N], "a/b split");
      @(negedge clk);
    end
    check(p1_cnt == 1, "W_P1 width 1");
    check(pn_cnt == 2**N, "W_PN width 2^N");
    check(pn1_cnt == 2**N + 1, "W_P(N+1) width 2^N+1");
    check(first_pn == last_p1 + 1, "W_PN follows W_P1");
    check(done_at == 2**N + 2, "done latency 2^N+2");
    check(busy_cnt == 2 * (2**N + 1) + 1, $sformatf("busy for %0d cycles", busy_cnt));
    while (busy) @(negedge clk);
  endtask

  initial begin
    foreach (data[r]) data[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    en = 0;
    run_op(1'b0);
    ignored_en++;
    en = 1;
    for (int n = 0; n < 30; n++) run_op(1'b1);
    check(ignored_busy > 0 && ignored_en > 0, "ignored starts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
