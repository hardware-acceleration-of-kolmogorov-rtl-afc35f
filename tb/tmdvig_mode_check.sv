// tmdvig_mode_check: testbench helper that exercises one input generator
// built with a given N (word width 2N). Every word value 0..2^(2N)-1 is
// applied on one of ROWS rows; the word-line current, integrated through
// the square-law cell model, must give the word back, the pulse must last
// 2^N+1 cycles and done must arrive 2^N+2 cycles after start. Raises
// `finished` with its counts.
module tmdvig_mode_check #(
  parameter int unsigned N    = 3,
  parameter int unsigned ROWS = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam real VTH = 0.35, KN = 40.0;
  logic en, start;
  logic [2*N-1:0] data [ROWS];
  real  wl [ROWS];
  logic p_n1, busy, done;
  real  q [ROWS];
  int   pulse_cycles;

  tmdvig #(.ROWS(ROWS), .N(N)) dut (.*);

  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      q[r] += (wl[r] > VTH) ? KN * (wl[r] - VTH) ** 2 : 0.0;
    if (p_n1) pulse_cycles++;
  end

  initial begin
    finished = 0; checks = 0; failures = 0;
    en = 1; start = 0;
    foreach (data[r]) data[r] = '0;
    @(posedge rst_n);
    for (int base = 0; base < 2**(2*N); base += ROWS) begin
      int lat;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        data[r] = (2*N)'((base + r) % (2**(2*N)));
        q[r] = 0.0;
      end
      pulse_cycles = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 2**N + 2) failures++;
      @(negedge clk);
      checks++;
      if (pulse_cycles != 2**N + 1) failures++;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (q[r] < real'(data[r]) - 1e-6 || q[r] > real'(data[r]) + 1e-6) begin
          failures++;
          $display("N=%0d word %0d charge %f", N, data[r], q[r]);
        end
      end
      while (busy) @(negedge clk);
    end
    $display("N=%0d: %0d-bit words in %0d unit times, %0d checks, %0d failures",
             N, 2 * N, 2**N + 1, checks, failures);
    finished = 1;
  end
endmodule
