// pm_tcm: pulse modulation and timing control logic of the TM-DV-IG.
//
// One operation converts ROWS 2N-bit B(X) words into word-line pulses.
// Each word is split as {b, a}: a = word[N-1:0] is applied for one unit
// (pulse W_P1), b = word[2N-1:N] for 2^N units (pulse W_PN), so the charge
// a bit line collects from a row is proportional to a + 2^N*b, the word's
// value. The block raises `go` into the delay chain and forms
//   p_n1 = go & ~tapn1   (W_P(N+1), 2^N+1 units, buffer-array enable)
//   p1   = go & ~tap1    (W_P1, 1 unit, TG-MUX selects V[a])
//   pn   = p1 ^ p_n1     (W_PN, 2^N units, TG-MUX selects V[b])
// the XOR being the logic operation named for this block.
//
// Interface: with en high, a `start` pulse latches `data` and launches the
// pulses in the next cycle. `done` is high for the one cycle after p_n1
// ends; `busy` stays high until the delay chain has emptied, after which a
// new start is accepted. Timing, start sampled at edge 0: p1 high in cycle
// 1, pn in cycles 2..2^N+1, done in cycle 2^N+2; busy ends 2^N+1 cycles
// later. The split of the word and the drain wait are choices of this RTL.
module pm_tcm #(
  parameter int unsigned ROWS = kan_pkg::M_IN * (kan_pkg::G + kan_pkg::K),
  parameter int unsigned N    = kan_pkg::N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           start,
  input  logic [2*N-1:0] data [ROWS],
  // delay chain
  output logic           go,
  input  logic           tap1,
  input  logic           tapn1,
  input  logic           chain_active,
  // to TG-MUXs and buffer array
  output logic [N-1:0]   a [ROWS],
  output logic [N-1:0]   b [ROWS],
  output logic           p1,
  output logic           pn,
  output logic           p_n1,
  output logic           busy,
  output logic           done
);
  logic accept;

  assign accept = en && start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      go <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        a[r] <= '0;
        b[r] <= '0;
      end
    end else if (accept) begin
      go <= 1'b1;
      for (int r = 0; r < ROWS; r++) begin
        a[r] <= data[r][N-1:0];
        b[r] <= data[r][2*N-1:N];
      end
    end else if (go && tapn1) begin
      go <= 1'b0;
    end
  end

  always_comb begin
    p_n1 = go & ~tapn1;
    p1   = go & ~tap1;
    pn   = p1 ^ p_n1;
    done = go & tapn1;
    busy = go | chain_active;
  end

  // W_P1 and W_PN never overlap, and both lie inside W_P(N+1).
  a_pulse_nest: assert property (@(posedge clk) disable iff (!rst_n)
    !(p1 && pn) && ((p1 || pn) == p_n1));

endmodule
