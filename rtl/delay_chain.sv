// delay_chain: unit-delay chain of the TM-DV-IG.
//
// A line of 2^N+1 unit delay stages. The level `go` from the pulse
// modulation logic enters the first stage; tap1 is go delayed by one unit
// and tapn1 is go delayed by 2^N+1 units. The pulse logic combines these
// with go itself to form pulses of exactly 1 and 2^N+1 units. `active` is
// high while any stage still holds part of the pulse, so the next pulse is
// not launched before the chain has settled.
//
// The unit delay is one period of `clk`: this RTL models the analog delay
// cells as flip-flops clocked at the unit-pulse rate, which makes pulse
// widths exact multiples of the unit width W_P1.
module delay_chain #(
  parameter int unsigned N = kan_pkg::N
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic tap1,     // go delayed by 1 unit
  output logic tapn1,    // go delayed by 2^N+1 units
  output logic active
);
  localparam int unsigned STAGES = 2**N + 1;

  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[STAGES-2:0], go};
  end

  assign tap1   = sr[0];
  assign tapn1  = sr[STAGES-1];
  assign active = |sr;

endmodule
