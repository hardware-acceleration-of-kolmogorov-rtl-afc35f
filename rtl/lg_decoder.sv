// lg_decoder: local-global decoder of one input X.
//
// PowerGap makes every knot interval 2^LD input codes wide, so the input
// splits into local information X[LD-1:0] (position inside an interval)
// and global information X[XW-1:LD] (which interval). Instead of one
// XW-bit decoder the block holds an LD-bit local decoder and an
// (XW-LD)-bit global decoder, each producing one-hot select lines for the
// TG-MUXs and TG-DEMUXs of the L2G-mux-demux.
//
// Inputs above the aligned range 0..G*2^LD-1 are not representable by the
// quantiser; this block saturates them to G*2^LD-1 (a design choice) and
// flags it on `clipped`. Purely combinational.
module lg_decoder #(
  parameter int unsigned XW = kan_pkg::XW,
  parameter int unsigned G  = kan_pkg::G,
  parameter int unsigned LD = kan_pkg::LD
) (
  input  logic [XW-1:0]    x,
  output logic [2**LD-1:0] local_sel,   // one-hot, bit l = X[LD-1:0] == l
  output logic [G-1:0]     global_sel,  // one-hot, bit g = X[XW-1:LD] == g
  output logic             clipped
);
  localparam int unsigned XMAX = G * (2**LD) - 1;

  logic [XW-1:0]    xs;
  logic [LD-1:0]    xl;
  logic [XW-LD-1:0] xg;

  always_comb begin
    clipped = (int'(x) > XMAX);
    xs      = clipped ? XW'(XMAX) : x;
    xl      = xs[LD-1:0];
    xg      = xs[XW-1:LD];
    for (int l = 0; l < 2**LD; l++) local_sel[l] = (int'(xl) == l);
    for (int g = 0; g < G; g++)     global_sel[g] = (int'(xg) == g);
  end

endmodule
