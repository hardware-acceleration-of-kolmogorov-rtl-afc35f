// sh_lut: Sharable-Hemi LUT.
//
// Because the quantisation grid is aligned to the knot grid, every B_i(X)
// is the same cubic (order K) bump shifted by whole intervals, so one table
// serves them all; because the bump is symmetric, only its first half is
// stored. The full bump spans (K+1) intervals of 2^LD codes; the table holds
// the first (K+1)/2 * 2^LD = 2 * 2^LD entries (A0 .. A_{2^LD*2-1}). The
// mirrored half is produced by wiring alone in l2g_mux_demux.
//
// The table is programmable (one write port, synchronous write) so that the
// B(X) precision or shape can be changed at run time. All entries are read
// in parallel, as the TG-MUXs of every input tap them directly. Reset
// clears the table.
module sh_lut #(
  parameter int unsigned LD = kan_pkg::LD,
  parameter int unsigned K  = kan_pkg::K,
  parameter int unsigned BW = 2 * kan_pkg::N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [$clog2(((K+1)/2)*(2**LD))-1:0] waddr,
  input  logic [BW-1:0]        wdata,
  output logic [BW-1:0]        value [((K+1)/2)*(2**LD)]
);
  localparam int unsigned DEPTH = ((K+1)/2) * (2**LD);

  logic [BW-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign value = mem;

endmodule
