// weight_lut: the 8 x 256 bit weighting-function lookup table of an engine.
//
// The address is the rounded squared distance a between a hit and a cell's
// intersection; the data is the weight w(a) = round(255 * exp(-a/32)), a
// Gaussian in the distance.  The table is a ROM filled at elaboration by
// retina_pkg::weight_table(); the paper fixes the table size (256 entries
// of 8 bits) and that the function is common to all engines, while the
// Gaussian width is this design's choice.
//
// Interface: addr in, weight out one clock later (registered read, as a
// block ROM would give).
module weight_lut
  import retina_pkg::*;
(
  input  logic          clk,
  input  logic [7:0]    addr,
  output logic [WW-1:0] weight
);

  localparam logic [255:0][WW-1:0] TABLE = weight_table();

  always_ff @(posedge clk) weight <= TABLE[addr];

endmodule
