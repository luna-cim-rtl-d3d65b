// lut_mux4: 4:1 select of one 6-bit LUT entry by a 2-bit slice of the input.
//
// Each half of the divide-and-conquer multiplier has four precomputed partial
// products, W x 00, W x 01, W x 10 and W x 11; the 2-bit slice of Y picks one.
// As in the paper the 4:1 mux is three 2:1 muxes of WIDTH bits: two in the
// first level driven by sel[0], one in the second level driven by sel[1]
// (which select bit drives which level is this design's choice).
// Purely combinational, no clock.
module lut_mux4 #(
  parameter int unsigned WIDTH = 6
) (
  input  logic [WIDTH-1:0] in0,   // W x 00
  input  logic [WIDTH-1:0] in1,   // W x 01
  input  logic [WIDTH-1:0] in2,   // W x 10
  input  logic [WIDTH-1:0] in3,   // W x 11
  input  logic [1:0]       sel,
  output logic [WIDTH-1:0] out
);
  logic [WIDTH-1:0] lo, hi;

  mux2 #(.WIDTH(WIDTH)) u_lo  (.in0(in0), .in1(in1), .sel(sel[0]), .out(lo));
  mux2 #(.WIDTH(WIDTH)) u_hi  (.in0(in2), .in1(in3), .sel(sel[0]), .out(hi));
  mux2 #(.WIDTH(WIDTH)) u_out (.in0(lo),  .in1(hi),  .sel(sel[1]), .out(out));
endmodule
