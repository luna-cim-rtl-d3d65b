// luna_lut_mult: optimized divide-and-conquer LUT multiplier, 4b W x 4b Y.
//
// W x Y = (W x Y[3:2]) << 2 + (W x Y[1:0]). Both 4b x 2b partial products are
// looked up, not computed: a 4:1 mux per side picks one of four 6-bit entries.
// The four entries are formed from only 10 stored bits, as the paper shows:
//   W x 00 = the single stored '0' bit repeated on all six bits
//   W x 01 = {00, W}                  (the four stored W bits)
//   W x 10 = {0, W, 0}                (W x 01 shifted, no extra storage)
//   W x 11 = {w11_msb[4:0], W[0]}     (five stored MSBs of 3W; bit 0 = W0)
// Both sides share the same stored bits. dc_adder then forms the product.
// The stored bits are inputs: the cells themselves live outside (the W cells
// in the array row, the other six in luna_cim_unit). Purely combinational.
module luna_lut_mult
  import luna_pkg::*;
(
  input  logic              zero_cell,  // stored '0'
  input  logic [W_BITS-1:0] w01,        // stored W (entry W x 01)
  input  logic [4:0]        w11_msb,    // stored bits 5:1 of W x 11
  input  logic [Y_BITS-1:0] y,
  output logic [P_BITS-1:0] out
);
  logic [Z_BITS-1:0] e00, e01, e10, e11;
  logic [Z_BITS-1:0] z_msb, z_lsb;

  assign e00 = {Z_BITS{zero_cell}};
  assign e01 = {2'b00, w01};
  assign e10 = {1'b0, w01, 1'b0};
  assign e11 = {w11_msb, w01[0]};

  lut_mux4 #(.WIDTH(Z_BITS)) u_msb_side (
    .in0(e00), .in1(e01), .in2(e10), .in3(e11), .sel(y[3:2]), .out(z_msb));
  lut_mux4 #(.WIDTH(Z_BITS)) u_lsb_side (
    .in0(e00), .in1(e01), .in2(e10), .in3(e11), .sel(y[1:0]), .out(z_lsb));

  dc_adder u_add (.z_msb(z_msb), .z_lsb(z_lsb), .out(out));
endmodule
