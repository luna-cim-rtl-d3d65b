// dc_adder: combines the two partial products of the divide-and-conquer
// multiplier, out = (z_msb << 2) + z_lsb, with 3 half adders and 3 full adders.
//
// Because Z_MSB is shifted left by two, bits 1:0 of the result are Z_LSB[1:0]
// and need no adder. Bit 2 adds two bits (half adder), bits 3..5 add Z_MSB,
// Z_LSB and a carry (full adders), and bits 6 and 7 add only Z_MSB and a carry
// (half adders). This is the 3 HA + 3 FA arrangement the paper draws. The carry
// out of bit 7 is dropped: the largest 4b x 4b product, 225, fits in 8 bits.
// out[1:0] are wired straight from z_lsb[1:0] on purpose, and the bit-7
// carry is left unconnected. Purely combinational.
module dc_adder (
  input  logic [5:0] z_msb,
  input  logic [5:0] z_lsb,
  output logic [7:0] out
);
  logic c2, c3, c4, c5, c6, c7_unused;

  assign out[1:0] = z_lsb[1:0];

  half_adder u_b2 (.a(z_msb[0]), .b(z_lsb[2]),              .s(out[2]), .co(c2));
  full_adder u_b3 (.a(z_msb[1]), .b(z_lsb[3]), .ci(c2),     .s(out[3]), .co(c3));
  full_adder u_b4 (.a(z_msb[2]), .b(z_lsb[4]), .ci(c3),     .s(out[4]), .co(c4));
  full_adder u_b5 (.a(z_msb[3]), .b(z_lsb[5]), .ci(c4),     .s(out[5]), .co(c5));
  half_adder u_b6 (.a(z_msb[4]), .b(c5),                    .s(out[6]), .co(c6));
  half_adder u_b7 (.a(z_msb[5]), .b(c6),                    .s(out[7]), .co(c7_unused));
endmodule
