// column_decoder: column enables for the SRAM column write drivers.
// With all_cols high every column is enabled (row access); otherwise only the
// addressed column is (single-bit access). Which columns the decoder selects is
// this design's choice. Combinational.
module column_decoder #(
  parameter int unsigned N = 8
) (
  input  logic                 all_cols,
  input  logic [$clog2(N)-1:0] addr,
  output logic [N-1:0]         col_sel
);
  always_comb begin
    col_sel = '0;
    if (all_cols)              col_sel = '1;
    else if (int'(addr) < N)   col_sel[addr] = 1'b1;
  end
endmodule
