// row_decoder: binary row address to one-hot word lines for the SRAM array.
// With en low no word line is raised. Combinational.
module row_decoder #(
  parameter int unsigned N = 8
) (
  input  logic                 en,
  input  logic [$clog2(N)-1:0] addr,
  output logic [N-1:0]         wl
);
  always_comb begin
    wl = '0;
    if (en && (int'(addr) < N)) wl[addr] = 1'b1;
  end
endmodule
