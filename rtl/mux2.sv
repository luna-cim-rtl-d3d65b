// mux2: WIDTH-bit 2:1 multiplexer, the building block of the LUT select tree.
// out = sel ? in1 : in0, purely combinational.
module mux2 #(
  parameter int unsigned WIDTH = 6
) (
  input  logic [WIDTH-1:0] in0,
  input  logic [WIDTH-1:0] in1,
  input  logic             sel,
  output logic [WIDTH-1:0] out
);
  assign out = sel ? in1 : in0;
endmodule
