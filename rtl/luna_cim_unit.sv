// luna_cim_unit: one compute-in-memory unit placed between two SRAM rows.
//
// The unit reads W and Y from the operand row above it and presents the 8-bit
// product W x Y for the row below. It owns the six LUT cells that are not part
// of the array row: the '0' cell of entry W x 00 and the five MSBs of W x 11
// (= 3W). The four W x 01 cells are the W cells of the row above, so the unit
// uses the paper's 10 stored bits in total. The six local cells are written by
// the host through lut_we/lut_wdata (the host precomputes 3W); this write port
// and the synchronous reset-to-zero are this design's choices.
//
// Timing: lut_wdata is captured at the rising edge with lut_we high; the
// product is combinational from w, y and the stored cells.
module luna_cim_unit
  import luna_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lut_we,
  input  lut_cells_t        lut_wdata,
  input  logic [W_BITS-1:0] w,
  input  logic [Y_BITS-1:0] y,
  output logic [P_BITS-1:0] out
);
  lut_cells_t cells;

  always_ff @(posedge clk) begin
    if (!rst_n)      cells <= '0;
    else if (lut_we) cells <= lut_wdata;
  end

  luna_lut_mult u_mult (
    .zero_cell(cells.zero),
    .w01      (w),
    .w11_msb  (cells.w11_msb),
    .y        (y),
    .out      (out)
  );
endmodule
