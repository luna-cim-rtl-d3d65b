// luna_cim_array: 8x8 SRAM array with four LUT-based multiplier units placed
// between its rows (the top level of the design).
//
// Row 2i holds the operands of unit i, {W_i<3:0>, Y_i<3:0>}, and row 2i+1
// receives its product OUT_i<7:0>. Each unit reads its operand row directly
// from the cells, so all N_UNITS multiplications run in parallel without any
// read access; a one-cycle `compute` strobe writes every unit's product into
// its OUT row at the next clock edge, and `done` follows one cycle after that.
// The row/column placement follows the paper's array drawing; the compute
// strobe and its timing are this design's choices.
//
// Host port (this design's choice of protocol): with acc_en high for one cycle
//   acc_we=1, bit_mode=0 : write wdata to row row_addr
//   acc_we=1, bit_mode=1 : write wdata[col_addr] to the cell (row_addr, col_addr)
//   acc_we=0             : read row row_addr; rdata is valid one cycle later
//                          with rvalid
// LUT programming: lut_we writes {W x 11 bits 5:1, zero cell} of unit
// lut_unit. W x 11 must be 3W of the weight stored in that unit's row.
// If a host write targets an OUT row in the same cycle as compute, the
// product wins. The units read only the operand rows; the OUT rows are read
// through the host port, so the odd-row cell taps are unused here.
module luna_cim_array
  import luna_pkg::*;
#(
  parameter int unsigned N_UNITS = 4,
  localparam int unsigned ROWS   = 2 * N_UNITS,
  localparam int unsigned RA     = $clog2(ROWS),
  localparam int unsigned CA     = $clog2(ROW_BITS),
  localparam int unsigned UA     = (N_UNITS > 1) ? $clog2(N_UNITS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host access
  input  logic                acc_en,
  input  logic                acc_we,
  input  logic                bit_mode,
  input  logic [RA-1:0]       row_addr,
  input  logic [CA-1:0]       col_addr,
  input  logic [ROW_BITS-1:0] wdata,
  output logic [ROW_BITS-1:0] rdata,
  output logic                rvalid,
  // compute
  input  logic                compute,
  output logic                done,
  // LUT programming
  input  logic                lut_we,
  input  logic [UA-1:0]       lut_unit,
  input  lut_cells_t          lut_wdata
);
  logic [ROWS-1:0]                wl;
  logic [ROW_BITS-1:0]            col_sel;
  logic [ROWS-1:0]                cim_we;
  logic [ROWS-1:0][ROW_BITS-1:0]  cim_wdata;
  logic [ROWS-1:0][ROW_BITS-1:0]  cells;

  row_decoder #(.N(ROWS)) u_row_dec (
    .en(acc_en), .addr(row_addr), .wl(wl));

  column_decoder #(.N(ROW_BITS)) u_col_dec (
    .all_cols(!bit_mode), .addr(col_addr), .col_sel(col_sel));

  sram_array #(.ROWS(ROWS), .COLS(ROW_BITS)) u_array (
    .clk, .rst_n,
    .wl, .col_sel,
    .we(acc_en && acc_we), .re(acc_en && !acc_we),
    .wdata, .rdata, .rvalid,
    .cim_we, .cim_wdata, .cells);

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    operand_row_t      op;
    logic [P_BITS-1:0] prod;

    assign op = operand_row_t'(cells[2*u]);

    luna_cim_unit u_unit (
      .clk, .rst_n,
      .lut_we   (lut_we && (int'(lut_unit) == u)),
      .lut_wdata(lut_wdata),
      .w        (op.w),
      .y        (op.y),
      .out      (prod));

    assign cim_we[2*u]      = 1'b0;
    assign cim_wdata[2*u]   = '0;
    assign cim_we[2*u+1]    = compute;
    assign cim_wdata[2*u+1] = prod;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= compute;
  end
endmodule
