// sram_array: ROWS x COLS SRAM bit-cell array with a host port and in-memory
// compute taps.
//
// Host port: the row decoder raises one word line (wl). On a write (we) the
// cells of that row whose column is enabled (col_sel) take wdata. On a read
// (re) the whole row is sensed by the COLS sense amplifiers and appears on
// rdata one clock later with rvalid.
// Compute taps: every cell value is visible on `cells`, so the units wired
// between rows read their operands in parallel without a host access, and
// each row can be written in one cycle by a unit (cim_we/cim_wdata). A unit
// write takes priority over a host write to the same row in the same cycle.
//
// The 6T cells, bitline conditioning and sense amplifiers are analog in
// silicon; here each cell is a flip-flop and the sensed row is registered.
// The one-cycle read latency, reset to zero and write priority are this
// design's choices.
module sram_array #(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host port
  input  logic [ROWS-1:0]            wl,
  input  logic [COLS-1:0]            col_sel,
  input  logic                       we,
  input  logic                       re,
  input  logic [COLS-1:0]            wdata,
  output logic [COLS-1:0]            rdata,
  output logic                       rvalid,
  // compute taps
  input  logic [ROWS-1:0]            cim_we,
  input  logic [ROWS-1:0][COLS-1:0]  cim_wdata,
  output logic [ROWS-1:0][COLS-1:0]  cells
);
  logic [COLS-1:0] sensed;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cells <= '0;
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        if (cim_we[r]) begin
          cells[r] <= cim_wdata[r];
        end else if (we && wl[r]) begin
          for (int c = 0; c < COLS; c++)
            if (col_sel[c]) cells[r][c] <= wdata[c];
        end
      end
    end
  end

  // Bitline read: the selected row drives the bitlines, the others do not.
  always_comb begin
    sensed = '0;
    for (int r = 0; r < ROWS; r++)
      if (wl[r]) sensed |= cells[r];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= re && !we;
      if (re && !we) rdata <= sensed;
    end
  end

  // At most one word line may be raised at a time.
  a_wl_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(wl))
    else $error("sram_array: more than one word line raised");
endmodule
