// tb_sram_array: random host row writes, masked (single column) writes, reads
// and compute-tap row writes against a reference copy of the array. Checks
// that read data arrives exactly one clock after the read with rvalid, that
// the cell taps always match the reference, and that a compute write wins over
// a host write to the same row. A watchdog ends the run with a failure.
`timescale 1ns/1ps
module tb_sram_array;
  localparam int ROWS = 8, COLS = 8;
  logic clk = 0, rst_n = 0;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0] col_sel = '0, wdata = '0, rdata;
  logic we = 0, re = 0, rvalid;
  logic [ROWS-1:0] cim_we = '0;
  logic [ROWS-1:0][COLS-1:0] cim_wdata = '0, cells;
  logic [ROWS-1:0][COLS-1:0] ref_cells;
  int checks = 0, failures = 0, collisions = 0, reads = 0;
  always #5 clk = ~clk;

  sram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [COLS-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    int r;
    logic [COLS-1:0] exp_rd;
    logic pending;
    ref_cells = '0;
    pending = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      // drive a random operation
      r = $urandom_range(0, ROWS - 1);
      wl = '0; we = 0; re = 0; cim_we = '0;
      case ($urandom_range(0, 3))
        0: begin wl[r] = 1; we = 1; col_sel = '1; wdata = COLS'($urandom); end
        1: begin wl[r] = 1; we = 1; col_sel = '0; col_sel[$urandom_range(0, COLS-1)] = 1;
                 wdata = COLS'($urandom); end
        2: begin wl[r] = 1; re = 1; end
        default: begin
          cim_we = ROWS'($urandom);
          cim_wdata = {ROWS{COLS'($urandom)}};
          for (int k = 0; k < ROWS; k++) cim_wdata[k] = COLS'($urandom);
          if ($urandom_range(0, 1) == 1) begin   // collide with a host write
            wl[r] = 1; we = 1; col_sel = '1; wdata = COLS'($urandom);
            if (cim_we[r]) collisions++;
          end
        end
      endcase
      @(posedge clk);
      // read data of the previous cycle's read
      checks++;
      if (rvalid !== pending) begin
        failures++;
        $display("FAIL rvalid=%0d expected %0d", rvalid, pending);
      end
      if (pending) chk(rdata, exp_rd, "read data");
      pending = re && !we;
      if (pending) begin exp_rd = ref_cells[r]; reads++; end
      // reference update
      for (int k = 0; k < ROWS; k++) begin
        if (cim_we[k]) ref_cells[k] = cim_wdata[k];
        else if (we && wl[k])
          for (int c = 0; c < COLS; c++) if (col_sel[c]) ref_cells[k][c] = wdata[c];
      end
      @(negedge clk);
      for (int k = 0; k < ROWS; k++) chk(cells[k], ref_cells[k], "cell taps");
    end
    checks++;
    if (collisions == 0 || reads == 0) begin
      failures++;
      $display("FAIL coverage collisions=%0d reads=%0d", collisions, reads);
    end
    $display("collisions=%0d reads=%0d", collisions, reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
