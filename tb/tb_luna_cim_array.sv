// tb_luna_cim_array: end-to-end test of the 8x8 array with four multiplier
// units, at the design's default size.
//
// 1. The paper's transient experiment: W = 0110 in every operand row and the
//    four inputs 1010, 1011, 0011, 1100 in the four rows; one compute must
//    give 00111100, 01000010, 00010010, 01001000 in the four OUT rows. The
//    same four inputs are then applied one after another to unit 0.
// 2. All 256 (W, Y) pairs, four at a time, each unit programmed with 3W,
//    operands written with row writes or single-bit writes, products read
//    back through the host read port and compared with W x Y.
// 3. A host write to an OUT row in the same cycle as compute (the product
//    must win), and reads of operand rows (must be unchanged by compute).
// It checks the one-cycle read latency and that done follows compute by one
// cycle, counts how often each mechanism ran, and fails for one that never did.
`timescale 1ns/1ps
module tb_luna_cim_array;
  import luna_pkg::*;
  logic clk = 0, rst_n = 0;
  logic acc_en = 0, acc_we = 0, bit_mode = 0;
  logic [2:0] row_addr = '0, col_addr = '0;
  logic [7:0] wdata = '0, rdata;
  logic rvalid, compute = 0, done;
  logic lut_we = 0;
  logic [1:0] lut_unit = '0;
  lut_cells_t lut_wdata = '0;
  int checks = 0, failures = 0;
  int n_row_wr = 0, n_bit_wr = 0, n_rd = 0, n_lut = 0, n_compute = 0, n_collide = 0;
  always #5 clk = ~clk;

  luna_cim_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [7:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got=%b exp=%b", what, got, exp);
    end
  endtask

  task automatic write_row(input int r, input logic [7:0] d);
    acc_en = 1; acc_we = 1; bit_mode = 0; row_addr = 3'(r); wdata = d;
    @(negedge clk);
    acc_en = 0; acc_we = 0;
    n_row_wr++;
  endtask

  task automatic write_bit(input int r, input int c, input logic b);
    acc_en = 1; acc_we = 1; bit_mode = 1; row_addr = 3'(r); col_addr = 3'(c);
    wdata = $urandom(); wdata[c] = b;      // other data bits must be ignored
    @(negedge clk);
    acc_en = 0; acc_we = 0; bit_mode = 0;
    n_bit_wr++;
  endtask

  task automatic read_row(input int r, output logic [7:0] d);
    acc_en = 1; acc_we = 0; row_addr = 3'(r);
    @(negedge clk);
    acc_en = 0;
    checks++;
    if (rvalid !== 1'b1) begin failures++; $display("FAIL rvalid not one cycle after read"); end
    d = rdata;
    n_rd++;
  endtask

  task automatic program_lut(input int u, input int w);
    lut_we = 1; lut_unit = 2'(u);
    lut_wdata.zero = 1'b0; lut_wdata.w11_msb = 5'((3 * w) >> 1);
    @(negedge clk);
    lut_we = 0;
    n_lut++;
  endtask

  task automatic do_compute();
    compute = 1;
    @(negedge clk);
    compute = 0;
    checks++;
    if (done !== 1'b1) begin failures++; $display("FAIL done not one cycle after compute"); end
    @(negedge clk);
    checks++;
    if (done !== 1'b0) begin failures++; $display("FAIL done longer than one cycle"); end
    n_compute++;
  endtask

  initial begin
    logic [3:0] fig_y [4] = '{4'b1010, 4'b1011, 4'b0011, 4'b1100};
    logic [7:0] fig_o [4] = '{8'b00111100, 8'b01000010, 8'b00010010, 8'b01001000};
    logic [7:0] d;
    int ws [4], ys [4];

    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1a. transient experiment, four units in parallel
    for (int u = 0; u < 4; u++) begin
      program_lut(u, 6);
      write_row(2 * u, {4'b0110, fig_y[u]});
    end
    do_compute();
    for (int u = 0; u < 4; u++) begin
      read_row(2 * u + 1, d);
      chk(d, fig_o[u], $sformatf("transient vector, unit %0d", u));
    end
    // 1b. the same inputs applied one after another to unit 0
    for (int i = 0; i < 4; i++) begin
      write_row(0, {4'b0110, fig_y[i]});
      do_compute();
      read_row(1, d);
      chk(d, fig_o[i], $sformatf("transient vector %0d, sequential", i));
    end

    // 2. all 256 pairs, four per compute
    for (int p = 0; p < 256; p += 4) begin
      for (int u = 0; u < 4; u++) begin
        ws[u] = (p + u) >> 4;
        ys[u] = (p + u) & 15;
        program_lut(u, ws[u]);
        if (((p >> 2) % 2) == 0) begin
          write_row(2 * u, {4'(ws[u]), 4'(ys[u])});
        end else begin
          for (int c = 0; c < 8; c++) write_bit(2 * u, c, 1'({4'(ws[u]), 4'(ys[u])} >> c));
        end
      end
      do_compute();
      for (int u = 0; u < 4; u++) begin
        read_row(2 * u + 1, d);
        chk(d, 8'(ws[u] * ys[u]), $sformatf("product W=%0d Y=%0d", ws[u], ys[u]));
        read_row(2 * u, d);
        chk(d, {4'(ws[u]), 4'(ys[u])}, "operand row unchanged");
      end
    end

    // 3. host write to an OUT row collides with compute: the product wins
    program_lut(2, 9);
    write_row(4, {4'd9, 4'd13});
    acc_en = 1; acc_we = 1; bit_mode = 0; row_addr = 3'd5; wdata = 8'hA5;
    compute = 1;
    @(negedge clk);
    acc_en = 0; acc_we = 0; compute = 0;
    n_collide++; n_compute++;
    read_row(5, d);
    chk(d, 8'(9 * 13), "compute wins over host write");
    // and a host write to an OUT row without compute sticks
    write_row(5, 8'h3C);
    read_row(5, d);
    chk(d, 8'h3C, "host write to OUT row");

    $display("row_writes=%0d bit_writes=%0d reads=%0d lut_programs=%0d computes=%0d collisions=%0d",
             n_row_wr, n_bit_wr, n_rd, n_lut, n_compute, n_collide);
    checks++;
    if (n_row_wr == 0 || n_bit_wr == 0 || n_rd == 0 || n_lut == 0 || n_compute == 0 || n_collide == 0) begin
      failures++;
      $display("FAIL a mechanism never ran");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
