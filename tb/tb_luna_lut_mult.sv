// tb_luna_lut_mult: exhaustive 16 x 16 check of the divide-and-conquer LUT
// multiplier programmed with the correct table (zero cell 0, W x 01 = W,
// W x 11 MSBs = 3W >> 1) against the integer product, the four transient
// vectors of the paper's 8x8 array experiment (W = 0110 with Y = 1010, 1011,
// 0011, 1100 give 00111100, 01000010, 00010010, 01001000), and a
// deliberately different table to show that the result is read from the
// stored cells. A watchdog ends the run with a failure if it hangs.
`timescale 1ns/1ps
module tb_luna_lut_mult;
  logic       zero_cell;
  logic [3:0] w01, y;
  logic [4:0] w11_msb;
  logic [7:0] out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  luna_lut_mult dut (.zero_cell, .w01, .w11_msb, .y, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_w(input int w);
    zero_cell = 1'b0;
    w01       = 4'(w);
    w11_msb   = 5'((3 * w) >> 1);
  endtask

  task automatic expect_out(input logic [7:0] exp, input string what);
    #1;
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: w=%0d y=%0d out=%b exp=%b", what, w01, y, out, exp);
    end
  endtask

  initial begin
    logic [3:0] fig_y [4] = '{4'b1010, 4'b1011, 4'b0011, 4'b1100};
    logic [7:0] fig_o [4] = '{8'b00111100, 8'b01000010, 8'b00010010, 8'b01001000};
    for (int w = 0; w < 16; w++) begin
      program_w(w);
      for (int v = 0; v < 16; v++) begin
        y = 4'(v);
        expect_out(8'(w * v), "exhaustive");
      end
    end
    program_w(6);
    for (int i = 0; i < 4; i++) begin
      y = fig_y[i];
      expect_out(fig_o[i], "transient vector");
    end
    // A different stored table: entries W x 00 = 6'b111111, W x 11 = {w11, W0}.
    zero_cell = 1'b1; w01 = 4'd5; w11_msb = 5'b10101;
    for (int v = 0; v < 16; v++) begin
      int e [4];
      e[0] = 63; e[1] = 5; e[2] = 10; e[3] = (5'b10101 << 1) | 1;
      y = 4'(v);
      expect_out(8'((e[v >> 2] * 4 + e[v & 3]) % 256), "reprogrammed table");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
