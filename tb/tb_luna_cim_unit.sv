// tb_luna_cim_unit: checks the unit's LUT cells and product. After reset the
// local cells are zero, so W x 11 reads as {00000, W0}. The test then programs
// 3W for each weight, checks all 16 inputs against W x Y, and checks that the
// cells hold their value while lut_we is low. A watchdog ends the run with a
// failure if it hangs.
`timescale 1ns/1ps
module tb_luna_cim_unit;
  import luna_pkg::*;
  logic       clk = 0, rst_n = 0, lut_we = 0;
  lut_cells_t lut_wdata = '0;
  logic [3:0] w = '0, y = '0;
  logic [7:0] out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  luna_cim_unit dut (.clk, .rst_n, .lut_we, .lut_wdata, .w, .y, .out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [7:0] exp, input string what);
    #1;
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: w=%0d y=%0d out=%0d exp=%0d", what, w, y, out, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // after reset: zero cell 0, W x 11 MSBs 0
    w = 4'd7; y = 4'b1111;            // entries: W x 11 = {00000,1} = 1
    check(8'(1 * 4 + 1), "after reset");
    y = 4'b0110;                      // W x 01 << 2 + W x 10
    check(8'(7 * 4 + 14), "after reset");
    for (int wi = 0; wi < 16; wi++) begin
      @(negedge clk);
      lut_we = 1;
      lut_wdata.zero    = 1'b0;
      lut_wdata.w11_msb = 5'((3 * wi) >> 1);
      @(negedge clk);
      lut_we = 0;
      lut_wdata = '1;                 // must be ignored while lut_we is low
      w = 4'(wi);
      for (int v = 0; v < 16; v++) begin
        y = 4'(v);
        check(8'(wi * v), "programmed");
      end
    end
    @(negedge clk);
    @(negedge clk);
    w = 4'd15; y = 4'd15;
    check(8'd225, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
