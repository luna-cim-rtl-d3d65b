// tb_lut_mux4: checks the 4:1, 6-bit LUT select against a direct case
// statement for every select value over random entries. A watchdog ends the
// run with a failure if it does not finish in time.
`timescale 1ns/1ps
module tb_lut_mux4;
  logic [5:0] in0, in1, in2, in3, out;
  logic [1:0] sel;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lut_mux4 #(.WIDTH(6)) dut (.in0, .in1, .in2, .in3, .sel, .out);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [5:0] exp;
    for (int i = 0; i < 500; i++) begin
      in0 = 6'($urandom); in1 = 6'($urandom); in2 = 6'($urandom); in3 = 6'($urandom);
      sel = 2'(i);
      #1;
      case (sel)
        2'd0: exp = in0;
        2'd1: exp = in1;
        2'd2: exp = in2;
        default: exp = in3;
      endcase
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL sel=%0d out=%h exp=%h", sel, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
