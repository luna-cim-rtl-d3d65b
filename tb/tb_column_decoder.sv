// tb_column_decoder: single-column selection for every address, and all
// columns when all_cols is high.
`timescale 1ns/1ps
module tb_column_decoder;
  logic       all_cols;
  logic [2:0] addr;
  logic [7:0] col_sel;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  column_decoder #(.N(8)) dut (.all_cols, .addr, .col_sel);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < 8; a++) begin
        all_cols = 1'(m); addr = 3'(a);
        #1;
        checks++;
        if (col_sel !== (m ? 8'hff : 8'(1 << a))) begin
          failures++;
          $display("FAIL all_cols=%0d addr=%0d col_sel=%b", m, a, col_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
