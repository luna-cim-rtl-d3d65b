// tb_row_decoder: every address with the enable high raises exactly that
// word line; with the enable low no word line is raised.
`timescale 1ns/1ps
module tb_row_decoder;
  logic       en;
  logic [2:0] addr;
  logic [7:0] wl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  row_decoder #(.N(8)) dut (.en, .addr, .wl);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 8; a++) begin
        en = 1'(e); addr = 3'(a);
        #1;
        checks++;
        if (wl !== (e ? 8'(1 << a) : 8'h00)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d wl=%b", e, a, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
