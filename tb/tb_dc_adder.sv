// tb_dc_adder: exhaustive check of the partial-product adder,
// out = ((z_msb << 2) + z_lsb) mod 256, over all 64 x 64 input pairs, and that
// every sum of two 4b x 2b partial products that can occur (at most 225)
// is exact. A watchdog ends the run with a failure if it hangs.
`timescale 1ns/1ps
module tb_dc_adder;
  logic [5:0] z_msb, z_lsb;
  logic [7:0] out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dc_adder dut (.z_msb, .z_lsb, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp;
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 64; b++) begin
        z_msb = 6'(a); z_lsb = 6'(b);
        #1;
        exp = (a * 4 + b) % 256;
        checks++;
        if (out !== 8'(exp)) begin
          failures++;
          $display("FAIL z_msb=%0d z_lsb=%0d out=%0d exp=%0d", a, b, out, exp);
        end
      end
    // partial products that a 4b x 4b multiply produces never overflow 8 bits
    for (int w = 0; w < 16; w++)
      for (int y = 0; y < 16; y++) begin
        z_msb = 6'(w * (y >> 2)); z_lsb = 6'(w * (y & 3));
        #1;
        checks++;
        if (int'(out) != w * y) begin
          failures++;
          $display("FAIL w=%0d y=%0d out=%0d", w, y, out);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
