// tb_max_star -- checks max*(a,b) for every pair of 9-bit inputs with 2
// fractional bits (setting S1), and random pairs with 3 fractional bits
// (setting S3), against max(a,b) + round(2^f ln(1 + e^-|a-b|/2^f)), saturated.
module tb_max_star;
  import tb_ref_pkg::*;
  logic signed [8:0]  a2, b2, y2;
  logic signed [10:0] a3, b3, y3;
  int checks = 0, failures = 0;

  max_star #(.W(9),  .FRAC(2)) dut2 (.a(a2), .b(b2), .y(y2));
  max_star #(.W(11), .FRAC(3)) dut3 (.a(a3), .b(b3), .y(y3));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = -256; x < 256; x++)
      for (int z = -256; z < 256; z += 3) begin
        a2 = 9'(x); b2 = 9'(z);
        #1;
        checks++;
        if (int'(y2) != ref_maxstar(x, z, 9, 2)) begin
          failures++;
          if (failures < 10) $display("FAIL f2 %0d %0d -> %0d exp %0d", x, z, y2, ref_maxstar(x, z, 9, 2));
        end
      end
    for (int i = 0; i < 20000; i++) begin
      int x, z;
      x = sext($urandom, 11);
      z = (i % 2) ? sext($urandom, 11) : sat(x + sext($urandom, 6), 11);
      a3 = 11'(x); b3 = 11'(z);
      #1;
      checks++;
      if (int'(y3) != ref_maxstar(x, z, 11, 3)) begin
        failures++;
        if (failures < 10) $display("FAIL f3 %0d %0d -> %0d exp %0d", x, z, y3, ref_maxstar(x, z, 11, 3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
