// tb_qc_code_rom -- checks the layer table for the default lifting
// (z1 = 32, z2 = 512) and a small one (z1 = 4, z2 = 16): every layer has d
// distinct column sets, column set c belongs to base column c / z1 and each
// layer of base row i touches base column j exactly B(i,j) times; across the
// z1 layers of a base row every column set of base column j is touched
// exactly B(i,j) times (the first lifting is a sum of permutations); all
// offsets are below z2.
module tb_qc_code_rom;
  localparam int B [7][11] = '{
    '{1,0,0,0,0,0,1,0,3,0,1}, '{0,1,2,0,0,0,0,0,0,2,1}, '{2,1,0,0,1,1,0,0,0,0,1},
    '{0,1,0,3,0,0,0,0,0,2,0}, '{2,0,0,0,0,0,0,1,0,3,0}, '{3,0,0,2,0,0,1,0,0,0,0},
    '{1,0,0,1,1,0,0,0,1,2,0}};
  int checks = 0, failures = 0;

  logic [7:0] layer_a;
  logic [5:0][8:0] col_a;
  logic [5:0][8:0] sh_a;
  qc_code_rom dut_a (.layer(layer_a), .col(col_a), .shift(sh_a));

  logic [4:0] layer_b;
  logic [5:0][5:0] col_b;
  logic [5:0][3:0] sh_b;
  qc_code_rom #(.Z1(4), .Z2(16)) dut_b (.layer(layer_b), .col(col_b), .shift(sh_b));

  task automatic check_cfg(int z1, int z2, bit big);
    int hits [7][352];
    for (int i = 0; i < 7; i++) for (int c = 0; c < 352; c++) hits[i][c] = 0;
    for (int k = 0; k < 7 * z1; k++) begin
      int cols[6], sh[6], cnt[11];
      if (big) layer_a = 8'(k); else layer_b = 5'(k);
      #1;
      for (int j = 0; j < 11; j++) cnt[j] = 0;
      for (int e = 0; e < 6; e++) begin
        cols[e] = big ? int'(col_a[e]) : int'(col_b[e]);
        sh[e]   = big ? int'(sh_a[e])  : int'(sh_b[e]);
        cnt[cols[e] / z1]++;
        hits[k / z1][cols[e]]++;
        checks++;
        if (sh[e] >= z2 || cols[e] >= 11 * z1) failures++;
        for (int f = 0; f < e; f++) begin
          checks++;
          if (cols[f] == cols[e]) begin failures++; $display("FAIL layer %0d repeats column set %0d", k, cols[e]); end
        end
      end
      for (int j = 0; j < 11; j++) begin
        checks++;
        if (cnt[j] != B[k / z1][j]) begin failures++; $display("FAIL layer %0d base col %0d: %0d", k, j, cnt[j]); end
      end
    end
    for (int i = 0; i < 7; i++)
      for (int c = 0; c < 11 * z1; c++) begin
        checks++;
        if (hits[i][c] != B[i][c / z1]) begin failures++; $display("FAIL row %0d set %0d hit %0d", i, c, hits[i][c]); end
      end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_a = 0; layer_b = 0;
    check_cfg(32, 512, 1'b1);
    check_cfg(4, 16, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
