// tb_hadamard_subdecoder -- checks the symbol-MAP Hadamard sub-decoder
// (r = 4, setting S1) against a straightforward model: direct FHT, full dual
// transform, APP = S_P - S_N and L_ex^H = APP - L_ex^PVN with the documented
// rounding and saturation.  Vectors enter back to back; the latency must be
// 2r+1 = 9 cycles.  A second instance with setting S2 widths (9-bit LLRs,
// 10-bit DFHT) and a third with setting S3 (9-bit LLRs, 11-bit DFHT with 3
// fractional bits, so the max* table for 3 fractional bits) are checked the
// same way.  Also checks that a strongly received
// all-zero Hadamard codeword gives positive APP values.
module tb_hadamard_subdecoder;
  import tb_ref_pkg::*;
  localparam int R = 4, Q = 16, D = 6, ND = 10, NV = 400;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic v1, v2, v3;
  logic signed [D-1:0][7:0]  lex1;
  logic signed [D-1:0][8:0]  lex2;
  logic signed [ND-1:0][4:0] d1h;
  logic signed [D-1:0][7:0]  app1, ex1;
  logic signed [D-1:0][8:0]  app2, ex2, app3, ex3;
  int checks = 0, failures = 0, cyc = 0, n_in = 0, n_out = 0, n_pos = 0;
  int ea1[NV][8], ee1[NV][8], ea2[NV][8], ee2[NV][8], ea3[NV][8], ee3[NV][8], t_in[NV];
  bit strong_v[NV];

  hadamard_subdecoder #(.R(R), .W_CH(5), .W_LLR(8), .W_DF(9), .DF_FRAC(2)) dut1 (
    .clk, .rst_n, .in_valid, .lex_pvn(lex1), .lch_d1h(d1h), .out_valid(v1), .app(app1), .lex_h(ex1));
  hadamard_subdecoder #(.R(R), .W_CH(5), .W_LLR(9), .W_DF(10), .DF_FRAC(2)) dut2 (
    .clk, .rst_n, .in_valid, .lex_pvn(lex2), .lch_d1h(d1h), .out_valid(v2), .app(app2), .lex_h(ex2));
  hadamard_subdecoder #(.R(R), .W_CH(5), .W_LLR(9), .W_DF(11), .DF_FRAC(3)) dut3 (
    .clk, .rst_n, .in_valid, .lex_pvn(lex2), .lch_d1h(d1h), .out_valid(v3), .app(app3), .lex_h(ex3));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (in_valid) begin t_in[n_in] = cyc; n_in++; end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && v1) begin
    checks++;
    if (!v2 || !v3) failures++;
    if (cyc - t_in[n_out] != 2 * R + 1) begin failures++; $display("latency %0d", cyc - t_in[n_out]); end
    for (int k = 0; k < D; k++) begin
      checks += 4;
      if (sext(int'(app1[k]), 8) != ea1[n_out][k] || sext(int'(ex1[k]), 8) != ee1[n_out][k] ||
          sext(int'(app2[k]), 9) != ea2[n_out][k] || sext(int'(ex2[k]), 9) != ee2[n_out][k]) begin
        failures++;
        if (failures < 10)
          $display("FAIL v%0d k%0d app %0d/%0d ex %0d/%0d app2 %0d/%0d", n_out, k,
                   sext(int'(app1[k]), 8), ea1[n_out][k], sext(int'(ex1[k]), 8), ee1[n_out][k],
                   sext(int'(app2[k]), 9), ea2[n_out][k]);
      end
      checks += 2;
      if (sext(int'(app3[k]), 9) != ea3[n_out][k] || sext(int'(ex3[k]), 9) != ee3[n_out][k]) begin
        failures++;
        if (failures < 10)
          $display("FAIL S3 v%0d k%0d app %0d/%0d ex %0d/%0d", n_out, k,
                   sext(int'(app3[k]), 9), ea3[n_out][k], sext(int'(ex3[k]), 9), ee3[n_out][k]);
      end
      if (strong_v[n_out]) begin
        checks++;
        if (sext(int'(app1[k]), 8) <= 0) failures++;
      end
    end
    if (strong_v[n_out]) n_pos++;
    n_out++;
  end

  initial begin
    int lx[8], lx2[8], dh[64], a[8], e[8];
    lex1 = '0; lex2 = '0; d1h = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      if (v % 7 == 3) begin in_valid = 0; @(negedge clk); end
      strong_v[v] = (v % 10 == 0);
      for (int i = 0; i < 64; i++) dh[i] = 0;
      for (int k = 0; k < 8; k++) begin lx[k] = 0; lx2[k] = 0; end
      for (int k = 0; k < ND; k++) begin
        dh[k] = strong_v[v] ? 8 + ($urandom % 8) : sext($urandom, 5);
        d1h[k] = 5'(dh[k]);
      end
      for (int k = 0; k < D; k++) begin
        lx[k]  = strong_v[v] ? ($urandom % 16) : ((v % 4 == 1) ? sext($urandom, 8) : sext($urandom, 6));
        lx2[k] = (v % 4 == 1) ? sext($urandom, 9) : lx[k];
        lex1[k] = 8'(lx[k]);
        lex2[k] = 9'(lx2[k]);
      end
      ref_hadamard(R, 8, 9, 2, lx, dh, a, e);
      ea1[v] = a; ee1[v] = e;
      ref_hadamard(R, 9, 10, 2, lx2, dh, a, e);
      ea2[v] = a; ee2[v] = e;
      ref_hadamard(R, 9, 11, 3, lx2, dh, a, e);
      ea3[v] = a; ee3[v] = e;
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (15) @(posedge clk);
    checks++;
    if (n_out != NV || n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
