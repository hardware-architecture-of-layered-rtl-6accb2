// tb_dfht_reduced -- checks the reduced DFHT (r = 4, 9-bit, 2 fractional
// bits) against a full, unpruned dual transform computed in flat loops with a
// real-valued max* table, at the six kept positions 0,1,2,4,8,15; inputs are
// ln gamma(+h) / ln gamma(-h) pairs as the FHT produces them and also
// unrelated random pairs.  Checks the latency of r cycles at one vector per
// cycle.
module tb_dfht_reduced;
  import tb_ref_pkg::*;
  localparam int R = 4, W = 9, F = 2, Q = 16, D = 6, NV = 300;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [Q-1:0][W-1:0] p_in, n_in;
  logic signed [D-1:0][W-1:0] sp, sn;
  int checks = 0, failures = 0, cyc = 0, n_in_cnt = 0, n_out = 0;
  int esp[NV][64], esn[NV][64], t_in[NV];

  dfht_reduced #(.R(R), .W(W), .FRAC(F)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (in_valid) begin t_in[n_in_cnt] = cyc; n_in_cnt++; end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - t_in[n_out] != R) begin failures++; $display("latency %0d", cyc - t_in[n_out]); end
    for (int k = 0; k < D; k++) begin
      checks += 2;
      if (sext(int'(sp[k]), W) != esp[n_out][spos(R, k)] || sext(int'(sn[k]), W) != esn[n_out][spos(R, k)]) begin
        failures++;
        $display("FAIL v%0d k%0d sp %0d/%0d sn %0d/%0d", n_out, k, sext(int'(sp[k]), W),
                 esp[n_out][spos(R, k)], sext(int'(sn[k]), W), esn[n_out][spos(R, k)]);
      end
    end
    n_out++;
  end

  initial begin
    int p[64], n[64], a[64], b[64];
    p_in = '0; n_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      for (int i = 0; i < 64; i++) begin p[i] = 0; n[i] = 0; end
      for (int i = 0; i < Q; i++) begin
        if (v % 3 == 0) begin p[i] = sext($urandom, W); n[i] = sext($urandom, W); end
        else begin
          p[i] = (v % 3 == 1) ? sext($urandom, 6) : sext($urandom, W);
          n[i] = sat(-p[i], W);
        end
        p_in[i] = W'(p[i]); n_in[i] = W'(n[i]);
      end
      ref_dfht(R, W, F, p, n, a, b);
      esp[v] = a; esn[v] = b;
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
