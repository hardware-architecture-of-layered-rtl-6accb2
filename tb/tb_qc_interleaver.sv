// tb_qc_interleaver -- checks the cyclic shifter of the RAM-to-sub-decoder
// path.  First the worked example of z2 = 16, N_h = 4, G = 4, p = 9: the
// words at addresses 0..3 (LLR indices [0 4 8 12], [1 5 9 13], ...) must come
// out as [12 0 4 8], [9 13 1 5], [10 14 2 6], [11 15 3 7].  Then, for random
// offsets with N_h = 8, G = 4, every lane l must receive P-VN (l*G + tau + p)
// mod z2 for the group tau = (a - p mod G) mod G, and the write-direction
// shifter must return every word to the RAM it came from.
module tb_qc_interleaver;
  int checks = 0, failures = 0;

  // example configuration
  logic [3:0] p1;
  logic [1:0] a1;
  logic [3:0][7:0] din1, dout1;
  qc_interleaver #(.NH(4), .G(4), .W(8), .WRITE(1'b0)) dut1 (.p(p1), .a_off(a1), .din(din1), .dout(dout1));

  // random configuration, read and write direction back to back
  logic [4:0] p2;
  logic [1:0] a2;
  logic [7:0][7:0] din2, dout2, back2;
  qc_interleaver #(.NH(8), .G(4), .W(8), .WRITE(1'b0)) dut2 (.p(p2), .a_off(a2), .din(din2), .dout(dout2));
  qc_interleaver #(.NH(8), .G(4), .W(8), .WRITE(1'b1)) dut3 (.p(p2), .a_off(a2), .din(dout2), .dout(back2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expd [4][4] = '{'{12, 0, 4, 8}, '{9, 13, 1, 5}, '{10, 14, 2, 6}, '{11, 15, 3, 7}};
    p1 = 4'd9;
    for (int a = 0; a < 4; a++) begin
      a1 = 2'(a);
      for (int l = 0; l < 4; l++) din1[l] = 8'(l * 4 + a);   // index stored in RAM l at address a
      #1;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (int'(dout1[l]) != expd[a][l]) begin
          failures++;
          $display("FAIL example addr %0d lane %0d got %0d exp %0d", a, l, dout1[l], expd[a][l]);
        end
      end
    end
    for (int t = 0; t < 2000; t++) begin
      int p, a, tau;
      p = $urandom % 32;
      a = $urandom % 4;
      p2 = 5'(p); a2 = 2'(a);
      for (int l = 0; l < 8; l++) din2[l] = 8'(l * 4 + a);
      #1;
      tau = (a - (p % 4) + 4) % 4;
      for (int l = 0; l < 8; l++) begin
        checks += 2;
        if (int'(dout2[l]) != (l * 4 + tau + p) % 32) begin
          failures++;
          if (failures < 10) $display("FAIL p %0d a %0d lane %0d got %0d exp %0d", p, a, l, dout2[l], (l * 4 + tau + p) % 32);
        end
        if (back2[l] != din2[l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
