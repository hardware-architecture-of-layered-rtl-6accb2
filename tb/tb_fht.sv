// tb_fht -- checks the pipelined FHT (r = 4, 8-bit inputs) against direct
// inner products with the Hadamard columns, including extreme inputs, and
// checks the latency of r cycles with a new vector every cycle.
module tb_fht;
  import tb_ref_pkg::*;
  localparam int R = 4, W = 8, Q = 1 << R;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [Q-1:0][W-1:0] din;
  logic signed [Q-1:0][W+R-1:0] dout;
  int checks = 0, failures = 0;
  int expv[300][64];
  int t_in[300];
  int n_in = 0, n_out = 0;
  int cyc = 0;

  fht #(.R(R), .W_IN(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = t_in[n_out];
    checks++;
    if (cyc - t != R) begin failures++; $display("latency %0d", cyc - t); end
    for (int j = 0; j < Q; j++) begin
      checks++;
      if (sext(int'(dout[j]), W + R) != expv[n_out][j]) begin
        failures++;
        $display("FAIL out[%0d]=%0d exp %0d", j, sext(int'(dout[j]), W + R), expv[n_out][j]);
      end
    end
    n_out++;
  end
  always @(posedge clk) if (in_valid) begin
    t_in[n_in] = cyc;
    n_in++;
  end

  initial begin
    int x[64], y[64];
    din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 300; v++) begin
      @(negedge clk);
      for (int i = 0; i < 64; i++) x[i] = 0;
      for (int i = 0; i < Q; i++) begin
        if (v < 4) x[i] = (v == 0) ? 127 : (v == 1) ? -128 : (v == 2) ? ((i % 2) ? -128 : 127) : (i == 5 ? -128 : 0);
        else       x[i] = sext($urandom, W);
        din[i] = W'(x[i]);
      end
      ref_fht(R, x, y);
      expv[v] = y;
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
