// tb_llr_ram_bank -- checks a bank of 4 dual-port RAMs (depth 16, 8 bits)
// against a shadow array: random writes on both ports (never the same address
// in one cycle), random reads on both ports, read data exactly RD_LAT cycles
// after the address, a read in the cycle after a write seeing the new data,
// and simultaneous read on one port and write on the other.
module tb_llr_ram_bank;
  localparam int NH = 4, DEPTH = 16, W = 8, LAT = pldpc_pkg::RD_LAT;
  logic clk = 0;
  logic en_a = 0, we_a = 0, en_b = 0, we_b = 0;
  logic [3:0] addr_a = 0, addr_b = 0;
  logic [NH-1:0][W-1:0] wd_a, wd_b, rd_a, rd_b;
  logic [W-1:0] shadow [NH][DEPTH];
  int checks = 0, failures = 0, cyc = 0;
  // expected read data, indexed by the cycle it must appear in
  logic [NH-1:0][W-1:0] exp_a [4096], exp_b [4096];
  bit chk_a [4096], chk_b [4096];

  llr_ram_bank #(.NH(NH), .DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (chk_a[cyc]) begin
      checks++;
      if (rd_a !== exp_a[cyc]) begin failures++; $display("A cyc %0d %h exp %h", cyc, rd_a, exp_a[cyc]); end
    end
    if (chk_b[cyc]) begin
      checks++;
      if (rd_b !== exp_b[cyc]) begin failures++; $display("B cyc %0d %h exp %h", cyc, rd_b, exp_b[cyc]); end
    end
    // model: reads see the array before this edge's writes
    if (en_a && !we_a) begin
      for (int l = 0; l < NH; l++) exp_a[cyc + LAT][l] = shadow[l][addr_a];
      chk_a[cyc + LAT] = 1;
    end
    if (en_b && !we_b) begin
      for (int l = 0; l < NH; l++) exp_b[cyc + LAT][l] = shadow[l][addr_b];
      chk_b[cyc + LAT] = 1;
    end
    if (en_a && we_a) for (int l = 0; l < NH; l++) shadow[l][addr_a] = wd_a[l];
    if (en_b && we_b) for (int l = 0; l < NH; l++) shadow[l][addr_b] = wd_b[l];
    cyc++;
  end

  initial begin
    // fill every location through alternating ports
    for (int i = 0; i < 4096; i++) begin chk_a[i] = 0; chk_b[i] = 0; end
    for (int g = 0; g < DEPTH; g += 2) begin
      @(negedge clk);
      en_a = 1; we_a = 1; addr_a = 4'(g);     wd_a = {$urandom, $urandom};
      en_b = 1; we_b = 1; addr_b = 4'(g + 1); wd_b = {$urandom, $urandom};
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en_a = ($urandom % 4) != 0; we_a = ($urandom % 3) == 0; addr_a = 4'($urandom);
      en_b = ($urandom % 4) != 0; we_b = ($urandom % 3) == 0; addr_b = 4'($urandom);
      if (en_a && we_a && en_b && we_b && addr_a == addr_b) addr_b = addr_a + 1'b1;
      wd_a = {$urandom, $urandom}; wd_b = {$urandom, $urandom};
      if (i % 50 == 10) begin  // write then read the same address next cycle
        en_a = 1; we_a = 1; en_b = 0;
        @(negedge clk);
        en_a = 1; we_a = 0; en_b = 1; we_b = 0; addr_b = addr_a;
      end
    end
    @(negedge clk) begin en_a = 0; en_b = 0; end
    repeat (LAT + 2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
