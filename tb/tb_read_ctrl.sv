// tb_read_ctrl -- checks the read control logic with N_h = 4, z1 = 4,
// z2 = 16 (G = 4).  The four RAM banks are modelled by formula (value =
// hash of lane and address, delivered RD_LAT cycles after an enabled read).
// For random layers, banks, column sets and offsets, in and after the first
// iteration and with random written-once flags, every group handed to the
// sub-decoders must hold, for sub-decoder l in group tau and entry j,
//   L_ex = sat(src(P-VN (l*G + tau + p_j) mod z2 of column set c_j) - L_ex^H)
// with src = PVN-CH (sign-extended) if first iteration and c_j not written,
// else PVN-APP, and L_ex^H = 0 in the first iteration, plus the D1H word of
// row l*G + tau.  The k-th group must arrive exactly PAIRS + RD_LAT + 1 +
// PAIRS*k cycles after start, rd_done must rise after the last group, and the
// CH / H-EX banks may only be enabled when they are needed.
module tb_read_ctrl;
  localparam int R = 4, Z1 = 4, Z2 = 16, NH = 4, W_CH = 5, W_LLR = 8;
  localparam int D = 6, ND = 10, PAIRS = 3, G = 4, L = 28, NC = 44;
  localparam int LAT = pldpc_pkg::RD_LAT;

  logic clk = 0, rst_n = 0, start = 0, first_iter = 0, bank = 0, flags_clr = 0;
  logic [4:0] layer = 0;
  logic [D-1:0][5:0] col;
  logic [D-1:0][3:0] shift;
  logic [1:0] flag_set = 0;
  logic [1:0][5:0] flag_col = 0;
  logic ch_en, app_en, ex_en, d1h_en, sd_valid, busy, rd_done;
  logic [7:0] pvn_addr_a, pvn_addr_b, d1h_addr;
  logic [9:0] ex_addr_a, ex_addr_b;
  logic [NH-1:0][W_CH-1:0] ch_rd_a, ch_rd_b;
  logic [NH-1:0][W_LLR-1:0] app_rd_a, app_rd_b, ex_rd_a, ex_rd_b;
  logic [NH-1:0][ND*W_CH-1:0] d1h_rd, sd_d1h;
  logic [NH-1:0][D-1:0][W_LLR-1:0] sd_lex;

  read_ctrl #(.R(R), .Z1(Z1), .Z2(Z2), .NH(NH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, t_start = 0, grp = 0;
  bit written [NC];
  int seed;

  function automatic int hv(int kind, int l, int a);
    return int'((seed * 7919 + kind * 104729 + l * 1299709 + a * 15485863) >>> 3) ;
  endfunction

  // RAM models (RD_LAT = 1)
  always @(posedge clk) begin
    for (int l = 0; l < NH; l++) begin
      if (ch_en) begin
        ch_rd_a[l] <= W_CH'(hv(0, l, int'(pvn_addr_a)));
        ch_rd_b[l] <= W_CH'(hv(0, l, int'(pvn_addr_b)));
      end
      if (app_en) begin
        app_rd_a[l] <= W_LLR'(hv(1, l, int'(pvn_addr_a)));
        app_rd_b[l] <= W_LLR'(hv(1, l, int'(pvn_addr_b)));
      end
      if (ex_en) begin
        ex_rd_a[l] <= W_LLR'(hv(2, l, int'(ex_addr_a)));
        ex_rd_b[l] <= W_LLR'(hv(2, l, int'(ex_addr_b)));
      end
      if (d1h_en) d1h_rd[l] <= (ND*W_CH)'({hv(3, l, int'(d1h_addr)), hv(4, l, int'(d1h_addr))});
    end
  end

  function automatic int sx(int v, int w);
    v = v & ((1 << w) - 1);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && ch_en && !first_iter) begin failures++; $display("CH bank enabled outside the first iteration"); end
    if (rst_n && ex_en && first_iter) begin failures++; $display("H-EX bank enabled in the first iteration"); end
    if (rst_n && sd_valid) begin
      checks++;
      if (cyc - t_start != PAIRS + LAT + 1 + PAIRS * grp) begin
        failures++;
        $display("group %0d arrived %0d cycles after start", grp, cyc - t_start);
      end
      for (int l = 0; l < NH; l++) begin
        checks++;
        if (sd_d1h[l] !== (ND*W_CH)'({hv(3, l, int'(bank) * L * G + int'(layer) * G + grp),
                                     hv(4, l, int'(bank) * L * G + int'(layer) * G + grp)})) begin
          failures++; $display("D1H lane %0d group %0d", l, grp);
        end
        for (int j = 0; j < D; j++) begin
          int v, src, ex, e;
          v = (l * G + grp + int'(shift[j])) % Z2;
          if (first_iter && !written[col[j]]) src = sx(hv(0, v / G, int'(col[j]) * G + v % G), W_CH);
          else src = sx(hv(1, v / G, int'(col[j]) * G + v % G), W_LLR);
          ex = first_iter ? 0 : sx(hv(2, l, (int'(layer) * G + grp) * D + j), W_LLR);
          e = tb_ref_pkg::sat(src - ex, W_LLR);
          checks++;
          if (sx(int'(sd_lex[l][j]), W_LLR) != e) begin
            failures++;
            if (failures < 10) $display("lex lane %0d grp %0d entry %0d got %0d exp %0d fi %0d wr %0d src %0d ex %0d seed %0d", l, grp, j, sx(int'(sd_lex[l][j]), W_LLR), e, first_iter, written[col[j]], src, ex, seed);
          end
        end
      end
      grp++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cs[D];
      seed = t;
      // distinct random column sets, random offsets
      for (int j = 0; j < D; j++) begin
        bit dup;
        do begin
          cs[j] = $urandom % NC;
          dup = 0;
          for (int f = 0; f < j; f++) if (cs[f] == cs[j]) dup = 1;
        end while (dup);
        col[j] = 6'(cs[j]);
        shift[j] = 4'($urandom);
      end
      layer = 5'($urandom % L);
      bank = 1'($urandom);
      first_iter = (t % 3) != 2;
      // new flag pattern every few layers
      if (t % 6 == 0) begin
        @(negedge clk) flags_clr = 1;
        @(negedge clk) flags_clr = 0;
        for (int c = 0; c < NC; c++) written[c] = 0;
        for (int n = 0; n < 20; n++) begin
          int c0, c1;
          c0 = $urandom % NC; c1 = $urandom % NC;
          @(negedge clk);
          flag_set = 2'b11; flag_col[0] = 6'(c0); flag_col[1] = 6'(c1);
          written[c0] = 1; written[c1] = 1;
        end
        @(negedge clk) flag_set = 0;
      end
      @(negedge clk);
      start = 1; grp = 0; t_start = cyc + 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (rd_done) begin failures++; $display("rd_done not cleared by start"); end
      while (!rd_done) @(negedge clk);
      checks++;
      if (grp != G) begin failures++; $display("%0d groups delivered", grp); end
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
