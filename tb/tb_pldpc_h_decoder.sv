// tb_pldpc_h_decoder -- end-to-end bench of the layered decoder on two small
// configurations of the same base matrix (z1 = 4, z2 = 16):
//   Case I  : N_h = 4, G = 4, widths S1 (8-bit LLRs, 9-bit DFHT), 3 iterations
//   Case II : N_h = 2, G = 8, widths S2 (9-bit LLRs, 10-bit DFHT), 3 iterations
// Each instance decodes two codewords with tb_dec_env (bit-true comparison of
// every hard decision, layer period, overlapped loading of the next codeword).
// The bench then fails every mechanism that never occurred: P-VNs from
// PVN-CH-RAM and from PVN-APP-RAM in the first iteration, H-EX-RAM reads,
// more than one group in the output FIFO (Case II), results waiting for the
// read side to finish (Case II), channel LLRs written during decoding into
// PVN-CH-RAM and into the other D1H-CH-RAM half, decoding from half 1.
module tb_pldpc_h_decoder;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- Case I ----------------
  localparam int Z1 = 4, Z2 = 16;
  localparam int NH1 = 4, NH2 = 2;
  localparam int ND = 10;

  logic rst1, start1, bank1, busy1, done1, chw1, chr1, d1w1, dv1;
  logic [7:0] ni1;
  logic [$clog2(44*4)-1:0] cha1, da1;
  logic [$clog2(2*28*4)-1:0] d1a1;
  logic [NH1-1:0][4:0] chd1;
  logic [NH1-1:0][ND*5-1:0] d1d1;
  logic [NH1-1:0] db1;
  logic fin1;
  int c1, f1, a1, b1, e1, m1, w1, o1, p1, k1, n1, x1;

  pldpc_h_decoder #(.Z1(Z1), .Z2(Z2), .NH(NH1)) dut1 (
    .clk, .rst_n(rst1), .start(start1), .num_iter(ni1), .bank(bank1), .busy(busy1), .done(done1),
    .ch_wr_en(chw1), .ch_wr_addr(cha1), .ch_wr_data(chd1), .ch_wr_ready(chr1),
    .d1h_wr_en(d1w1), .d1h_wr_addr(d1a1), .d1h_wr_data(d1d1),
    .dec_valid(dv1), .dec_addr(da1), .dec_bits(db1));

  tb_dec_env #(.Z1(Z1), .Z2(Z2), .NH(NH1), .NITER(3), .NAME("caseI")) env1 (
    .clk, .rst_n(rst1), .start(start1), .num_iter(ni1), .bank(bank1), .busy(busy1), .done(done1),
    .ch_wr_en(chw1), .ch_wr_addr(cha1), .ch_wr_data(chd1), .ch_wr_ready(chr1),
    .d1h_wr_en(d1w1), .d1h_wr_addr(d1a1), .d1h_wr_data(d1d1),
    .dec_valid(dv1), .dec_addr(da1), .dec_bits(db1),
    .obs_lstart(dut1.lstart),
    .obs_ch_src(dut1.u_rd.m.vld && (!dut1.u_rd.m.app0 || !dut1.u_rd.m.app1)),
    .obs_app_first(dut1.u_rd.m.vld && dut1.u_rd.m.zero_ex && (dut1.u_rd.m.app0 || dut1.u_rd.m.app1)),
    .obs_ex_rd(dut1.ex_en_rd),
    .obs_fifo_cnt(8'(dut1.fifo_count)),
    .obs_wr_wait(dut1.u_wr.active && !dut1.fifo_empty && !dut1.rd_done),
    .finished(fin1), .checks(c1), .failures(f1),
    .n_ch_src(a1), .n_app_first(b1), .n_ex_rd(e1), .n_fifo_multi(m1), .n_wr_wait(w1),
    .n_ch_overlap(o1), .n_d1h_overlap(p1), .n_bank1(k1), .n_words(n1), .fifo_max(x1));

  // ---------------- Case II ----------------
  logic rst2, start2, bank2, busy2, done2, chw2, chr2, d1w2, dv2;
  logic [7:0] ni2;
  logic [$clog2(44*8)-1:0] cha2, da2;
  logic [$clog2(2*28*8)-1:0] d1a2;
  logic [NH2-1:0][4:0] chd2;
  logic [NH2-1:0][ND*5-1:0] d1d2;
  logic [NH2-1:0] db2;
  logic fin2;
  int c2, f2, a2, b2, e2, m2, w2, o2, p2, k2, n2, x2;

  pldpc_h_decoder #(.Z1(Z1), .Z2(Z2), .NH(NH2), .W_LLR(9), .W_DF(10)) dut2 (
    .clk, .rst_n(rst2), .start(start2), .num_iter(ni2), .bank(bank2), .busy(busy2), .done(done2),
    .ch_wr_en(chw2), .ch_wr_addr(cha2), .ch_wr_data(chd2), .ch_wr_ready(chr2),
    .d1h_wr_en(d1w2), .d1h_wr_addr(d1a2), .d1h_wr_data(d1d2),
    .dec_valid(dv2), .dec_addr(da2), .dec_bits(db2));

  tb_dec_env #(.Z1(Z1), .Z2(Z2), .NH(NH2), .W_LLR(9), .W_DF(10), .NITER(3), .NAME("caseII")) env2 (
    .clk, .rst_n(rst2), .start(start2), .num_iter(ni2), .bank(bank2), .busy(busy2), .done(done2),
    .ch_wr_en(chw2), .ch_wr_addr(cha2), .ch_wr_data(chd2), .ch_wr_ready(chr2),
    .d1h_wr_en(d1w2), .d1h_wr_addr(d1a2), .d1h_wr_data(d1d2),
    .dec_valid(dv2), .dec_addr(da2), .dec_bits(db2),
    .obs_lstart(dut2.lstart),
    .obs_ch_src(dut2.u_rd.m.vld && (!dut2.u_rd.m.app0 || !dut2.u_rd.m.app1)),
    .obs_app_first(dut2.u_rd.m.vld && dut2.u_rd.m.zero_ex && (dut2.u_rd.m.app0 || dut2.u_rd.m.app1)),
    .obs_ex_rd(dut2.ex_en_rd),
    .obs_fifo_cnt(8'(dut2.fifo_count)),
    .obs_wr_wait(dut2.u_wr.active && !dut2.fifo_empty && !dut2.rd_done),
    .finished(fin2), .checks(c2), .failures(f2),
    .n_ch_src(a2), .n_app_first(b2), .n_ex_rd(e2), .n_fifo_multi(m2), .n_wr_wait(w2),
    .n_ch_overlap(o2), .n_d1h_overlap(p2), .n_bank1(k2), .n_words(n2), .fifo_max(x2));

  task automatic need(string what, int n);
    checks++;
    $display("  %-44s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism never exercised: %s", what); end
  endtask

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (fin1 && fin2);
    checks = c1 + c2;
    failures = f1 + f2;
    $display("Case I : fifo max %0d, Case II : fifo max %0d", x1, x2);
    need("CaseI  P-VN from PVN-CH-RAM", a1);
    need("CaseI  first-iteration P-VN from PVN-APP-RAM", b1);
    need("CaseI  H-EX-RAM reads", e1);
    need("CaseI  decisions streamed", n1);
    need("CaseI  PVN-CH-RAM loaded during decoding", o1);
    need("CaseI  D1H half loaded during decoding", p1);
    need("CaseI  decoding from D1H half 1", k1);
    need("CaseII P-VN from PVN-CH-RAM", a2);
    need("CaseII first-iteration P-VN from PVN-APP-RAM", b2);
    need("CaseII H-EX-RAM reads", e2);
    need("CaseII FIFO holding more than one group", m2);
    need("CaseII results waiting for the read side", w2);
    need("CaseII decisions streamed", n2);
    need("CaseII PVN-CH-RAM loaded during decoding", o2);
    need("CaseII D1H half loaded during decoding", p2);
    need("CaseII decoding from D1H half 1", k2);
    checks++;
    if (x1 > 4 || x2 > 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
