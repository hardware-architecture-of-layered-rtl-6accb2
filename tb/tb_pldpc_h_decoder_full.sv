// tb_pldpc_h_decoder_full -- full-size bench: the decoder with its default
// parameters (z1 = 32, z2 = 512, N_h = 128, G = 4, S1 widths), so a codeword
// of 352*512 P-VNs and 224 layers of 512 Hadamard check nodes.  tb_dec_env
// decodes two codewords with 2 iterations each, the second one loaded
// during the decoding of the first and decoded from D1H-CH-RAM half 1, and
// compares every hard decision with the bit-true reference; it also checks
// the layer period of 26 cycles.
module tb_pldpc_h_decoder_full;
  localparam int NH = 128, ND = 10, AW_P = 11, AW_D = 11;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, bank, busy, done, ch_wr_en, ch_wr_ready, d1h_wr_en, dec_valid;
  logic [7:0] num_iter;
  logic [AW_P-1:0] ch_wr_addr, dec_addr;
  logic [AW_D-1:0] d1h_wr_addr;
  logic [NH-1:0][4:0] ch_wr_data;
  logic [NH-1:0][ND*5-1:0] d1h_wr_data;
  logic [NH-1:0] dec_bits;
  logic fin;
  int checks, failures, a, b, e, m, w, o, p, k, n, x;

  pldpc_h_decoder dut (.*);

  tb_dec_env #(.NITER(2), .NAME("full")) env (
    .clk, .rst_n, .start, .num_iter, .bank, .busy, .done,
    .ch_wr_en, .ch_wr_addr, .ch_wr_data, .ch_wr_ready,
    .d1h_wr_en, .d1h_wr_addr, .d1h_wr_data,
    .dec_valid, .dec_addr, .dec_bits,
    .obs_lstart(dut.lstart),
    .obs_ch_src(dut.u_rd.m.vld && (!dut.u_rd.m.app0 || !dut.u_rd.m.app1)),
    .obs_app_first(dut.u_rd.m.vld && dut.u_rd.m.zero_ex && (dut.u_rd.m.app0 || dut.u_rd.m.app1)),
    .obs_ex_rd(dut.ex_en_rd),
    .obs_fifo_cnt(8'(dut.fifo_count)),
    .obs_wr_wait(dut.u_wr.active && !dut.fifo_empty && !dut.rd_done),
    .finished(fin), .checks, .failures,
    .n_ch_src(a), .n_app_first(b), .n_ex_rd(e), .n_fifo_multi(m), .n_wr_wait(w),
    .n_ch_overlap(o), .n_d1h_overlap(p), .n_bank1(k), .n_words(n), .fifo_max(x));

  initial begin
    #2000000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int c, f;
    wait (fin);
    c = checks; f = failures;
    $display("full: CH %0d, APP first %0d, H-EX %0d, overlap CH %0d D1H %0d, half 1 %0d, words %0d, fifo max %0d",
             a, b, e, o, p, k, n, x);
    c += 6;
    if (a == 0) f++;
    if (b == 0) f++;
    if (e == 0) f++;
    if (o == 0) f++;
    if (p == 0) f++;
    if (k == 0) f++;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
