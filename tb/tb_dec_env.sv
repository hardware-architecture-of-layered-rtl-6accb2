// tb_dec_env -- stimulus, reference model and scoreboard for one
// pldpc_h_decoder instance (the decoder itself is instantiated by the caller,
// so that the same environment serves the small and the full-size benches).
//
// Scenario: two codewords.  Codeword 0's P-VN channel LLRs are written into
// PVN-CH-RAM and its D1H channel LLRs into half 0 of D1H-CH-RAM; decoding is
// started with NITER iterations.  While it runs, codeword 1's D1H LLRs are
// written into half 1 and, as soon as the decoder allows it (after the first
// iteration, ch_wr_ready), its P-VN LLRs into PVN-CH-RAM.  Codeword 1 is then
// decoded from half 1.  Every streamed hard-decision word is compared with a
// bit-true layered reference decoder built on ref_hadamard (initialisation
// L_app = L_ch, L_ex^H = 0; per layer all reads before all writes).
// LLRs are those of the all-zero codeword after a noisy channel, so the
// decoded words must also contain fewer errors than the channel decisions.
// The layer period (cycles between layer starts) is checked against
// max(d*G/2 + 2r+1 + d/2, d*G) + 2.
// The obs_* inputs are internal decoder events; the bench counts them and
// reports the counts (the caller fails mechanisms that never occurred).
module tb_dec_env #(
  parameter int R       = pldpc_pkg::R_DEF,
  parameter int Z1      = pldpc_pkg::Z1_DEF,
  parameter int Z2      = pldpc_pkg::Z2_DEF,
  parameter int NH      = pldpc_pkg::NH_DEF,
  parameter int W_CH    = pldpc_pkg::W_CH_DEF,
  parameter int W_LLR   = pldpc_pkg::W_LLR_DEF,
  parameter int W_DF    = pldpc_pkg::W_DF_DEF,
  parameter int DF_FRAC = pldpc_pkg::DF_FRAC_DEF,
  parameter int NITER   = 2,
  parameter string NAME = "dec",
  localparam int D      = R + 2,
  localparam int ND     = (1 << R) - D,
  localparam int G      = Z2 / NH,
  localparam int L      = pldpc_pkg::M_BASE * Z1,
  localparam int NC     = pldpc_pkg::N_BASE * Z1,
  localparam int AW_P   = $clog2(NC * G),
  localparam int AW_D   = $clog2(2 * L * G)
) (
  input  logic                       clk,
  output logic                       rst_n,
  output logic                       start,
  output logic [7:0]                 num_iter,
  output logic                       bank,
  input  logic                       busy,
  input  logic                       done,
  output logic                       ch_wr_en,
  output logic [AW_P-1:0]            ch_wr_addr,
  output logic [NH-1:0][W_CH-1:0]    ch_wr_data,
  input  logic                       ch_wr_ready,
  output logic                       d1h_wr_en,
  output logic [AW_D-1:0]            d1h_wr_addr,
  output logic [NH-1:0][ND*W_CH-1:0] d1h_wr_data,
  input  logic                       dec_valid,
  input  logic [AW_P-1:0]            dec_addr,
  input  logic [NH-1:0]              dec_bits,
  // internal events
  input  logic                       obs_lstart,
  input  logic                       obs_ch_src,     // P-VN taken from PVN-CH-RAM
  input  logic                       obs_app_first,  // first iteration, taken from PVN-APP-RAM
  input  logic                       obs_ex_rd,      // H-EX-RAM read
  input  logic [7:0]                 obs_fifo_cnt,
  input  logic                       obs_wr_wait,    // result waiting for the read side
  // results
  output logic                       finished,
  output int                         checks,
  output int                         failures,
  output int                         n_ch_src, n_app_first, n_ex_rd, n_fifo_multi,
  output int                         n_wr_wait, n_ch_overlap, n_d1h_overlap,
  output int                         n_bank1, n_words, fifo_max
);
  import tb_ref_pkg::*;

  localparam int NV     = NC * Z2;
  localparam int NROW   = L * Z2;
  localparam int PERIOD = (D * G / 2 + 2 * R + 1 + D / 2 > D * G ? D * G / 2 + 2 * R + 1 + D / 2 : D * G) + 2;

  int chv  [2][NV];
  int d1hv [2][NROW][ND];
  int app_r [NV];
  int ex_r  [NROW * D];
  bit exp_bits [NV];
  bit seen [NC * G];
  int cyc = 0, last_ls = -1, ch_err, dec_err, cur_cw = 0;
  bit running = 0;

  function automatic int noisy_llr();
    int v;
    v = 3 + int'($urandom % 13) - 6 + int'($urandom % 13) - 6 + int'($urandom % 13) - 6;
    return sat(v, W_CH);
  endfunction

  task automatic ref_decode(int cw);
    for (int b = 0; b < NV; b++) app_r[b] = chv[cw][b];
    for (int x = 0; x < NROW * D; x++) ex_r[x] = 0;
    for (int it = 0; it < NITER; it++)
      for (int k = 0; k < L; k++)
        for (int t = 0; t < Z2; t++) begin
          int lx[8], dh[64], a[8], e[8], bi[8];
          for (int j = 0; j < D; j++) begin
            bi[j] = pldpc_pkg::code_col(k, j, Z1) * Z2 + (t + pldpc_pkg::code_shift(k, j, Z1, Z2)) % Z2;
            lx[j] = sat(app_r[bi[j]] - ex_r[(k * Z2 + t) * D + j], W_LLR);
          end
          for (int i = 0; i < ND; i++) dh[i] = d1hv[cw][k * Z2 + t][i];
          ref_hadamard(R, W_LLR, W_DF, DF_FRAC, lx, dh, a, e);
          for (int j = 0; j < D; j++) begin
            app_r[bi[j]] = a[j];
            ex_r[(k * Z2 + t) * D + j] = e[j];
          end
        end
    for (int b = 0; b < NV; b++) exp_bits[b] = app_r[b] < 0;
  endtask

  task automatic write_ch(int cw, bit wait_ready);
    for (int g = 0; g < NC * G; g++) begin
      @(negedge clk);
      while (wait_ready && !ch_wr_ready) @(negedge clk);
      ch_wr_en   = 1'b1;
      ch_wr_addr = AW_P'(g);
      for (int l = 0; l < NH; l++) ch_wr_data[l] = W_CH'(chv[cw][(g / G) * Z2 + l * G + g % G]);
    end
    @(negedge clk) ch_wr_en = 1'b0;
  endtask

  task automatic write_d1h(int cw, int half);
    for (int w = 0; w < L * G; w++) begin
      @(negedge clk);
      d1h_wr_en   = 1'b1;
      d1h_wr_addr = AW_D'(half * L * G + w);
      for (int l = 0; l < NH; l++)
        for (int i = 0; i < ND; i++)
          d1h_wr_data[l][i*W_CH +: W_CH] = W_CH'(d1hv[cw][(w / G) * Z2 + l * G + w % G][i]);
    end
    @(negedge clk) d1h_wr_en = 1'b0;
  endtask

  task automatic decode(int cw, int half);
    for (int g = 0; g < NC * G; g++) seen[g] = 0;
    ch_err = 0;
    for (int b = 0; b < NV; b++) if (chv[cw][b] < 0) ch_err++;
    dec_err = 0;
    cur_cw  = cw;
    @(negedge clk);
    start = 1'b1; bank = 1'(half); num_iter = 8'(NITER);
    @(negedge clk);
    start = 1'b0;
    running = 1;
  endtask

  task automatic finish_decode();
    while (running) @(negedge clk);
    for (int g = 0; g < NC * G; g++) begin
      checks++;
      if (!seen[g]) begin failures++; $display("%s: word %0d never delivered", NAME, g); end
    end
    checks++;
    $display("%s: codeword %0d channel errors %0d, decoded errors %0d", NAME, cur_cw, ch_err, dec_err);
    if (dec_err >= ch_err) failures++;
  endtask

  // scoreboard and event counters
  always @(posedge clk) begin
    cyc++;
    if (dec_valid) begin
      n_words++;
      checks++;
      if (seen[dec_addr]) failures++;
      seen[dec_addr] = 1;
      for (int l = 0; l < NH; l++) begin
        int b;
        b = (int'(dec_addr) / G) * Z2 + l * G + int'(dec_addr) % G;
        if (dec_bits[l]) dec_err++;
        if (dec_bits[l] != exp_bits[b]) begin
          failures++;
          if (failures < 10) $display("%s: word %0d lane %0d got %0d exp %0d", NAME, dec_addr, l, dec_bits[l], exp_bits[b]);
        end
      end
      if (cur_cw == 1 && bank) n_bank1++;
    end
    if (done) running = 0;
    if (obs_lstart) begin
      if (last_ls >= 0 && running) begin
        checks++;
        if (cyc - last_ls != PERIOD) begin
          failures++;
          if (failures < 10) $display("%s: layer period %0d, expected %0d", NAME, cyc - last_ls, PERIOD);
        end
      end
      last_ls = cyc;
    end
    if (!busy) last_ls = -1;
    if (rst_n && obs_ch_src) n_ch_src++;
    if (rst_n && obs_app_first) n_app_first++;
    if (rst_n && obs_ex_rd) n_ex_rd++;
    if (rst_n && obs_fifo_cnt > 1) n_fifo_multi++;
    if (rst_n && int'(obs_fifo_cnt) > fifo_max) fifo_max = int'(obs_fifo_cnt);
    if (rst_n && obs_wr_wait) n_wr_wait++;
    if (busy && ch_wr_en) n_ch_overlap++;
    if (busy && d1h_wr_en) n_d1h_overlap++;
  end

  initial begin
    checks = 0; failures = 0; finished = 0;
    n_ch_src = 0; n_app_first = 0; n_ex_rd = 0; n_fifo_multi = 0; n_wr_wait = 0;
    n_ch_overlap = 0; n_d1h_overlap = 0; n_bank1 = 0; n_words = 0; fifo_max = 0;
    rst_n = 0; start = 0; num_iter = 0; bank = 0;
    ch_wr_en = 0; ch_wr_addr = '0; ch_wr_data = '0;
    d1h_wr_en = 0; d1h_wr_addr = '0; d1h_wr_data = '0;
    for (int cw = 0; cw < 2; cw++) begin
      for (int b = 0; b < NV; b++) chv[cw][b] = noisy_llr();
      for (int x = 0; x < NROW; x++) for (int i = 0; i < ND; i++) d1hv[cw][x][i] = noisy_llr();
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    write_ch(0, 1'b0);
    write_d1h(0, 0);
    ref_decode(0);
    decode(0, 0);
    write_d1h(1, 1);          // other half, while codeword 0 is decoded
    write_ch(1, 1'b1);        // as soon as the first iteration is over
    finish_decode();
    ref_decode(1);
    decode(1, 1);
    finish_decode();
    repeat (4) @(negedge clk);
    finished = 1;
  end
endmodule
