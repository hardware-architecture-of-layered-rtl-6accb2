// pldpc_h_decoder -- layered decoder for protograph-based LDPC-Hadamard
// (PLDPC-Hadamard) codes.
//
// The code's m*z1 layers (block rows of z2 Hadamard check nodes) are decoded
// one after another, I times.  For a layer, the d column sets it touches are
// read from four banks of N_h dual-port RAMs (PVN-CH, PVN-APP, H-EX, D1H-CH),
// interleaved by cyclic shifts and fed in G = z2/N_h groups to N_h pipelined
// symbol-MAP Hadamard sub-decoders; the updated L_app^PVN and L_ex^H come back
// through an output FIFO and are written to the RAMs.  The next layer starts
// when the last write of the previous one has been issued, so layers never
// overlap and no memory conflict can occur.
//
// Cycles per layer: max(d*G/2 + 2r+1 + d/2, d*G) + 2 (the +2 being one RAM
// read latency and one FIFO stage), i.e. 26 for N_h = 128 and 50 for N_h = 64.
//
// Interface
//   ch_wr_*   one word of PVN-CH-RAM per cycle: N_h channel LLRs of P-VNs;
//             word g of RAM l holds P-VN floor(g/G)*z2 + l*G + g mod G.
//             Allowed while ch_wr_ready (not during the first iteration).
//   d1h_wr_*  one word of D1H-CH-RAM per cycle (any time, separate port):
//             address h*m*z1*G + w of RAM l holds the 2^r-d D1H channel LLRs
//             of row l*G + (w mod G) of layer floor(w/G), half h.
//   start     decode the codeword in PVN-CH-RAM and D1H half `bank` with
//             num_iter iterations (0 counts as 1).
//   dec_*     after the last iteration the hard decisions are streamed, one
//             PVN-APP-RAM word (N_h bits, 1 = negative LLR) per cycle, in
//             address order 0 .. n*z1*G-1; `done` pulses with the last word.
// Channel LLRs are 5-bit, 3 fractional bits, positive meaning bit 0.
// The architecture (RAM types and arrangement, sub-decoder pipeline, two
// control logics, FIFO for Case II, doubled D1H-CH-RAM) is the published one.
// The host interface, the decision read-out and the first-iteration flags are
// this design's own.
// The assertions at the end use rst_n synchronously (disable iff) while the
// flip-flops use it as an asynchronous reset; lint notes this mixed use, which
// concerns only the checkers.  Only sub-decoder 0's out_valid is used: all
// N_h sub-decoders run in lock step (checked by an assertion).
module pldpc_h_decoder #(
  parameter int R       = pldpc_pkg::R_DEF,
  parameter int Z1      = pldpc_pkg::Z1_DEF,
  parameter int Z2      = pldpc_pkg::Z2_DEF,
  parameter int NH      = pldpc_pkg::NH_DEF,
  parameter int W_CH    = pldpc_pkg::W_CH_DEF,
  parameter int W_LLR   = pldpc_pkg::W_LLR_DEF,
  parameter int W_DF    = pldpc_pkg::W_DF_DEF,
  parameter int DF_FRAC = pldpc_pkg::DF_FRAC_DEF,
  localparam int D      = R + 2,
  localparam int ND     = (1 << R) - D,
  localparam int G      = Z2 / NH,
  localparam int L      = pldpc_pkg::M_BASE * Z1,
  localparam int NC     = pldpc_pkg::N_BASE * Z1,
  localparam int LW     = $clog2(L),
  localparam int CW     = $clog2(NC),
  localparam int PW     = (Z2 > 1) ? $clog2(Z2) : 1,
  localparam int AW_P   = $clog2(NC * G),
  localparam int AW_E   = $clog2(L * D * G),
  localparam int AW_D   = $clog2(2 * L * G)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control
  input  logic                       start,
  input  logic [7:0]                 num_iter,
  input  logic                       bank,
  output logic                       busy,
  output logic                       done,
  // channel LLRs of the P-VNs
  input  logic                       ch_wr_en,
  input  logic [AW_P-1:0]            ch_wr_addr,
  input  logic [NH-1:0][W_CH-1:0]    ch_wr_data,
  output logic                       ch_wr_ready,
  // channel LLRs of the D1H-VNs
  input  logic                       d1h_wr_en,
  input  logic [AW_D-1:0]            d1h_wr_addr,
  input  logic [NH-1:0][ND*W_CH-1:0] d1h_wr_data,
  // hard decisions
  output logic                       dec_valid,
  output logic [AW_P-1:0]            dec_addr,
  output logic [NH-1:0]              dec_bits
);
  import pldpc_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t        state;
  logic [LW-1:0] layer;
  logic [7:0]    iter, n_iter;
  logic          dbank;
  logic          first_iter;
  logic          lstart, layer_done;
  logic [AW_P-1:0] ocnt;
  logic          out_rd;
  logic [RD_LAT:0] out_vld;
  logic [AW_P-1:0] out_addr_d [RD_LAT+1];

  // ---------------- code table ----------------
  logic [D-1:0][CW-1:0] col;
  logic [D-1:0][PW-1:0] shift;
  qc_code_rom #(.R(R), .Z1(Z1), .Z2(Z2)) u_rom (.layer, .col, .shift);

  // ---------------- sequencer ----------------
  assign first_iter = (iter == 8'd0);
  wire   last_layer = (int'(layer) == L - 1);
  wire   last_iter  = (iter + 8'd1 >= n_iter);
  assign lstart     = (state == S_IDLE && start) ||
                      (state == S_RUN && layer_done && !(last_layer && last_iter));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      layer  <= '0;
      iter   <= '0;
      n_iter <= 8'd1;
      dbank  <= 1'b0;
      ocnt   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          layer  <= '0;
          iter   <= '0;
          n_iter <= (num_iter == 8'd0) ? 8'd1 : num_iter;
          dbank  <= bank;
        end
        S_RUN: if (layer_done) begin
          if (last_layer) begin
            layer <= '0;
            if (last_iter) begin
              state <= S_OUT;
              ocnt  <= '0;
            end else begin
              iter <= iter + 8'd1;
            end
          end else begin
            layer <= layer + 1'b1;
          end
        end
        S_OUT: begin
          ocnt <= ocnt + 1'b1;
          if (int'(ocnt) == NC * G - 1) begin
            state <= S_IDLE;
            iter  <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_rd = (state == S_OUT);
    assign ch_wr_ready = !(state == S_RUN && first_iter) && !(state == S_IDLE && start);

  // ---------------- RAM banks ----------------
  logic                       ch_en_rd;
  logic [AW_P-1:0]            pvn_addr_a, pvn_addr_b;
  logic [NH-1:0][W_CH-1:0]    ch_rd_a, ch_rd_b;
  logic                       app_en_rd;
  logic [NH-1:0][W_LLR-1:0]   app_rd_a, app_rd_b;
  logic                       ex_en_rd;
  logic [AW_E-1:0]            exr_addr_a, exr_addr_b;
  logic [NH-1:0][W_LLR-1:0]   ex_rd_a, ex_rd_b;
  logic                       d1h_en_rd;
  logic [AW_D-1:0]            d1h_rd_addr;
  logic [NH-1:0][ND*W_CH-1:0] d1h_rd, d1h_rd_b_unused;

  logic                       app_we, ex_we;
  logic [AW_P-1:0]            appw_addr_a, appw_addr_b;
  logic [AW_E-1:0]            exw_addr_a, exw_addr_b;
  logic [NH-1:0][W_LLR-1:0]   app_wd_a, app_wd_b, ex_wd_a, ex_wd_b;

  // PVN-CH-RAM: port A shared by host writes and decoder reads, port B reads.
  llr_ram_bank #(.NH(NH), .DEPTH(NC * G), .W(W_CH)) u_pvn_ch (
    .clk,
    .en_a(ch_en_rd || ch_wr_en), .we_a(!ch_en_rd && ch_wr_en),
    .addr_a(ch_en_rd ? pvn_addr_a : ch_wr_addr), .wd_a(ch_wr_data), .rd_a(ch_rd_a),
    .en_b(ch_en_rd), .we_b(1'b0), .addr_b(pvn_addr_b), .wd_b('0), .rd_b(ch_rd_b)
  );

  // PVN-APP-RAM: reads, write-back and the final decision read-out.
  llr_ram_bank #(.NH(NH), .DEPTH(NC * G), .W(W_LLR)) u_pvn_app (
    .clk,
    .en_a(app_en_rd || app_we || out_rd), .we_a(app_we),
    .addr_a(app_we ? appw_addr_a : (out_rd ? ocnt : pvn_addr_a)),
    .wd_a(app_wd_a), .rd_a(app_rd_a),
    .en_b(app_en_rd || app_we), .we_b(app_we),
    .addr_b(app_we ? appw_addr_b : pvn_addr_b), .wd_b(app_wd_b), .rd_b(app_rd_b)
  );

  // H-EX-RAM
  llr_ram_bank #(.NH(NH), .DEPTH(L * D * G), .W(W_LLR)) u_h_ex (
    .clk,
    .en_a(ex_en_rd || ex_we), .we_a(ex_we),
    .addr_a(ex_we ? exw_addr_a : exr_addr_a), .wd_a(ex_wd_a), .rd_a(ex_rd_a),
    .en_b(ex_en_rd || ex_we), .we_b(ex_we),
    .addr_b(ex_we ? exw_addr_b : exr_addr_b), .wd_b(ex_wd_b), .rd_b(ex_rd_b)
  );

  // D1H-CH-RAM, two halves: port A reads for decoding, port B takes new LLRs.
  llr_ram_bank #(.NH(NH), .DEPTH(2 * L * G), .W(ND * W_CH)) u_d1h_ch (
    .clk,
    .en_a(d1h_en_rd), .we_a(1'b0), .addr_a(d1h_rd_addr), .wd_a('0), .rd_a(d1h_rd),
    .en_b(d1h_wr_en), .we_b(d1h_wr_en), .addr_b(d1h_wr_addr), .wd_b(d1h_wr_data),
    .rd_b(d1h_rd_b_unused)
  );

  // ---------------- read control ----------------
  logic [1:0]           flag_set;
  logic [1:0][CW-1:0]   flag_col;
  logic                 sd_valid, rd_busy, rd_done;
  logic [NH-1:0][D-1:0][W_LLR-1:0] sd_lex;
  logic [NH-1:0][ND*W_CH-1:0]      sd_d1h;

  read_ctrl #(.R(R), .Z1(Z1), .Z2(Z2), .NH(NH), .W_CH(W_CH), .W_LLR(W_LLR)) u_rd (
    .clk, .rst_n, .start(lstart), .layer, .first_iter, .bank(dbank), .col, .shift,
    .flags_clr(state == S_IDLE && start), .flag_set, .flag_col,
    .ch_en(ch_en_rd), .pvn_addr_a, .pvn_addr_b, .ch_rd_a, .ch_rd_b,
    .app_en(app_en_rd), .app_rd_a, .app_rd_b,
    .ex_en(ex_en_rd), .ex_addr_a(exr_addr_a), .ex_addr_b(exr_addr_b), .ex_rd_a, .ex_rd_b,
    .d1h_en(d1h_en_rd), .d1h_addr(d1h_rd_addr), .d1h_rd,
    .sd_valid, .sd_lex, .sd_d1h, .busy(rd_busy), .rd_done
  );

  // ---------------- Hadamard sub-decoders ----------------
  logic [NH-1:0]                   sd_out_vld;
  logic [NH-1:0][D-1:0][W_LLR-1:0] res_app, res_ex;

  for (genvar l = 0; l < NH; l++) begin : g_hd
    hadamard_subdecoder #(.R(R), .W_CH(W_CH), .W_LLR(W_LLR), .W_DF(W_DF), .DF_FRAC(DF_FRAC)) u_hd (
      .clk, .rst_n, .in_valid(sd_valid), .lex_pvn(sd_lex[l]), .lch_d1h(sd_d1h[l]),
      .out_valid(sd_out_vld[l]), .app(res_app[l]), .lex_h(res_ex[l])
    );
  end

  // ---------------- output FIFO ----------------
  localparam int FW = 2 * NH * D * W_LLR;
  logic          fifo_pop, fifo_empty, fifo_full;
  logic [FW-1:0] fifo_dout;
  logic [$clog2(G+1)-1:0] fifo_count;

  out_fifo #(.W(FW), .DEPTH(G)) u_fifo (
    .clk, .rst_n, .push(sd_out_vld[0]), .din({res_app, res_ex}),
    .pop(fifo_pop), .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full),
    .count(fifo_count)
  );

  // ---------------- write control ----------------
  logic wr_busy;
  write_ctrl #(.R(R), .Z1(Z1), .Z2(Z2), .NH(NH), .W_LLR(W_LLR)) u_wr (
    .clk, .rst_n, .start(lstart), .layer, .col, .shift, .rd_done,
    .fifo_empty, .res_app(fifo_dout[FW-1 -: FW/2]), .res_ex(fifo_dout[FW/2-1:0]),
    .fifo_pop,
    .app_we, .app_addr_a(appw_addr_a), .app_addr_b(appw_addr_b), .app_wd_a, .app_wd_b,
    .ex_we, .ex_addr_a(exw_addr_a), .ex_addr_b(exw_addr_b), .ex_wd_a, .ex_wd_b,
    .flag_set, .flag_col, .busy(wr_busy), .layer_done
  );

  assign busy = (state != S_IDLE) || out_vld != '0 || rd_busy || wr_busy;

  // ---------------- hard-decision read-out ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld <= '0;
      for (int s = 0; s <= RD_LAT; s++) out_addr_d[s] <= '0;
    end else begin
      out_vld       <= {out_vld[RD_LAT-1:0], out_rd};
      out_addr_d[0] <= ocnt;
      for (int s = 1; s <= RD_LAT; s++) out_addr_d[s] <= out_addr_d[s-1];
    end
  end

  always_comb begin
    for (int l = 0; l < NH; l++) dec_bits[l] = app_rd_a[l][W_LLR-1];
  end
  assign dec_valid = out_vld[RD_LAT-1];
  assign dec_addr  = out_addr_d[RD_LAT-1];
  assign done      = dec_valid && int'(dec_addr) == NC * G - 1;

  // ---------------- checks ----------------
  a_ch_port_free: assert property (@(posedge clk) disable iff (!rst_n)
    !(ch_wr_en && ch_en_rd));
  a_no_write_while_read: assert property (@(posedge clk) disable iff (!rst_n)
    !(app_we && (app_en_rd || out_rd)));
  a_fifo_never_full_push: assert property (@(posedge clk) disable iff (!rst_n)
    !(sd_out_vld[0] && fifo_full));
  a_fifo_bound: assert property (@(posedge clk) disable iff (!rst_n)
    int'(fifo_count) <= G);
  a_sd_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    sd_out_vld == '0 || sd_out_vld == '1);

endmodule
