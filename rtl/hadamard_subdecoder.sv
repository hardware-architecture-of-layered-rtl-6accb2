// hadamard_subdecoder -- symbol-MAP decoder of one Hadamard check node (H-CN)
// for the layered PLDPC-Hadamard decoder.
//
// Inputs are the d = r+2 extrinsic LLRs L_ex^PVN from the P-VNs of the H-CN
// and the 2^r-d channel LLRs of its degree-1 Hadamard VNs (D1H-VNs).  The
// 2^r FHT inputs are the P-VN LLRs at the embedded single-parity-check
// positions 0,1,2,4,..,2^(r-1),2^r-1 and the D1H LLRs, in ascending order, at
// the other positions (the other term of L_ch + L_apr being zero).
//   cycles 1..r    FHT; its output is 2 ln gamma(+h_j).  Dropping the LSB
//                  halves it, and the value is truncated (arithmetic shift)
//                  to the DFHT fraction and saturated to W_DF bits.
//                  ln gamma(-h_j) is its (saturated) negation.
//   cycles r+1..2r reduced DFHT (max* butterflies).
//   cycle 2r+1     L_app^H = S_P - S_N, rescaled to 3 fractional bits and
//                  saturated to W_LLR, and L_ex^H = L_app^H - L_ex^PVN
//                  (saturated), with L_ex^PVN delayed 2r cycles.
// Latency 2r+1 cycles, fully pipelined (a new H-CN may enter every cycle).
// The pipeline, its stage count and the bit widths of each stage follow the
// published design (setting S1 by default); the rounding (truncation) and the
// saturation at each narrowing are this design's choice.
module hadamard_subdecoder #(
  parameter int R       = pldpc_pkg::R_DEF,
  parameter int W_CH    = pldpc_pkg::W_CH_DEF,
  parameter int W_LLR   = pldpc_pkg::W_LLR_DEF,
  parameter int W_DF    = pldpc_pkg::W_DF_DEF,
  parameter int DF_FRAC = pldpc_pkg::DF_FRAC_DEF,
  localparam int Q      = 1 << R,
  localparam int D      = R + 2,
  localparam int ND     = Q - D
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [D-1:0][W_LLR-1:0] lex_pvn,   // L_ex^PVN, one per P-VN
  input  logic signed [ND-1:0][W_CH-1:0] lch_d1h,   // channel LLRs of the D1H-VNs
  output logic                          out_valid,
  output logic signed [D-1:0][W_LLR-1:0] app,       // L_app^H -> new L_app^PVN
  output logic signed [D-1:0][W_LLR-1:0] lex_h      // L_ex^H
);
  import pldpc_pkg::*;

  localparam int WF    = W_LLR + R;                 // FHT output width
  localparam int SHIFT = LLR_FRAC + 1 - DF_FRAC;    // 2ln(g) at 3 frac -> ln(g) at DF_FRAC

  // ---- FHT input arrangement ----
  logic signed [Q-1:0][W_LLR-1:0] fin;
  always_comb begin
    for (int k = 0; k < D; k++)  fin[spc_pos(R, k)] = lex_pvn[k];
    for (int k = 0; k < ND; k++) fin[d1h_pos(R, k)] = W_LLR'($signed(lch_d1h[k]));
  end

  logic                       fht_vld;
  logic signed [Q-1:0][WF-1:0] fout;

  fht #(.R(R), .W_IN(W_LLR)) u_fht (
    .clk, .rst_n, .in_valid, .din(fin), .out_valid(fht_vld), .dout(fout)
  );

  // ---- ln gamma(+h_j), ln gamma(-h_j) ----
  logic signed [Q-1:0][W_DF-1:0] lp, ln_;
  always_comb begin
    for (int j = 0; j < Q; j++) begin
      logic signed [WF-1:0] v;
      v      = $signed(fout[j]) >>> SHIFT;
      lp[j]  = W_DF'(sat_int(int'(v), W_DF));
      ln_[j] = W_DF'(sat_int(-int'(v), W_DF));
    end
  end

  logic                        df_vld;
  logic signed [D-1:0][W_DF-1:0] sp, sn;

  dfht_reduced #(.R(R), .W(W_DF), .FRAC(DF_FRAC)) u_dfht (
    .clk, .rst_n, .in_valid(fht_vld), .p_in(lp), .n_in(ln_),
    .out_valid(df_vld), .sp, .sn
  );

  // ---- L_ex^PVN delay line, 2r cycles ----
  logic signed [D-1:0][W_LLR-1:0] dly [2*R];
  always_ff @(posedge clk) begin
    dly[0] <= lex_pvn;
    for (int s = 1; s < 2 * R; s++) dly[s] <= dly[s-1];
  end

  // ---- APP and extrinsic calculation ----
  always_ff @(posedge clk) begin
    for (int k = 0; k < D; k++) begin
      int a;
      a = (int'($signed(sp[k])) - int'($signed(sn[k]))) * (1 << (LLR_FRAC - DF_FRAC));
      a = sat_int(a, W_LLR);
      app[k]   <= W_LLR'(a);
      lex_h[k] <= W_LLR'(sat_int(a - int'($signed(dly[2*R-1][k])), W_LLR));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= df_vld;
  end

endmodule
