// dfht_reduced -- pipelined dual fast Hadamard transform, reduced to the r+2
// outputs that the layered decoder feeds back.
//
// Input j holds P_j = ln gamma(+h_j) and N_j = ln gamma(-h_j), the log
// likelihoods of the codewords +h_j and -h_j.  Output k (k = 0..r+1, Hadamard
// position i = spc_pos(k)) holds
//     S_P(i) = ln sum over codewords c with c_i = +1 of gamma(c),
//     S_N(i) = ln sum over codewords c with c_i = -1 of gamma(c).
// The structure is the FHT's with max* in place of the adders.  Stage s pairs
// positions i and i' = i + 2^s and forms
//     i : (max*(P_i, P_i'), max*(N_i, N_i'))
//     i': (max*(P_i, N_i'), max*(N_i, P_i'))
// Stages run bit 0 first, so the last stage pairs 0/8, 1/9, 2/10, 4/12, 7/15
// for r = 4 as in the published pipeline, and a butterfly half is only built
// when a kept output depends on it (for r = 4 the last stage has 12 max* units,
// not 32).  Every stage is registered (W bits); latency r cycles.  The final
// subtraction S_P - S_N is done by the caller in the following cycle.
module dfht_reduced #(
  parameter int R    = pldpc_pkg::R_DEF,
  parameter int W    = pldpc_pkg::W_DF_DEF,
  parameter int FRAC = pldpc_pkg::DF_FRAC_DEF,
  localparam int Q   = 1 << R,
  localparam int D   = R + 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [Q-1:0][W-1:0] p_in,
  input  logic signed [Q-1:0][W-1:0] n_in,
  output logic                      out_valid,
  output logic signed [D-1:0][W-1:0] sp,
  output logic signed [D-1:0][W-1:0] sn
);
  import pldpc_pkg::*;

  // Positions whose value is needed at the output of stage s.
  function automatic logic [Q-1:0] need_mask(int s);
    logic [Q-1:0] m, nm;
    m = '0;
    for (int e = 0; e < D; e++) m[spc_pos(R, e)] = 1'b1;
    for (int t = R - 1; t > s; t--) begin
      nm = m;
      for (int i = 0; i < Q; i++) if (m[i]) nm[i ^ (1 << t)] = 1'b1;
      m = nm;
    end
    return m;
  endfunction

  logic [R-1:0] vld;

  for (genvar s = 0; s < R; s++) begin : g_st
    localparam logic [Q-1:0] NEED = need_mask(s);
    logic signed [W-1:0] rp [Q];
    logic signed [W-1:0] rn [Q];
    logic signed [W-1:0] xp [Q];
    logic signed [W-1:0] xn [Q];

    for (genvar i = 0; i < Q; i++) begin : g_in
      if (s == 0) begin : g_first
        assign xp[i] = p_in[i];
        assign xn[i] = n_in[i];
      end else begin : g_next
        assign xp[i] = g_st[s-1].rp[i];
        assign xn[i] = g_st[s-1].rn[i];
      end
    end

    for (genvar i = 0; i < Q; i++) begin : g_bf
      localparam int J = i ^ (1 << s);   // partner position
      if (NEED[i]) begin : g_keep
        logic signed [W-1:0] yp, yn;
        if (((i >> s) & 1) == 0) begin : g_lo
          max_star #(.W(W), .FRAC(FRAC)) u_p (.a(xp[i]), .b(xp[J]), .y(yp));
          max_star #(.W(W), .FRAC(FRAC)) u_n (.a(xn[i]), .b(xn[J]), .y(yn));
        end else begin : g_hi
          max_star #(.W(W), .FRAC(FRAC)) u_p (.a(xp[J]), .b(xn[i]), .y(yp));
          max_star #(.W(W), .FRAC(FRAC)) u_n (.a(xn[J]), .b(xp[i]), .y(yn));
        end
        always_ff @(posedge clk) begin
          rp[i] <= yp;
          rn[i] <= yn;
        end
      end else begin : g_drop
        assign rp[i] = '0;
        assign rn[i] = '0;
      end
    end
  end

  for (genvar k = 0; k < D; k++) begin : g_out
    assign sp[k] = g_st[R-1].rp[spc_pos(R, k)];
    assign sn[k] = g_st[R-1].rn[spc_pos(R, k)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[R-2:0], in_valid};
  end
  assign out_valid = vld[R-1];

endmodule
