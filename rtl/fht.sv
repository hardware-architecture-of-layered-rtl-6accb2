// fht -- pipelined fast Hadamard transform of 2^r signed values.
//
// out[j] = sum_i (-1)^popcount(i & j) * in[i], i.e. the inner product of the
// input vector with column h_j of the Sylvester Hadamard matrix.  Stage s
// (s = 0 .. r-1) combines the pair (i, i + 2^s) for every i whose bit s is 0
// into (x_i + x_{i+2^s}, x_i - x_{i+2^s}); the first stage pairs inputs 0 and 1
// as in the published r = 4 pipeline.  Each stage is registered and one bit
// wider than the last (8 -> 9 -> 10 -> 11 -> 12 bits for 8-bit inputs), so no
// value can overflow.  Latency r cycles, one new vector per cycle.
module fht #(
  parameter int R    = pldpc_pkg::R_DEF,
  parameter int W_IN = pldpc_pkg::W_LLR_DEF,
  localparam int Q   = 1 << R
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic signed [Q-1:0][W_IN-1:0]   din,
  output logic                            out_valid,
  output logic signed [Q-1:0][W_IN+R-1:0] dout
);

  logic [R-1:0] vld;

  for (genvar s = 0; s < R; s++) begin : g_st
    logic signed [W_IN+s:0] r [Q];
    logic signed [W_IN+s-1:0] x [Q];   // stage input

    for (genvar i = 0; i < Q; i++) begin : g_in
      if (s == 0) begin : g_first
        assign x[i] = din[i];
      end else begin : g_next
        assign x[i] = g_st[s-1].r[i];
      end
    end

    for (genvar i = 0; i < Q; i++) begin : g_bf
      if (((i >> s) & 1) == 0) begin : g_pair
        always_ff @(posedge clk) begin
          r[i]            <= (W_IN+s+1)'(x[i]) + (W_IN+s+1)'(x[i + (1 << s)]);
          r[i + (1 << s)] <= (W_IN+s+1)'(x[i]) - (W_IN+s+1)'(x[i + (1 << s)]);
        end
      end
    end
  end

  for (genvar i = 0; i < Q; i++) begin : g_out
    assign dout[i] = g_st[R-1].r[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[R-2:0], in_valid};
  end
  assign out_valid = vld[R-1];

endmodule
