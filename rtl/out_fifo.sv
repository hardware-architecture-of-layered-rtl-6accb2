// out_fifo -- first-in first-out buffer for the results of the Hadamard
// sub-decoders (OUT_FIFO).
//
// When loading a layer takes longer than the first sub-decoder result
// (t_loading = d*G/2 > 2r+1+d/2, "Case II", e.g. N_h = 64, G = 8), results
// arrive while both ports of every RAM are still busy reading; they wait here
// until the write side may use the ports.  In Case I (e.g. N_h = 128, G = 4)
// the same buffer holds each group only while its d/2 write cycles run.
// One entry is one group: N_h x d updated L_app^PVN and L_ex^H values.
// Show-ahead: dout is the oldest entry whenever empty is low; push and pop may
// happen in the same cycle.  Pushing when full or popping when empty is an
// error (asserted).  The buffer depth (G entries always suffice) is this
// design's choice; the published design gives no depth.
module out_fifo #(
  parameter int W     = 2 * pldpc_pkg::NH_DEF * (pldpc_pkg::R_DEF + 2) * pldpc_pkg::W_LLR_DEF,
  parameter int DEPTH = pldpc_pkg::Z2_DEF / pldpc_pkg::NH_DEF,
  localparam int PTW  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [CW-1:0] count
);

  logic [W-1:0]   mem [DEPTH];
  logic [PTW-1:0] wp, rp;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (int'(count) == DEPTH);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
