// write_ctrl -- write-side control logic of the layered decoder: stores the
// updated L_app^PVN and L_ex^H of every group of a layer back into the RAMs.
//
// The results of one group (N_h sub-decoders x d entries) are taken from the
// head of out_fifo and written two entries per cycle, entry 2k on port A and
// entry 2k+1 on port B of PVN-APP-RAM and H-EX-RAM, so a group takes d/2
// cycles.  L_app^PVN goes to the address it was read from, with the read
// rotation undone (qc_interleaver, WRITE = 1); L_ex^H goes unrotated to
// (layer*G + tau)*d + j.  Each written column set is reported (flag_set) so
// that later reads of the first iteration take PVN-APP-RAM instead of
// PVN-CH-RAM.
// Writing may only begin once the read side has finished (rd_done): both
// ports of every RAM are used for reading until then.  After `start` the block
// writes G groups and raises layer_done in the cycle of the last write.
// The write order and addressing mirror the published read operation; the
// hand-over through the FIFO and the rd_done rule are this design's choices.
module write_ctrl #(
  parameter int R     = pldpc_pkg::R_DEF,
  parameter int Z1    = pldpc_pkg::Z1_DEF,
  parameter int Z2    = pldpc_pkg::Z2_DEF,
  parameter int NH    = pldpc_pkg::NH_DEF,
  parameter int W_LLR = pldpc_pkg::W_LLR_DEF,
  localparam int D     = R + 2,
  localparam int PAIRS = D / 2,
  localparam int G     = Z2 / NH,
  localparam int L     = pldpc_pkg::M_BASE * Z1,
  localparam int NC    = pldpc_pkg::N_BASE * Z1,
  localparam int LW    = $clog2(L),
  localparam int CW    = $clog2(NC),
  localparam int PW    = (Z2 > 1) ? $clog2(Z2) : 1,
  localparam int GW    = (G > 1) ? $clog2(G) : 1,
  localparam int AW_P  = $clog2(NC * G),
  localparam int AW_E  = $clog2(L * D * G),
  localparam int PRW   = $clog2(PAIRS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [LW-1:0]                 layer,
  input  logic [D-1:0][CW-1:0]          col,
  input  logic [D-1:0][PW-1:0]          shift,
  input  logic                          rd_done,
  // result FIFO
  input  logic                          fifo_empty,
  input  logic [NH-1:0][D-1:0][W_LLR-1:0] res_app,
  input  logic [NH-1:0][D-1:0][W_LLR-1:0] res_ex,
  output logic                          fifo_pop,
  // PVN-APP-RAM write ports
  output logic                          app_we,
  output logic [AW_P-1:0]               app_addr_a,
  output logic [AW_P-1:0]               app_addr_b,
  output logic [NH-1:0][W_LLR-1:0]      app_wd_a,
  output logic [NH-1:0][W_LLR-1:0]      app_wd_b,
  // H-EX-RAM write ports
  output logic                          ex_we,
  output logic [AW_E-1:0]               ex_addr_a,
  output logic [AW_E-1:0]               ex_addr_b,
  output logic [NH-1:0][W_LLR-1:0]      ex_wd_a,
  output logic [NH-1:0][W_LLR-1:0]      ex_wd_b,
  // written column sets
  output logic [1:0]                    flag_set,
  output logic [1:0][CW-1:0]            flag_col,
  output logic                          busy,
  output logic                          layer_done
);

  logic          active;
  logic [GW-1:0] tau;
  logic [PRW-1:0] pr;
  logic          wr;
  int            j0, j1;
  logic [GW-1:0] a0, a1;
  logic [NH-1:0][W_LLR-1:0] app0, app1;

  assign wr = active && rd_done && !fifo_empty;

  always_comb begin
    j0 = 2 * int'(pr);
    j1 = j0 + 1;
    a0 = GW'((int'(tau) + int'(shift[j0]) % G) % G);
    a1 = GW'((int'(tau) + int'(shift[j1]) % G) % G);
    for (int l = 0; l < NH; l++) begin
      app0[l]    = res_app[l][j0];
      app1[l]    = res_app[l][j1];
      ex_wd_a[l] = res_ex[l][j0];
      ex_wd_b[l] = res_ex[l][j1];
    end
    app_we     = wr;
    ex_we      = wr;
    app_addr_a = AW_P'(int'(col[j0]) * G + int'(a0));
    app_addr_b = AW_P'(int'(col[j1]) * G + int'(a1));
    ex_addr_a  = AW_E'((int'(layer) * G + int'(tau)) * D + j0);
    ex_addr_b  = AW_E'((int'(layer) * G + int'(tau)) * D + j1);
    flag_set   = {wr, wr};
    flag_col   = {col[j1], col[j0]};
    fifo_pop   = wr && (int'(pr) == PAIRS - 1);
    layer_done = fifo_pop && (int'(tau) == G - 1);
  end

  qc_interleaver #(.NH(NH), .G(G), .W(W_LLR), .WRITE(1'b1)) u_il_a (
    .p(shift[j0]), .a_off(a0), .din(app0), .dout(app_wd_a)
  );
  qc_interleaver #(.NH(NH), .G(G), .W(W_LLR), .WRITE(1'b1)) u_il_b (
    .p(shift[j1]), .a_off(a1), .din(app1), .dout(app_wd_b)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      tau    <= '0;
      pr     <= '0;
    end else if (start) begin
      active <= 1'b1;
      tau    <= '0;
      pr     <= '0;
    end else if (wr) begin
      if (int'(pr) == PAIRS - 1) begin
        pr  <= '0;
        tau <= tau + 1'b1;
        if (int'(tau) == G - 1) active <= 1'b0;
      end else begin
        pr <= pr + 1'b1;
      end
    end
  end

  assign busy = active;

endmodule
