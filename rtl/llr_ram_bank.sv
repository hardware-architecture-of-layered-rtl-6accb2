// llr_ram_bank -- N_h true dual-port RAMs that share their two address buses.
//
// The decoder keeps each kind of LLR in a bank of N_h RAMs, RAM l holding the
// l-th group of every set of z2 values (set s, value v of the set at address
// s*G + v mod G of RAM v / G).  One address therefore reaches N_h values of the
// same set at once, one per RAM, and two addresses (ports A and B) reach 2*N_h.
// The same module serves as PVN-CH-RAM, PVN-APP-RAM, H-EX-RAM and D1H-CH-RAM;
// only DEPTH and W differ.
//
// Interface: per port an enable, a write enable, an address shared by all N_h
// RAMs and one data word per RAM.  Timing: a write takes effect at the clock
// edge of the cycle it is presented in; read data of an address presented in
// cycle t is on rd_* during cycle t+RD_LAT (registered output).  A read in the
// cycle after a write to the same address returns the new value.  The two ports
// must not write the same address in the same cycle (asserted).  Contents are
// not reset; the controller never reads a word it has not written.
module llr_ram_bank #(
  parameter int NH     = pldpc_pkg::NH_DEF,
  parameter int DEPTH  = 1408,
  parameter int W      = pldpc_pkg::W_LLR_DEF,
  parameter int RD_LAT = pldpc_pkg::RD_LAT,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  // port A
  input  logic                en_a,
  input  logic                we_a,
  input  logic [AW-1:0]       addr_a,
  input  logic [NH-1:0][W-1:0] wd_a,
  output logic [NH-1:0][W-1:0] rd_a,
  // port B
  input  logic                en_b,
  input  logic                we_b,
  input  logic [AW-1:0]       addr_b,
  input  logic [NH-1:0][W-1:0] wd_b,
  output logic [NH-1:0][W-1:0] rd_b
);

  for (genvar l = 0; l < NH; l++) begin : g_ram
    logic [W-1:0] mem [DEPTH];
    logic [W-1:0] qa [RD_LAT];
    logic [W-1:0] qb [RD_LAT];

    always_ff @(posedge clk) begin
      if (en_a) begin
        if (we_a) mem[addr_a] <= wd_a[l];
        else      qa[0] <= mem[addr_a];
      end
      if (en_b) begin
        if (we_b) mem[addr_b] <= wd_b[l];
        else      qb[0] <= mem[addr_b];
      end
      for (int s = 1; s < RD_LAT; s++) begin
        qa[s] <= qa[s-1];
        qb[s] <= qb[s-1];
      end
    end

    assign rd_a[l] = qa[RD_LAT-1];
    assign rd_b[l] = qb[RD_LAT-1];
  end

  // Both ports writing one address in one cycle has no defined result.
  a_no_write_clash: assert property (@(posedge clk)
    !(en_a && we_a && en_b && we_b && addr_a == addr_b));

endmodule
