// qc_interleaver -- cyclic shifter between the N_h RAMs of a bank and the N_h
// Hadamard sub-decoders, for one circulant permutation matrix (CPM).
//
// A CPM of offset p connects row rho of a layer to column (rho + p) mod z2.
// Sub-decoder l works on row l*G + tau of the layer (tau = group), whose
// P-VN sits at address offset a = (tau + r_e) mod G of RAM (l + rot) mod N_h,
// with q_u = p / G, r_e = p mod G and
//     rot = (q_u + 1) mod N_h  if a < r_e,   rot = q_u  otherwise.
// The caller supplies p and a; for reads (WRITE = 0) the words are rotated
// left, out[l] = in[(l + rot) mod N_h]; for writes (WRITE = 1) they are rotated
// right, out[(l + rot) mod N_h] = in[l], which undoes the read rotation.
// The q_u / r_e rule is the published one; the log2(N_h)-stage barrel
// structure is this design's choice.  Purely combinational.  N_h and G must be
// powers of two.
module qc_interleaver #(
  parameter int NH    = pldpc_pkg::NH_DEF,
  parameter int G     = pldpc_pkg::Z2_DEF / pldpc_pkg::NH_DEF,
  parameter int W     = pldpc_pkg::W_LLR_DEF,
  parameter bit WRITE = 1'b0,
  localparam int Z2   = NH * G,
  localparam int PW   = (Z2 > 1) ? $clog2(Z2) : 1,
  localparam int GW   = (G > 1) ? $clog2(G) : 1,
  localparam int SW   = (NH > 1) ? $clog2(NH) : 1
) (
  input  logic [PW-1:0]        p,      // CPM offset, 0 .. z2-1
  input  logic [GW-1:0]        a_off,  // address offset inside the set, 0 .. G-1
  input  logic [NH-1:0][W-1:0] din,
  output logic [NH-1:0][W-1:0] dout
);

  logic [PW-1:0] q_u, r_e;
  logic [SW-1:0] rot;

  always_comb begin
    q_u = p / PW'(G);
    r_e = p % PW'(G);
    if (PW'(a_off) < r_e) rot = SW'(q_u + 1'b1);  // modulo N_h by truncation
    else                  rot = SW'(q_u);
  end

  // Barrel rotator: stage s rotates by 2^s when bit s of rot is set.
  logic [NH-1:0][W-1:0] st [SW+1];

  assign st[0] = din;
  for (genvar s = 0; s < SW; s++) begin : g_stage
    for (genvar l = 0; l < NH; l++) begin : g_lane
      localparam int SRC = WRITE ? (l + NH - ((1 << s) % NH)) % NH : (l + (1 << s)) % NH;
      assign st[s+1][l] = rot[s] ? st[s][SRC] : st[s][l];
    end
  end
  assign dout = st[SW];

endmodule
