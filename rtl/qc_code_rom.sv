// qc_code_rom -- "index & shift" table of the doubly lifted parity-check
// matrix: for every layer (block row of z2 H-CNs) the d column sets (blocks of
// z2 P-VNs) it touches and the offset p of each z2 x z2 circulant.
//
// There are m*z1 layers and n*z1 column sets.  The table is computed at
// elaboration from the base matrix and the lifting formula in pldpc_pkg
// (code_col / code_shift) and read asynchronously: the outputs follow the
// layer index in the same cycle.  Entry delta of a layer is stored as
// {column set, offset}.
module qc_code_rom #(
  parameter int R   = pldpc_pkg::R_DEF,
  parameter int Z1  = pldpc_pkg::Z1_DEF,
  parameter int Z2  = pldpc_pkg::Z2_DEF,
  localparam int D  = R + 2,
  localparam int L  = pldpc_pkg::M_BASE * Z1,                       // layers
  localparam int NC = pldpc_pkg::N_BASE * Z1,                       // column sets
  localparam int LW = $clog2(L),
  localparam int CW = $clog2(NC),
  localparam int PW = (Z2 > 1) ? $clog2(Z2) : 1
) (
  input  logic [LW-1:0]        layer,
  output logic [D-1:0][CW-1:0] col,
  output logic [D-1:0][PW-1:0] shift
);
  import pldpc_pkg::*;

  typedef logic [L-1:0][D-1:0][CW+PW-1:0] table_t;

  function automatic table_t build_table();
    table_t t;
    for (int k = 0; k < L; k++)
      for (int e = 0; e < D; e++)
        t[k][e] = {CW'(code_col(k, e, Z1)), PW'(code_shift(k, e, Z1, Z2))};
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_comb begin
    for (int e = 0; e < D; e++) begin
      {col[e], shift[e]} = TABLE[layer][e];
    end
  end

endmodule
