// read_ctrl -- read-side control logic of the layered decoder: loads the N_h
// Hadamard sub-decoders with one group of H-CNs after another.
//
// A layer has G = z2/N_h groups; sub-decoder l handles row l*G + tau of the
// layer in group tau.  For each group the d entries (column set c_j, CPM
// offset p_j) of the layer are read two at a time, entry 2k on port A and
// entry 2k+1 on port B of every RAM bank (dual-port RAMs), so a group takes
// d/2 cycles and the whole layer t_loading = d*G/2 cycles:
//   PVN address   c_j*G + ((tau + p_j mod G) mod G), rotated by qc_interleaver
//   H-EX address  (layer*G + tau)*d + j                (not rotated)
//   D1H address   bank*m*z1*G + layer*G + tau          (with the last pair)
// In the cycle the data return, L_ex^PVN = L_app^PVN - L_ex^H is formed
// (saturated) and stored in a collection register; when the last pair of a
// group is in, the group is handed to the sub-decoders (sd_valid).
// During the first iteration a P-VN's value comes from PVN-CH-RAM until its
// column set has been written once (one flag per column set, set by the write
// side), and L_ex^H reads as zero: this is the algorithm's initialisation
// L_app = L_ch, L_ex^H = 0 done without a separate copy pass.
// Timing: reads are issued in the d*G/2 cycles after `start`; sd_valid for
// group tau comes RD_LAT+1 cycles after its last read; rd_done rises the cycle
// after the last group was handed over and stays high until the next start.
// The read addressing is the published one; the flag scheme, the collection
// register and the cycle alignment are this design's choices.
module read_ctrl #(
  parameter int R     = pldpc_pkg::R_DEF,
  parameter int Z1    = pldpc_pkg::Z1_DEF,
  parameter int Z2    = pldpc_pkg::Z2_DEF,
  parameter int NH    = pldpc_pkg::NH_DEF,
  parameter int W_CH  = pldpc_pkg::W_CH_DEF,
  parameter int W_LLR = pldpc_pkg::W_LLR_DEF,
  localparam int D     = R + 2,
  localparam int ND    = (1 << R) - D,
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
  localparam int AW_D  = $clog2(2 * L * G),
  localparam int NRD   = PAIRS * G,
  localparam int CNTW  = $clog2(NRD + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,       // begin reading a layer
  input  logic [LW-1:0]                 layer,
  input  logic                          first_iter,
  input  logic                          bank,        // D1H-CH-RAM half in use
  input  logic [D-1:0][CW-1:0]          col,         // from qc_code_rom
  input  logic [D-1:0][PW-1:0]          shift,
  // written-once flags per column set
  input  logic                          flags_clr,
  input  logic [1:0]                    flag_set,
  input  logic [1:0][CW-1:0]            flag_col,
  // PVN-CH-RAM (read both ports)
  output logic                          ch_en,
  output logic [AW_P-1:0]               pvn_addr_a,  // shared by CH and APP banks
  output logic [AW_P-1:0]               pvn_addr_b,
  input  logic [NH-1:0][W_CH-1:0]       ch_rd_a,
  input  logic [NH-1:0][W_CH-1:0]       ch_rd_b,
  // PVN-APP-RAM
  output logic                          app_en,
  input  logic [NH-1:0][W_LLR-1:0]      app_rd_a,
  input  logic [NH-1:0][W_LLR-1:0]      app_rd_b,
  // H-EX-RAM
  output logic                          ex_en,
  output logic [AW_E-1:0]               ex_addr_a,
  output logic [AW_E-1:0]               ex_addr_b,
  input  logic [NH-1:0][W_LLR-1:0]      ex_rd_a,
  input  logic [NH-1:0][W_LLR-1:0]      ex_rd_b,
  // D1H-CH-RAM (port A)
  output logic                          d1h_en,
  output logic [AW_D-1:0]               d1h_addr,
  input  logic [NH-1:0][ND*W_CH-1:0]    d1h_rd,
  // to the sub-decoders
  output logic                          sd_valid,
  output logic [NH-1:0][D-1:0][W_LLR-1:0] sd_lex,
  output logic [NH-1:0][ND*W_CH-1:0]    sd_d1h,
  output logic                          busy,
  output logic                          rd_done
);
  import pldpc_pkg::*;

  // ---------------- issue side ----------------
  logic [CNTW-1:0] cnt;
  logic            issuing;
  logic [NC-1:0]   written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      cnt     <= '0;
    end else if (start) begin
      issuing <= 1'b1;
      cnt     <= '0;
    end else if (issuing) begin
      if (cnt == CNTW'(NRD - 1)) issuing <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) written <= '0;
    else if (flags_clr) written <= '0;
    else begin
      if (flag_set[0]) written[flag_col[0]] <= 1'b1;
      if (flag_set[1]) written[flag_col[1]] <= 1'b1;
    end
  end

  typedef struct packed {
    logic          vld;
    logic          last;     // last pair of the group
    logic          lastgrp;  // last group of the layer
    logic [$clog2(PAIRS+1)-1:0] pr;
    logic [PW-1:0] p0, p1;
    logic [GW-1:0] a0, a1;
    logic          app0, app1;
    logic          zero_ex;
  } meta_t;

  meta_t m_now;
  logic [GW-1:0] tau;
  logic [$clog2(PAIRS+1)-1:0] pr;

  always_comb begin
    int j0, j1;
    tau = GW'(int'(cnt) / PAIRS);
    pr  = ($clog2(PAIRS+1))'(int'(cnt) % PAIRS);
    j0  = 2 * int'(pr);
    j1  = j0 + 1;
    m_now.vld     = issuing;
    m_now.last    = (int'(pr) == PAIRS - 1);
    m_now.lastgrp = (int'(tau) == G - 1);
    m_now.pr      = pr;
    m_now.p0      = shift[j0];
    m_now.p1      = shift[j1];
    m_now.a0      = GW'((int'(tau) + int'(shift[j0]) % G) % G);
    m_now.a1      = GW'((int'(tau) + int'(shift[j1]) % G) % G);
    m_now.app0    = !first_iter || written[col[j0]];
    m_now.app1    = !first_iter || written[col[j1]];
    m_now.zero_ex = first_iter;

    pvn_addr_a = AW_P'(int'(col[j0]) * G + int'(m_now.a0));
    pvn_addr_b = AW_P'(int'(col[j1]) * G + int'(m_now.a1));
    ex_addr_a  = AW_E'((int'(layer) * G + int'(tau)) * D + j0);
    ex_addr_b  = AW_E'((int'(layer) * G + int'(tau)) * D + j1);
    d1h_addr   = AW_D'(int'(bank) * L * G + int'(layer) * G + int'(tau));
    ch_en      = issuing && first_iter;
    app_en     = issuing;
    ex_en      = issuing && !first_iter;
    d1h_en     = issuing && m_now.last;
  end

  // ---------------- metadata pipeline (RAM latency) ----------------
  meta_t mp [RD_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RD_LAT; s++) mp[s] <= '0;
    end else begin
      mp[0] <= m_now;
      for (int s = 1; s < RD_LAT; s++) mp[s] <= mp[s-1];
    end
  end
  meta_t m;
  assign m = mp[RD_LAT-1];

  // ---------------- data side ----------------
  logic [NH-1:0][W_LLR-1:0] sel_a, sel_b, rot_a, rot_b;
  always_comb begin
    for (int l = 0; l < NH; l++) begin
      sel_a[l] = m.app0 ? app_rd_a[l] : W_LLR'($signed(ch_rd_a[l]));
      sel_b[l] = m.app1 ? app_rd_b[l] : W_LLR'($signed(ch_rd_b[l]));
    end
  end

  qc_interleaver #(.NH(NH), .G(G), .W(W_LLR), .WRITE(1'b0)) u_il_a (
    .p(m.p0), .a_off(m.a0), .din(sel_a), .dout(rot_a)
  );
  qc_interleaver #(.NH(NH), .G(G), .W(W_LLR), .WRITE(1'b0)) u_il_b (
    .p(m.p1), .a_off(m.a1), .din(sel_b), .dout(rot_b)
  );

  logic [NH-1:0][D-1:0][W_LLR-1:0] coll;
  logic [NH-1:0][ND*W_CH-1:0]      coll_d1h;
  logic                            load_next, load_last;

  always_ff @(posedge clk) begin
    if (m.vld) begin
      for (int l = 0; l < NH; l++) begin
        int ea, eb;
        ea = m.zero_ex ? 0 : int'($signed(ex_rd_a[l]));
        eb = m.zero_ex ? 0 : int'($signed(ex_rd_b[l]));
        coll[l][2*m.pr]     <= W_LLR'(sat_int(int'($signed(rot_a[l])) - ea, W_LLR));
        coll[l][2*m.pr + 1] <= W_LLR'(sat_int(int'($signed(rot_b[l])) - eb, W_LLR));
        if (m.last) coll_d1h[l] <= d1h_rd[l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_next <= 1'b0;
      load_last <= 1'b0;
      rd_done   <= 1'b0;
    end else begin
      load_next <= m.vld && m.last;
      load_last <= m.vld && m.last && m.lastgrp;
      if (start)          rd_done <= 1'b0;
      else if (load_last) rd_done <= 1'b1;
    end
  end

  assign sd_valid = load_next;
  assign sd_lex   = coll;
  assign sd_d1h   = coll_d1h;
  assign busy     = issuing || m.vld || load_next;

endmodule
