// bclg4: 4-bit QDI block carry lookahead generator (BCLG), optionally with a redundant
// carry output (BCLGRC, REDUNDANT = 1).
//
// For every bit i the operand rails give three mutually exclusive functions:
//   P_i = X_i1.Y_i0 + X_i0.Y_i1 (propagate), G_i = X_i1.Y_i1 (generate),
//   K_i = X_i0.Y_i0 (kill).
// The lookahead carry is written in disjoint sum-of-products form:
//   C41 = G3 + P3G2 + P3P2G1 + P3P2P1G0 + P3P2P1P0.C01
//   C40 = K3 + P3K2 + P3P2K1 + P3P2P1K0 + P3P2P1P0.C00
// The generate (kill) terms are ORed into GS (KS). The all-propagate product PP is
// synchronised with each carry-input rail in a C-element and ORed with GS (KS) to give
// NC41 (NC40).
// Internal completion detection: R_i = G_i + P_i + K_i for each bit feeds a tree of
// C-elements (C1, C2, ICD). The carry output is C4x = C(NC4x, ICD). So C4 shows data
// only after all eight operand signals have arrived. It returns to the spacer only after
// all of them have gone, even if NC4x fell earlier. Without this the block would not be
// QDI (gate orphans).
// The redundant carry of the BCLGRC is RC41 = PP.C01 + GS, RC40 = PP.C00 + KS (an AO21
// per rail). It is logically equal to C4 but has no internal completion detection, so it
// switches early. It feeds the next generator's carry input and so shortens the lookahead
// chain. All of this follows the paper's Fig. 4a/5a. Under RTO every AND/OR becomes its
// dual and the C-elements stay.
//
// Tools report combinational loops through the C-elements (pc1/pc0, the ICD tree,
// C41/C40): that is their feedback (see c_element), intended.
//
// Interface: x[3:0], y[3:0], cin (dual-rail) in; c4 out; rc4 out. When REDUNDANT = 0
// (plain BCLG) rc4 is held at the spacer and should be left unconnected. No clock.
module bclg4
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL  = RTZ,
  parameter bit        REDUNDANT = 1'b1
) (
  input  dr_t [3:0] x,
  input  dr_t [3:0] y,
  input  dr_t       cin,
  output dr_t       c4,
  output dr_t       rc4
);

  logic [3:0] p, g, k, r;
  logic gs, ks, pp;
  logic pc1, pc0;          // C(C01, PP), C(C00, PP)
  logic nc41, nc40;
  logic cd1, cd2, icd;     // C1, C2 and ICD of the internal completion detector

  for (genvar i = 0; i < 4; i++) begin : g_pgk
    assign p[i] = g_ao22(PROTOCOL, x[i].r1, y[i].r0, x[i].r0, y[i].r1);
    assign g[i] = g_and2(PROTOCOL, x[i].r1, y[i].r1);
    assign k[i] = g_and2(PROTOCOL, x[i].r0, y[i].r0);
    assign r[i] = g_or3(PROTOCOL, g[i], p[i], k[i]);
  end

  assign gs = g_or4(PROTOCOL, g[3], g_and2(PROTOCOL, p[3], g[2]),
                    g_and3(PROTOCOL, p[3], p[2], g[1]),
                    g_and4(PROTOCOL, p[3], p[2], p[1], g[0]));
  assign ks = g_or4(PROTOCOL, k[3], g_and2(PROTOCOL, p[3], k[2]),
                    g_and3(PROTOCOL, p[3], p[2], k[1]),
                    g_and4(PROTOCOL, p[3], p[2], p[1], k[0]));
  assign pp = g_and4(PROTOCOL, p[3], p[2], p[1], p[0]);

  c_element u_pc1 (.a(cin.r1), .b(pp), .rst_n(1'b1), .q(pc1));
  c_element u_pc0 (.a(cin.r0), .b(pp), .rst_n(1'b1), .q(pc0));

  assign nc41 = g_or2(PROTOCOL, gs, pc1);
  assign nc40 = g_or2(PROTOCOL, ks, pc0);

  // Internal completion detection (R1..R4 are bits 3..0).
  c_element u_c1  (.a(r[3]), .b(r[2]), .rst_n(1'b1), .q(cd1));
  c_element u_c2  (.a(r[1]), .b(r[0]), .rst_n(1'b1), .q(cd2));
  c_element u_icd (.a(cd1),  .b(cd2),  .rst_n(1'b1), .q(icd));

  c_element u_c41 (.a(nc41), .b(icd), .rst_n(1'b1), .q(c4.r1));
  c_element u_c40 (.a(nc40), .b(icd), .rst_n(1'b1), .q(c4.r0));

  if (REDUNDANT) begin : g_rc
    assign rc4.r1 = g_ao21(PROTOCOL, cin.r1, pp, gs);
    assign rc4.r0 = g_ao21(PROTOCOL, cin.r0, pp, ks);
  end else begin : g_no_rc
    assign rc4 = spacer(PROTOCOL);
  end

endmodule
