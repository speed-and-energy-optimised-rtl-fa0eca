// eo_xor3: early output QDI dual-rail 3-input XOR.
//
// The sum half of eo_full_adder: AO22 gates form E (x == y) and D (x != y), each is
// synchronised with both rails of c in C-elements, and OR gates give
// OUT1 = C(E,C1) + C(D,C0), OUT0 = C(E,C0) + C(D,C1). It produces the most significant
// sum bit of every 4-bit nibble, where no carry output is needed. RTO uses the dual
// gates and the same C-elements.
//
// Tools report combinational loops at the four C-element outputs: that is their
// feedback (see c_element), intended.
//
// Interface: x, y, c (dual-rail) in; s = x ^ y ^ c (dual-rail) out. No clock.
module eo_xor3
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t x,
  input  dr_t y,
  input  dr_t c,
  output dr_t s
);

  logic eq, df;
  logic eq_c1, eq_c0, df_c1, df_c0;

  assign eq = g_ao22(PROTOCOL, x.r0, y.r0, x.r1, y.r1);
  assign df = g_ao22(PROTOCOL, x.r0, y.r1, x.r1, y.r0);

  c_element u_eq_c1 (.a(eq), .b(c.r1), .rst_n(1'b1), .q(eq_c1));
  c_element u_eq_c0 (.a(eq), .b(c.r0), .rst_n(1'b1), .q(eq_c0));
  c_element u_df_c1 (.a(df), .b(c.r1), .rst_n(1'b1), .q(df_c1));
  c_element u_df_c0 (.a(df), .b(c.r0), .rst_n(1'b1), .q(df_c0));

  assign s.r1 = g_or2(PROTOCOL, eq_c1, df_c0);
  assign s.r0 = g_or2(PROTOCOL, eq_c0, df_c1);

endmodule
