// eo_full_adder: early output QDI dual-rail full adder.
//
// Two AO22 gates classify the operand pair: E (x and y equal) and D (x and y differ).
// Each is paired with each carry-input rail in a C-element, and the sum rails are
// ORed from them: SUM1 = C(E,CIN1) + C(D,CIN0), SUM0 = C(E,CIN0) + C(D,CIN1).
// The carry output is an AO22 per rail: COUT1 = CIN1.D + X1.Y1 and
// COUT0 = CIN0.D + X0.Y0, so a generate (x=y=1) or kill (x=y=0) produces the carry
// output before the carry input arrives (early output), and the spacer can likewise
// reach the carry output early. The sum always waits for the carry input.
// This is the paper's cell (after its earlier work); under RTO every AND/OR becomes its
// dual and the C-elements stay.
//
// Tools report combinational loops at the four C-element outputs: that is their
// feedback (see c_element), intended.
//
// Interface: x, y, cin (dual-rail) in; sum, cout (dual-rail) out. No clock.
module eo_full_adder
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t x,
  input  dr_t y,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic eq, df;            // x == y, x != y (one-hot during data)
  logic eq_c1, eq_c0, df_c1, df_c0;

  assign eq = g_ao22(PROTOCOL, x.r0, y.r0, x.r1, y.r1);
  assign df = g_ao22(PROTOCOL, x.r0, y.r1, x.r1, y.r0);

  c_element u_eq_c1 (.a(eq), .b(cin.r1), .rst_n(1'b1), .q(eq_c1));
  c_element u_eq_c0 (.a(eq), .b(cin.r0), .rst_n(1'b1), .q(eq_c0));
  c_element u_df_c1 (.a(df), .b(cin.r1), .rst_n(1'b1), .q(df_c1));
  c_element u_df_c0 (.a(df), .b(cin.r0), .rst_n(1'b1), .q(df_c0));

  assign sum.r1  = g_or2(PROTOCOL, eq_c1, df_c0);
  assign sum.r0  = g_or2(PROTOCOL, eq_c0, df_c1);

  assign cout.r1 = g_ao22(PROTOCOL, cin.r1, df, x.r1, y.r1);
  assign cout.r0 = g_ao22(PROTOCOL, cin.r0, df, x.r0, y.r0);

endmodule
