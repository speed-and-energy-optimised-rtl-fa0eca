// bcla4: one 4-bit nibble of the block carry lookahead adder. With REDUNDANT = 1 it is
// a 4-bit BCLARC (the generator is a BCLGRC); with REDUNDANT = 0 it is a 4-bit BCLA,
// which the full adder uses only for its most significant nibble.
//
// The nibble's sum bits are made by a small ripple chain: three early output full
// adders for bits 0..2 and an XOR3 for bit 3, whose carry is not needed. The carry into
// the chain is cin_fa. The nibble's carry output is not rippled: bclg4 computes it by
// lookahead from the eight operand signals and its own carry input cin_g. In the BCLARC
// cin_g is the previous nibble's redundant carry and cin_fa its non-redundant carry; in
// the least significant nibble both are the adder's carry input.
//
// Combinational loops reported here are the C-elements' feedback, intended.
//
// Interface: x[3:0], y[3:0], cin_fa, cin_g (dual-rail) in; sum[3:0], c4 (non-redundant
// carry out, QDI) and rc4 (redundant carry out, spacer when REDUNDANT = 0) out.
// No clock.
module bcla4
  import qdi_pkg::*;
#(
  parameter protocol_e PROTOCOL  = RTZ,
  parameter bit        REDUNDANT = 1'b1
) (
  input  dr_t [3:0] x,
  input  dr_t [3:0] y,
  input  dr_t       cin_fa,
  input  dr_t       cin_g,
  output dr_t [3:0] sum,
  output dr_t       c4,
  output dr_t       rc4
);

  dr_t [3:0] c;            // ripple carries into bits 0..3

  assign c[0] = cin_fa;

  for (genvar i = 0; i < 3; i++) begin : g_fa
    eo_full_adder #(.PROTOCOL(PROTOCOL)) u_fa (
      .x(x[i]), .y(y[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1])
    );
  end

  eo_xor3 #(.PROTOCOL(PROTOCOL)) u_xor3 (
    .x(x[3]), .y(y[3]), .c(c[3]), .s(sum[3])
  );

  bclg4 #(.PROTOCOL(PROTOCOL), .REDUNDANT(REDUNDANT)) u_bclg (
    .x(x), .y(y), .cin(cin_g), .c4(c4), .rc4(rc4)
  );

endmodule
