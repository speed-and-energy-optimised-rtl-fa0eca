// qdi_bclarc: N-bit QDI block carry lookahead adder with redundant carry (BCLARC).
//
// The operands are split into N/4 nibbles. Every nibble except the most significant is
// a 4-bit BCLARC (bcla4, REDUNDANT = 1); the most significant is a 4-bit BCLA
// (REDUNDANT = 0), whose single carry output is the adder's carry-out (overflow).
// Two carry chains run between nibbles:
//   - the redundant carries RC4 link the lookahead generators (cin_g of nibble k is
//     rc4 of nibble k-1). They have no internal completion detection, so data and
//     spacer race along this chain at one AO21/OA21 gate per nibble;
//   - the non-redundant carries C4, which do wait for internal completion, enter the
//     ripple chain of the next nibble (cin_fa). They acknowledge that nibble's operands.
// In the least significant nibble both carry inputs are the adder's carry input.
// The structure is the paper's Fig. 3b for N = 32.
//
// Combinational loops reported here are the C-elements' feedback, intended. The
// redundant carry of the top nibble does not exist (plain BCLG), so that entry of
// rc4 stays unused.
//
// Interface: x[N-1:0], y[N-1:0], cin (dual-rail) in; sum[N-1:0], cout (dual-rail) out.
// The carry input is an ordinary dual-rail input that takes part in the handshake;
// logic 0 is the usual value. No clock. N must be a multiple of 4.
module qdi_bclarc
  import qdi_pkg::*;
#(
  parameter int        WIDTH    = 32,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t [WIDTH-1:0] x,
  input  dr_t [WIDTH-1:0] y,
  input  dr_t             cin,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout
);

  localparam int NIB = WIDTH / 4;

  dr_t [NIB-1:0] c4, rc4;      // carry outputs of each nibble
  dr_t [NIB-1:0] cfa, cg;       // carry inputs of each nibble's ripple chain / generator

  assign cfa[0] = cin;
  assign cg[0]  = cin;
  for (genvar k = 1; k < NIB; k++) begin : g_link
    assign cfa[k] = c4[k-1];
    assign cg[k]  = rc4[k-1];
  end

  for (genvar k = 0; k < NIB; k++) begin : g_nib
    bcla4 #(.PROTOCOL(PROTOCOL), .REDUNDANT(k != NIB - 1)) u_nib (
      .x     (x[4*k +: 4]),
      .y     (y[4*k +: 4]),
      .cin_fa(cfa[k]),
      .cin_g (cg[k]),
      .sum   (sum[4*k +: 4]),
      .c4    (c4[k]),
      .rc4   (rc4[k])
    );
  end

  assign cout = c4[NIB-1];

  initial begin
    assert (WIDTH % 4 == 0 && WIDTH >= 4)
      else $error("qdi_bclarc: WIDTH must be a positive multiple of 4");
  end

endmodule
