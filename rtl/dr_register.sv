// dr_register: register bank of a dual-rail QDI pipeline stage.
//
// One 2-input C-element per rail combines the incoming rail with the stage's ACKIN
// (the complement of the next stage's completion-detector output). With ACKIN = 1 the
// register lets rising rails through; with ACKIN = 0 it lets falling rails through.
// Under RTZ this passes data (rising) when the next stage is empty and the spacer
// (falling) after the next stage has acknowledged; under RTO it passes the spacer
// (rising) and then data (falling). The same bank is used for both protocols, as in
// the paper's Fig. 1b.
//
// Tools report a combinational loop per rail: the C-element's feedback, intended.
//
// Interface: d (dual-rail in), ackin, q (dual-rail out). rst_n (active low, this
// design's addition) forces every rail to the protocol's spacer value.
// No clock: q changes in the same step as d/ackin.
module dr_register
  import qdi_pkg::*;
#(
  parameter int        N        = 3,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  logic         rst_n,
  input  dr_t  [N-1:0] d,
  input  logic         ackin,
  output dr_t  [N-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    c_element #(.RESET_VAL(spacer_rail(PROTOCOL))) u_c1 (
      .a(d[i].r1), .b(ackin), .rst_n(rst_n), .q(q[i].r1)
    );
    c_element #(.RESET_VAL(spacer_rail(PROTOCOL))) u_c0 (
      .a(d[i].r0), .b(ackin), .rst_n(rst_n), .q(q[i].r0)
    );
  end

endmodule
