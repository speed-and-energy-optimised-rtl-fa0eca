// qdi_pkg: types and helpers shared by the dual-rail quasi-delay-insensitive (QDI)
// adder blocks.
//
// A single-rail bit b travels on two rails {r1, r0}. Two handshake protocols are
// supported and chosen per module by a `protocol_e` parameter:
//   RTZ (return-to-zero): b=1 -> {1,0}, b=0 -> {0,1}, spacer {0,0}, {1,1} illegal.
//   RTO (return-to-one) : b=1 -> {0,1}, b=0 -> {1,0}, spacer {1,1}, {0,0} illegal.
// An RTO circuit is the RTZ circuit with every AND/OR gate replaced by its dual while
// the C-elements are kept. The g_and*/g_or* functions below express that: they are the
// named gate under RTZ and its dual under RTO, so one gate-level description serves both
// protocols. The encodings follow the paper; the helper functions are this design's own.
package qdi_pkg;

  typedef enum logic {
    RTZ = 1'b0,
    RTO = 1'b1
  } protocol_e;

  // One dual-rail signal: r1 is the "true" rail, r0 the "false" rail.
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  // Value every rail takes in the spacer (and which a register resets to).
  function automatic logic spacer_rail(protocol_e p);
    return (p == RTO);
  endfunction

  function automatic dr_t spacer(protocol_e p);
    return (p == RTO) ? '{r1: 1'b1, r0: 1'b1} : '{r1: 1'b0, r0: 1'b0};
  endfunction

  function automatic dr_t encode(protocol_e p, logic b);
    return (p == RTO) ? '{r1: ~b, r0: b} : '{r1: b, r0: ~b};
  endfunction

  function automatic logic is_spacer(protocol_e p, dr_t d);
    return d == spacer(p);
  endfunction

  function automatic logic is_data(dr_t d);
    return d.r1 != d.r0;
  endfunction

  function automatic logic is_illegal(protocol_e p, dr_t d);
    return (d.r1 == d.r0) && (d.r1 != spacer_rail(p));
  endfunction

  // Value carried by a data codeword (meaningless for a spacer).
  function automatic logic decode(protocol_e p, dr_t d);
    return (p == RTO) ? d.r0 : d.r1;
  endfunction

  // Gates named after their RTZ form; under RTO each becomes its dual.
  function automatic logic g_and2(protocol_e p, logic a, logic b);
    return (p == RTZ) ? (a & b) : (a | b);
  endfunction

  function automatic logic g_or2(protocol_e p, logic a, logic b);
    return (p == RTZ) ? (a | b) : (a & b);
  endfunction

  function automatic logic g_and3(protocol_e p, logic a, logic b, logic c);
    return (p == RTZ) ? (a & b & c) : (a | b | c);
  endfunction

  function automatic logic g_or3(protocol_e p, logic a, logic b, logic c);
    return (p == RTZ) ? (a | b | c) : (a & b & c);
  endfunction

  function automatic logic g_and4(protocol_e p, logic a, logic b, logic c, logic d);
    return (p == RTZ) ? (a & b & c & d) : (a | b | c | d);
  endfunction

  function automatic logic g_or4(protocol_e p, logic a, logic b, logic c, logic d);
    return (p == RTZ) ? (a | b | c | d) : (a & b & c & d);
  endfunction

  // AO22 = (a & b) | (c & d); under RTO it becomes OA22 = (a | b) & (c | d).
  function automatic logic g_ao22(protocol_e p, logic a, logic b, logic c, logic d);
    return g_or2(p, g_and2(p, a, b), g_and2(p, c, d));
  endfunction

  // AO21 = (a & b) | c; under RTO it becomes OA21 = (a | b) & c.
  function automatic logic g_ao21(protocol_e p, logic a, logic b, logic c);
    return g_or2(p, g_and2(p, a, b), c);
  endfunction

endpackage
