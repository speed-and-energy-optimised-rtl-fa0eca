// completion_detector: acknowledges that a whole dual-rail bus holds data or spacer.
//
// Each dual-rail signal is reduced to one wire by a 2-input OR of its rails under RTZ
// handshaking, or a 2-input AND under RTO handshaking (the dual gate). All these wires
// meet in a balanced tree of 2-input C-elements whose root is ACKOUT. Under RTZ,
// ack = 1 once every signal holds data and 0 once every signal is the spacer; under RTO,
// ack = 1 once every signal is the spacer and 0 once every signal holds data. In between
// it holds its value. This follows the paper's completion detector; the tree shape
// (heap-ordered, any N) is this design's choice.
//
// Tools report a combinational loop at each tree node: it is the C-element's feedback
// (see c_element) and intended.
//
// Interface: d[N-1:0] dual-rail bus in, ack out. No clock; the C-elements have no reset
// because they settle as soon as the bus is uniform.
module completion_detector
  import qdi_pkg::*;
#(
  parameter int        N        = 3,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  dr_t  [N-1:0] d,
  output logic         ack
);

  // Heap-ordered tree: node i has children 2i+1 and 2i+2; leaves are N-1 .. 2N-2.
  localparam int NODES = 2 * N - 1;
  logic [NODES-1:0] node;

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N-1+i] = g_or2(PROTOCOL, d[i].r1, d[i].r0);
  end

  for (genvar i = 0; i < N - 1; i++) begin : g_tree
    c_element u_c (
      .a    (node[2*i+1]),
      .b    (node[2*i+2]),
      .rst_n(1'b1),
      .q    (node[i])
    );
  end

  assign ack = node[0];

endmodule
