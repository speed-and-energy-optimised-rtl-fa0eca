// bclarc_top: one asynchronous pipeline stage around the QDI BCLARC adder.
//
// The adder sits between two register banks, each followed by a completion detector
// (the arrangement of the paper's Fig. 1b, which it keeps for every adder it measures):
//
//   x,y,cin -> [input register] -> qdi_bclarc -> [output register] -> sum,cout
//                    |  ^                                |  ^
//          input CD -+  +---- ~ (output CD) -------------+  +---- ~rx_ack
//
// The input register's C-elements take ACKIN = ~(output completion detector), so a new
// operand (or spacer) enters only after the previous result (or spacer) has been
// captured at the output. The input completion detector gives tx_ack, the ACKOUT
// towards the sender. The output register's ACKIN is ~rx_ack, where rx_ack is the
// receiver's ACKOUT.
//
// Handshake (RTZ): the sender drives data once tx_ack = 0 and the spacer once
// tx_ack = 1. The receiver raises rx_ack when it has taken the result and lowers it
// after the spacer. Under RTO the same wires carry spacer-data-spacer with all gate
// polarities dual; the C-elements and the inverters on the acknowledge lines are the same.
//
// Reset (rst_n, active low, this design's addition): both register banks are forced to
// the spacer; hold the inputs at the spacer and rx_ack at its idle level
// (0 for RTZ, 1 for RTO) during reset. No clock.
//
// Timing assumption: the adder resets early, so its outputs can all return to the
// spacer while some input-register rail still holds data. If the output side then
// acknowledges the spacer, the input register is re-armed for data and that rail is
// stuck. The spacer must therefore reach all input rails together, which is the
// isochronic-fork assumption the early output style places on the primary inputs.
// Data may arrive in any order. Lint and synthesis report combinational loops: one
// per C-element (its feedback) and the acknowledge ring through both registers, the
// adder and the output detector. Both are the asynchronous circuit itself.
module bclarc_top
  import qdi_pkg::*;
#(
  parameter int        WIDTH    = 32,
  parameter protocol_e PROTOCOL = RTZ
) (
  input  logic            rst_n,
  // operands from the sender
  input  dr_t [WIDTH-1:0] x,
  input  dr_t [WIDTH-1:0] y,
  input  dr_t             cin,
  output logic            tx_ack,   // ACKOUT to the sender
  // result to the receiver
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout,
  input  logic            rx_ack    // ACKOUT of the receiver
);

  localparam int NI = 2 * WIDTH + 1;
  localparam int NO = WIDTH + 1;

  dr_t [NI-1:0] in_d, in_q;
  dr_t [NO-1:0] out_d, out_q;
  dr_t [WIDTH-1:0] a_sum;
  dr_t             a_cout;
  logic            out_ack;
  logic            in_ackin, out_ackin;

  assign in_ackin  = ~out_ack;
  assign out_ackin = ~rx_ack;

  assign in_d = {cin, y, x};

  dr_register #(.N(NI), .PROTOCOL(PROTOCOL)) u_in_reg (
    .rst_n(rst_n), .d(in_d), .ackin(in_ackin), .q(in_q)
  );

  completion_detector #(.N(NI), .PROTOCOL(PROTOCOL)) u_in_cd (
    .d(in_q), .ack(tx_ack)
  );

  qdi_bclarc #(.WIDTH(WIDTH), .PROTOCOL(PROTOCOL)) u_adder (
    .x   (in_q[WIDTH-1:0]),
    .y   (in_q[2*WIDTH-1:WIDTH]),
    .cin (in_q[2*WIDTH]),
    .sum (a_sum),
    .cout(a_cout)
  );

  assign out_d = {a_cout, a_sum};

  dr_register #(.N(NO), .PROTOCOL(PROTOCOL)) u_out_reg (
    .rst_n(rst_n), .d(out_d), .ackin(out_ackin), .q(out_q)
  );

  completion_detector #(.N(NO), .PROTOCOL(PROTOCOL)) u_out_cd (
    .d(out_q), .ack(out_ack)
  );

  assign sum  = out_q[WIDTH-1:0];
  assign cout = out_q[WIDTH];

endmodule
