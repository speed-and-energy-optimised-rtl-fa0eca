// tb_bclarc_top_full: the adder stage with every parameter at its default (32-bit,
// RTZ handshaking), run through 2000 random operand transactions, each a data phase
// followed by a spacer phase. This is the size of the functional test the adder is
// characterised with. The qdi_env sender/receiver checks every result against
// x + y + cin and the output rails for monotonic changes.
module tb_bclarc_top_full;
  import qdi_pkg::*;

  localparam int W    = 32;
  localparam int NVEC = 2000;

  logic       rst_n, tx_ack, rx_ack, done;
  dr_t [W-1:0] x, y, s;
  dr_t        cin, cout;
  int chk, fl, n_rx, n_ovf, n_prop, n_stall, n_nm;
  int checks = 0, failures = 0;

  bclarc_top dut (
    .rst_n(rst_n), .x(x), .y(y), .cin(cin), .tx_ack(tx_ack),
    .sum(s), .cout(cout), .rx_ack(rx_ack)
  );

  qdi_env #(.WIDTH(W), .PROTOCOL(RTZ), .NVEC(NVEC)) env (
    .rst_n(rst_n), .x(x), .y(y), .cin(cin), .tx_ack(tx_ack), .sum(s), .cout(cout),
    .rx_ack(rx_ack), .done(done), .checks(chk), .failures(fl), .n_rx(n_rx),
    .n_ovf(n_ovf), .n_prop(n_prop), .n_stall(n_stall), .n_nonmono(n_nm)
  );

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog: %0d results received", n_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk, failures + fl);
    $finish;
  end

  initial begin
    wait (done);
    checks += 5;
    if (n_rx != NVEC) begin failures++; $display("FAIL results %0d of %0d", n_rx, NVEC); end
    if (n_nm != 0)    begin failures++; $display("FAIL non-monotonic outputs: %0d", n_nm); end
    if (n_ovf == 0)   begin failures++; $display("FAIL no overflow seen"); end
    if (n_prop == 0)  begin failures++; $display("FAIL no full-length carry propagation"); end
    if (n_stall == 0) begin failures++; $display("FAIL sender never stalled"); end
    $display("results %0d overflow %0d propagate %0d stall %0d", n_rx, n_ovf, n_prop, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk, failures + fl);
    $finish;
  end

endmodule
