// tb_bclarc_top: end-to-end test of the adder stage, both protocols at once. One
// bclarc_top runs with its default parameters (32 bits, RTZ) and one with RTO; each
// is driven by a qdi_env sender/receiver pair through NVEC transactions.
// Checked: every result equals x + y + cin, no output rail breaks monotonicity, and
// the test ends within the watchdog. NVEC = 2000 transactions per protocol, the size
// of the functional test the adders are characterised with. Counted per protocol, and
// each must happen at least once: carry-out 1 (overflow), a carry propagated through all 32 bits, the
// sender stalled by a stage still holding an unacknowledged result, the adder's
// carry-out produced before all operands reached it (early output), and a redundant
// carry RC4 ahead of the non-redundant C4 of the same nibble.
module tb_bclarc_top;
  import qdi_pkg::*;

  localparam int W    = 32;
  localparam int NVEC = 2000;

  // RTZ instance (defaults)
  logic       rst_n_z, tx_ack_z, rx_ack_z, done_z;
  dr_t [W-1:0] x_z, y_z, s_z;
  dr_t        cin_z, cout_z;
  int chk_z, fail_z, rx_z, ovf_z, prop_z, stall_z, nm_z;

  // RTO instance
  logic       rst_n_n, tx_ack_n, rx_ack_n, done_n;
  dr_t [W-1:0] x_n, y_n, s_n;
  dr_t        cin_n, cout_n;
  int chk_n, fail_n, rx_n, ovf_n, prop_n, stall_n, nm_n;

  int early_z = 0, early_n = 0, rc_z = 0, rc_n = 0;
  int checks = 0, failures = 0;

  bclarc_top dut_z (
    .rst_n(rst_n_z), .x(x_z), .y(y_z), .cin(cin_z), .tx_ack(tx_ack_z),
    .sum(s_z), .cout(cout_z), .rx_ack(rx_ack_z)
  );
  qdi_env #(.WIDTH(W), .PROTOCOL(RTZ), .NVEC(NVEC)) env_z (
    .rst_n(rst_n_z), .x(x_z), .y(y_z), .cin(cin_z), .tx_ack(tx_ack_z), .sum(s_z), .cout(cout_z),
    .rx_ack(rx_ack_z), .done(done_z), .checks(chk_z), .failures(fail_z), .n_rx(rx_z),
    .n_ovf(ovf_z), .n_prop(prop_z), .n_stall(stall_z), .n_nonmono(nm_z)
  );

  bclarc_top #(.PROTOCOL(RTO)) dut_n (
    .rst_n(rst_n_n), .x(x_n), .y(y_n), .cin(cin_n), .tx_ack(tx_ack_n),
    .sum(s_n), .cout(cout_n), .rx_ack(rx_ack_n)
  );
  qdi_env #(.WIDTH(W), .PROTOCOL(RTO), .NVEC(NVEC)) env_n (
    .rst_n(rst_n_n), .x(x_n), .y(y_n), .cin(cin_n), .tx_ack(tx_ack_n), .sum(s_n), .cout(cout_n),
    .rx_ack(rx_ack_n), .done(done_n), .checks(chk_n), .failures(fail_n), .n_rx(rx_n),
    .n_ovf(ovf_n), .n_prop(prop_n), .n_stall(stall_n), .n_nonmono(nm_n)
  );

  // Probes inside the stages: early carry-out and redundant carries running ahead.
  function automatic bit all_data(dr_t [2*W:0] d);
    for (int i = 0; i <= 2 * W; i++) if (!is_data(d[i])) return 1'b0;
    return 1'b1;
  endfunction

  always @(dut_z.u_adder.cout or dut_z.in_q)
    if (rst_n_z && is_data(dut_z.u_adder.cout) && !all_data(dut_z.in_q)) early_z++;
  always @(dut_n.u_adder.cout or dut_n.in_q)
    if (rst_n_n && is_data(dut_n.u_adder.cout) && !all_data(dut_n.in_q)) early_n++;
  always @(dut_z.u_adder.rc4 or dut_z.u_adder.c4)
    for (int k = 0; k < W / 4 - 1; k++)
      if (rst_n_z && is_data(dut_z.u_adder.rc4[k]) && !is_data(dut_z.u_adder.c4[k])) rc_z++;
  always @(dut_n.u_adder.rc4 or dut_n.u_adder.c4)
    for (int k = 0; k < W / 4 - 1; k++)
      if (rst_n_n && is_data(dut_n.u_adder.rc4[k]) && !is_data(dut_n.u_adder.c4[k])) rc_n++;

  task automatic need(int count, string what);
    checks++;
    if (count == 0) begin failures++; $display("FAIL never happened: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog: RTZ received %0d, RTO received %0d", rx_z, rx_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_z + chk_n, failures + fail_z + fail_n);
    $finish;
  end

  initial begin
    wait (done_z && done_n);
    checks += 4;
    if (rx_z != NVEC) begin failures++; $display("FAIL RTZ results %0d of %0d", rx_z, NVEC); end
    if (rx_n != NVEC) begin failures++; $display("FAIL RTO results %0d of %0d", rx_n, NVEC); end
    if (nm_z != 0) begin failures++; $display("FAIL RTZ non-monotonic outputs: %0d", nm_z); end
    if (nm_n != 0) begin failures++; $display("FAIL RTO non-monotonic outputs: %0d", nm_n); end
    need(ovf_z, "RTZ overflow");       need(ovf_n, "RTO overflow");
    need(prop_z, "RTZ full carry propagation"); need(prop_n, "RTO full carry propagation");
    need(stall_z, "RTZ sender stall"); need(stall_n, "RTO sender stall");
    need(early_z, "RTZ early carry-out"); need(early_n, "RTO early carry-out");
    need(rc_z, "RTZ redundant carry ahead"); need(rc_n, "RTO redundant carry ahead");
    $display("RTZ: results %0d overflow %0d propagate %0d stall %0d early-cout %0d rc-ahead %0d",
             rx_z, ovf_z, prop_z, stall_z, early_z, rc_z);
    $display("RTO: results %0d overflow %0d propagate %0d stall %0d early-cout %0d rc-ahead %0d",
             rx_n, ovf_n, prop_n, stall_n, early_n, rc_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_z + chk_n, failures + fail_z + fail_n);
    $finish;
  end

endmodule
