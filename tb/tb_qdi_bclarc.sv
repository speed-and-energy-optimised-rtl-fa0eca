// tb_qdi_bclarc: the 32-bit BCLARC under RTZ and RTO. For each operand set the 65
// dual-rail inputs (x, y, cin) arrive one at a time in random order, then return to
// the spacer in random order. Operands are random, with regular special cases: a carry
// that must propagate through all 32 bits (x = ~y, cin = 1), all-ones plus all-ones
// (overflow) and zero.
// Checked against {cout, sum} = x + y + cin: final values, monotonic output rails in
// both phases, and a complete return to the spacer. Also counted and required: the
// carry-out appearing before all inputs are in (early output), and a redundant carry
// RC4 showing data before the non-redundant C4 of the same nibble.
module tb_qdi_bclarc;
  import qdi_pkg::*;

  localparam int W    = 32;
  localparam int NIN  = 2 * W + 1;
  localparam int NOUT = W + 1;
  localparam int NVEC = 300;

  dr_t [NIN-1:0]  in_z, in_n;
  dr_t [NOUT-1:0] oz, on;
  int checks = 0, failures = 0, early_cout = 0, rc_ahead = 0, n_prop = 0, n_ovf = 0;

  qdi_bclarc #(.WIDTH(W), .PROTOCOL(RTZ)) dut_z (.x(in_z[W-1:0]), .y(in_z[2*W-1:W]), .cin(in_z[2*W]),
    .sum(oz[W-1:0]), .cout(oz[W]));
  qdi_bclarc #(.WIDTH(W), .PROTOCOL(RTO)) dut_n (.x(in_n[W-1:0]), .y(in_n[2*W-1:W]), .cin(in_n[2*W]),
    .sum(on[W-1:0]), .cout(on[W]));

  task automatic fail(string what);
    failures++;
    if (failures < 20) $display("FAIL %s", what);
  endtask

  task automatic mono(protocol_e p, dr_t prev, dr_t now, bit data_phase, string what);
    checks++;
    if (data_phase) begin
      if (is_data(prev) && now != prev) fail({what, ": non-monotonic in data phase"});
    end else begin
      if (!is_data(now) && !is_spacer(p, now)) fail({what, ": illegal codeword"});
      else if (is_data(now) && now != prev) fail({what, ": non-monotonic in spacer phase"});
    end
  endtask

  task automatic shuffle(ref int ord[NIN]);
    for (int i = NIN - 1; i > 0; i--) begin
      int j = int'($urandom_range(i, 0));
      int s = ord[i]; ord[i] = ord[j]; ord[j] = s;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord[NIN];
    logic [W-1:0] a, b;
    logic c;
    logic [NIN-1:0] v;
    logic [W:0] exp_sum;
    dr_t [NOUT-1:0] pz, pn;
    for (int i = 0; i < NIN; i++) begin in_z[i] = spacer(RTZ); in_n[i] = spacer(RTO); ord[i] = i; end
    #1;
    for (int t = 0; t < NVEC; t++) begin
      a = $urandom; b = $urandom; c = 1'($urandom);
      case (t % 10)
        0: begin b = ~a; c = 1'b1; end
        1: begin a = '1; b = '1; end
        2: begin a = '0; b = '0; c = 1'b0; end
        default: ;
      endcase
      if ((a ^ b) == '1 && c) n_prop++;
      v = {c, b, a};
      exp_sum = {1'b0, a} + {1'b0, b} + (W+1)'(c);
      if (exp_sum[W]) n_ovf++;
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        pz = oz; pn = on;
        in_z[ord[i]] = encode(RTZ, v[ord[i]]);
        in_n[ord[i]] = encode(RTO, v[ord[i]]);
        #1;
        for (int k = 0; k < NOUT; k++) begin
          mono(RTZ, pz[k], oz[k], 1, $sformatf("RTZ out%0d", k));
          mono(RTO, pn[k], on[k], 1, $sformatf("RTO out%0d", k));
        end
        if (i < NIN - 1 && is_data(oz[W])) early_cout++;
        for (int k = 0; k < W / 4 - 1; k++)
          if (is_data(dut_z.rc4[k]) && !is_data(dut_z.c4[k])) rc_ahead++;
      end
      for (int k = 0; k < NOUT; k++) begin
        checks += 2;
        if (!(is_data(oz[k]) && decode(RTZ, oz[k]) == exp_sum[k])) fail($sformatf("RTZ bit %0d a=%h b=%h c=%b", k, a, b, c));
        if (!(is_data(on[k]) && decode(RTO, on[k]) == exp_sum[k])) fail($sformatf("RTO bit %0d a=%h b=%h c=%b", k, a, b, c));
      end
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        pz = oz; pn = on;
        in_z[ord[i]] = spacer(RTZ);
        in_n[ord[i]] = spacer(RTO);
        #1;
        for (int k = 0; k < NOUT; k++) begin
          mono(RTZ, pz[k], oz[k], 0, $sformatf("RTZ out%0d", k));
          mono(RTO, pn[k], on[k], 0, $sformatf("RTO out%0d", k));
        end
      end
      for (int k = 0; k < NOUT; k++) begin
        checks += 2;
        if (!is_spacer(RTZ, oz[k])) fail($sformatf("RTZ out%0d not spacer", k));
        if (!is_spacer(RTO, on[k])) fail($sformatf("RTO out%0d not spacer", k));
      end
    end
    checks += 4;
    if (early_cout == 0) fail("carry-out never produced early");
    if (rc_ahead == 0)   fail("redundant carry never ahead of C4");
    if (n_prop == 0)     fail("no full-length propagation");
    if (n_ovf == 0)      fail("no overflow");
    $display("early cout %0d, RC4 ahead of C4 %0d, full propagations %0d, overflows %0d",
             early_cout, rc_ahead, n_prop, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
