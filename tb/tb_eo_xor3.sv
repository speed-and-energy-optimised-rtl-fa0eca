// tb_eo_xor3: all 8 input combinations, repeated, for the RTZ and RTO XOR3 side by
// side. Inputs arrive, then return to the spacer, one at a time in random order.
// Checked: monotonic output rails, output = x ^ y ^ c, no output data before all three
// inputs have data (the XOR3 depends on each of them), spacer restored at the end.
module tb_eo_xor3;
  import qdi_pkg::*;

  localparam int NIN = 3;   // 0: x, 1: y, 2: c

  dr_t [NIN-1:0] iz, in_;
  dr_t sz, sn;
  int checks = 0, failures = 0;

  eo_xor3 #(.PROTOCOL(RTZ)) dut_z (.x(iz[0]), .y(iz[1]), .c(iz[2]), .s(sz));
  eo_xor3 #(.PROTOCOL(RTO)) dut_n (.x(in_[0]), .y(in_[1]), .c(in_[2]), .s(sn));

  task automatic fail(string what);
    failures++;
    $display("FAIL %s", what);
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
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord[NIN];
    logic [NIN-1:0] v;
    dr_t psz, psn;
    for (int i = 0; i < NIN; i++) begin iz[i] = spacer(RTZ); in_[i] = spacer(RTO); ord[i] = i; end
    #1;
    for (int t = 0; t < 400; t++) begin
      v = NIN'(t % 8);
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        psz = sz; psn = sn;
        iz[ord[i]]  = encode(RTZ, v[ord[i]]);
        in_[ord[i]] = encode(RTO, v[ord[i]]);
        #1;
        mono(RTZ, psz, sz, 1, "RTZ s"); mono(RTO, psn, sn, 1, "RTO s");
        if (i < NIN - 1) begin
          checks += 2;
          if (is_data(sz)) fail("RTZ output before all inputs");
          if (is_data(sn)) fail("RTO output before all inputs");
        end
      end
      checks += 2;
      if (!(is_data(sz) && decode(RTZ, sz) == ^v)) fail($sformatf("RTZ s v=%b", v));
      if (!(is_data(sn) && decode(RTO, sn) == ^v)) fail($sformatf("RTO s v=%b", v));
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        psz = sz; psn = sn;
        iz[ord[i]]  = spacer(RTZ);
        in_[ord[i]] = spacer(RTO);
        #1;
        mono(RTZ, psz, sz, 0, "RTZ s"); mono(RTO, psn, sn, 0, "RTO s");
      end
      checks += 2;
      if (!is_spacer(RTZ, sz)) fail("RTZ s not spacer");
      if (!is_spacer(RTO, sn)) fail("RTO s not spacer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
