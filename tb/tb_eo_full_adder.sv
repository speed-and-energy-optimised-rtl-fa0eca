// tb_eo_full_adder: all 8 operand combinations, many times, for the RTZ and the RTO
// full adder side by side. The three inputs arrive one at a time in random order, then
// leave (spacer) in random order. Checked: every output rail changes monotonically
// (spacer -> data -> spacer, no data-to-other-data), the final sum and carry equal
// x + y + cin, the sum never shows data before cin has arrived, and both outputs are
// back at the spacer after the spacer phase. Early carry outputs (carry data before
// cin arrives, possible when x = y) are counted and must occur.
module tb_eo_full_adder;
  import qdi_pkg::*;

  localparam int NIN = 3;   // 0: x, 1: y, 2: cin

  dr_t [NIN-1:0] iz, in_;
  dr_t sz, cz, sn, cn;
  int checks = 0, failures = 0, early_cout = 0;

  eo_full_adder #(.PROTOCOL(RTZ)) dut_z (.x(iz[0]), .y(iz[1]), .cin(iz[2]), .sum(sz), .cout(cz));
  eo_full_adder #(.PROTOCOL(RTO)) dut_n (.x(in_[0]), .y(in_[1]), .cin(in_[2]), .sum(sn), .cout(cn));

  task automatic fail(string what);
    failures++;
    $display("FAIL %s", what);
  endtask

  // One output rail pair must only move away from the spacer in a data phase and only
  // back to it in a spacer phase.
  task automatic mono(protocol_e p, dr_t prev, dr_t now, bit data_phase, string what);
    checks++;
    if (data_phase) begin
      if (is_data(prev) && now != prev) fail({what, ": non-monotonic in data phase"});
    end else begin
      if (!is_data(now) && !is_spacer(p, now)) fail({what, ": illegal codeword"});
      else if (is_data(now) && now != prev) fail({what, ": non-monotonic in spacer phase"});
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
    int j, s;
    logic [NIN-1:0] v;
    bit cin_in;
    dr_t psz, pcz, psn, pcn;
    for (int i = 0; i < NIN; i++) begin iz[i] = spacer(RTZ); in_[i] = spacer(RTO); end
    #1;
    for (int t = 0; t < 400; t++) begin
      v = NIN'(t % 8);
      for (int i = 0; i < NIN; i++) ord[i] = i;
      for (int i = NIN - 1; i > 0; i--) begin
        j = int'($urandom_range(i, 0)); s = ord[i]; ord[i] = ord[j]; ord[j] = s;
      end
      cin_in = 0;
      for (int i = 0; i < NIN; i++) begin
        psz = sz; pcz = cz; psn = sn; pcn = cn;
        iz[ord[i]]  = encode(RTZ, v[ord[i]]);
        in_[ord[i]] = encode(RTO, v[ord[i]]);
        if (ord[i] == 2) cin_in = 1;
        #1;
        mono(RTZ, psz, sz, 1, "RTZ sum"); mono(RTZ, pcz, cz, 1, "RTZ cout");
        mono(RTO, psn, sn, 1, "RTO sum"); mono(RTO, pcn, cn, 1, "RTO cout");
        checks += 2;
        if (!cin_in && is_data(sz)) fail("RTZ sum before cin");
        if (!cin_in && is_data(sn)) fail("RTO sum before cin");
        if (!cin_in && is_data(cz)) early_cout++;
      end
      begin
        logic [1:0] e;
        e = 2'(v[0]) + 2'(v[1]) + 2'(v[2]);
        checks += 4;
        if (!(is_data(sz) && decode(RTZ, sz) == e[0])) fail($sformatf("RTZ sum v=%b iz=%b sz=%b cz=%b", v, iz, sz, cz));
        if (!(is_data(cz) && decode(RTZ, cz) == e[1])) fail($sformatf("RTZ cout v=%b", v));
        if (!(is_data(sn) && decode(RTO, sn) == e[0])) fail($sformatf("RTO sum v=%b", v));
        if (!(is_data(cn) && decode(RTO, cn) == e[1])) fail($sformatf("RTO cout v=%b", v));
      end
      for (int i = NIN - 1; i > 0; i--) begin
        j = int'($urandom_range(i, 0)); s = ord[i]; ord[i] = ord[j]; ord[j] = s;
      end
      for (int i = 0; i < NIN; i++) begin
        psz = sz; pcz = cz; psn = sn; pcn = cn;
        iz[ord[i]]  = spacer(RTZ);
        in_[ord[i]] = spacer(RTO);
        #1;
        mono(RTZ, psz, sz, 0, "RTZ sum"); mono(RTZ, pcz, cz, 0, "RTZ cout");
        mono(RTO, psn, sn, 0, "RTO sum"); mono(RTO, pcn, cn, 0, "RTO cout");
      end
      checks += 4;
      if (!is_spacer(RTZ, sz)) fail("RTZ sum not spacer");
      if (!is_spacer(RTZ, cz)) fail("RTZ cout not spacer");
      if (!is_spacer(RTO, sn)) fail("RTO sum not spacer");
      if (!is_spacer(RTO, cn)) fail("RTO cout not spacer");
    end
    checks++;
    if (early_cout == 0) fail("no early carry output seen");
    $display("early carry outputs: %0d", early_cout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
