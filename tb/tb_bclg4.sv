// tb_bclg4: exhaustive test of the 4-bit block carry lookahead generator, as BCLG
// (REDUNDANT = 0) and as BCLGRC (REDUNDANT = 1), under RTZ and RTO: four instances fed
// the same logical operands. Each of the 512 values of (x, y, cin) is applied twice,
// with the nine inputs arriving and then leaving in random order.
// Checked against an independent model, carry = (x + y + cin) >> 4:
//   - every carry output rail changes monotonically;
//   - C4 shows data only once all eight operand signals have data (internal
//     completion detection), and keeps its data until every bit position has lost
//     at least one operand, which is when the internal detector falls. This covers the
//     paper's example where P3, P2, P1 fall while G0 remains;
//   - final C4 and RC4 equal the model, RC4 of a plain BCLG stays at the spacer;
//   - all outputs are back at the spacer after the spacer phase.
// Counted and required: RC4 data before all operands are in (early redundant carry),
// C4 data before cin arrives (carry generated or killed inside the block).
module tb_bclg4;
  import qdi_pkg::*;

  localparam int NIN = 9;   // 0..3: x, 4..7: y, 8: cin
  localparam int NDUT = 4;  // 0: RTZ BCLGRC, 1: RTO BCLGRC, 2: RTZ BCLG, 3: RTO BCLG

  dr_t [NIN-1:0] in_z, in_n;
  dr_t c4 [NDUT], rc4 [NDUT];
  int checks = 0, failures = 0, early_rc = 0, early_c = 0, held_c = 0;

  bclg4 #(.PROTOCOL(RTZ), .REDUNDANT(1'b1)) dut0 (.x(in_z[3:0]), .y(in_z[7:4]), .cin(in_z[8]), .c4(c4[0]), .rc4(rc4[0]));
  bclg4 #(.PROTOCOL(RTO), .REDUNDANT(1'b1)) dut1 (.x(in_n[3:0]), .y(in_n[7:4]), .cin(in_n[8]), .c4(c4[1]), .rc4(rc4[1]));
  bclg4 #(.PROTOCOL(RTZ), .REDUNDANT(1'b0)) dut2 (.x(in_z[3:0]), .y(in_z[7:4]), .cin(in_z[8]), .c4(c4[2]), .rc4(rc4[2]));
  bclg4 #(.PROTOCOL(RTO), .REDUNDANT(1'b0)) dut3 (.x(in_n[3:0]), .y(in_n[7:4]), .cin(in_n[8]), .c4(c4[3]), .rc4(rc4[3]));

  function automatic protocol_e prot(int d);
    return (d % 2 == 0) ? RTZ : RTO;
  endfunction

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
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord[NIN];
    logic [NIN-1:0] v, here;   // operand values, which inputs currently hold data
    logic [4:0] sum;
    dr_t pc [NDUT], prc [NDUT];
    bit all_ops, some_pair;
    for (int i = 0; i < NIN; i++) begin in_z[i] = spacer(RTZ); in_n[i] = spacer(RTO); ord[i] = i; end
    #1;
    for (int t = 0; t < 1024; t++) begin
      v = NIN'(t % 512);
      sum = 5'(v[3:0]) + 5'(v[7:4]) + 5'(v[8]);
      here = '0;
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        for (int d = 0; d < NDUT; d++) begin pc[d] = c4[d]; prc[d] = rc4[d]; end
        in_z[ord[i]] = encode(RTZ, v[ord[i]]);
        in_n[ord[i]] = encode(RTO, v[ord[i]]);
        here[ord[i]] = 1'b1;
        #1;
        all_ops = &here[7:0];
        for (int d = 0; d < NDUT; d++) begin
          mono(prot(d), pc[d], c4[d], 1, $sformatf("dut%0d c4", d));
          mono(prot(d), prc[d], rc4[d], 1, $sformatf("dut%0d rc4", d));
          checks++;
          if (is_data(c4[d]) && !all_ops) fail($sformatf("dut%0d c4 data before all operands (v=%b here=%b)", d, v, here));
        end
        if (is_data(rc4[0]) && !(all_ops && here[8])) early_rc++;
        if (is_data(c4[0]) && !here[8]) early_c++;
      end
      for (int d = 0; d < NDUT; d++) begin
        checks += 2;
        if (!(is_data(c4[d]) && decode(prot(d), c4[d]) == sum[4]))
          fail($sformatf("dut%0d c4=%b v=%b", d, c4[d], v));
        if (d < 2) begin
          if (!(is_data(rc4[d]) && decode(prot(d), rc4[d]) == sum[4]))
            fail($sformatf("dut%0d rc4=%b v=%b", d, rc4[d], v));
        end else if (!is_spacer(prot(d), rc4[d])) fail($sformatf("dut%0d rc4 not spacer", d));
      end
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        for (int d = 0; d < NDUT; d++) begin pc[d] = c4[d]; prc[d] = rc4[d]; end
        in_z[ord[i]] = spacer(RTZ);
        in_n[ord[i]] = spacer(RTO);
        here[ord[i]] = 1'b0;
        #1;
        some_pair = 1'b0;
        for (int b = 0; b < 4; b++) if (here[b] && here[b+4]) some_pair = 1'b1;
        for (int d = 0; d < NDUT; d++) begin
          mono(prot(d), pc[d], c4[d], 0, $sformatf("dut%0d c4", d));
          mono(prot(d), prc[d], rc4[d], 0, $sformatf("dut%0d rc4", d));
          checks++;
          if (some_pair && !is_data(c4[d])) fail($sformatf("dut%0d c4 spacer before internal completion", d));
        end
        if (some_pair) held_c++;
      end
      for (int d = 0; d < NDUT; d++) begin
        checks += 2;
        if (!is_spacer(prot(d), c4[d])) fail($sformatf("dut%0d c4 not spacer", d));
        if (!is_spacer(prot(d), rc4[d])) fail($sformatf("dut%0d rc4 not spacer", d));
      end
    end
    checks += 3;
    if (early_rc == 0) fail("no early redundant carry seen");
    if (early_c == 0) fail("no carry produced before cin seen");
    if (held_c == 0) fail("internal completion never held C4");
    $display("early RC4: %0d, C4 before cin: %0d, C4 held by ICD: %0d", early_rc, early_c, held_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
