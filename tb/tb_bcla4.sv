// tb_bcla4: the 4-bit BCLARC nibble (RTZ and RTO) and the 4-bit BCLA nibble (RTZ),
// exhaustively over x, y and the carry. The ripple-chain carry input (cin_fa) and the
// generator carry input (cin_g) carry the same value but arrive independently, as in
// the full adder, where they come from different nibble outputs. All ten inputs arrive
// and then leave in random order.
// Checked against x + y + cin computed here: the four sum bits, C4 and RC4 (spacer for
// the BCLA), monotonic output rails in both phases, full return to the spacer.
module tb_bcla4;
  import qdi_pkg::*;

  localparam int NIN  = 10;  // 0..3: x, 4..7: y, 8: cin_fa, 9: cin_g
  localparam int NOUT = 6;   // 0..3: sum, 4: c4, 5: rc4
  localparam int NDUT = 3;   // 0: RTZ BCLARC, 1: RTO BCLARC, 2: RTZ BCLA

  dr_t [NIN-1:0]  in_z, in_n;
  dr_t [NOUT-1:0] o [NDUT];
  int checks = 0, failures = 0;

  bcla4 #(.PROTOCOL(RTZ), .REDUNDANT(1'b1)) dut0 (.x(in_z[3:0]), .y(in_z[7:4]), .cin_fa(in_z[8]),
    .cin_g(in_z[9]), .sum(o[0][3:0]), .c4(o[0][4]), .rc4(o[0][5]));
  bcla4 #(.PROTOCOL(RTO), .REDUNDANT(1'b1)) dut1 (.x(in_n[3:0]), .y(in_n[7:4]), .cin_fa(in_n[8]),
    .cin_g(in_n[9]), .sum(o[1][3:0]), .c4(o[1][4]), .rc4(o[1][5]));
  bcla4 #(.PROTOCOL(RTZ), .REDUNDANT(1'b0)) dut2 (.x(in_z[3:0]), .y(in_z[7:4]), .cin_fa(in_z[8]),
    .cin_g(in_z[9]), .sum(o[2][3:0]), .c4(o[2][4]), .rc4(o[2][5]));

  function automatic protocol_e prot(int d);
    return (d == 1) ? RTO : RTZ;
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
    logic [8:0] t9;
    logic [NIN-1:0] v;
    logic [4:0] sum;
    dr_t [NOUT-1:0] po [NDUT];
    for (int i = 0; i < NIN; i++) begin in_z[i] = spacer(RTZ); in_n[i] = spacer(RTO); ord[i] = i; end
    #1;
    for (int t = 0; t < 1024; t++) begin
      t9 = 9'(t % 512);
      v = {t9[8], t9};
      sum = 5'(v[3:0]) + 5'(v[7:4]) + 5'(v[8]);
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        for (int d = 0; d < NDUT; d++) po[d] = o[d];
        in_z[ord[i]] = encode(RTZ, v[ord[i]]);
        in_n[ord[i]] = encode(RTO, v[ord[i]]);
        #1;
        for (int d = 0; d < NDUT; d++)
          for (int k = 0; k < NOUT; k++) mono(prot(d), po[d][k], o[d][k], 1, $sformatf("dut%0d out%0d", d, k));
      end
      for (int d = 0; d < NDUT; d++) begin
        for (int k = 0; k < 5; k++) begin
          checks++;
          if (!(is_data(o[d][k]) && decode(prot(d), o[d][k]) == sum[k]))
            fail($sformatf("dut%0d out%0d=%b v=%b", d, k, o[d][k], v));
        end
        checks++;
        if (d < 2) begin
          if (!(is_data(o[d][5]) && decode(prot(d), o[d][5]) == sum[4])) fail($sformatf("dut%0d rc4 v=%b", d, v));
        end else if (!is_spacer(RTZ, o[d][5])) fail("BCLA rc4 not spacer");
      end
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        for (int d = 0; d < NDUT; d++) po[d] = o[d];
        in_z[ord[i]] = spacer(RTZ);
        in_n[ord[i]] = spacer(RTO);
        #1;
        for (int d = 0; d < NDUT; d++)
          for (int k = 0; k < NOUT; k++) mono(prot(d), po[d][k], o[d][k], 0, $sformatf("dut%0d out%0d", d, k));
      end
      for (int d = 0; d < NDUT; d++)
        for (int k = 0; k < NOUT; k++) begin
          checks++;
          if (!is_spacer(prot(d), o[d][k])) fail($sformatf("dut%0d out%0d not spacer", d, k));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
