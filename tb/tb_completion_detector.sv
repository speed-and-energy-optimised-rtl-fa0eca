// tb_completion_detector: drives a 5-signal dual-rail bus through data and spacer
// phases, one signal at a time in random order, for RTZ and RTO detectors. The
// acknowledge must keep its old value until the last signal has changed, then flip.
module tb_completion_detector;
  import qdi_pkg::*;

  localparam int N = 5;

  dr_t [N-1:0] dz, dn;     // RTZ bus, RTO bus (same values, encoded per protocol)
  logic az, an;
  int checks = 0, failures = 0;

  completion_detector #(.N(N), .PROTOCOL(RTZ)) dut_z (.d(dz), .ack(az));
  completion_detector #(.N(N), .PROTOCOL(RTO)) dut_n (.d(dn), .ack(an));

  task automatic expect_ack(logic ez, logic en, string what);
    checks += 2;
    if (az !== ez) begin failures++; $display("FAIL RTZ %s: ack=%b exp %b", what, az, ez); end
    if (an !== en) begin failures++; $display("FAIL RTO %s: ack=%b exp %b", what, an, en); end
  endtask

  task automatic shuffle(ref int ord[N]);
    for (int i = 0; i < N; i++) ord[i] = i;
    for (int i = N - 1; i > 0; i--) begin
      int j = int'($urandom_range(i, 0));
      int t = ord[i]; ord[i] = ord[j]; ord[j] = t;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord[N];
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) begin dz[i] = spacer(RTZ); dn[i] = spacer(RTO); end
    #1 expect_ack(1'b0, 1'b1, "initial spacer");
    for (int t = 0; t < 60; t++) begin
      v = N'($urandom);
      shuffle(ord);
      for (int i = 0; i < N; i++) begin
        dz[ord[i]] = encode(RTZ, v[ord[i]]);
        dn[ord[i]] = encode(RTO, v[ord[i]]);
        #1;
        if (i < N - 1) expect_ack(1'b0, 1'b1, "partial data");
        else           expect_ack(1'b1, 1'b0, "complete data");
      end
      shuffle(ord);
      for (int i = 0; i < N; i++) begin
        dz[ord[i]] = spacer(RTZ);
        dn[ord[i]] = spacer(RTO);
        #1;
        if (i < N - 1) expect_ack(1'b1, 1'b0, "partial spacer");
        else           expect_ack(1'b0, 1'b1, "complete spacer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
