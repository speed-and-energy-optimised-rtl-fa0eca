// tb_dr_register: checks the C-element register bank for RTZ and RTO. After reset
// both banks hold the spacer. Each rail of q follows d only while d agrees with
// ackin and otherwise holds, so a new codeword enters only when ackin allows it.
module tb_dr_register;
  import qdi_pkg::*;

  localparam int N = 3;

  logic rst_n, ackin;
  dr_t [N-1:0] d, qz, qn;
  dr_t [N-1:0] mz, mn;     // reference state
  int checks = 0, failures = 0;

  dr_register #(.N(N), .PROTOCOL(RTZ)) dut_z (.rst_n(rst_n), .d(d), .ackin(ackin), .q(qz));
  dr_register #(.N(N), .PROTOCOL(RTO)) dut_n (.rst_n(rst_n), .d(d), .ackin(ackin), .q(qn));

  task automatic check(string what);
    checks += 2;
    if (qz !== mz) begin failures++; $display("FAIL RTZ %s: q=%b exp %b", what, qz, mz); end
    if (qn !== mn) begin failures++; $display("FAIL RTO %s: q=%b exp %b", what, qn, mn); end
  endtask

  task automatic model();
    logic [2*N-1:0] dv, zv, nv;
    dv = d; zv = mz; nv = mn;
    for (int i = 0; i < 2 * N; i++)
      if (dv[i] == ackin) begin zv[i] = ackin; nv[i] = ackin; end
    mz = zv; mn = nv;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; ackin = 1'b0;
    d = '1;
    #1;
    for (int i = 0; i < N; i++) begin mz[i] = spacer(RTZ); mn[i] = spacer(RTO); end
    check("reset");
    rst_n = 1'b1;
    #1 model(); check("after reset");
    // RTZ-style transaction: data passes while ackin = 1, spacer waits for ackin = 0
    d = '0; ackin = 1'b1;
    #1 model(); check("spacer in");
    d = {encode(RTZ, 1'b1), encode(RTZ, 1'b0), encode(RTZ, 1'b1)};
    #1 model(); check("data in, ackin=1");
    d = '0;
    #1 model(); check("spacer held while ackin=1");
    ackin = 1'b0;
    #1 model(); check("spacer passes with ackin=0");
    // random stimulus
    for (int t = 0; t < 300; t++) begin
      if ($urandom_range(3, 0) == 0) ackin = ~ackin;
      else d = (2 * N)'($urandom);
      #1 model(); check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
