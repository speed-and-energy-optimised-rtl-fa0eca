// tb_c_element: checks the Muller C-element against its next-state function
// q+ = ab + q(a + b), over random input sequences, and checks the asynchronous reset to
// both reset values.
module tb_c_element;

  logic a, b, rst_n;
  logic q0, q1;            // RESET_VAL = 0 / 1
  logic m0, m1;            // reference models
  int checks = 0, failures = 0;

  c_element #(.RESET_VAL(1'b0)) dut0 (.a(a), .b(b), .rst_n(rst_n), .q(q0));
  c_element #(.RESET_VAL(1'b1)) dut1 (.a(a), .b(b), .rst_n(rst_n), .q(q1));

  task automatic check(string what);
    checks += 2;
    if (q0 !== m0) begin failures++; $display("FAIL %s: q0=%b exp %b (a=%b b=%b)", what, q0, m0, a, b); end
    if (q1 !== m1) begin failures++; $display("FAIL %s: q1=%b exp %b (a=%b b=%b)", what, q1, m1, a, b); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 1'b1; b = 1'b0; rst_n = 1'b0;
    #1 m0 = 1'b0; m1 = 1'b1; check("reset");
    rst_n = 1'b1;
    #1 check("hold after reset");
    for (int i = 0; i < 400; i++) begin
      a = 1'($urandom);
      b = 1'($urandom);
      #1;
      if (a == b) begin m0 = a; m1 = a; end
      check("step");
      if (i % 97 == 50) begin
        rst_n = 1'b0;
        #1 m0 = 1'b0; m1 = 1'b1; check("reset mid-run");
        rst_n = 1'b1;
        #1;
        if (a == b) begin m0 = a; m1 = a; end
        check("release");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
