// Self-checking testbench for dr_c_element and dr_c_element_r.
// Drives 2000 random input pairs and compares the output with a reference
// state variable updated by the C-element rule (follow when equal, else hold).
// The reset variant is also checked for reset to both values.
module tb_dr_c_element;
  logic a, b, z;
  logic rst_n, zr0, zr1;
  logic ref_z, ref_r0, ref_r1;
  int checks = 0, failures = 0;

  dr_c_element dut (.a(a), .b(b), .z(z));
  dr_c_element_r #(.RESET_VALUE(1'b0)) dut_r0 (.rst_n(rst_n), .a(a), .b(b), .z(zr0));
  dr_c_element_r #(.RESET_VALUE(1'b1)) dut_r1 (.rst_n(rst_n), .a(a), .b(b), .z(zr1));

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%0b b=%0b got %0b expected %0b", what, a, b, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Reset the resettable variants with inputs disagreeing (hold condition).
    rst_n = 1'b0; a = 1'b1; b = 1'b0;
    #1;
    check("reset to 0", zr0, 1'b0);
    check("reset to 1", zr1, 1'b1);
    rst_n = 1'b1;
    #1;
    check("hold after reset 0", zr0, 1'b0);
    check("hold after reset 1", zr1, 1'b1);
    a = 1'b0; b = 1'b0; #1;
    ref_z = 1'b0; ref_r0 = 1'b0; ref_r1 = 1'b0;
    check("both 0", z, 1'b0);
    for (int i = 0; i < 2000; i++) begin
      a = 1'($urandom); b = 1'($urandom);
      #1;
      if (a == b) begin ref_z = a; ref_r0 = a; ref_r1 = a; end
      check("c", z, ref_z);
      check("c_r0", zr0, ref_r0);
      check("c_r1", zr1, ref_r1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
