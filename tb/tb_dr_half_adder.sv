// Self-checking testbench for dr_half_adder, both protocols at once.
// For every input pair and both arrival orders it applies the spacer, then
// the two inputs one after the other, then the spacer again, one input at a
// time. It checks the output against sum = a ^ b and cout = a & b, that no output word is ever
// illegal, and the early output behaviour: both outputs wait for both inputs, and both return to spacer as soon as either input does.
module tb_dr_half_adder;
  import dr_pkg::*;

  dr_t x [2], y [2];
  dr_t sum [2], cout [2];
  int checks = 0, failures = 0;
  int early = 0;

  dr_half_adder #(.PROTOCOL(RTZ)) dut_rtz (.a(x[0]), .b(y[0]), .sum(sum[0]), .cout(cout[0]));
  dr_half_adder #(.PROTOCOL(RTO)) dut_rto (.a(x[1]), .b(y[1]), .sum(sum[1]), .cout(cout[1]));

  function automatic protocol_e proto(int p);
    return (p == 0) ? RTZ : RTO;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic vx, vy;
    protocol_e pr;
    for (int p = 0; p < 2; p++) begin
      x[p] = spacer(proto(p)); y[p] = spacer(proto(p));
    end
    #1;
    for (int rep = 0; rep < 10; rep++) begin
      for (int combo = 0; combo < 8; combo++) begin
        bit xfirst;
        {xfirst, vx, vy} = 3'(combo);
        for (int p = 0; p < 2; p++) begin
          pr = proto(p);
          check("sum spacer", is_spacer(pr, sum[p]));
          check("cout spacer", is_spacer(pr, cout[p]));
          // first input arrives
          if (xfirst) x[p] = encode(pr, vx); else y[p] = encode(pr, vy);
          #1;
          check("sum legal", !is_illegal(pr, sum[p]));
          check("cout legal", !is_illegal(pr, cout[p]));
          check("sum waits", is_spacer(pr, sum[p]));
          check("cout waits", is_spacer(pr, cout[p]));
          // second input arrives
          if (xfirst) y[p] = encode(pr, vy); else x[p] = encode(pr, vx);
          #1;
          check("sum legal", !is_illegal(pr, sum[p]));
          check("cout legal", !is_illegal(pr, cout[p]));
          check("sum value", is_data(sum[p]) && decode(pr, sum[p]) == (vx ^ vy));
          check("cout value", is_data(cout[p]) && decode(pr, cout[p]) == (vx & vy));
          // spacer, first input
          if (xfirst) x[p] = spacer(pr); else y[p] = spacer(pr);
          #1;
          check("sum legal", !is_illegal(pr, sum[p]));
          check("cout legal", !is_illegal(pr, cout[p]));
          check("sum early reset", is_spacer(pr, sum[p]));
          check("cout early reset", is_spacer(pr, cout[p]));
          early++;
          if (xfirst) y[p] = spacer(pr); else x[p] = spacer(pr);
          #1;
          check("sum legal", !is_illegal(pr, sum[p]));
          check("cout legal", !is_illegal(pr, cout[p]));
        end
      end
    end
    check("early output seen", early > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
