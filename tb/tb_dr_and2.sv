// Self-checking testbench for dr_and2, both protocols at once.
// For every input pair and both arrival orders it applies the spacer, then
// the two inputs one after the other, then the spacer again, one input at a
// time. It checks the output against z = x & y, that no output word is ever
// illegal, and the early output behaviour: a 0 on the first input alone already gives z = 0, a 1 alone gives no output.
module tb_dr_and2;
  import dr_pkg::*;

  dr_t x [2], y [2];
  dr_t z [2];
  int checks = 0, failures = 0;
  int early = 0;

  dr_and2 #(.PROTOCOL(RTZ)) dut_rtz (.x(x[0]), .y(y[0]), .z(z[0]));
  dr_and2 #(.PROTOCOL(RTO)) dut_rto (.x(x[1]), .y(y[1]), .z(z[1]));

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
          check("z spacer", is_spacer(pr, z[p]));
          // first input arrives
          if (xfirst) x[p] = encode(pr, vx); else y[p] = encode(pr, vy);
          #1;
          check("z legal", !is_illegal(pr, z[p]));
          if ((xfirst ? vx : vy) == 1'b0) begin
            check("early zero", is_data(z[p]) && decode(pr, z[p]) == 1'b0);
            early++;
          end else begin
            check("waits on a one", is_spacer(pr, z[p]));
          end
          // second input arrives
          if (xfirst) y[p] = encode(pr, vy); else x[p] = encode(pr, vx);
          #1;
          check("z legal", !is_illegal(pr, z[p]));
          check("z value", is_data(z[p]) && decode(pr, z[p]) == (vx & vy));
          // spacer, first input
          if (xfirst) x[p] = spacer(pr); else y[p] = spacer(pr);
          #1;
          check("z legal", !is_illegal(pr, z[p]));
          if ((xfirst ? vy : vx) == 1'b1) check("reset once the 0 leaves", is_spacer(pr, z[p]));
          if (xfirst) y[p] = spacer(pr); else x[p] = spacer(pr);
          #1;
          check("z legal", !is_illegal(pr, z[p]));
        end
      end
    end
    check("early output seen", early > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
