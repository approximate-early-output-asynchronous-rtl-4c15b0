// Self-checking testbench for dr_full_adder, both protocols at once.
// For every input combination and several random arrival orders it
//   - applies the spacer, then the three inputs one at a time, checking after
//     each step that no output word is illegal, that the carry is produced
//     early when a == b, and that the sum waits for cin (indication);
//   - checks the final sum and carry against a ^ b ^ cin and majority();
//   - removes the inputs one at a time, checking that the carry returns to
//     spacer as soon as a and b have (early reset) and that the sum holds
//     data while cin is still data.
module tb_dr_full_adder;
  import dr_pkg::*;

  dr_t a [2], b [2], cin [2], sum [2], cout [2];
  int checks = 0, failures = 0;
  int early_carry = 0;

  dr_full_adder #(.PROTOCOL(RTZ)) dut_rtz (.a(a[0]), .b(b[0]), .cin(cin[0]), .sum(sum[0]), .cout(cout[0]));
  dr_full_adder #(.PROTOCOL(RTO)) dut_rto (.a(a[1]), .b(b[1]), .cin(cin[1]), .sum(sum[1]), .cout(cout[1]));

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

  task automatic check_legal(int p);
    check("sum legal", !is_illegal(proto(p), sum[p]));
    check("cout legal", !is_illegal(proto(p), cout[p]));
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [3];
    logic va, vb, vc;
    bit   arrived [3];
    for (int p = 0; p < 2; p++) begin
      a[p] = spacer(proto(p)); b[p] = spacer(proto(p)); cin[p] = spacer(proto(p));
    end
    #1;
    for (int rep = 0; rep < 40; rep++) begin
      for (int v = 0; v < 8; v++) begin
        {va, vb, vc} = 3'(v);
        // random arrival order (same for both protocols)
        order = '{0, 1, 2};
        for (int i = 2; i > 0; i--) begin
          int j, t;
          j = $urandom_range(i, 0);
          t = order[i]; order[i] = order[j]; order[j] = t;
        end
        for (int p = 0; p < 2; p++) begin
          protocol_e pr;
          pr = proto(p);
          check("sum spacer", is_spacer(pr, sum[p]));
          check("cout spacer", is_spacer(pr, cout[p]));
          arrived = '{0, 0, 0};
          // data phase
          for (int k = 0; k < 3; k++) begin
            case (order[k])
              0: a[p]   = encode(pr, va);
              1: b[p]   = encode(pr, vb);
              default: cin[p] = encode(pr, vc);
            endcase
            arrived[order[k]] = 1'b1;
            #1;
            check_legal(p);
            if (arrived[0] && arrived[1] && va == vb) begin
              check("early carry", is_data(cout[p]) && decode(pr, cout[p]) == va);
              if (!arrived[2]) early_carry++;
            end
            if (!arrived[2]) check("sum waits for cin", is_spacer(pr, sum[p]));
          end
          if (!(is_data(sum[p]) && decode(pr, sum[p]) == (va ^ vb ^ vc))) $display("p=%0d v=%0d a=%b b=%b c=%b sum=%b cout=%b", p, v, a[p], b[p], cin[p], sum[p], cout[p]);
          check("sum value",  is_data(sum[p])  && decode(pr, sum[p])  == (va ^ vb ^ vc));
          check("cout value", is_data(cout[p]) && decode(pr, cout[p]) == ((va & vb) | (va & vc) | (vb & vc)));
          // spacer phase, same order
          arrived = '{1, 1, 1};
          for (int k = 0; k < 3; k++) begin
            case (order[k])
              0: a[p]   = spacer(pr);
              1: b[p]   = spacer(pr);
              default: cin[p] = spacer(pr);
            endcase
            arrived[order[k]] = 1'b0;
            #1;
            check_legal(p);
            if (!arrived[0] && !arrived[1]) check("early carry reset", is_spacer(pr, cout[p]));
            if (arrived[2]) check("sum holds while cin is data", is_data(sum[p]));
          end
        end
      end
    end
    check("early carry seen", early_carry > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
