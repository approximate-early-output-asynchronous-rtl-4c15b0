// Self-checking testbench for eo_approx_adder in all twelve configurations
// the paper evaluates: RTZ and RTO, each with 0 (exact), 4, 8, 12, 16 and 20
// approximate bits, WIDTH = 32.
//
// Each vector is a pair of random 32-bit operands. The 64 operand bits arrive
// one at a time in a random order, then return to spacer one at a time in
// another random order. After every step it checks, for every instance, that
// no output word is illegal and that every output rail moves only away from
// the spacer level during the data phase and only towards it during the
// spacer phase (monotonic, glitch-free outputs); that an approximate sum bit
// is valid as soon as its own two operand bits are (early output); and at the
// end of each phase that the result equals an independent integer model and
// that every output is spacer again.
module tb_eo_approx_adder;
  import dr_pkg::*;

  localparam int W = 32;
  localparam int NCFG = 6;
  localparam int unsigned KS [NCFG] = '{0, 4, 8, 12, 16, 20};
  localparam int NVEC = 1000;

  dr_t [W-1:0] a_bus [2], b_bus [2];
  dr_t [W-1:0] sum_o [2][NCFG];
  dr_t         cout_o [2][NCFG];

  int checks = 0, failures = 0;
  int approx_carry_one = 0, cout_one = 0;

  for (genvar p = 0; p < 2; p++) begin : g_p
    for (genvar c = 0; c < NCFG; c++) begin : g_c
      eo_approx_adder #(
        .WIDTH(W), .APPROX_BITS(KS[c]), .PROTOCOL(p == 0 ? RTZ : RTO)
      ) dut (
        .a(a_bus[p]), .b(b_bus[p]), .sum(sum_o[p][c]), .cout(cout_o[p][c])
      );
    end
  end

  function automatic protocol_e proto(int p);
    return (p == 0) ? RTZ : RTO;
  endfunction

  // Independent model of the approximate sum (33 bits incl. carry out).
  function automatic logic [W:0] model(logic [W-1:0] a, logic [W-1:0] b, int unsigned k);
    logic [W:0] hi, ah, bh;
    logic [W-1:0] lo_mask;
    if (k == 0) return {1'b0, a} + {1'b0, b};
    ah = {1'b0, a} >> k;
    bh = {1'b0, b} >> k;
    hi = ah + bh + (a[k-1] & b[k-1]);
    lo_mask = (W'(1) << k) - 1;
    return (hi << k) | {1'b0, (a | b) & lo_mask};
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Snapshot of the previous outputs for the monotonicity check.
  dr_t [W:0] prev [2][NCFG];

  task automatic step_checks(bit data_phase, logic [2*W-1:0] arrived);
    for (int p = 0; p < 2; p++) begin
      logic sl;
      sl = spacer_level(proto(p));
      for (int c = 0; c < NCFG; c++) begin
        dr_t [W:0] now;
        bit ok_mono, ok_legal, ok_early;
        now = {cout_o[p][c], sum_o[p][c]};
        ok_mono = 1; ok_legal = 1; ok_early = 1;
        for (int i = 0; i <= W; i++) begin
          if (is_illegal(proto(p), now[i])) ok_legal = 0;
          if (data_phase) begin
            if (prev[p][c][i].r1 != sl && now[i].r1 == sl) ok_mono = 0;
            if (prev[p][c][i].r0 != sl && now[i].r0 == sl) ok_mono = 0;
          end else begin
            if (prev[p][c][i].r1 == sl && now[i].r1 != sl) ok_mono = 0;
            if (prev[p][c][i].r0 == sl && now[i].r0 != sl) ok_mono = 0;
          end
        end
        if (data_phase)
          for (int i = 0; i < int'(KS[c]); i++)
            if (arrived[i] && arrived[W+i] && !is_data(now[i])) ok_early = 0;
        check("legal", ok_legal);
        check("monotonic", ok_mono);
        if (data_phase && KS[c] > 0) check("early approximate sum", ok_early);
        prev[p][c] = now;
      end
    end
  endtask

  task automatic drive_bit(int idx, bit to_data, logic [W-1:0] av, logic [W-1:0] bv);
    for (int p = 0; p < 2; p++) begin
      if (idx < W) a_bus[p][idx]   = to_data ? encode(proto(p), av[idx])   : spacer(proto(p));
      else         b_bus[p][idx-W] = to_data ? encode(proto(p), bv[idx-W]) : spacer(proto(p));
    end
  endtask

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] av, bv;
    logic [2*W-1:0] arrived;
    int order [2*W];
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < W; i++) begin
        a_bus[p][i] = spacer(proto(p));
        b_bus[p][i] = spacer(proto(p));
      end
    #1;
    for (int p = 0; p < 2; p++)
      for (int c = 0; c < NCFG; c++) prev[p][c] = {cout_o[p][c], sum_o[p][c]};

    for (int n = 0; n < NVEC; n++) begin
      av = $urandom; bv = $urandom;
      // Some directed operands: all ones, carry-generating top approximate bits.
      if (n == 0) begin av = '1; bv = '1; end
      if (n == 1) begin av = 32'h8000_0000; bv = 32'h8000_0000; end

      // data phase, random arrival order
      for (int i = 0; i < 2*W; i++) order[i] = i;
      order.shuffle();
      arrived = '0;
      for (int s = 0; s < 2*W; s++) begin
        drive_bit(order[s], 1'b1, av, bv);
        arrived[order[s]] = 1'b1;
        #1;
        step_checks(1'b1, arrived);
      end
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < NCFG; c++) begin
          logic [W:0] exp, got;
          bit valid;
          exp = model(av, bv, KS[c]);
          valid = is_data(cout_o[p][c]);
          got[W] = decode(proto(p), cout_o[p][c]);
          for (int i = 0; i < W; i++) begin
            if (!is_data(sum_o[p][c][i])) valid = 0;
            got[i] = decode(proto(p), sum_o[p][c][i]);
          end
          check("result valid", valid);
          check("result value", got == exp);
          if (got != exp && failures < 20)
            $display("  p=%0d K=%0d a=%h b=%h got %h exp %h", p, KS[c], av, bv, got, exp);
          if (p == 0 && KS[c] > 0 && av[KS[c]-1] && bv[KS[c]-1]) approx_carry_one++;
          if (p == 0 && got[W]) cout_one++;
        end

      // spacer phase, another random order
      order.shuffle();
      for (int s = 0; s < 2*W; s++) begin
        drive_bit(order[s], 1'b0, av, bv);
        #1;
        step_checks(1'b0, '0);
      end
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < NCFG; c++) begin
          bit allsp;
          allsp = is_spacer(proto(p), cout_o[p][c]);
          for (int i = 0; i < W; i++) if (!is_spacer(proto(p), sum_o[p][c][i])) allsp = 0;
          check("all spacer", allsp);
        end
    end
    check("approximate carry of 1 seen", approx_carry_one > 0);
    check("carry out of 1 seen", cout_one > 0);
    $display("vectors=%0d approx_carry_one=%0d cout_one=%0d", NVEC, approx_carry_one, cout_one);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
