// Self-checking testbench for dr_completion_detector, both protocols, with
// NBITS = 5 (a tree that is not a power of two) and NBITS = 64. The word moves
// from spacer to data and back one bit at a time in random order; ACKOUT must
// keep its old level until the last bit has changed and take the new level
// right after it (1 after data for RTZ, 1 after spacer for RTO).
module tb_dr_completion_detector;
  import dr_pkg::*;

  localparam int NB [2] = '{5, 64};
  dr_t [63:0] d [2][2];
  logic ack [2][2];
  int checks = 0, failures = 0;

  for (genvar p = 0; p < 2; p++) begin : g_p
    for (genvar s = 0; s < 2; s++) begin : g_s
      dr_completion_detector #(.NBITS(NB[s]), .PROTOCOL(p == 0 ? RTZ : RTO)) dut (
        .d(d[p][s][NB[s]-1:0]), .ackout(ack[p][s])
      );
    end
  end

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
    int order [64];
    int n;
    for (int p = 0; p < 2; p++)
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < 64; i++) d[p][s][i] = spacer(proto(p));
    #1;
    for (int rep = 0; rep < 50; rep++) begin
      for (int p = 0; p < 2; p++) begin
        for (int s = 0; s < 2; s++) begin
          protocol_e pr;
          logic lvl_sp, lvl_data;
          pr = proto(p);
          n = NB[s];
          lvl_data = ack_after_data(pr);
          lvl_sp = ~lvl_data;
          check("ack after spacer", ack[p][s] == lvl_sp);
          for (int phase = 0; phase < 2; phase++) begin
            for (int i = 0; i < 64; i++) order[i] = i;
            order.shuffle();
            for (int k = 0, m = 0; k < 64; k++) begin
              if (order[k] >= n) continue;
              d[p][s][order[k]] = (phase == 0) ? encode(pr, 1'($urandom)) : spacer(pr);
              m++;
              #1;
              if (m < n) check("ack holds", ack[p][s] == ((phase == 0) ? lvl_sp : lvl_data));
              else       check("ack switches", ack[p][s] == ((phase == 0) ? lvl_data : lvl_sp));
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
