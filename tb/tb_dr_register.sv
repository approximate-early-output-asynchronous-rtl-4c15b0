// Self-checking testbench for dr_register (NBITS = 8), both protocols.
// Checks reset to spacer; that with ACKIN at the data-admitting level a data
// word passes; that once ACKIN flips the register holds the data although the
// input has returned to spacer; that the spacer then passes; and that with
// ACKIN still at the spacer-admitting level new data is held off.
module tb_dr_register;
  import dr_pkg::*;

  localparam int N = 8;
  logic rst_n;
  logic ackin [2];
  dr_t [N-1:0] d [2], q [2];
  int checks = 0, failures = 0;

  dr_register #(.NBITS(N), .PROTOCOL(RTZ)) dut_rtz (.rst_n(rst_n), .ackin(ackin[0]), .d(d[0]), .q(q[0]));
  dr_register #(.NBITS(N), .PROTOCOL(RTO)) dut_rto (.rst_n(rst_n), .ackin(ackin[1]), .d(d[1]), .q(q[1]));

  function automatic protocol_e proto(int p);
    return (p == 0) ? RTZ : RTO;
  endfunction

  function automatic dr_t [N-1:0] enc_word(protocol_e pr, logic [N-1:0] v);
    dr_t [N-1:0] w;
    for (int i = 0; i < N; i++) w[i] = encode(pr, v[i]);
    return w;
  endfunction

  function automatic dr_t [N-1:0] sp_word(protocol_e pr);
    dr_t [N-1:0] w;
    for (int i = 0; i < N; i++) w[i] = spacer(pr);
    return w;
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
    logic [N-1:0] v;
    rst_n = 1'b0;
    for (int p = 0; p < 2; p++) begin
      // ACKIN already admitting data while reset is applied
      ackin[p] = ack_after_data(proto(p));
      d[p] = enc_word(proto(p), 8'hA5);
    end
    #1;
    for (int p = 0; p < 2; p++) check("reset to spacer", q[p] == sp_word(proto(p)));
    for (int p = 0; p < 2; p++) d[p] = sp_word(proto(p));
    #1 rst_n = 1'b1;
    #1;
    for (int n = 0; n < 200; n++) begin
      v = N'($urandom);
      for (int p = 0; p < 2; p++) begin
        protocol_e pr;
        pr = proto(p);
        d[p] = enc_word(pr, v);
        #1 check("data passes", q[p] == enc_word(pr, v));
        ackin[p] = ~ack_after_data(pr);     // receiver has taken the data
        #1 check("data held", q[p] == enc_word(pr, v));
        d[p] = sp_word(pr);
        #1 check("spacer passes", q[p] == sp_word(pr));
        d[p] = enc_word(pr, ~v);            // early data must wait
        #1 check("data held off", q[p] == sp_word(pr));
        d[p] = sp_word(pr);
        ackin[p] = ack_after_data(pr);
        #1 check("spacer held", q[p] == sp_word(pr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
