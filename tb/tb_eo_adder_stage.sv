// End-to-end testbench for eo_adder_stage at its default parameters
// (WIDTH = 32, APPROX_BITS = 8, RTO): 1000 operand pairs, the number of random
// vectors the paper's own evaluation used, pass through the stage under the
// full 4-phase handshake with a randomly slow receiver. Every result is
// checked against a model of the approximate sum. Each mechanism must occur
// at least once: stalls from back-pressure, slow receiver responses, a carry of
// 1 into the accurate sub-adder, a carry output of 1, and results that differ
// from the exact sum because of the approximation.
module tb_eo_adder_stage;
  import dr_pkg::*;

  localparam int unsigned NVEC = 1000;

  logic rst_n, ackout, rx_ackout, done;
  dr_t [31:0] a, b, sum;
  dr_t cout;
  int checks, failures, n_done, n_stall, n_slow_rx, n_approx_carry, n_cout_one, n_inexact;
  int total_checks, total_failures;

  eo_adder_stage dut (
    .rst_n(rst_n), .a(a), .b(b), .ackout(ackout), .sum(sum), .cout(cout), .rx_ackout(rx_ackout)
  );

  stage_env #(.WIDTH(32), .APPROX_BITS(8), .PROTOCOL(RTO), .NVEC(NVEC)) env (
    .rst_n(rst_n), .a(a), .b(b), .ackout(ackout), .sum(sum), .cout(cout), .rx_ackout(rx_ackout),
    .done(done), .checks(checks), .failures(failures), .n_done(n_done), .n_stall(n_stall),
    .n_slow_rx(n_slow_rx), .n_approx_carry(n_approx_carry), .n_cout_one(n_cout_one),
    .n_inexact(n_inexact)
  );

  task automatic report();
    total_checks = checks + 5;
    total_failures = failures + int'(n_stall == 0) + int'(n_slow_rx == 0)
                   + int'(n_approx_carry == 0) + int'(n_cout_one == 0) + int'(n_inexact == 0);
    $display("transactions=%0d stalls=%0d slow_rx=%0d approx_carry_one=%0d cout_one=%0d inexact=%0d",
             n_done, n_stall, n_slow_rx, n_approx_carry, n_cout_one, n_inexact);
  endtask

  initial begin : watchdog
    #(NVEC * 200 + 1000);
    report();
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule
